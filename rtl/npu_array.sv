// npu_array: Z GNPU lanes and Z LNPU lanes working in tandem.
//
// Lane r of the GNPU array serves check row r of the current block (the APP block has
// already been rotated so that lane r sees the variable it is connected to). The
// variable-to-check messages q the GNPU lanes compute are pushed, together with the
// block's pipeline token, into a JB-deep delay line (the q buffer). JB cycles later,
// when the layer's global minima and signs are complete, the same block comes out of
// the delay line into the LNPU array, which produces the new check-to-variable messages
// r and the new APP values p of the block. Because a layer has exactly JB slots, the
// LNPU array works on layer u while the GNPU array works on layer u+1 (2-layer
// pipelining) without any extra storage for the GNPU results: each GNPU lane's result
// registers hold layer u's minima for exactly the layer time the LNPU needs them.
//
// Interface: tok_b, p_in, r_in belong to the same block (GNPU stage); tok_l, r_out,
// p_out are the block leaving the LNPU stage, JB cycles later. flush invalidates every
// token in the q buffer (used when decoding stops early), so none of them is written
// back. p_out is in lane order
// and must be rotated back before it is written to APP memory.
// The z-fold array and the GNPU/LNPU split are the paper's; the delay-line q buffer is
// this design's way of carrying q from one pass to the other.
module npu_array
  import ldpc_pkg::*;
#(
  parameter int ZL = Z,
  parameter int D  = JB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 flush,
  input  token_t               tok_b,
  input  logic [ZL-1:0][W-1:0] p_in,
  input  logic [ZL-1:0][W-1:0] r_in,
  output token_t               tok_l,
  output logic [ZL-1:0][W-1:0] r_out,
  output logic [ZL-1:0][W-1:0] p_out
);

  logic [ZL-1:0][W-1:0] q_b;
  logic [ZL-1:0][W-1:0] q_dl  [D];
  token_t               tok_dl [D];
  mag_t                 min1 [ZL], min2 [ZL];
  logic                 sgn  [ZL];

  for (genvar r = 0; r < ZL; r++) begin : g_lane
    llr_t q_lane, r_lane, p_lane;
    gnpu u_gnpu (
      .clk, .rst_n,
      .en    (tok_b.valid),
      .bv    (tok_b.bv),
      .first (tok_b.first),
      .last  (tok_b.last),
      .p     (llr_t'(p_in[r])),
      .r_old (llr_t'(r_in[r])),
      .q     (q_lane),
      .min1  (min1[r]),
      .min2  (min2[r]),
      .sgn   (sgn[r])
    );
    assign q_b[r] = q_lane;

    lnpu u_lnpu (
      .q     (llr_t'(q_dl[D-1][r])),
      .min1  (min1[r]),
      .min2  (min2[r]),
      .sgn   (sgn[r]),
      .r_new (r_lane),
      .p_new (p_lane)
    );
    assign r_out[r] = r_lane;
    assign p_out[r] = p_lane;
  end

  // q buffer: D-stage delay line of the block's q values and token.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) tok_dl[i] <= '0;
    end else if (flush) begin
      for (int i = 0; i < D; i++) tok_dl[i] <= '0;
    end else begin
      tok_dl[0] <= tok_b;
      for (int i = 1; i < D; i++) tok_dl[i] <= tok_dl[i-1];
    end
  end

  always_ff @(posedge clk) begin
    q_dl[0] <= q_b;
    for (int i = 1; i < D; i++) q_dl[i] <= q_dl[i-1];
  end

  assign tok_l = tok_dl[D-1];

endmodule
