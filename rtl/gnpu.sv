// gnpu: one lane of the global node-processing pass.
//
// Each cycle one block of the current layer arrives (en). The lane forms the
// variable-to-check message q = p - r from the rotated APP value p and the stored
// check-to-variable message r of the previous iteration (saturated to +-511), and folds
// |q| into a running first minimum f and second minimum s and sign(q) into a running
// sign product, using the comparison rules of the global pass:
//   |q| <= f      : s <- f, f <- |q|
//   f < |q| < s   : s <- |q|
// The search restarts from f = s = infinity on the first slot of a layer; slots without
// a valid block (bv = 0) are skipped. On the last slot the final f, s and sign product
// are latched into the result registers, where the LNPU lane reads them during the
// next layer time while this lane already works on the next layer.
//
// Timing: q is combinational; the accumulators and result registers update on the
// clock edge that ends the block's cycle. Reset clears both (reset is this design's
// choice; the algorithm and comparison rules are the paper's).
module gnpu
  import ldpc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic bv,
  input  logic first,
  input  logic last,
  input  llr_t p,
  input  llr_t r_old,
  output llr_t q,
  output mag_t min1,
  output mag_t min2,
  output logic sgn
);

  mag_t f_acc, s_acc;
  logic sp_acc;
  mag_t f_nxt, s_nxt, f_base, s_base, mag;
  logic sp_nxt, sp_base;

  assign q   = sat((W+1)'(p) - (W+1)'(r_old));
  assign mag = q[W-1] ? mag_t'(-q) : mag_t'(q);

  always_comb begin
    f_base  = first ? MAG_INF : f_acc;
    s_base  = first ? MAG_INF : s_acc;
    sp_base = first ? 1'b0    : sp_acc;
    f_nxt   = f_base;
    s_nxt   = s_base;
    sp_nxt  = sp_base;
    if (bv) begin
      if (mag <= f_base) begin
        f_nxt = mag;
        s_nxt = f_base;
      end else if (mag < s_base) begin
        s_nxt = mag;
      end
      sp_nxt = sp_base ^ q[W-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_acc  <= MAG_INF;
      s_acc  <= MAG_INF;
      sp_acc <= 1'b0;
      min1   <= MAG_INF;
      min2   <= MAG_INF;
      sgn    <= 1'b0;
    end else if (en) begin
      f_acc  <= f_nxt;
      s_acc  <= s_nxt;
      sp_acc <= sp_nxt;
      if (last) begin
        min1 <= f_nxt;
        min2 <= s_nxt;
        sgn  <= sp_nxt;
      end
    end
  end

endmodule
