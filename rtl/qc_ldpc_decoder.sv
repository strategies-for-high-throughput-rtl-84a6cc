// qc_ldpc_decoder: layered scaled min-sum decoder for the IEEE 802.11n rate-1/2 QC-LDPC
// code with z = 81 (n = 1944), with z-fold NPU parallelism, the compact (rearranged)
// block schedule and 2-layer pipelining.
//
// Dataflow, one block of Z = 81 edges per cycle:
//   A  decoder_ctrl issues a token (layer, slot, block column, shift); the APP word of
//      the block column and the CN-message word of (layer, slot) are read.
//   B  the APP word is rotated by the shift (barrel_shifter) and, with the CN word,
//      enters the GNPU array of npu_array, which forms q = p - r and the running
//      minima/signs of the layer; q is pushed into the q buffer.
//   L  JB = 8 cycles later the block leaves the q buffer into the LNPU array, which
//      forms the new r and p = q + r; p is rotated back by Z - shift and written to APP
//      memory, r to CN-message memory. Slots without a valid block are not written.
// With the 2x schedule the LNPU array processes layer u while the GNPU array processes
// layer u+1; the APP memory forwards a word written in the same cycle it is read, which
// together with the staggered index matrix makes every read see the latest write.
//
// Host interface (this design's choice; the paper has none): while busy is low the host
// writes the channel LLRs, one block column of Z words per write (llr_wr_*), pulses
// start, waits for done and reads results back per block column (rd_addr; rd_llr and
// rd_hard are valid the cycle after). rd_hard[r] = 1 where the APP value is negative.
// parity_ok (valid with parity_valid) tells whether the hard decisions after the last
// iteration satisfy all parity checks; it is computed on the write-back path.
// Decoding takes TMAX iterations of 14 x 8 = 112 cycles (2x) or 24 x 8 = 192 cycles (1x),
// plus 3 cycles from the start pulse to done. With early_stop high (held for the whole
// run) the decoder follows the algorithm's stopping rule: after the first iteration whose
// hard decisions satisfy every check it drops the blocks of the next iteration already
// in the pipeline and finishes, k iterations taking k x 112 + 4 (or k x 192 + 4) cycles;
// iter then holds k. The stopping rule is the paper's; its hardware form is this design's.
module qc_ldpc_decoder
  import ldpc_pkg::*;
#(
  parameter bit PIPE2X = 1'b1,
  parameter int TMAX_P = TMAX
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                llr_wr_en,
  input  logic [COL_W-1:0]    llr_wr_addr,
  input  logic [Z-1:0][W-1:0] llr_wr_data,
  input  logic                start,
  input  logic                early_stop,  // stop once all parity checks hold
  output logic                busy,
  output logic                done,
  output logic [7:0]          iter,
  input  logic [COL_W-1:0]    rd_addr,
  output logic [Z-1:0][W-1:0] rd_llr,
  output logic [Z-1:0]        rd_hard,
  output logic                parity_ok,   // hard decisions of the last iteration satisfy every check
  output logic                parity_valid
);

  token_t tok_a, tok_b, tok_l;
  logic   bubble, fwd, stop, flush, iter_end, iter_end_q;

  logic [Z-1:0][W-1:0] app_rd, app_rot, cn_rd, r_out, p_out, p_back;
  logic [SHIFT_W-1:0]  shift_inv;

  logic               app_rd_en, app_wr_en, cn_wr_en;
  logic [COL_W-1:0]   app_rd_addr, app_wr_addr;
  logic [Z-1:0][W-1:0] app_wr_data;

  decoder_ctrl #(.PIPE2X(PIPE2X), .TMAX_P(TMAX_P)) u_ctrl (
    .clk, .rst_n, .start(start && !busy), .stop, .flush, .busy, .done, .tok_a, .bubble, .iter
  );

  // Address stage: decoder reads while busy, host reads otherwise.
  assign app_rd_en   = busy ? tok_a.valid : 1'b1;
  assign app_rd_addr = busy ? tok_a.col   : rd_addr;

  // Write port: LNPU stage while busy, host LLR load otherwise.
  assign cn_wr_en    = tok_l.valid && tok_l.bv && !flush;
  assign app_wr_en   = busy ? cn_wr_en   : llr_wr_en;
  assign app_wr_addr = busy ? tok_l.col  : llr_wr_addr;
  assign app_wr_data = busy ? p_back     : llr_wr_data;

  app_memory #(.Z(Z), .W(W), .DEPTH(NB)) u_app (
    .clk,
    .rd_en(app_rd_en), .rd_addr(app_rd_addr), .rd_data(app_rd),
    .wr_en(app_wr_en), .wr_addr(app_wr_addr), .wr_data(app_wr_data),
    .fwd
  );

  cn_msg_memory #(.Z(Z), .W(W), .LAYERS(MB), .BLOCKS(JB)) u_cn (
    .clk,
    .rd_en(tok_a.valid), .rd_zero(tok_a.iter0), .rd_layer(tok_a.layer), .rd_blk(tok_a.blk),
    .rd_data(cn_rd),
    .wr_en(cn_wr_en), .wr_layer(tok_l.layer), .wr_blk(tok_l.blk), .wr_data(r_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     tok_b <= '0;
    else if (flush) tok_b <= '0;
    else            tok_b <= tok_a;
  end

  barrel_shifter #(.Z(Z), .W(W)) u_rot (
    .din(app_rd), .shift(tok_b.shift), .dout(app_rot)
  );

  npu_array #(.ZL(Z), .D(JB)) u_npu (
    .clk, .rst_n, .flush, .tok_b, .p_in(app_rot), .r_in(cn_rd),
    .tok_l, .r_out, .p_out
  );

  assign shift_inv = (tok_l.shift == '0) ? '0 : SHIFT_W'(Z - int'(tok_l.shift));

  barrel_shifter #(.Z(Z), .W(W)) u_unrot (
    .din(p_out), .shift(shift_inv), .dout(p_back)
  );

  // Syndrome of the hard decisions, evaluated at the end of every iteration.
  logic [Z-1:0] wr_hard;
  for (genvar r = 0; r < Z; r++) begin : g_wr_hard
    assign wr_hard[r] = p_back[r][W-1];
  end

  parity_check u_parity (
    .clk, .rst_n,
    .clear       (start && !busy),
    .wr_en       (cn_wr_en),
    .wr_layer    (tok_l.layer),
    .wr_col      (tok_l.col),
    .wr_hard,
    .iter_end,
    .parity_ok,
    .check_valid (parity_valid)
  );

  assign iter_end = tok_l.valid && tok_l.last && (int'(tok_l.layer) == MB - 1) && !flush;

  // Early termination: the cycle after an iteration's last write-back parity_ok holds its
  // result; stop then if every check is satisfied.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) iter_end_q <= 1'b0;
    else        iter_end_q <= iter_end;
  end
  assign stop = early_stop && iter_end_q && parity_ok;

  // Host read-back.
  assign rd_llr = app_rd;
  for (genvar r = 0; r < Z; r++) begin : g_hard
    assign rd_hard[r] = app_rd[r][W-1];
  end

endmodule
