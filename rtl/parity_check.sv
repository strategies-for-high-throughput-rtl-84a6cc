// parity_check: on-the-fly syndrome check (v H^T = 0) of the hard decisions at the end
// of every decoding iteration.
//
// It watches the APP write-back port. A write of block column c is the column's final
// value for the iteration when it comes from the last layer that uses c (last_layer in
// ldpc_pkg). At that write the hard decisions of the column (sign bits, column order)
// are rotated by H_b(u, c) and XORed into the Z-bit syndrome accumulator of every layer
// u that uses c; check row r of layer u sees variable (r + H_b(u, c)) mod Z of the
// column. When the last slot of the last layer has been written the accumulators hold
// v H^T of the iteration: parity_ok is updated (1 = every check satisfied) and the
// accumulators restart for the next iteration. No extra cycles are spent.
//
// The check itself is step 4 of the paper's decoding algorithm; this on-the-fly
// structure is this design's. The decoder top uses the result for early termination.
module parity_check
  import ldpc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,      // new frame: restart accumulation
  input  logic               wr_en,      // APP write of a valid block
  input  logic [LAYER_W-1:0] wr_layer,
  input  logic [COL_W-1:0]   wr_col,
  input  logic [Z-1:0]       wr_hard,    // hard decisions of the written column
  input  logic               iter_end,   // this cycle carries the last slot of the last layer
  output logic               parity_ok,
  output logic               check_valid // parity_ok holds the result of an iteration
);

  logic [Z-1:0] syn [MB];
  logic [Z-1:0] syn_nxt [MB];
  logic [Z-1:0] contrib [MB];
  logic         final_wr;
  logic [MB-1:0] use_col;

  // Columns written for the last time in the iteration.
  function automatic logic is_last(int u, int c);
    return (last_layer(c) == u);
  endfunction

  always_comb begin
    final_wr = 1'b0;
    for (int c = 0; c < NB; c++)
      if (int'(wr_col) == c) final_wr = wr_en && is_last(int'(wr_layer), c);
  end

  for (genvar u = 0; u < MB; u++) begin : g_layer
    logic [SHIFT_W-1:0] sh;
    logic [Z-1:0][0:0]  rot_in, rot_out;
    always_comb begin
      sh = '0;
      use_col[u] = 1'b0;
      for (int c = 0; c < NB; c++)
        if (int'(wr_col) == c && HB[u][c] >= 0) begin
          sh = SHIFT_W'(HB[u][c]);
          use_col[u] = 1'b1;
        end
    end
    for (genvar r = 0; r < Z; r++) begin : g_bit
      assign rot_in[r] = wr_hard[r];
      assign contrib[u][r] = rot_out[r][0];
    end
    barrel_shifter #(.Z(Z), .W(1)) u_rot (.din(rot_in), .shift(sh), .dout(rot_out));
    assign syn_nxt[u] = (final_wr && use_col[u]) ? (syn[u] ^ contrib[u]) : syn[u];
  end

  logic all_zero;
  always_comb begin
    all_zero = 1'b1;
    for (int u = 0; u < MB; u++) if (syn_nxt[u] != '0) all_zero = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < MB; u++) syn[u] <= '0;
      parity_ok   <= 1'b0;
      check_valid <= 1'b0;
    end else if (clear) begin
      for (int u = 0; u < MB; u++) syn[u] <= '0;
      check_valid <= 1'b0;
    end else if (iter_end) begin
      for (int u = 0; u < MB; u++) syn[u] <= '0;
      parity_ok   <= all_zero;
      check_valid <= 1'b1;
    end else begin
      for (int u = 0; u < MB; u++) syn[u] <= syn_nxt[u];
    end
  end

endmodule
