// tb_decoder_ctrl: runs the scheduler in both schedules (2x and 1x) for 2 iterations and
// checks every issued token against the expected sequence: in 2x, per superlayer, six
// layers of 8 consecutive slots and then 8 bubble cycles; in 1x, every layer followed by
// 8 bubble cycles. Slot contents (column, shift, valid) must match the rearranged index
// matrix, first/last/iter0 must be set correctly, and done must pulse 3 cycles after
// the last scheduled cycle: 2 x 112 + 3 cycles (2x) and 2 x 192 + 3 cycles (1x) after start.
// A third 2x instance gets a stop pulse in the middle of the second iteration: flush must
// be high in exactly that cycle, no token may be issued after it, done must follow two
// cycles later, iter must read 1, and a stop pulse while idle must be ignored.
module tb_decoder_ctrl;
  import ldpc_pkg::*;
  localparam int T = 2;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy2, done2, bub2, busy1, done1, bub1;
  logic busy3, done3, bub3, stop3 = 1'b0, flush3;
  token_t tok2, tok1, tok3;
  logic [7:0] it2, it1, it3;
  localparam int STOP_AT = 150;

  decoder_ctrl #(.PIPE2X(1'b1), .TMAX_P(T)) dut2 (
    .clk, .rst_n, .start, .stop(1'b0), .flush(), .busy(busy2), .done(done2), .tok_a(tok2), .bubble(bub2), .iter(it2));
  decoder_ctrl #(.PIPE2X(1'b0), .TMAX_P(T)) dut1 (
    .clk, .rst_n, .start, .stop(1'b0), .flush(), .busy(busy1), .done(done1), .tok_a(tok1), .bubble(bub1), .iter(it1));

  decoder_ctrl #(.PIPE2X(1'b1), .TMAX_P(T)) dut3 (
    .clk, .rst_n, .start, .stop(stop3), .flush(flush3), .busy(busy3), .done(done3), .tok_a(tok3),
    .bubble(bub3), .iter(it3));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // expected token for cycle c (from the cycle after start) of a schedule
  function automatic token_t expect_tok(bit pipe2x, int c);
    token_t e;
    int nslot, per_sl, per_it, it, sl, slot, w, u;
    nslot  = pipe2x ? SL + 1 : 2 * SL;
    per_sl = nslot * JB;
    per_it = per_sl * (MB / SL);
    e = '0;
    if (c >= T * per_it) return e;
    it   = c / per_it;
    sl   = (c % per_it) / per_sl;
    slot = (c % per_sl) / JB;
    w    = c % JB;
    if (pipe2x ? (slot >= SL) : (slot % 2 == 1)) return e;
    u = sl * SL + (pipe2x ? slot : slot / 2);
    e.valid = 1'b1;
    e.bv    = (BETA_I[u][w] >= 0);
    e.first = (w == 0);
    e.last  = (w == JB - 1);
    e.iter0 = (it == 0);
    e.layer = LAYER_W'(u);
    e.blk   = BLK_W'(w);
    e.col   = e.bv ? COL_W'(BETA_I[u][w]) : '0;
    e.shift = e.bv ? SHIFT_W'(HB[u][BETA_I[u][w]]) : '0;
    return e;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d2, d1, bad2, bad1, nb2, nb1, d3, bad3, nf3, late3, fl_at, it_done3;
    d2 = 0; d1 = 0; bad2 = 0; bad1 = 0; nb2 = 0; nb1 = 0;
    d3 = 0; bad3 = 0; nf3 = 0; late3 = 0; fl_at = 0; it_done3 = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int c = 1; c < 500; c++) begin
      token_t e2, e1;
      e2 = expect_tok(1'b1, c - 1);
      e1 = expect_tok(1'b0, c - 1);
      if ((e2.valid || tok2.valid) && tok2 != e2) bad2++;
      if ((e1.valid || tok1.valid) && tok1 != e1) bad1++;
      if (bub2) nb2++;
      if (bub1) nb1++;
      if (done2) d2 = c;
      if (done1) d1 = c;
      stop3 = (c == STOP_AT) || (c == 400);
      #1;
      if (c < STOP_AT && (e2.valid || tok3.valid) && tok3 != e2) bad3++;
      if (c > STOP_AT && tok3.valid) late3++;
      if (flush3) begin nf3++; fl_at = c; end
      if (done3) begin d3 = c; it_done3 = int'(it3); end
      @(negedge clk);
    end
    checks += 11;
    if (bad3 != 0) begin failures++; $display("FAIL stop: %0d tokens before the stop differ", bad3); end
    if (nf3 != 1 || fl_at != STOP_AT) begin failures++; $display("FAIL stop: flush %0d times, last at %0d", nf3, fl_at); end
    if (late3 != 0) begin failures++; $display("FAIL stop: %0d tokens issued after the stop", late3); end
    if (d3 != STOP_AT + 2) begin failures++; $display("FAIL stop: done at %0d, expected %0d", d3, STOP_AT + 2); end
    if (it_done3 != 1) begin failures++; $display("FAIL stop: iter=%0d at done, expected 1", it_done3); end
    if (bad2 != 0) begin failures++; $display("FAIL 2x: %0d tokens differ", bad2); end
    if (bad1 != 0) begin failures++; $display("FAIL 1x: %0d tokens differ", bad1); end
    if (d2 != T * 112 + 3) begin failures++; $display("FAIL 2x done at %0d", d2); end
    if (d1 != T * 192 + 3) begin failures++; $display("FAIL 1x done at %0d", d1); end
    if (nb2 != T * 2 * JB) begin failures++; $display("FAIL 2x bubble cycles %0d", nb2); end
    if (nb1 != T * 12 * JB) begin failures++; $display("FAIL 1x bubble cycles %0d", nb1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
