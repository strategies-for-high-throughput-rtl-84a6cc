// tb_parity_check: plays the write-back stream of one iteration (layers in order, the
// valid slots of each layer, one write per cycle) into the parity checker. Writes that
// are not the last write of their column in the iteration carry random hard decisions,
// which must be ignored; the last writes carry the test word v. After the last slot of
// the last layer, parity_ok must equal (v H^T == 0), computed here directly from the
// base matrix. Words: all zero (must pass although the non-final writes are random),
// random words and single-bit errors (must fail).
module tb_parity_check;
  import ldpc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 0, wr_en = 0, iter_end = 0;
  logic [LAYER_W-1:0] wr_layer = '0;
  logic [COL_W-1:0] wr_col = '0;
  logic [Z-1:0] wr_hard = '0;
  logic parity_ok, check_valid;

  parity_check dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit v [NB][Z];

  function automatic bit syndrome_zero();
    for (int u = 0; u < MB; u++) for (int r = 0; r < Z; r++) begin
      bit x;
      x = 0;
      for (int c = 0; c < NB; c++) if (HB[u][c] >= 0) x ^= v[c][(r + HB[u][c]) % Z];
      if (x) return 1'b0;
    end
    return 1'b1;
  endfunction

  task automatic run_iteration(string name);
    bit exp_ok;
    int lastl [NB];
    for (int c = 0; c < NB; c++) begin
      lastl[c] = -1;
      for (int u = 0; u < MB; u++) if (HB[u][c] >= 0) lastl[c] = u;
    end
    exp_ok = syndrome_zero();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int u = 0; u < MB; u++) for (int w = 0; w < JB; w++) begin
      @(negedge clk);
      wr_en = (BETA_I[u][w] >= 0);
      wr_layer = LAYER_W'(u);
      wr_col = wr_en ? COL_W'(BETA_I[u][w]) : '0;
      iter_end = (u == MB - 1) && (w == JB - 1);
      for (int r = 0; r < Z; r++)
        wr_hard[r] = (wr_en && lastl[BETA_I[u][w]] == u) ? v[BETA_I[u][w]][r] : 1'($urandom);
    end
    @(negedge clk); wr_en = 0; iter_end = 0;
    checks++;
    if (!check_valid || parity_ok != exp_ok) begin
      failures++; $display("FAIL %s: parity_ok=%0d valid=%0d expected %0d", name, parity_ok, check_valid, exp_ok);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (v[c, r]) v[c][r] = 0;
    run_iteration("zero word");
    for (int k = 0; k < 5; k++) begin
      foreach (v[c, r]) v[c][r] = 1'($urandom);
      run_iteration("random word");
    end
    for (int k = 0; k < 10; k++) begin
      foreach (v[c, r]) v[c][r] = 0;
      v[$urandom_range(0, NB-1)][$urandom_range(0, Z-1)] = 1;
      run_iteration("single error");
    end
    foreach (v[c, r]) v[c][r] = 0;
    run_iteration("zero word again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
