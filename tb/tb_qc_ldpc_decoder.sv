// tb_qc_ldpc_decoder: end-to-end test of the decoder at its default size
// (z = 81, n = 1944, 8 iterations, 2x pipelined schedule).
//
// The sequential reference model of ldpc_ref_pkg (layered scaled min-sum decoding in the
// same fixed point) is run alongside.
// Processing the layers strictly one after another in that model must give the same APP
// memory contents, bit for bit, as the pipelined hardware; this holds only if every
// GNPU read in the hardware sees the LNPU write that precedes it in layer order.
// Frames: (1) random LLRs, (2) and (3) the all-zero codeword sent over a BPSK/AWGN
// channel at 2.5 dB Eb/N0, where the hard decisions must also come out all zero, and
// (4) a frame of large LLRs that drives the saturation logic.
// Checks: the APP words of every block column, the hard decisions, the parity-check
// flag (against v H^T computed here from the reference decisions), and the cycle count
// from start to done (8 x 112 + 3). Frames (1) and (3) run with early termination on:
// the decoder must then stop after the first iteration k whose reference decisions
// satisfy every check, with the reference APP values after k iterations, iter = k and
// k x 112 + 4 cycles (no stop, and 8 x 112 + 3 cycles, if that never happens before the
// last iteration); at least one frame must really stop early. It also counts the pipeline events the design relies
// on (GNPU/LNPU overlap, superlayer bubbles, skipped invalid slots, APP write-to-read
// forwarding, zero CN reads in the first iteration) and fails if one never happens.
module tb_qc_ldpc_decoder;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int CYC_ITER = 2 * (SL + 1) * JB;     // 112
  localparam int EXP_CYC  = TMAX * CYC_ITER + 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic llr_wr_en = 1'b0;
  logic [COL_W-1:0] llr_wr_addr = '0;
  logic [Z-1:0][W-1:0] llr_wr_data = '0;
  logic start = 1'b0;
  logic early_stop = 1'b0;
  logic busy, done;
  logic [7:0] iter;
  logic [COL_W-1:0] rd_addr = '0;
  logic [Z-1:0][W-1:0] rd_llr;
  logic [Z-1:0] rd_hard;
  logic parity_ok, parity_valid;

  qc_ldpc_decoder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_pok = 0, n_pbad = 0, n_early = 0;
  int n_overlap = 0, n_bubble = 0, n_skip = 0, n_fwd = 0, n_zero = 0, n_sat = 0;

  app_t chan, app;

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1 << 30))) / real'(1 << 30);
    u2 = (real'($urandom_range(0, 1 << 30))) / real'(1 << 30);
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // v H^T = 0 for the hard decisions of a: the parity-check rule, computed from HB.
  function automatic bit checks_hold(input app_t a);
    for (int u = 0; u < MB; u++) for (int r = 0; r < Z; r++) begin
      bit x;
      x = 1'b0;
      for (int c = 0; c < NB; c++) if (HB[u][c] >= 0) x ^= (a[c][(r + HB[u][c]) % Z] < 0);
      if (x) return 1'b0;
    end
    return 1'b1;
  endfunction

  task automatic load_and_run(input string name, input bit expect_zero, input bit es);
    int cyc, k, exp_cyc;
    // iterations the decoder is expected to run
    k = TMAX;
    if (es) begin
      for (int t = 1; t < TMAX; t++) begin
        void'(ref_decode(chan, app, t));
        if (checks_hold(app)) begin k = t; break; end
      end
    end
    exp_cyc = (k < TMAX) ? k * CYC_ITER + 4 : EXP_CYC;
    if (k < TMAX) n_early++;
    early_stop = es;
    // load
    for (int c = 0; c < NB; c++) begin
      @(negedge clk);
      llr_wr_en   = 1'b1;
      llr_wr_addr = COL_W'(c);
      for (int r = 0; r < Z; r++) llr_wr_data[r] = W'(chan[c][r]);
    end
    @(negedge clk);
    llr_wr_en = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != exp_cyc) begin
      failures++;
      $display("FAIL %s: decode took %0d cycles, expected %0d", name, cyc, exp_cyc);
    end
    checks++;
    if (int'(iter) != k) begin
      failures++;
      $display("FAIL %s: iter=%0d after done, expected %0d", name, iter, k);
    end
    early_stop = 1'b0;
    n_sat += ref_decode(chan, app, k);
    // read back
    begin
      int bad_words = 0, bad_hard = 0, ones = 0;
      for (int c = 0; c < NB; c++) begin
        @(negedge clk);
        rd_addr = COL_W'(c);
        @(negedge clk);
        for (int r = 0; r < Z; r++) begin
          if ($signed(rd_llr[r]) != app[c][r]) bad_words++;
          if (rd_hard[r] != (app[c][r] < 0)) bad_hard++;
          ones += int'(rd_hard[r]);
        end
      end
      checks += 2;
      if (bad_words != 0) begin failures++; $display("FAIL %s: %0d APP values differ from the reference", name, bad_words); end
      if (bad_hard != 0) begin failures++; $display("FAIL %s: %0d hard decisions differ", name, bad_hard); end
      begin
        bit exp_ok;
        exp_ok = checks_hold(app);
        checks++;
        if (!parity_valid || parity_ok != exp_ok) begin
          failures++; $display("FAIL %s: parity_ok=%0d valid=%0d, expected %0d", name, parity_ok, parity_valid, exp_ok);
        end
        if (exp_ok) n_pok++; else n_pbad++;
      end
      if (expect_zero) begin
        checks++;
        if (ones != 0) begin failures++; $display("FAIL %s: %0d bit errors after decoding", name, ones); end
      end
      $display("%s: %0d iterations, %0d cycles, %0d ones in the decision", name, k, cyc, ones);
    end
  endtask

  // pipeline event counters
  always @(posedge clk) if (rst_n) begin
    if (dut.tok_b.valid && dut.tok_l.valid) n_overlap++;
    if (dut.bubble) n_bubble++;
    if (dut.tok_l.valid && !dut.tok_l.bv) n_skip++;
    if (dut.busy && dut.fwd) n_fwd++;
    if (dut.tok_a.valid && dut.tok_a.iter0) n_zero++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sigma2, ebn0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1: random LLRs
    for (int c = 0; c < NB; c++) for (int r = 0; r < Z; r++) chan[c][r] = $urandom_range(0, 400) - 200;
    load_and_run("random", 1'b0, 1'b1);

    // 2, 3: all-zero codeword, BPSK over AWGN, Eb/N0 = 2.5 dB, rate 1/2
    ebn0   = 10.0 ** (2.5 / 10.0);
    sigma2 = 1.0 / (2.0 * 0.5 * ebn0);
    for (int k = 0; k < 2; k++) begin
      for (int c = 0; c < NB; c++) for (int r = 0; r < Z; r++) begin
        real y, l;
        y = 1.0 + $sqrt(sigma2) * gauss();
        l = 2.0 * y / sigma2 * 16.0;
        chan[c][r] = isat(int'(l));
      end
      load_and_run($sformatf("awgn%0d", k), 1'b1, k == 1);
    end

    // 4: large LLRs (drive saturation)
    for (int c = 0; c < NB; c++) for (int r = 0; r < Z; r++)
      chan[c][r] = ($urandom_range(0, 9) == 0) ? -($urandom_range(300, 511)) : $urandom_range(300, 511);
    load_and_run("large", 1'b0, 1'b0);

    $display("events: overlap=%0d bubble=%0d skip=%0d fwd=%0d zero_read=%0d saturation=%0d",
             n_overlap, n_bubble, n_skip, n_fwd, n_zero, n_sat);
    checks += 9;
    if (n_early == 0) begin failures++; $display("FAIL no frame stopped early"); end
    if (n_pok  == 0) begin failures++; $display("FAIL no frame passed the parity check"); end
    if (n_pbad == 0) begin failures++; $display("FAIL no frame failed the parity check"); end
    if (n_overlap == 0) begin failures++; $display("FAIL no GNPU/LNPU overlap"); end
    if (n_bubble  == 0) begin failures++; $display("FAIL no superlayer bubble"); end
    if (n_skip    == 0) begin failures++; $display("FAIL no invalid slot skipped"); end
    if (n_fwd     == 0) begin failures++; $display("FAIL no APP forwarding"); end
    if (n_zero    == 0) begin failures++; $display("FAIL no first-iteration zero read"); end
    if (n_sat     == 0) begin failures++; $display("FAIL no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
