// tb_ber_awgn: bit-error-rate workload. The all-zero codeword of the n = 1944 code is
// sent as BPSK over an AWGN channel (rate 1/2, Eb/N0 = 1.0, 1.5, 2.0, 2.5 dB, FRAMES
// frames per point) and decoded by two decoders side by side, one with the default 8
// iterations and one with 4. Channel LLRs are 2y/sigma^2 in the decoder's format (4
// fraction bits, saturated to +-511). Each decoded frame must equal the sequential
// reference model bit for bit; the decoded BER with 8 iterations must lie below the raw
// channel BER at every point from 1.5 dB up and must not exceed the 4-iteration BER.
// The BER table is printed for comparison with a published BER curve.
module tb_ber_awgn;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int FRAMES = 100;
  localparam int NPTS = 4;
  localparam real EBN0 [NPTS] = '{1.0, 1.5, 2.0, 2.5};

  logic clk = 1'b0, rst_n = 1'b0;
  logic llr_wr_en = 1'b0;
  logic [COL_W-1:0] llr_wr_addr = '0;
  logic [Z-1:0][W-1:0] llr_wr_data = '0;
  logic start = 1'b0;
  logic busy8, done8, busy4, done4;
  logic [7:0] iter8, iter4;
  logic [COL_W-1:0] rd_addr = '0;
  logic [Z-1:0][W-1:0] rd_llr8, rd_llr4;
  logic [Z-1:0] rd_hard8, rd_hard4;

  qc_ldpc_decoder dut8 (
    .clk, .rst_n, .llr_wr_en, .llr_wr_addr, .llr_wr_data, .start, .early_stop(1'b0),
    .busy(busy8), .done(done8), .iter(iter8), .rd_addr, .rd_llr(rd_llr8), .rd_hard(rd_hard8));
  qc_ldpc_decoder #(.TMAX_P(4)) dut4 (
    .clk, .rst_n, .llr_wr_en, .llr_wr_addr, .llr_wr_data, .start, .early_stop(1'b0),
    .busy(busy4), .done(done4), .iter(iter4), .rd_addr, .rd_llr(rd_llr4), .rd_hard(rd_hard4));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  app_t chan, app8, app4;

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1 << 30))) / real'(1 << 30);
    u2 = (real'($urandom_range(0, 1 << 30))) / real'(1 << 30);
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int raw_err [NPTS], err8 [NPTS], err4 [NPTS];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int pt = 0; pt < NPTS; pt++) begin
      real sigma2;
      raw_err[pt] = 0; err8[pt] = 0; err4[pt] = 0;
      sigma2 = 1.0 / (2.0 * 0.5 * (10.0 ** (EBN0[pt] / 10.0)));
      for (int fr = 0; fr < FRAMES; fr++) begin
        int bad8, bad4;
        bad8 = 0; bad4 = 0;
        for (int c = 0; c < NB; c++) for (int r = 0; r < Z; r++) begin
          real y;
          y = 1.0 + $sqrt(sigma2) * gauss();
          chan[c][r] = isat(int'(2.0 * y / sigma2 * 16.0));
          if (chan[c][r] < 0) raw_err[pt]++;
        end
        for (int c = 0; c < NB; c++) begin
          @(negedge clk);
          llr_wr_en = 1'b1; llr_wr_addr = COL_W'(c);
          for (int r = 0; r < Z; r++) llr_wr_data[r] = W'(chan[c][r]);
        end
        @(negedge clk); llr_wr_en = 1'b0; start = 1'b1;
        @(negedge clk); start = 1'b0;
        while (busy8 || busy4) @(negedge clk);
        void'(ref_decode(chan, app8, 8));
        void'(ref_decode(chan, app4, 4));
        for (int c = 0; c < NB; c++) begin
          @(negedge clk); rd_addr = COL_W'(c);
          @(negedge clk);
          for (int r = 0; r < Z; r++) begin
            if ($signed(rd_llr8[r]) != app8[c][r]) bad8++;
            if ($signed(rd_llr4[r]) != app4[c][r]) bad4++;
            err8[pt] += int'(rd_hard8[r]);
            err4[pt] += int'(rd_hard4[r]);
          end
        end
        checks += 2;
        if (bad8 != 0) begin failures++; $display("FAIL %0.1f dB frame %0d: 8-iteration result differs in %0d values", EBN0[pt], fr, bad8); end
        if (bad4 != 0) begin failures++; $display("FAIL %0.1f dB frame %0d: 4-iteration result differs in %0d values", EBN0[pt], fr, bad4); end
      end
      $display("Eb/N0 %0.1f dB: raw BER %e  decoded BER 8 it %e  4 it %e  (%0d bits)", EBN0[pt],
               real'(raw_err[pt]) / real'(FRAMES * NBITS), real'(err8[pt]) / real'(FRAMES * NBITS),
               real'(err4[pt]) / real'(FRAMES * NBITS), FRAMES * NBITS);
      checks++;
      if (err8[pt] > err4[pt]) begin failures++; $display("FAIL 8 iterations worse than 4 at %0.1f dB", EBN0[pt]); end
      if (EBN0[pt] >= 1.5) begin
        checks++;
        if (err8[pt] >= raw_err[pt]) begin failures++; $display("FAIL no coding gain at %0.1f dB", EBN0[pt]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
