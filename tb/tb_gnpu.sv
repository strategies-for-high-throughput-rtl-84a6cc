// tb_gnpu: feeds 300 random layers of 8 slots (random p, r, random invalid slots, values
// drawn from a narrow range now and then so that ties occur) into one GNPU lane and
// compares q every cycle and the latched first minimum, second minimum and sign product
// after every layer with a model that sorts the magnitudes of the valid slots.
module tb_gnpu;
  import ldpc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en = 0, bv = 0, first = 0, last = 0;
  llr_t p = '0, r_old = '0, q;
  mag_t min1, min2;
  logic sgn;

  gnpu dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  function automatic int isat(int x);
    return (x > 511) ? 511 : (x < -511) ? -511 : x;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < 300; l++) begin
      int mags [$];
      bit sp;
      int rng;
      sp = 0;
      mags.delete();
      rng = (l % 3 == 0) ? 4 : 600;
      for (int w = 0; w < 8; w++) begin
        int pi, ri, qi;
        @(negedge clk);
        en = 1; first = (w == 0); last = (w == 7);
        bv = ($urandom_range(0, 5) != 0) || (w < 2);
        pi = $urandom_range(0, 2*rng) - rng; if (pi < -511) pi = -511; if (pi > 511) pi = 511;
        ri = $urandom_range(0, 2*rng) - rng; if (ri < -511) ri = -511; if (ri > 511) ri = 511;
        p = llr_t'(pi); r_old = llr_t'(ri);
        qi = isat(pi - ri);
        #1;
        checks++;
        if (int'(q) != qi) begin failures++; $display("FAIL q: %0d - %0d gave %0d", pi, ri, q); end
        if (bv) begin mags.push_back((qi < 0) ? -qi : qi); sp ^= (qi < 0); end
      end
      @(negedge clk);
      en = 0; last = 0;
      if ($urandom_range(0, 1)) @(negedge clk);   // idle cycles must not disturb results
      mags.sort();
      checks += 3;
      if (int'(min1) != mags[0]) begin failures++; $display("FAIL min1 %0d exp %0d", min1, mags[0]); end
      if (int'(min2) != mags[1]) begin failures++; $display("FAIL min2 %0d exp %0d", min2, mags[1]); end
      if (sgn != sp)             begin failures++; $display("FAIL sign product"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
