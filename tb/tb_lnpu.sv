// tb_lnpu: random q, minima and sign product (including |q| equal to the first minimum)
// into one LNPU lane; r and p are compared with r = sign * floor(0.75 * m) and
// p = sat(q + r), where m is the second minimum when |q| equals the first, else the first.
module tb_lnpu;
  import ldpc_pkg::*;
  llr_t q, r_new, p_new;
  mag_t min1, min2;
  logic sgn;

  lnpu dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      int f, s, qi, m, rr, pp;
      f = $urandom_range(0, 511);
      s = $urandom_range(f, 511);
      qi = $urandom_range(0, 1) ? f : $urandom_range(f, 511);
      if ($urandom_range(0, 1)) qi = -qi;
      q = llr_t'(qi); min1 = mag_t'(f); min2 = mag_t'(s); sgn = $urandom_range(0, 1);
      #1;
      m  = (((qi < 0) ? -qi : qi) == f) ? s : f;
      rr = (m * 3) / 4;
      if (sgn ^ (qi < 0)) rr = -rr;
      pp = qi + rr; if (pp > 511) pp = 511; if (pp < -511) pp = -511;
      checks += 2;
      if (int'(r_new) != rr) begin failures++; if (failures < 10) $display("FAIL r: q=%0d f=%0d s=%0d got %0d exp %0d", qi, f, s, r_new, rr); end
      if (int'(p_new) != pp) begin failures++; if (failures < 10) $display("FAIL p: got %0d exp %0d", p_new, pp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
