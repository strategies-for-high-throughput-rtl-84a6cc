// tb_npu_array: streams 40 layer slots (every fourth one a bubble, some invalid block
// slots) of random p and r blocks through the full 81-lane NPU array, back to back as
// the 2x schedule does. A model computes, per lane and layer, q = sat(p - r), the first
// and second minimum and the sign product over the valid slots, and then the new r and
// p of each block. Each block must leave the array exactly 8 cycles after it entered,
// with its token and with the model's r and p in every lane. Finally six blocks are
// fed and flush is raised: none of them may come out, while a block fed after the
// flush must come out 8 cycles later as usual.
module tb_npu_array;
  import ldpc_pkg::*;
  localparam int NL = 40, NC = NL * JB, D = JB;

  logic clk = 1'b0, rst_n = 1'b0;
  token_t tok_b, tok_l;
  logic flush = 1'b0;
  logic [Z-1:0][W-1:0] p_in, r_in, r_out, p_out;

  npu_array #(.ZL(Z), .D(D)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  token_t tk [NC];
  int pv [NC][Z], rv [NC][Z], er [NC][Z], ep [NC][Z];

  function automatic int isat(int x);
    return (x > 511) ? 511 : (x < -511) ? -511 : x;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // build stimulus and expected results
    for (int l = 0; l < NL; l++) begin
      bit bubble_slot;
      bubble_slot = (l % 4 == 3);
      for (int w = 0; w < JB; w++) begin
        int c;
        c = l * JB + w;
        tk[c] = '0;
        tk[c].valid = !bubble_slot;
        tk[c].bv    = (w < 6) || ($urandom_range(0, 1) == 1);
        tk[c].first = (w == 0);
        tk[c].last  = (w == JB - 1);
        tk[c].layer = LAYER_W'(l % MB);
        tk[c].blk   = BLK_W'(w);
        tk[c].col   = COL_W'($urandom_range(0, NB-1));
        tk[c].shift = SHIFT_W'($urandom_range(0, Z-1));
        for (int r = 0; r < Z; r++) begin
          pv[c][r] = $urandom_range(0, 1000) - 500;
          rv[c][r] = $urandom_range(0, 400) - 200;
        end
      end
      if (!bubble_slot) for (int r = 0; r < Z; r++) begin
        int f, s, q [JB];
        bit sp;
        f = 511; s = 511; sp = 0;
        for (int w = 0; w < JB; w++) begin
          int c, m;
          c = l * JB + w;
          q[w] = isat(pv[c][r] - rv[c][r]);
          if (tk[c].bv) begin
            m = (q[w] < 0) ? -q[w] : q[w];
            if (m <= f) begin s = f; f = m; end else if (m < s) s = m;
            sp ^= (q[w] < 0);
          end
        end
        for (int w = 0; w < JB; w++) begin
          int c, m, mn, rr;
          c = l * JB + w;
          m  = (q[w] < 0) ? -q[w] : q[w];
          mn = (m != f) ? f : s;
          rr = (3 * mn) / 4;
          if (sp ^ (q[w] < 0)) rr = -rr;
          er[c][r] = rr;
          ep[c][r] = isat(q[w] + rr);
        end
      end
    end

    tok_b = '0; p_in = '0; r_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NC + D + 2; t++) begin
      @(negedge clk);
      if (t < NC) begin
        tok_b = tk[t];
        for (int r = 0; r < Z; r++) begin p_in[r] = W'(pv[t][r]); r_in[r] = W'(rv[t][r]); end
      end else tok_b = '0;
      #1;
      if (t >= D && t - D < NC) begin
        int c, bad;
        c = t - D;
        checks++;
        if (tok_l != tk[c]) begin failures++; $display("FAIL token of block %0d late or wrong", c); end
        if (tk[c].valid && tk[c].bv) begin
          bad = 0;
          for (int r = 0; r < Z; r++)
            if ($signed(r_out[r]) != er[c][r] || $signed(p_out[r]) != ep[c][r]) bad++;
          checks++;
          if (bad != 0) begin failures++; $display("FAIL block %0d: %0d lanes wrong", c, bad); end
        end
      end else if (t < D) begin
        checks++;
        if (tok_l.valid) begin failures++; $display("FAIL output before the latency"); end
      end
    end
    // flush
    begin
      int leaked, seen_at;
      token_t probe;
      leaked = 0; seen_at = -1;
      probe = tk[0];
      probe.valid = 1'b1;
      probe.col = COL_W'(5);
      for (int t = 0; t < 6 + 1 + 1 + D + 3; t++) begin
        @(negedge clk);
        flush = (t == 6);
        if (t < 6)      begin tok_b = tk[t]; tok_b.valid = 1'b1; end
        else if (t == 7) tok_b = probe;
        else            tok_b = '0;
        #1;
        if (tok_l.valid && tok_l == probe) seen_at = t;
        else if (tok_l.valid && t > 6) leaked++;
      end
      flush = 1'b0;
      checks += 2;
      if (leaked != 0) begin failures++; $display("FAIL flush: %0d flushed blocks came out", leaked); end
      if (seen_at != 7 + D) begin failures++; $display("FAIL flush: block after the flush came out at %0d", seen_at); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
