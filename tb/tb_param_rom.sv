// tb_param_rom: checks the code-parameter ROM against the base matrix.
// For every layer the valid slots must list exactly the non-zero block columns of that
// base-matrix row, each once, with the shift printed in the base matrix; the shifts of
// each layer, as a multiset, must equal that layer's row of the (unrearranged) block
// shift matrix typed in below; inside a superlayer every block column shared by layers
// u and u+1 must sit in an earlier slot of layer u (the stagger the 2x pipeline needs);
// and the code length and iteration limit must be 1944 and 8.
module tb_param_rom;
  import ldpc_pkg::*;

  // Block shift matrix in original (column) order, 7 or 8 entries per layer.
  localparam int BS [MB][JB] = '{
    '{57,50,11,50,79, 1, 0,-1}, '{ 3,28, 0,55, 7, 0, 0,-1}, '{30,24,37,56,14, 0, 0,-1},
    '{62,53,53, 3,35, 0, 0,-1}, '{40,20,66,22,28, 0, 0,-1}, '{ 0, 8,42,50, 8, 0, 0,-1},
    '{69,79,79,56,52, 0, 0, 0}, '{65,38,57,72,27, 0, 0,-1}, '{64,14,52,30,32, 0, 0,-1},
    '{45,70, 0,77, 9, 0, 0,-1}, '{ 2,56,57,35,12, 0, 0,-1}, '{24,61,60,27,51,16, 1, 0}
  };

  logic [LAYER_W-1:0] layer;
  logic [BLK_W-1:0]   blk;
  logic [COL_W-1:0]   col;
  logic [SHIFT_W-1:0] shift;
  logic               bv;
  logic [15:0]        code_len;
  logic [7:0]         t_max;

  param_rom dut (.*);

  int checks = 0, failures = 0;
  int cols [MB][JB];
  int shs  [MB][JB];
  bit vs   [MB][JB];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int u = 0; u < MB; u++) for (int w = 0; w < JB; w++) begin
      layer = LAYER_W'(u); blk = BLK_W'(w);
      #1;
      cols[u][w] = int'(col); shs[u][w] = int'(shift); vs[u][w] = bv;
    end
    for (int u = 0; u < MB; u++) begin
      int seen [NB];
      int hist_rom [Z], hist_ref [Z];
      foreach (seen[c]) seen[c] = 0;
      foreach (hist_rom[k]) begin hist_rom[k] = 0; hist_ref[k] = 0; end
      for (int w = 0; w < JB; w++) if (vs[u][w]) begin
        seen[cols[u][w]]++;
        chk(HB[u][cols[u][w]] == shs[u][w], $sformatf("shift of layer %0d slot %0d", u, w));
        hist_rom[shs[u][w]]++;
      end
      for (int w = 0; w < JB; w++) if (BS[u][w] >= 0) hist_ref[BS[u][w]]++;
      for (int c = 0; c < NB; c++)
        chk(seen[c] == ((HB[u][c] >= 0) ? 1 : 0), $sformatf("column %0d of layer %0d", c, u));
      chk(hist_rom == hist_ref, $sformatf("shift multiset of layer %0d", u));
      if ((u % SL) != SL - 1) begin
        for (int w2 = 0; w2 < JB; w2++) if (vs[u+1][w2])
          for (int w1 = 0; w1 < JB; w1++) if (vs[u][w1] && cols[u][w1] == cols[u+1][w2])
            chk(w1 < w2, $sformatf("stagger of column %0d between layers %0d and %0d", cols[u][w1], u, u+1));
      end
    end
    chk(code_len == 16'd1944, "code length");
    chk(t_max == 8'd8, "iteration limit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
