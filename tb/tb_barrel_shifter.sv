// tb_barrel_shifter: random blocks rotated by every shift 0..127; out[r] must equal
// in[(r + shift) mod 81]. A second instance rotating by 81 - shift must restore the input.
module tb_barrel_shifter;
  localparam int Z = 81, W = 10;
  logic [Z-1:0][W-1:0] din, dout, back;
  logic [6:0] shift, shift_inv;

  barrel_shifter #(.Z(Z), .W(W)) dut (.din, .shift, .dout);
  barrel_shifter #(.Z(Z), .W(W)) inv (.din(dout), .shift(shift_inv), .dout(back));

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 128; s++) begin
      for (int r = 0; r < Z; r++) din[r] = W'($urandom);
      shift = 7'(s);
      shift_inv = 7'((Z - (s % Z)) % Z);
      #1;
      for (int r = 0; r < Z; r++) begin
        checks++;
        if (dout[r] != din[(r + s) % Z]) begin
          failures++;
          if (failures < 10) $display("FAIL shift %0d lane %0d", s, r);
        end
      end
      checks++;
      if (back != din) begin failures++; $display("FAIL inverse rotation for shift %0d", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
