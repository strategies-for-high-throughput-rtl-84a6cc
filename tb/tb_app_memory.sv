// tb_app_memory: writes random words to all 24 addresses and reads them back
// (one-cycle read latency), then checks random concurrent reads and writes against a
// model: a read of the address being written in the same cycle must return the new word
// and raise fwd; any other read returns the stored word.
module tb_app_memory;
  localparam int Z = 81, W = 10, DEPTH = 24;
  logic clk = 1'b0;
  logic rd_en = 1'b0, wr_en = 1'b0;
  logic [4:0] rd_addr = '0, wr_addr = '0;
  logic [Z-1:0][W-1:0] rd_data, wr_data = '0;
  logic fwd;

  app_memory #(.Z(Z), .W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [Z-1:0][W-1:0] model [DEPTH];

  function automatic logic [Z-1:0][W-1:0] rnd();
    logic [Z-1:0][W-1:0] v;
    for (int r = 0; r < Z; r++) v[r] = W'($urandom);
    return v;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'(a); wr_data = rnd(); model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = 5'(a);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data != model[a]) begin failures++; $display("FAIL readback %0d", a); end
    end
    for (int i = 0; i < 400; i++) begin
      logic [Z-1:0][W-1:0] exp_d;
      bit exp_f;
      @(negedge clk);
      rd_en = 1; wr_en = $urandom_range(0, 1);
      rd_addr = 5'($urandom_range(0, DEPTH-1));
      wr_addr = ($urandom_range(0, 2) == 0) ? rd_addr : 5'($urandom_range(0, DEPTH-1));
      wr_data = rnd();
      exp_f = wr_en && (wr_addr == rd_addr);
      exp_d = exp_f ? wr_data : model[rd_addr];
      #1;
      checks++;
      if (fwd != exp_f) begin failures++; $display("FAIL fwd flag at step %0d", i); end
      @(negedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      wr_en = 0; rd_en = 0;
      checks++;
      if (rd_data != exp_d) begin failures++; $display("FAIL read at step %0d (fwd=%0d)", i, exp_f); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
