// tb_cn_msg_memory: writes a distinct random word to each of the 12 x 8 (layer, slot)
// addresses, reads every one back with rd_zero low (must match) and high (must be zero).
module tb_cn_msg_memory;
  localparam int Z = 81, W = 10;
  logic clk = 1'b0;
  logic rd_en = 0, rd_zero = 0, wr_en = 0;
  logic [3:0] rd_layer = '0, wr_layer = '0;
  logic [2:0] rd_blk = '0, wr_blk = '0;
  logic [Z-1:0][W-1:0] rd_data, wr_data = '0;

  cn_msg_memory #(.Z(Z), .W(W), .LAYERS(12), .BLOCKS(8)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [Z-1:0][W-1:0] model [12][8];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int u = 0; u < 12; u++) for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      wr_en = 1; wr_layer = 4'(u); wr_blk = 3'(b);
      for (int r = 0; r < Z; r++) wr_data[r] = W'($urandom);
      wr_data[0] = W'(u * 8 + b + 1);
      model[u][b] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int z = 0; z < 2; z++)
      for (int u = 0; u < 12; u++) for (int b = 0; b < 8; b++) begin
        @(negedge clk); rd_en = 1; rd_zero = z[0]; rd_layer = 4'(u); rd_blk = 3'(b);
        @(negedge clk); rd_en = 0;
        checks++;
        if (rd_data != (z ? '0 : model[u][b])) begin
          failures++; $display("FAIL layer %0d slot %0d zero=%0d", u, b, z);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
