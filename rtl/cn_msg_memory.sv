// cn_msg_memory: check-to-variable message memory.
//
// One word of Z x W bits per (layer, block slot): the messages r of the Z edges of that
// block, stored in NPU-lane order (no rotation is needed for them). Read synchronously
// by the GNPU side, written by the LNPU side. The r(0) = 0 initialisation of the
// algorithm is done without clearing the RAM: during the first iteration the read port
// returns zeros (rd_zero). The paper gives the memory's size (z x dc x L x f bits) and
// role; the addressing (layer * JB + slot) and the zero-on-read are this design's choice.
module cn_msg_memory #(
  parameter int Z       = 81,
  parameter int W       = 10,
  parameter int LAYERS  = 12,
  parameter int BLOCKS  = 8,
  parameter int LAYER_W = $clog2(LAYERS),
  parameter int BLK_W   = $clog2(BLOCKS)
) (
  input  logic                clk,
  input  logic                rd_en,
  input  logic                rd_zero,
  input  logic [LAYER_W-1:0]  rd_layer,
  input  logic [BLK_W-1:0]    rd_blk,
  output logic [Z-1:0][W-1:0] rd_data,
  input  logic                wr_en,
  input  logic [LAYER_W-1:0]  wr_layer,
  input  logic [BLK_W-1:0]    wr_blk,
  input  logic [Z-1:0][W-1:0] wr_data
);

  localparam int DEPTH = LAYERS * BLOCKS;
  localparam int AW    = $clog2(DEPTH);

  logic [Z-1:0][W-1:0] mem [DEPTH];
  logic [AW-1:0] rd_addr, wr_addr;

  assign rd_addr = AW'(int'(rd_layer) * BLOCKS + int'(rd_blk));
  assign wr_addr = AW'(int'(wr_layer) * BLOCKS + int'(wr_blk));

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= rd_zero ? '0 : mem[rd_addr];
  end

endmodule
