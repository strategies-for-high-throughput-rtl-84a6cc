// app_memory: APP (a-posteriori LLR) memory, one word of Z x W bits per block column.
//
// A simple dual-port RAM: one synchronous read port feeding the GNPU side and one write
// port driven by the LNPU side (or by the host while the decoder is idle). The read data
// is registered; when the write port writes the address being read in the same cycle
// the new data is forwarded to the read register. The 2-layer pipeline needs this: the
// stagger of the rearranged index matrix leaves exactly one block slot between the LNPU
// writing a column for layer u and the GNPU reading it for layer u+1, and that read and
// write fall in the same cycle. Forwarding is this design's choice; the paper gives the
// memory's size (z x N x f bits) and its role.
module app_memory #(
  parameter int Z     = 81,
  parameter int W     = 10,
  parameter int DEPTH = 24,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rd_en,
  input  logic [AW-1:0]       rd_addr,
  output logic [Z-1:0][W-1:0] rd_data,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic [Z-1:0][W-1:0] wr_data,
  output logic                fwd       // a read was served from the write port this cycle
);

  logic [Z-1:0][W-1:0] mem [DEPTH];

  assign fwd = rd_en && wr_en && (rd_addr == wr_addr);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= fwd ? wr_data : mem[rd_addr];
  end

endmodule
