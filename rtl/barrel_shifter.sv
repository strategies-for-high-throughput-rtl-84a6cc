// barrel_shifter: circular rotation of one block of Z words.
//
// out[r] = in[(r + shift) mod Z]. With an identity block right-shifted by s, check row r
// of the block is connected to variable r + s (mod Z), so rotating an APP block by s
// lines every variable up with the NPU lane of the check it feeds. Rotating by Z - s
// undoes it, which is how the decoder puts updated APP values back in column order.
//
// The rotation is built as log2 stages; stage k rotates by 2^k mod Z when bit k of the
// shift is set, so any shift below 2^SHIFT_W composes to a rotation by shift mod Z.
// Z need not be a power of two. The paper names the barrel shifter and its job; the
// logarithmic structure is this design's choice. Purely combinational.
module barrel_shifter #(
  parameter int Z       = 81,
  parameter int W       = 10,
  parameter int SHIFT_W = $clog2(Z)
) (
  input  logic [Z-1:0][W-1:0] din,
  input  logic [SHIFT_W-1:0]  shift,
  output logic [Z-1:0][W-1:0] dout
);

  logic [Z-1:0][W-1:0] stage [SHIFT_W+1];

  assign stage[0] = din;

  for (genvar k = 0; k < SHIFT_W; k++) begin : g_stage
    localparam int R = (1 << k) % Z;
    for (genvar r = 0; r < Z; r++) begin : g_lane
      assign stage[k+1][r] = shift[k] ? stage[k][(r + R) % Z] : stage[k][r];
    end
  end

  assign dout = stage[SHIFT_W];

endmodule
