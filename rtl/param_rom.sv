// param_rom: code-parameter ROM of the decoder.
//
// For a (layer, block slot) pair it returns the block column to fetch from APP memory,
// the circulant shift of that block and whether the slot holds a valid block at all
// (slots padded with -1 in the rearranged index matrix are invalid and are neither
// counted in the min/sign search nor written back). It also holds the code length and
// the maximum number of decoding iterations. The contents are the rearranged block
// index matrix and the shift values of the 802.11n R=1/2 z=81 code taken from ldpc_pkg;
// the ROM is built at elaboration time from those tables, so changing the code means
// changing the package only.
//
// Timing: purely combinational (the lookup sits in the address stage of the pipeline).
module param_rom
  import ldpc_pkg::*;
#(
  parameter int TMAX_P = TMAX      // maximum number of decoding iterations
) (
  input  logic [LAYER_W-1:0] layer,
  input  logic [BLK_W-1:0]   blk,
  output logic [COL_W-1:0]   col,
  output logic [SHIFT_W-1:0] shift,
  output logic               bv,
  output logic [15:0]        code_len,
  output logic [7:0]         t_max
);

  typedef struct packed {
    logic               bv;
    logic [COL_W-1:0]   col;
    logic [SHIFT_W-1:0] shift;
  } rom_word_t;

  function automatic rom_word_t entry(int u, int w);
    rom_word_t e;
    e.bv    = (BETA_I[u][w] >= 0);
    e.col   = e.bv ? COL_W'(BETA_I[u][w]) : '0;
    e.shift = SHIFT_W'(beta_s(u, w));
    return e;
  endfunction

  rom_word_t rom [MB*JB];

  for (genvar u = 0; u < MB; u++) begin : g_layer
    for (genvar w = 0; w < JB; w++) begin : g_blk
      assign rom[u*JB+w] = entry(u, w);
    end
  end

  rom_word_t rd;
  always_comb begin
    if (int'(layer) < MB) rd = rom[int'(layer)*JB + int'(blk)];
    else                  rd = '0;
  end

  assign col      = rd.col;
  assign shift    = rd.shift;
  assign bv       = rd.bv;
  assign code_len = 16'(NBITS);
  assign t_max    = 8'(TMAX_P);

endmodule
