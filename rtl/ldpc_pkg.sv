// ldpc_pkg: constants, code tables and shared types of the layered QC-LDPC decoder.
//
// The code is the IEEE 802.11n rate-1/2 code with submatrix size z = 81 (n = 1944).
// HB is its 12 x 24 base matrix (-1 = all-zero block, otherwise the right-shift of the
// identity block). BETA_I is the rearranged block index matrix: for each layer it lists
// the 0-based block columns in the order they are processed, padded with -1 to a fixed
// eight slots per layer. Adjacent layers of one superlayer (layers 1-6 and 7-12) are
// staggered so that a block column shared by layer u and u+1 appears in an earlier slot
// of layer u than of layer u+1; the 2-layer pipeline relies on this. The shift matrix
// that goes with BETA_I is not tabulated: beta_s() reads it out of HB.
//
// Both tables are copied from the paper. The word length, the saturation range and the
// pipeline token type are this design's own choices.
package ldpc_pkg;

  localparam int Z      = 81;   // submatrix (circulant) size
  localparam int MB     = 12;   // layers (rows of the base matrix)
  localparam int NB     = 24;   // block columns
  localparam int JB     = 8;    // block slots processed per layer
  localparam int SL     = 6;    // layers per superlayer
  localparam int W      = 10;   // word length f of LLR, APP and messages (6 integer + 4 fraction bits)
  localparam int TMAX   = 8;    // maximum number of decoding iterations
  localparam int NBITS  = NB * Z;

  localparam int LAYER_W = $clog2(MB);
  localparam int BLK_W   = $clog2(JB);
  localparam int COL_W   = $clog2(NB);
  localparam int SHIFT_W = $clog2(Z);

  // Base matrix of the 802.11n R=1/2, z=81 code.
  localparam int HB [MB][NB] = '{
    '{57,-1,-1,-1,50,-1,11,-1,50,-1,79,-1, 1, 0,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1},
    '{ 3,-1,28,-1, 0,-1,-1,-1,55, 7,-1,-1,-1, 0, 0,-1,-1,-1,-1,-1,-1,-1,-1,-1},
    '{30,-1,-1,-1,24,37,-1,-1,56,14,-1,-1,-1,-1, 0, 0,-1,-1,-1,-1,-1,-1,-1,-1},
    '{62,53,-1,-1,53,-1,-1, 3,35,-1,-1,-1,-1,-1,-1, 0, 0,-1,-1,-1,-1,-1,-1,-1},
    '{40,-1,-1,20,66,-1,-1,22,28,-1,-1,-1,-1,-1,-1,-1, 0, 0,-1,-1,-1,-1,-1,-1},
    '{ 0,-1,-1,-1, 8,-1,42,-1,50,-1,-1, 8,-1,-1,-1,-1,-1, 0, 0,-1,-1,-1,-1,-1},
    '{69,79,79,-1,-1,-1,56,-1,52,-1,-1,-1, 0,-1,-1,-1,-1,-1, 0, 0,-1,-1,-1,-1},
    '{65,-1,-1,-1,38,57,-1,-1,72,-1,27,-1,-1,-1,-1,-1,-1,-1,-1, 0, 0,-1,-1,-1},
    '{64,-1,-1,-1,14,52,-1,-1,30,-1,-1,32,-1,-1,-1,-1,-1,-1,-1,-1, 0, 0,-1,-1},
    '{-1,45,-1,70, 0,-1,-1,-1,77, 9,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1, 0, 0,-1},
    '{ 2,56,-1,57,35,-1,-1,-1,-1,-1,12,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1, 0, 0},
    '{24,-1,61,-1,60,-1,-1,27,51,-1,-1,16, 1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1, 0}
  };

  // Rearranged block index matrix (processing order of the block columns of each layer).
  localparam int BETA_I [MB][JB] = '{
    '{ 0, 4, 8,13, 6,10,12,-1},
    '{ 9, 0, 4, 8,13,14, 2,-1},
    '{15, 9, 0, 4, 8, 5,14,-1},
    '{ 7,15,16, 0, 4, 8, 1,-1},
    '{17, 7, 3,16, 0, 4, 8,-1},
    '{ 6,17,18,11,-1, 0, 4, 8},
    '{19, 6, 0, 8, 1, 2,18,12},
    '{ 4,19, 5, 0, 8,20,10,-1},
    '{21, 4,11, 5, 0, 8,20,-1},
    '{ 1,21, 4, 3,22, 9, 8,-1},
    '{ 0, 1,23, 4, 3,22,10,-1},
    '{ 8, 0, 2,23, 4,12, 7,11}
  };

  typedef logic signed [W-1:0] llr_t;
  typedef logic        [W-2:0] mag_t;

  localparam llr_t LLR_MAX = llr_t'((1 << (W-1)) - 1);   // +511
  localparam llr_t LLR_MIN = -LLR_MAX;                   // -511 (symmetric range)
  localparam mag_t MAG_INF = '1;                         // "infinity" of the min search

  // Shift value of the block in slot w of layer u (the rearranged shift matrix).
  function automatic int beta_s(int u, int w);
    return (BETA_I[u][w] < 0) ? 0 : HB[u][BETA_I[u][w]];
  endfunction

  // Last layer (in processing order) in which block column c takes part.
  function automatic int last_layer(int c);
    int l;
    l = 0;
    for (int u = 0; u < MB; u++) if (HB[u][c] >= 0) l = u;
    return l;
  endfunction

  // Saturate a wide signed sum to the symmetric range of llr_t.
  function automatic llr_t sat(logic signed [W:0] x);
    int xi;
    xi = int'(x);
    if (xi > int'(LLR_MAX))      return LLR_MAX;
    else if (xi < int'(LLR_MIN)) return LLR_MIN;
    else                         return llr_t'(x);
  endfunction

  // One block travelling down the pipeline.
  typedef struct packed {
    logic               valid;   // a real block slot (not a pipeline bubble)
    logic               bv;      // slot holds a valid (non-zero) block
    logic               first;   // first slot of the layer
    logic               last;    // last slot of the layer
    logic               iter0;   // first iteration: stored CN messages read as zero
    logic [LAYER_W-1:0] layer;
    logic [BLK_W-1:0]   blk;
    logic [COL_W-1:0]   col;     // block column (APP memory address)
    logic [SHIFT_W-1:0] shift;   // right-shift of the identity block
  } token_t;

endpackage
