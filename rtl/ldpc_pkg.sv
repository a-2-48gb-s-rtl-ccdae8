// ldpc_pkg -- constants, types and helper functions shared by the QC-LDPC
// decoder.
//
// The code is the rate-1/2 quasi-cyclic LDPC code of IEEE 802.11n with
// lifting size z = 81 (n = 1944, k = 972). Its 12 x 24 base matrix HB holds,
// for each z x z block, either -1 (all-zero block) or the right cyclic shift s
// of an identity matrix. The decoder never walks the zero blocks: the
// beta_rom module turns each base-matrix row (a "layer") into the list of
// its valid blocks, i.e. the block index matrix (column numbers) and the
// block shift matrix (shift values).
//
// Number formats (this design's choice): channel LLRs are 10-bit two's
// complement, the 30-bit host word carrying three of them and a block of 81
// of them filling 810 bits. Posterior LLRs are 12-bit, saturated
// symmetrically to +/-2047. Check-to-variable messages are stored in the
// compressed min-sum form: first minimum, second minimum, position of the
// first minimum and one sign bit per valid block of the layer.
package ldpc_pkg;

  // ---- code dimensions ---------------------------------------------------
  localparam int unsigned Z       = 81;  // lifting size (block size)
  localparam int unsigned MB      = 12;  // base-matrix rows = layers
  localparam int unsigned NB      = 24;  // base-matrix columns = block columns
  localparam int unsigned MAX_DC  = 8;   // largest layer degree of this code
  localparam int unsigned LAYER_W = 4;   // bits to number a layer
  localparam int unsigned COL_W   = 5;   // bits to number a block column
  localparam int unsigned POS_W   = 3;   // bits to number a block in a layer
  localparam int unsigned SHIFT_W = 7;   // bits of a shift value (< Z)

  // ---- number formats ----------------------------------------------------
  localparam int unsigned LLR_W = 10;        // channel LLR width
  localparam int unsigned P_W   = 12;        // posterior / Q width
  localparam int unsigned MAG_W = P_W - 1;   // message magnitude width
  localparam int          P_MAX = (1 << (P_W - 1)) - 1;

  // ---- host and DRAM word formats ------------------------------------
  localparam int unsigned SAMPLES_PER_DMA_WORD  = 3;   // U30 word, 3 LLRs
  localparam int unsigned DMA_W                 = 30;
  localparam int unsigned SAMPLES_PER_DRAM_WORD = 24;  // 8 x U30 per word
  localparam int unsigned DRAM_W                = 240;
  localparam int unsigned DRAM_WORDS_PER_BLOCK  = 4;   // ceil(81/24)
  localparam int unsigned DMA_WORDS_PER_BLOCK   = 27;  // 81/3
  localparam int unsigned UP_W                  = 64;  // target-to-host word

  // ---- IEEE 802.11n rate-1/2, z = 81 base matrix ---------------------------
  typedef int hb_row_t [NB];
  localparam hb_row_t HB [MB] = '{
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

  // ---- types -------------------------------------------------------------
  typedef logic signed [P_W-1:0]   p_t;     // posterior / Q value
  typedef logic signed [LLR_W-1:0] llr_t;   // channel LLR
  typedef logic [MAG_W-1:0]        mag_t;   // message magnitude

  // Compressed check-node state of one row (one lane) of one layer.
  typedef struct packed {
    mag_t              min1;   // smallest |Q| of the row (already scaled)
    mag_t              min2;   // second smallest |Q| (already scaled)
    logic [POS_W-1:0]  idx;    // position of min1 within the layer
    logic [MAX_DC-1:0] sgn;    // sign of Q for every block of the layer
  } cn_state_t;

  // One entry of the block index / block shift matrices.
  typedef struct packed {
    logic [COL_W-1:0]   col;    // block column (beta_I)
    logic [SHIFT_W-1:0] shift;  // cyclic shift (beta_S)
    logic               last;   // last valid block of the layer
  } beta_t;

  // ---- helpers -----------------------------------------------------------
  // Saturate a wide signed value to the symmetric P_W-bit range.
  function automatic p_t sat_p(input logic signed [P_W+1:0] v);
    localparam logic signed [P_W+1:0] HI = (P_W+2)'(P_MAX);
    if (v > HI)       return p_t'(P_MAX);
    else if (v < -HI) return p_t'(-P_MAX);
    else                 return p_t'(v);
  endfunction

  // Normalised min-sum scaling by 3/4.
  function automatic mag_t scale_mag(input mag_t m);
    return m - (m >> 2);
  endfunction

  // Check-to-variable message of block position pos, rebuilt from the
  // compressed state: magnitude min2 at the position of min1, min1
  // elsewhere; sign = product of all other signs in the row.
  function automatic logic signed [P_W:0] r_msg(input cn_state_t st,
                                                input logic [POS_W-1:0] pos);
    mag_t m;
    logic s;
    m = (pos == st.idx) ? st.min2 : st.min1;
    s = (^st.sgn) ^ st.sgn[pos];
    return s ? -$signed({2'b00, m}) : $signed({2'b00, m});
  endfunction

endpackage
