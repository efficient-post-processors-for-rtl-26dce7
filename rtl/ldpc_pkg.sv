// ldpc_pkg: types and constants shared by the post-processing LDPC decoder.
//
// The code is the IEEE 802.11n rate-5/6 (1944,1620) QC-LDPC code: a 4 x 24 base
// matrix of Z x Z blocks (Z = 81). A base entry x >= 0 stands for the identity
// matrix cyclically shifted right by x, so row r of the block connects to column
// (r + x) mod Z of that block column; -1 stands for an all-zero block. The base
// matrix below is the one printed in the paper's figure of the parity-check
// matrix. For simulations at a reduced lifting size Z the shift is taken mod Z.
//
// Messages use Q5.0 two's-complement quantisation (as the paper's 802.11n
// decoder) and are kept symmetric, +-15. The posterior LLR width (8 bits) is
// this design's own choice.
package ldpc_pkg;

  localparam int unsigned MB   = 4;    // block rows = layers
  localparam int unsigned NB   = 24;   // block columns = processing elements
  localparam int unsigned ZMAX = 81;   // lifting size of the (1944,1620) code
  localparam int unsigned QW   = 5;    // VC / CV message width (Q5.0)
  localparam int unsigned PW   = 8;    // posterior LLR width
  localparam int unsigned SW   = 7;    // shift field width (0..80)

  localparam int MSG_MAX  = (1 << (QW - 1)) - 1;  // 15
  localparam int POST_MAX = (1 << (PW - 1)) - 1;  // 127

  typedef logic signed [QW-1:0] msg_t;
  typedef logic signed [PW-1:0] post_t;

  // Check-to-variable message with the check's unmarginalised parity flag:
  // sat = 1 when the signs of all VC messages into the check multiply to +1.
  typedef struct packed {
    logic sat;
    msg_t msg;
  } c2v_t;

  // Base matrix of the (1944,1620) code, row-major, -1 = zero block.
  localparam int HB [MB][NB] = '{
    '{13, 48, 80, 66,  4, 74,  7, 30, 76, 52, 37, 60, -1, 49, 73, 31, 74, 73, 23, -1,  1,  0, -1, -1},
    '{69, 63, 74, 56, 64, 77, 57, 65,  6, 16, 51, -1, 64, -1, 68,  9, 48, 62, 54, 27, -1,  0,  0, -1},
    '{51, 15,  0, 80, 24, 25, 42, 54, 44, 71, 71,  9, 67, 35, -1, 58, -1, 29, -1, 53,  0, -1,  0,  0},
    '{16, 29, 36, 41, 44, 56, 59, 37, 50, 24, -1, 65,  4, 65, 52, -1,  4, -1, 73, 52,  1, -1, -1,  0}
  };

  // Post-processing phase of the current iteration (Algorithms 1 and 2).
  typedef enum logic [2:0] {
    PH_BP        = 3'd0,  // plain BP, first M iterations
    PH_CONSTRAIN = 3'd1,  // focused heating: soft bit flipping, L iterations
    PH_GAP       = 3'd2,  // plain BP separating focused and extended heating, G iterations
    PH_HEAT      = 3'd3,  // extended heating: VC reweighting to A0, P iterations
    PH_COOL      = 3'd4   // plain BP cooling, N iterations
  } phase_e;

  // Run-time post-processing schedule. Quenching is P=1, L=G=0.
  typedef struct packed {
    logic [6:0] m;        // BP iterations before post-processing
    logic [6:0] l;        // constraining (soft bit flip) iterations
    logic [6:0] g;        // gap iterations
    logic [6:0] p;        // heating iterations
    logic [6:0] n;        // cooling iterations
    logic [QW-2:0] a0;    // reweighted VC magnitude
    logic [QW-2:0] b0;    // soft-flipped posterior magnitude
  } pp_cfg_t;

  // The paper's post-processing settings for the (1944,1620) code, M = N = 20.
  localparam pp_cfg_t CFG_80211N = '{m: 7'd20, l: 7'd5, g: 7'd10, p: 7'd10, n: 7'd20,
                                     a0: 4'd1, b0: 4'd1};

  // Shift of base entry (row, col) at lifting size z.
  function automatic int unsigned hb_shift(int unsigned row, int unsigned col, int unsigned z);
    return (HB[row][col] < 0) ? 0 : (int'(HB[row][col]) % z);
  endfunction

  function automatic logic hb_valid(int unsigned row, int unsigned col);
    return HB[row][col] >= 0;
  endfunction

  // Compacted c2v memory address: count of non-zero blocks above (row, col).
  function automatic int unsigned hb_addr(int unsigned row, int unsigned col);
    int unsigned a = 0;
    for (int unsigned r = 0; r < row; r++) if (HB[r][col] >= 0) a++;
    return a;
  endfunction

  function automatic msg_t sat_msg(int x);
    if (x > MSG_MAX) return msg_t'(MSG_MAX);
    if (x < -MSG_MAX) return msg_t'(-MSG_MAX);
    return msg_t'(x);
  endfunction

  function automatic post_t sat_post(int x);
    if (x > POST_MAX) return post_t'(POST_MAX);
    if (x < -POST_MAX) return post_t'(-POST_MAX);
    return post_t'(x);
  endfunction

endpackage
