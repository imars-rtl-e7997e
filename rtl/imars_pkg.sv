// imars_pkg: types and constants shared by the in-memory recommendation
// accelerator. An embedding is 32 dimensions of signed 8-bit integers,
// packed into one 256-bit word (dimension d in bits [8d+7:8d]); this word is
// also the width of one CMA row, of every adder-tree input and of the RSC
// bus. Vector additions are lane-wise: each 8-bit lane adds modulo 2^8 with
// no carry into its neighbour, so the order of the additions in the adder
// trees never changes a result (this wrap-around rule is this design's own
// choice; the quantisation must keep pooled sums in range).
package imars_pkg;

  localparam int unsigned EDIM  = 32;            // embedding dimensions
  localparam int unsigned EBITS = 8;             // int8 quantisation
  localparam int unsigned VW    = EDIM * EBITS;  // 256-bit vector word

  typedef logic [VW-1:0] vec_t;

  // Lane-wise modulo-2^8 addition of two embedding words.
  function automatic vec_t vadd(input vec_t a, input vec_t b);
    vec_t s;
    for (int d = 0; d < EDIM; d++) s[d*EBITS +: EBITS] = a[d*EBITS +: EBITS] + b[d*EBITS +: EBITS];
    return s;
  endfunction

  // Operations a CMA bank (and each CMA in it) understands.
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_WRITE    = 4'd1,  // RAM mode: write one row
    OP_READ     = 4'd2,  // RAM mode: read one row
    OP_ACC_CLR  = 4'd3,  // clear the accumulators next to the RAM SAs
    OP_LOOKUP   = 4'd4,  // RAM mode read + in-memory add into the accumulator
    OP_SEARCH   = 4'd5,  // CAM mode threshold search, forget reported rows
    OP_SEARCH_C = 4'd6,  // CAM mode threshold search, keep reported rows masked
    OP_POP      = 4'd7,  // priority encoder: report and retire the first match
    OP_INVAL    = 4'd8   // mark every row invalid (empties a buffer)
  } cma_op_e;

  // Configuration of one fully connected layer mapped on a crossbar.
  typedef struct packed {
    logic       en;      // layer in use
    logic       relu;    // clamp negative outputs to 0
    logic [4:0] shift;   // requantisation: arithmetic right shift of the MAC sum
    logic [7:0] out_n;   // output neurons in use (1..128); the rest read as 0
  } layer_cfg_t;

  // Command broadcast to a bank. idx is a row index into the embedding table
  // held by the bank; the bank turns it into (mat, CMA, row).
  typedef struct packed {
    cma_op_e     op;
    logic [15:0] idx;
    vec_t        data;   // write data / search key
    vec_t        mask;   // search: 1 = column takes part
    logic [8:0]  thr;    // search: largest Hamming distance that still matches
    logic        sig;    // item table: address the LSH-signature half of the pair
  } bank_cmd_t;

  localparam int unsigned BMAX   = 32;  // largest number of CMA banks
  localparam int unsigned NLAYER = 3;   // crossbars (layers) per DNN stack

  // Static configuration of the accelerator for one recommendation model.
  typedef struct packed {
    logic [BMAX-1:0]       filt_mask;    // banks pooled in the filtering stage
    logic [BMAX-1:0]       rank_mask;    // banks pooled in the ranking stage
    logic [4:0]            itet_bank;    // bank holding the item table (pair mode)
    logic [BMAX-1:0][2:0]  filt_slot;    // feature-buffer slot of each bank, filtering
    logic [BMAX-1:0][2:0]  rank_slot;    // feature-buffer slot of each bank, ranking
    logic [2:0]            dense_f_slot; // first slot of the filtering dense features
    logic [2:0]            dense_f_nw;   // their number of words (0..4)
    logic [2:0]            dense_r_slot;
    logic [2:0]            dense_r_nw;
    logic [8:0]            nns_thr;      // Hamming radius of the near-neighbour search
    logic [7:0]            nns_max;      // candidates to keep (N)
    logic [7:0]            topk;         // items to return (k)
    logic [6:0]            n_sparse;     // entries in the sparse-feature list
    logic                  skip_filter;  // ranking only (DLRM-style): candidates from the host list
    layer_cfg_t [NLAYER-1:0] df_layer;   // filtering dense-feature stack
    layer_cfg_t [NLAYER-1:0] fp_layer;   // filtering predictor stack
    layer_cfg_t [NLAYER-1:0] dr_layer;   // ranking dense-feature stack
    layer_cfg_t [NLAYER-1:0] rp_layer;   // ranking predictor stack
  } imars_cfg_t;

  // Targets of the host load port.
  typedef enum logic [1:0] {HW_ET = 2'd0, HW_XBAR = 2'd1, HW_LSH = 2'd2, HW_SPARSE = 2'd3} hw_tgt_e;

endpackage
