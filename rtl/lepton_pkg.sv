// lepton_pkg -- types, constants and the probability-model table shared by the
// Lepton encoder.
//
// The encoder codes every bit of every syntax element with its own adaptive
// probability model.  Models are numbered here with a global id (0..NUM_MODELS-1);
// the binarizer addresses a model by id, the top instantiates one model per id,
// and the parallel-to-serial stage picks model outputs by id.
//
// Bin counts per model are the ones of the Lepton model table (Table III of the
// source paper).  The memory depth of each optimized model is this design's
// choice where the paper only gives group totals (see model_depth()).
package lepton_pkg;

  // ---------------------------------------------------------------- data widths
  localparam int COEF_W   = 12;   // signed quantized DCT coefficient
  localparam int VAL_W    = 13;   // signed element value (DC residual needs one bit more)
  localparam int IDX_WMAX = 18;   // widest model index (res_thres_6: 262144 bins)
  localparam int PROB_W   = 8;    // probability of a 0 bit, in 1/256
  localparam int BIN_W    = 16;   // one bin: two 8-bit counts
  localparam int MAX_BINS = 22;   // 11 exponent + 1 sign + 10 residual bits
  localparam int MODEL_LAT = 3;   // cycles from model request to model output

  // ---------------------------------------------------------------- model ids
  localparam int ID_NZ7    = 0;   // nz_7x7_0..5   (bit b of num_nonzero_7x7)
  localparam int ID_EXP7   = 6;   // exp_7x7_0..10
  localparam int ID_RES7   = 17;  // res_7x7_0..9  (bit position p of the magnitude)
  localparam int ID_NZX    = 27;  // nz_edgex_0..2
  localparam int ID_NZY    = 30;  // nz_edgey_0..2
  localparam int ID_EXPE   = 33;  // exp_edge_0..10
  localparam int ID_THRES  = 44;  // res_thres_0..7
  localparam int ID_RESE   = 52;  // res_edge_0..1
  localparam int ID_EXPDC  = 54;  // exp_dc_0..10
  localparam int ID_RESDC  = 65;  // res_dc_0..9
  localparam int ID_SIGN   = 75;  // sign
  localparam int NUM_MODELS = 76;
  localparam int ID_W      = 7;

  localparam int N_WAYS    = 32;  // N of the optimized models (paper: N=32)

  // Table IV utilization rates of exp_7x7_0..10, in 1/10000.
  localparam int EXP7_UTIL [11] = '{5078, 4959, 4642, 4322, 4003, 3375, 2425, 1473, 807, 317, 24};

  // Number of bins of a model (Table III).
  function automatic int model_range(int id);
    if (id >= ID_NZ7 && id < ID_EXP7) begin
      case (id - ID_NZ7)
        0: return 500; 1: return 260; 2: return 140; 3: return 80; 4: return 40; default: return 20;
      endcase
    end
    if (id >= ID_EXP7  && id < ID_RES7)  return 10780;
    if (id >= ID_RES7  && id < ID_NZX)   return 1260;
    if (id >= ID_NZX   && id < ID_EXPE)  return 512 >> ((id - ID_NZX) % 3);
    if (id >= ID_EXPE  && id < ID_THRES) return 2156;
    if (id >= ID_THRES && id < ID_RESE)  return (id - ID_THRES == 7) ? 4096 : (4096 << (id - ID_THRES));
    if (id >= ID_RESE  && id < ID_EXPDC) return 196;
    if (id >= ID_EXPDC && id < ID_RESDC) return 204;
    if (id >= ID_RESDC && id < ID_SIGN)  return 12;
    return 66;
  endfunction

  // Models built with the hash-based set-associative memory: the four groups the
  // paper evaluates (exp_7x7, exp_edge, res_7x7, res_thres).  The rest keep one
  // dedicated bin per index.
  function automatic bit model_is_opt(int id);
    return (id >= ID_EXP7 && id < ID_NZX) || (id >= ID_EXPE && id < ID_RESE);
  endfunction

  // Physical memory depth of an optimized model, a multiple of N_WAYS.
  //   exp_7x7_i : utilization (Table IV) * 10780, rounded up to N
  //   exp_edge  : Table V total 9536 split evenly over 11 models, rounded up
  //   res_7x7   : Table V total 3968 split evenly over 10 models, rounded up
  //   res_thres : Table V total 14336 split evenly over 8 models
  function automatic int model_depth(int id);
    int units;
    if (id >= ID_EXP7 && id < ID_RES7)
      units = (EXP7_UTIL[id - ID_EXP7] * 10780 + 10000 * N_WAYS - 1) / (10000 * N_WAYS);
    else if (id >= ID_RES7 && id < ID_NZX)   units = (3968 + 10 * N_WAYS - 1) / (10 * N_WAYS);
    else if (id >= ID_EXPE && id < ID_THRES) units = (9536 + 11 * N_WAYS - 1) / (11 * N_WAYS);
    else if (id >= ID_THRES && id < ID_RESE) units = 14336 / (8 * N_WAYS);
    else return model_range(id);
    return units * N_WAYS;
  endfunction

  function automatic int clog2_min1(int v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

  // ---------------------------------------------------------------- syntax elements
  typedef enum logic [2:0] {
    EL_NZ7   = 3'd0,   // num_nonzero_7x7
    EL_COEF7 = 3'd1,   // 7x7 AC coefficient
    EL_NZX   = 3'd2,   // num_nonzero_x_edge
    EL_NZY   = 3'd3,   // num_nonzero_y_edge
    EL_EDGE  = 3'd4,   // x or y edge coefficient
    EL_DC    = 3'd5,   // DC residual
    EL_FLUSH = 3'd6    // end of image: flush the arithmetic coder
  } el_type_e;

  // One syntax element with the context it is coded in.
  typedef struct packed {
    el_type_e                 etype;
    logic                     flag_c;  // 0 luma, 1 chroma
    logic signed [VAL_W-1:0]  value;   // coefficient, count or DC residual
    logic [5:0]               pos;     // 7x7: coding rank 0..48; edge: 0..6 x, 7..13 y
    logic [5:0]               zz;      // zigzag index of the coefficient
    logic [5:0]               nzl;     // non-zeros left in the region, this one included
    logic [3:0]               prior;   // 0..10, from the neighbour blocks
    logic [3:0]               nzctx;   // 0..9, num_nonzero_7x7 context
    logic [2:0]               nzb;     // 0..7, bucket of this block's 7x7 count
    logic [2:0]               ectx;    // 0..7, neighbour's edge count
    logic [6:0]               dcctx;   // 0..101, DC prediction spread
  } el_t;

  // One request to one probability model.
  typedef struct packed {
    logic                 en;
    logic                 bit_v;
    logic [IDX_WMAX-1:0]  idx;
  } bin_req_t;

  // One coded bin on its way to the arithmetic coder.
  typedef struct packed {
    logic              valid;
    logic              bit_v;
    logic [PROB_W-1:0] prob;
  } coded_bin_t;

  // Order of the bins of one element: model id of bin k.
  typedef struct packed {
    logic                           valid;
    logic                           flush;
    logic [4:0]                     nbins;
    logic [MAX_BINS-1:0][ID_W-1:0]  ids;
    logic [MAX_BINS-1:0]            bits;
  } bin_order_t;

  // Output token of the arithmetic coder: an optional lead byte followed by
  // run_len copies of run_byte.
  typedef struct packed {
    logic        valid;
    logic        lead_valid;
    logic [7:0]  lead_byte;
    logic [23:0] run_len;
    logic [7:0]  run_byte;
  } out_tok_t;

  typedef logic signed [COEF_W-1:0] coef_t;
  typedef coef_t [63:0] block_t;      // natural (raster) order, element r*8+c

  // Natural position of the k-th coefficient of the 7x7 region in coding
  // (zigzag) order, k = 0..48.
  function automatic int pos7_nat(int k);
    int n;
    n = 0;
    for (int z = 0; z < 64; z++)
      for (int p = 0; p < 64; p++)
        if (int'(zigzag_of(p)) == z && p / 8 != 0 && p % 8 != 0) begin
          if (n == k) return p;
          n++;
        end
    return 9;
  endfunction

  // Natural position of edge coefficient k = 0..13: x edge (row 0, columns
  // 1..7) first, then y edge (column 0, rows 1..7).
  function automatic int pose_nat(int k);
    return (k < 7) ? (k + 1) : ((k - 6) * 8);
  endfunction

  // Bit length of a magnitude (the Exp-Golomb exponent).
  function automatic logic [3:0] bitlen(logic [VAL_W-1:0] m);
    logic [3:0] r;
    r = '0;
    for (int i = 0; i < VAL_W; i++) if (m[i]) r = 4'(i + 1);
    return r;
  endfunction

  // Zigzag index of natural (raster) position p = row*8+col of an 8x8 block.
  function automatic logic [5:0] zigzag_of(int p);
    int r, c, s, z;
    r = p / 8; c = p % 8; s = r + c;
    if (s < 8) begin
      z = s * (s + 1) / 2;
      z += (s % 2 == 0) ? c : r;
    end else begin
      z = 64 - (15 - s) * (16 - s) / 2;
      z += (s % 2 == 0) ? (c - (s - 7)) : (r - (s - 7));
    end
    return 6'(z);
  endfunction

endpackage
