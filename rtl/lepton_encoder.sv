// lepton_encoder -- Lepton hardware encoder, top level.
//
// Re-encodes the quantized DCT coefficients of a JPEG image (as produced by a
// JPEG decoder, which is outside this design) into a Lepton arithmetic-coded
// stream.  Blocks flow through
//
//   line_buffer -> nz_counter x3, dc_residual -> coef_serializer -> binarizer
//     -> 76 probability models (in parallel) -> p2s -> arith_enc4 -> tokens
//
// One syntax element (a count, a coefficient or the DC residual) is binarized
// per cycle; all of its bits are coded in parallel, each on its own model;
// the bits then leave four per cycle in coding order.  The 40 models of the
// exp_7x7, res_7x7, exp_edge and res_thres groups use the hash-based
// set-associative memory (opt_prob_model, N ways per unit, equal default
// intervals, one controller per model); the other 36 keep one bin per index
// (direct_prob_model).  If any optimized model runs out of ways, or a value
// cannot be binarized, irq rises and the first offending model id and index
// are held in ovf_model/ovf_index, so software can re-encode the image and
// refresh the boundary indexes (cfg_* port: boundary cfg_sel of model
// cfg_model).
//
// Parameters: MAX_W blocks per row in the line buffer; N ways per
// set-associative unit; MEM_DIV divides the memory budget of every optimized
// model (1 = the budget derived from the paper; larger values give smaller,
// faster-to-simulate models with more overflows).
//
// Interface and timing: img_start (one cycle, while idle) clears all models,
// the coder and the status; plane_start/plane_width start a colour plane; then
// blocks are offered with blk_valid/blk_ready in raster order, blk_last on the
// last block of the image.  Output tokens (see arith_enc4) appear on tok[0..3]
// with no back-pressure; done pulses after the last token.
//
// Lint notes: the x-edge count of the left block and the y-edge count of the
// block above are computed by their counters but used by no context (the x
// edge looks up, the y edge looks left), so those outputs stay unread.  The
// bit-echo assertions sample rst_n synchronously through disable iff while the
// flops reset asynchronously; that is the usual pattern and not a circuit
// issue.
module lepton_encoder
  import lepton_pkg::*;
#(
  parameter int MAX_W   = 240,
  parameter int N       = N_WAYS,
  parameter int MEM_DIV = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          img_start,
  input  logic          plane_start,
  input  logic [15:0]   plane_width,
  input  logic          blk_valid,
  output logic          blk_ready,
  input  block_t        blk,
  input  logic          blk_flag_c,
  input  logic          blk_last,
  input  logic          cfg_we,
  input  logic [ID_W-1:0] cfg_model,
  input  logic [7:0]    cfg_sel,
  input  logic [17:0]   cfg_val,
  output out_tok_t      tok [4],
  output logic          done,
  output logic          irq,
  output logic          ovf_valid,
  output logic [ID_W-1:0] ovf_model,
  output logic [IDX_WMAX-1:0] ovf_index,
  output logic          range_err
);
  function automatic int opt_depth(int id);
    int d;
    d = model_depth(id) / MEM_DIV;
    d = ((d + N - 1) / N) * N;
    return (d < N) ? N : d;
  endfunction

  // ------------------------------------------------------------ line buffer
  logic   lb_valid, lb_ready, lb_ha, lb_hl, lb_fc, lb_last;
  block_t lb_cur, lb_above, lb_left;

  line_buffer #(.MAX_W(MAX_W)) u_lb (
    .clk, .rst_n, .plane_start, .plane_width,
    .in_valid(blk_valid), .in_ready(blk_ready), .in_blk(blk), .in_flag_c(blk_flag_c), .in_last(blk_last),
    .out_valid(lb_valid), .out_ready(lb_ready), .cur_blk(lb_cur), .above_blk(lb_above), .left_blk(lb_left),
    .has_above(lb_ha), .has_left(lb_hl), .out_flag_c(lb_fc), .out_last(lb_last));

  // ------------------------------------------------------------ preprocess
  logic [5:0] nz7_c, nz7_a, nz7_l;
  logic [2:0] nzx_c, nzx_a, nzx_l, nzy_c, nzy_a, nzy_l;
  logic signed [VAL_W-1:0] dc_res;
  logic [6:0] dcctx;
  logic       dc_err;

  nz_counter u_nz_cur   (.blk(lb_cur),   .nz7(nz7_c), .nzx(nzx_c), .nzy(nzy_c));
  nz_counter u_nz_above (.blk(lb_above), .nz7(nz7_a), .nzx(nzx_a), .nzy(nzy_a));
  nz_counter u_nz_left  (.blk(lb_left),  .nz7(nz7_l), .nzx(nzx_l), .nzy(nzy_l));

  dc_residual u_dc (
    .dc_cur(lb_cur[0]), .dc_above(lb_above[0]), .dc_left(lb_left[0]),
    .has_above(lb_ha), .has_left(lb_hl), .residual(dc_res), .dcctx, .range_err(dc_err));

  logic el_valid, el_ready;
  el_t  el;

  coef_serializer u_ser (
    .clk, .rst_n, .blk_valid(lb_valid), .blk_ready(lb_ready),
    .cur_blk(lb_cur), .above_blk(lb_above), .left_blk(lb_left),
    .has_above(lb_ha), .has_left(lb_hl), .flag_c(lb_fc), .last(lb_last),
    .nz7(nz7_c), .nzx(nzx_c), .nzy(nzy_c), .nz7_above(nz7_a), .nz7_left(nz7_l),
    .nzx_above(nzx_a), .nzy_left(nzy_l), .dc_res, .dcctx,
    .el_valid, .el_ready, .el);

  // ------------------------------------------------------------ binarization
  bin_req_t   req [NUM_MODELS];
  bin_order_t order0;
  logic       coef_err;

  binarizer u_bin (.clk, .rst_n, .el_valid, .el_ready, .el, .req, .order(order0), .range_err(coef_err));

  // ------------------------------------------------------------ probability models
  logic [NUM_MODELS-1:0]          m_en, m_bit, m_ovf;
  logic [NUM_MODELS-1:0][7:0]     m_prob;
  logic [IDX_WMAX-1:0]            m_ovf_idx [NUM_MODELS];

  for (genvar g = 0; g < NUM_MODELS; g++) begin : g_model
    localparam int RANGE = model_range(g);
    localparam int IW    = clog2_min1(RANGE);
    if (model_is_opt(g)) begin : g_opt
      localparam int DEPTH = opt_depth(g);
      logic [IW-1:0] oidx;
      opt_prob_model #(.MAX_INDEX(RANGE), .MEM_DEPTH(DEPTH), .N(N), .K(DEPTH / N),
                       .IDX_W(IW), .REC_W(IW), .CFG_W(18)) u_m (
        .clk, .rst_n, .clear(img_start), .en_in(req[g].en), .index_in(req[g].idx[IW-1:0]),
        .bit_data_in(req[g].bit_v), .cfg_we(cfg_we && int'(cfg_model) == g), .cfg_sel, .cfg_val,
        .out_en(m_en[g]), .prob_out(m_prob[g]), .bit_data_out(m_bit[g]),
        .ovf(m_ovf[g]), .ovf_index(oidx));
      assign m_ovf_idx[g] = IDX_WMAX'(oidx);
    end else begin : g_dir
      direct_prob_model #(.MAX_INDEX(RANGE), .IDX_W(IW)) u_m (
        .clk, .rst_n, .clear(img_start), .en_in(req[g].en), .index_in(req[g].idx[IW-1:0]),
        .bit_data_in(req[g].bit_v),
        .out_en(m_en[g]), .prob_out(m_prob[g]), .bit_data_out(m_bit[g]));
      assign m_ovf[g]     = 1'b0;
      assign m_ovf_idx[g] = '0;
    end
  end

  // order list delayed by the model latency
  bin_order_t order_d [MODEL_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < MODEL_LAT; i++) order_d[i] <= '0;
    else begin
      order_d[0] <= order0;
      for (int i = 1; i < MODEL_LAT; i++) order_d[i] <= order_d[i-1];
    end
  end

  // ------------------------------------------------------------ output
  coded_bin_t cbins [4];
  logic       flush;

  p2s u_p2s (.clk, .rst_n, .order(order_d[MODEL_LAT-1]), .m_en, .m_prob, .out_bins(cbins), .flush_out(flush));

  arith_enc4 u_ae (.clk, .rst_n, .clear(img_start), .in_bins(cbins), .flush_in(flush), .tok, .done);

  // ------------------------------------------------------------ overflow / interrupt
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ovf_valid <= 1'b0; ovf_model <= '0; ovf_index <= '0; range_err <= 1'b0;
    end else if (img_start) begin
      ovf_valid <= 1'b0; ovf_model <= '0; ovf_index <= '0; range_err <= 1'b0;
    end else begin
      if (!ovf_valid && |m_ovf) begin
        ovf_valid <= 1'b1;
        for (int g = NUM_MODELS - 1; g >= 0; g--)
          if (m_ovf[g]) begin ovf_model <= ID_W'(g); ovf_index <= m_ovf_idx[g]; end
      end
      if (coef_err || (lb_valid && lb_ready && dc_err)) range_err <= 1'b1;
    end
  end
  assign irq = ovf_valid || range_err;

  // every model's echoed bit must match the bit the binarizer sent
  for (genvar g = 0; g < NUM_MODELS; g++) begin : g_chk
    a_bit_echo : assert property (@(posedge clk) disable iff (!rst_n)
      m_en[g] |-> (m_bit[g] == order_bit(order_d[MODEL_LAT-1], g)));
  end

  function automatic logic order_bit(bin_order_t o, int id);
    for (int k = 0; k < MAX_BINS; k++)
      if (k < int'(o.nbins) && int'(o.ids[k]) == id) return o.bits[k];
    return 1'b0;
  endfunction
endmodule
