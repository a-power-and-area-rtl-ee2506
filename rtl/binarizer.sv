// binarizer -- binarization and probability-model index calculation.
//
// Turns one syntax element per cycle into all of its bits at once, each bit
// addressed to its own probability model (global model id, see lepton_pkg)
// with the model index it is coded under.  Coefficients and the DC residual
// are binarized Exp-Golomb style: magnitude m, exponent e = bitlen(m) (0..11)
// sent in unary on exponent models 0..e (bit i is 1 for i < e; with e = 11 all
// 11 bits are 1 and no terminator follows), then the sign (if e > 0), then the
// e-1 bits of m below its leading one, most significant first.  Counts of
// non-zeros are sent as fixed-length binary, most significant bit first, on
// one model per bit position.
//
// Model indexes are mixed-radix numbers of their context fields (paper eq. 2);
// the field ranges multiply out to the bin counts of the Lepton model table:
//   exp_7x7_i  {flag_c 2, prior 11, nz-left bin 10, position 49}   = 10780
//   exp_edge_i {flag_c 2, prior 11, nz-left 7, position 14}        = 2156
//   exp_dc_i   {flag_c 2, DC spread 102}                           = 204
//   sign       {flag_c 2, region 3, e-1 11}                        = 66
//   res_7x7_p  {flag_c 2, e-2 10, zigzag-1 63}                     = 1260
//   res_thres_k{flag_c, pos 4b, e-2 4b, prior 3b} (12 bits) x k-bit prefix of
//              the bits already sent (k = 0..6: 4096 << k; k = 7: 4096)
//   res_edge_j {flag_c 2, position 14, prior 7}                    = 196
//   res_dc_p   {flag_c 2, e-2 capped 6}                            = 12
//   nz_7x7_b   {flag_c 2, nzctx 10} x prefix of higher bits        = 20 .. 500
//   nz_edge*_b {flag_c 2, nzb 8, ectx 8} x prefix of higher bits   = 128 .. 512
// Edge residuals: the top 8 residual bits go to res_thres_0..7, any lower ones
// to res_edge_0..1.  The field sets of exp_7x7 are the paper's (eq. 1); every
// other field set is this design's choice sized to the model table.
//
// Interface: el_valid/el_ready in.  Outputs are registered: req[id] for every
// model, and order (the model id and bit of each bin, in coding order).  The
// P2S stage drains 4 bins per cycle, so after an element of n bins the input
// stays blocked for ceil(n/4)-1 cycles.  range_err pulses when a coefficient
// magnitude exceeds 2047 (it is clamped).
module binarizer
  import lepton_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        el_valid,
  output logic        el_ready,
  input  el_t         el,
  output bin_req_t    req [NUM_MODELS],
  output bin_order_t order,
  output logic        range_err
);
  bin_req_t   r_c [NUM_MODELS];
  bin_order_t o_c;
  logic [2:0] wait_q;
  logic       oor;

  assign el_ready = (wait_q == 0);

  function automatic int imin(int a, int b);
    return (a < b) ? a : b;
  endfunction

  always_comb begin
    int n, m, e, v, fc, L, p, pr, pre, ctx;
    for (int i = 0; i < NUM_MODELS; i++) r_c[i] = '0;
    o_c = '0;
    n   = 0; L = 0; p = 0; pr = 0; pre = 0; ctx = 0;
    v   = int'(el.value);
    m   = (v < 0) ? -v : v;
    oor = (m > 2047);
    if (m > 2047) m = 2047;
    e   = int'(bitlen(VAL_W'(m)));
    fc  = int'(el.flag_c);

    // append one bin: model id, bit, index
    `define BIN(ID, B, IX) begin \
        r_c[ID].en = 1'b1; r_c[ID].bit_v = (B); r_c[ID].idx = IDX_WMAX'(IX); \
        o_c.ids[n] = ID_W'(ID); o_c.bits[n] = (B); n++; end

    case (el.etype)
      EL_NZ7: begin
        for (int b = 5; b >= 0; b--) begin
          pr  = (49 >> (b + 1)) + 1;
          pre = v >> (b + 1);
          `BIN(ID_NZ7 + b, v[b], (fc * 10 + int'(el.nzctx)) * pr + pre)
        end
      end
      EL_NZX, EL_NZY: begin
        for (int b = 2; b >= 0; b--) begin
          pr  = (7 >> (b + 1)) + 1;
          pre = v >> (b + 1);
          `BIN(((el.etype == EL_NZX) ? ID_NZX : ID_NZY) + b, v[b],
               ((fc * 8 + int'(el.nzb)) * 8 + int'(el.ectx)) * pr + pre)
        end
      end
      EL_COEF7: begin
        for (int i = 0; i <= imin(e, 10); i++)
          `BIN(ID_EXP7 + i, i < e,
               ((fc * 11 + int'(el.prior)) * 10 + imin(9, (int'(el.nzl) - 1) / 5)) * 49 + int'(el.pos))
        if (e > 0) `BIN(ID_SIGN, v < 0, (fc * 3 + 0) * 11 + e - 1)
        for (int q = e - 2; q >= 0; q--)
          `BIN(ID_RES7 + q, m[q], (fc * 10 + e - 2) * 63 + int'(el.zz) - 1)
      end
      EL_EDGE: begin
        for (int i = 0; i <= imin(e, 10); i++)
          `BIN(ID_EXPE + i, i < e,
               ((fc * 11 + int'(el.prior)) * 7 + int'(el.nzl) - 1) * 14 + int'(el.pos))
        if (e > 0) `BIN(ID_SIGN, v < 0, (fc * 3 + 1) * 11 + e - 1)
        L   = e - 1;
        ctx = (fc << 11) | ((int'(el.pos) & 15) << 7) | (((e - 2) & 15) << 3) | imin(7, int'(el.prior));
        for (int k = 0; k < L; k++) begin
          p = L - 1 - k;
          if (k < 7)       `BIN(ID_THRES + k, m[p], (ctx << k) | ((m >> (p + 1)) & ((1 << k) - 1)))
          else if (k == 7) `BIN(ID_THRES + 7, m[p], ctx)
          else             `BIN(ID_RESE + k - 8, m[p], (fc * 14 + int'(el.pos)) * 7 + imin(6, int'(el.prior)))
        end
      end
      EL_DC: begin
        for (int i = 0; i <= imin(e, 10); i++)
          `BIN(ID_EXPDC + i, i < e, fc * 102 + int'(el.dcctx))
        if (e > 0) `BIN(ID_SIGN, v < 0, (fc * 3 + 2) * 11 + e - 1)
        for (int q = e - 2; q >= 0; q--)
          `BIN(ID_RESDC + q, m[q], fc * 6 + imin(5, e - 2))
      end
      EL_FLUSH: o_c.flush = 1'b1;
      default: ;
    endcase
    `undef BIN
    o_c.valid = 1'b1;
    o_c.nbins = 5'(n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_MODELS; i++) req[i] <= '0;
      order     <= '0;
      wait_q    <= '0;
      range_err <= 1'b0;
    end else begin
      range_err <= 1'b0;
      if (el_valid && el_ready) begin
        req       <= r_c;
        order     <= o_c;
        wait_q    <= (o_c.nbins == 0) ? 3'd0 : 3'((int'(o_c.nbins) + 3) / 4 - 1);
        range_err <= oor && (el.etype == EL_COEF7 || el.etype == EL_EDGE);
      end else begin
        for (int i = 0; i < NUM_MODELS; i++) req[i].en <= 1'b0;
        order.valid <= 1'b0;
        if (wait_q != 0) wait_q <= wait_q - 3'd1;
      end
    end
  end
endmodule
