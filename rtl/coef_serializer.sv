// coef_serializer -- preprocess serializers: turns a block (with its above and
// left neighbours) into the sequence of syntax elements of the Lepton coding
// order, one element per cycle:
//
//   num_nonzero_7x7, 7x7 AC coefficients, num_nonzero_x_edge, x edge
//   coefficients, num_nonzero_y_edge, y edge coefficients, DC residual
//
// A region's coefficients run in zigzag order from the first one up to its
// last non-zero coefficient (zeros in between are coded); a region without
// non-zeros contributes only its count.  After the last block of an image an
// EL_FLUSH element closes the arithmetic code.  Each element carries the
// context the binarizer needs to form model indexes:
//   prior  min(10, bitlen((|above[p]| + |left[p]| + 1) / 2)), p = same position
//   nzl    non-zeros still to come in the region, this coefficient included
//   nzctx  (num_nonzero_7x7 of above + left + 1) / 2 / 5   (0..9)
//   nzb    num_nonzero_7x7 / 7 (0..7);  ectx  neighbour's edge count (x edge:
//          above block, y edge: left block)
// The coding order and the stop at the last non-zero coefficient follow the
// paper (Table I); the context formulas are this design's stand-ins for the
// Lepton reference contexts, which the paper does not spell out.
//
// Interface: blk_valid/blk_ready (a block and its precomputed counts and DC
// residual), el_valid/el_ready towards the binarizer.
module coef_serializer
  import lepton_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    blk_valid,
  output logic                    blk_ready,
  input  block_t                  cur_blk,
  input  block_t                  above_blk,
  input  block_t                  left_blk,
  input  logic                    has_above,
  input  logic                    has_left,
  input  logic                    flag_c,
  input  logic                    last,
  input  logic [5:0]              nz7,
  input  logic [2:0]              nzx,
  input  logic [2:0]              nzy,
  input  logic [5:0]              nz7_above,
  input  logic [5:0]              nz7_left,
  input  logic [2:0]              nzx_above,
  input  logic [2:0]              nzy_left,
  input  logic signed [VAL_W-1:0] dc_res,
  input  logic [6:0]              dcctx,
  output logic                    el_valid,
  input  logic                    el_ready,
  output el_t                     el
);
  typedef enum logic [3:0] {S_IDLE, S_NZ7, S_C7, S_NZX, S_CX, S_NZY, S_CY, S_DC, S_FLUSH} state_e;

  state_e      st;
  block_t      cb, ab, lb;
  logic        ha, hl, fc, lst;
  logic [5:0]  n7, nleft;
  logic [2:0]  nx, ny;
  logic [3:0]  nzctx_q;
  logic [2:0]  ectx_x, ectx_y;
  logic signed [VAL_W-1:0] dres;
  logic [6:0]  dctx;
  logic [5:0]  k;          // coefficient counter inside a region

  // coding-order tables
  logic [5:0] P7 [49];
  logic [5:0] PE [14];
  always_comb begin
    for (int i = 0; i < 49; i++) P7[i] = 6'(pos7_nat(i));
    for (int i = 0; i < 14; i++) PE[i] = 6'(pose_nat(i));
  end

  function automatic logic [3:0] prior_of(coef_t a, coef_t l);
    logic [VAL_W-1:0] ma, ml, avg;
    logic [3:0] b;
    ma  = (a < 0) ? VAL_W'(-a) : VAL_W'(a);
    ml  = (l < 0) ? VAL_W'(-l) : VAL_W'(l);
    avg = (ma + ml + 1) >> 1;
    b   = bitlen(avg);
    return (b > 4'd10) ? 4'd10 : b;
  endfunction

  logic [5:0] p_cur;
  coef_t      v_cur;
  logic       adv;

  always_comb begin
    p_cur = (st == S_C7) ? P7[k] : PE[4'((st == S_CY) ? k + 6'd7 : k)];
    v_cur = cb[p_cur];
    el = '0;
    el.flag_c = fc;
    el.nzb    = (n7 / 7 > 6'd7) ? 3'd7 : 3'(n7 / 7);
    el.nzctx  = nzctx_q;
    case (st)
      S_NZ7: begin el.etype = EL_NZ7; el.value = VAL_W'(n7); end
      S_NZX: begin el.etype = EL_NZX; el.value = VAL_W'(nx); el.ectx = ectx_x; end
      S_NZY: begin el.etype = EL_NZY; el.value = VAL_W'(ny); el.ectx = ectx_y; end
      S_C7, S_CX, S_CY: begin
        el.etype = (st == S_C7) ? EL_COEF7 : EL_EDGE;
        el.value = VAL_W'(v_cur);
        el.pos   = (st == S_CY) ? k + 6'd7 : k;
        el.zz    = zigzag_of(int'(p_cur));
        el.nzl   = nleft;
        el.prior = prior_of(ha ? ab[p_cur] : '0, hl ? lb[p_cur] : '0);
      end
      S_DC:    begin el.etype = EL_DC; el.value = dres; el.dcctx = dctx; end
      S_FLUSH: begin el.etype = EL_FLUSH; end
      default: ;
    endcase
  end

  assign el_valid  = (st != S_IDLE);
  assign blk_ready = (st == S_IDLE);
  assign adv       = el_valid && el_ready;

  always_ff @(posedge clk) begin
    if (st == S_IDLE && blk_valid) begin
      cb <= cur_blk;
      ab <= above_blk;
      lb <= left_blk;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      k <= '0; nleft <= '0;
      ha <= 1'b0; hl <= 1'b0; fc <= 1'b0; lst <= 1'b0;
      n7 <= '0; nx <= '0; ny <= '0; nzctx_q <= '0; ectx_x <= '0; ectx_y <= '0;
      dres <= '0; dctx <= '0;
    end else begin
      case (st)
        S_IDLE: if (blk_valid) begin
          st <= S_NZ7;
          ha <= has_above; hl <= has_left; fc <= flag_c; lst <= last;
          n7 <= nz7; nx <= nzx; ny <= nzy;
          nzctx_q <= 4'(((has_above ? 7'(nz7_above) : 7'd0) + (has_left ? 7'(nz7_left) : 7'd0) + 7'd1) / 7'd2 / 7'd5);
          ectx_x  <= has_above ? nzx_above : 3'd0;
          ectx_y  <= has_left  ? nzy_left  : 3'd0;
          dres <= dc_res; dctx <= dcctx;
        end
        S_NZ7: if (adv) begin
          k <= '0; nleft <= n7;
          st <= (n7 != 0) ? S_C7 : S_NZX;
        end
        S_C7, S_CX, S_CY: if (adv) begin
          logic [5:0] nl;
          nl = (v_cur != 0) ? nleft - 6'd1 : nleft;
          nleft <= nl;
          k <= k + 6'd1;
          if (nl == 0) begin
            case (st)
              S_C7:    st <= S_NZX;
              S_CX:    st <= S_NZY;
              default: st <= S_DC;
            endcase
          end
        end
        S_NZX: if (adv) begin
          k <= '0; nleft <= 6'(nx);
          st <= (nx != 0) ? S_CX : S_NZY;
        end
        S_NZY: if (adv) begin
          k <= '0; nleft <= 6'(ny);
          st <= (ny != 0) ? S_CY : S_DC;
        end
        S_DC:    if (adv) st <= lst ? S_FLUSH : S_IDLE;
        S_FLUSH: if (adv) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
