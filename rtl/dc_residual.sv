// dc_residual -- DC prediction and residual of one block.
//
// The DC coefficient is predicted from the DC of the left and above blocks:
// their mean (rounded down) when both exist, the one that exists otherwise,
// 0 for the first block of a plane.  The residual dc - prediction is what gets
// coded.  dcctx, the spread |left - above| capped at 101, is the context of
// the DC exponent models (204 bins = 2 colours x 102).  A residual beyond
// +-2047 cannot be binarized with 11 exponent bits: it is clamped and
// range_err is raised so the image can be handed to software.
// The paper says only that the DC is predicted from neighbour blocks; the
// prediction rule, the context and the clamp are this design's.
// Purely combinational.
module dc_residual
  import lepton_pkg::*;
(
  input  coef_t                   dc_cur,
  input  coef_t                   dc_above,
  input  coef_t                   dc_left,
  input  logic                    has_above,
  input  logic                    has_left,
  output logic signed [VAL_W-1:0] residual,
  output logic [6:0]              dcctx,
  output logic                    range_err
);
  logic signed [VAL_W:0] pred, res, spread;

  always_comb begin
    if (has_above && has_left) pred = ((VAL_W+1)'(dc_above) + (VAL_W+1)'(dc_left)) >>> 1;
    else if (has_left)         pred = (VAL_W+1)'(dc_left);
    else if (has_above)        pred = (VAL_W+1)'(dc_above);
    else                       pred = '0;
    res = (VAL_W+1)'(dc_cur) - pred;
    range_err = (res > 2047) || (res < -2047);
    if (res > 2047)       residual = VAL_W'(2047);
    else if (res < -2047) residual = -VAL_W'(2047);
    else                  residual = VAL_W'(res);
    spread = (VAL_W+1)'(dc_left) - (VAL_W+1)'(dc_above);
    if (spread < 0) spread = -spread;
    dcctx = (has_above && has_left) ? ((spread > 101) ? 7'd101 : 7'(spread)) : 7'd0;
  end
endmodule
