// tb_dc_residual -- DC prediction, residual, spread context and clamp.
module tb_dc_residual;
  import lepton_pkg::*;
  int checks = 0, failures = 0, n_clamp = 0;
  coef_t dc_cur, dc_above, dc_left;
  logic has_above, has_left, range_err;
  logic signed [VAL_W-1:0] residual;
  logic [6:0] dcctx;

  dc_residual dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      int c, a, l, pred, r, ctx, sp;
      bit err;
      c = $urandom_range(0, 4095) - 2048; a = $urandom_range(0, 4095) - 2048; l = $urandom_range(0, 4095) - 2048;
      if (t % 2) begin c = c / 16; a = a / 16; l = l / 16; end
      dc_cur = coef_t'(c); dc_above = coef_t'(a); dc_left = coef_t'(l);
      has_above = $urandom_range(0, 1); has_left = $urandom_range(0, 1);
      if (has_above && has_left) pred = $floor((a + l) / 2.0);
      else if (has_left) pred = l;
      else if (has_above) pred = a;
      else pred = 0;
      r = c - pred;
      err = (r > 2047 || r < -2047);
      if (r > 2047) r = 2047;
      if (r < -2047) r = -2047;
      sp = (l > a) ? l - a : a - l;
      ctx = (has_above && has_left) ? ((sp > 101) ? 101 : sp) : 0;
      #1;
      checks++;
      if (err) n_clamp++;
      if (int'(residual) != r || int'(dcctx) != ctx || range_err != err) begin
        failures++; $display("FAIL c%0d a%0d l%0d res %0d exp %0d", c, a, l, residual, r);
      end
    end
    checks++;
    if (n_clamp == 0) begin failures++; $display("FAIL no clamp case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
