// tb_binarizer -- bins, model ids and model indexes of random elements of
// every type, checked against the reference binarization; also checks that
// the input is blocked for ceil(bins/4)-1 cycles after each element.
module tb_binarizer;
  import lepton_pkg::*;
  import lepton_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_wait = 0, n_clamp = 0;
  logic el_valid, el_ready, range_err;
  el_t el;
  bin_req_t req [NUM_MODELS];
  bin_order_t order;

  binarizer dut (.*);

  task automatic check_el(el_t e, bit exp_err);
    bin_t q [$];
    int v, nb, fc;
    bit [NUM_MODELS-1:0] en_exp;
    v = int'(e.value); fc = e.flag_c;
    case (e.etype)
      EL_NZ7:   count_bins(q, NZ7, 6, 49, v, fc * 10 + e.nzctx);
      EL_NZX:   count_bins(q, NZX, 3, 7, v, (fc * 8 + e.nzb) * 8 + e.ectx);
      EL_NZY:   count_bins(q, NZY, 3, 7, v, (fc * 8 + e.nzb) * 8 + e.ectx);
      EL_COEF7: coef_bins(q, 0, v, fc, e.prior, e.nzl, e.pos, e.zz, 0);
      EL_EDGE:  coef_bins(q, 1, v, fc, e.prior, e.nzl, e.pos, e.zz, 0);
      EL_DC:    coef_bins(q, 2, v, fc, 0, 0, 0, 0, e.dcctx);
      default: ;
    endcase
    checks++;
    if (!order.valid || int'(order.nbins) != q.size() || order.flush != (e.etype == EL_FLUSH) || range_err != exp_err) begin
      failures++; $display("FAIL type %0d value %0d: nbins %0d exp %0d", e.etype, v, order.nbins, q.size());
      return;
    end
    en_exp = '0;
    foreach (q[k]) begin
      en_exp[q[k].id] = 1'b1;
      checks++;
      if (int'(order.ids[k]) != q[k].id || order.bits[k] != q[k].b || !req[q[k].id].en ||
          req[q[k].id].bit_v != q[k].b || int'(req[q[k].id].idx) != q[k].idx ||
          q[k].idx >= model_range(q[k].id)) begin
        failures++;
        $display("FAIL type %0d value %0d bin %0d: id %0d/%0d idx %0d/%0d", e.etype, v, k,
                 order.ids[k], q[k].id, req[q[k].id].idx, q[k].idx);
      end
    end
    for (int i = 0; i < NUM_MODELS; i++) if (req[i].en != en_exp[i]) begin
      checks++; failures++; $display("FAIL stray enable on model %0d", i);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    el_valid = 0; el = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      el_t e;
      int nb, w, mag;
      bit err;
      e = '0;
      e.etype = el_type_e'($urandom_range(0, 6));
      e.flag_c = $urandom_range(0, 1);
      mag = (t % 7 == 0) ? 2048 : $urandom_range(0, 2047) >> $urandom_range(0, 11);
      err = 0;
      case (e.etype)
        EL_NZ7: begin e.value = VAL_W'($urandom_range(0, 49)); e.nzctx = 4'($urandom_range(0, 9)); end
        EL_NZX, EL_NZY: begin
          e.value = VAL_W'($urandom_range(0, 7)); e.nzb = 3'($urandom_range(0, 7)); e.ectx = 3'($urandom_range(0, 7));
        end
        EL_COEF7, EL_EDGE: begin
          e.value = VAL_W'($urandom_range(0, 1) ? -mag : mag);
          err = mag > 2047;
          e.prior = 4'($urandom_range(0, 10));
          e.pos = 6'((e.etype == EL_COEF7) ? $urandom_range(0, 48) : $urandom_range(0, 13));
          e.zz = 6'($urandom_range(4, 63));
          e.nzl = 6'((e.etype == EL_COEF7) ? $urandom_range(1, 49) : $urandom_range(1, 7));
        end
        EL_DC: begin
          if (mag > 2047) mag = 2047;
          e.value = VAL_W'($urandom_range(0, 1) ? -mag : mag); e.dcctx = 7'($urandom_range(0, 101));
        end
        default: ;
      endcase
      if (err) n_clamp++;
      @(negedge clk);
      el = e; el_valid = 1;
      @(negedge clk);
      el_valid = 0;
      check_el(e, err);
      // spacing: blocked for ceil(n/4)-1 cycles
      nb = int'(order.nbins);
      w = (nb == 0) ? 0 : (nb + 3) / 4 - 1;
      for (int c = 0; c < w; c++) begin
        checks++;
        if (el_ready) begin failures++; $display("FAIL ready too early after %0d bins", nb); end
        @(negedge clk);
      end
      checks++;
      if (!el_ready) begin failures++; $display("FAIL not ready after %0d bins", nb); end
      if (w > 0) n_wait++;
    end
    checks++;
    if (n_wait == 0 || n_clamp == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
