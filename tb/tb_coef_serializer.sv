// tb_coef_serializer -- element order and contexts of random sparse blocks
// (empty regions, full regions, trailing zeros), with random stalls on the
// element side.  The expected element list is built here from the coding
// rules: count, coefficients in zigzag order up to the last non-zero, for the
// 7x7, x edge and y edge regions, then the DC residual, then a flush after
// the last block.
module tb_coef_serializer;
  import lepton_pkg::*;
  import lepton_ref_pkg::zz_of, lepton_ref_pkg::prior_of, lepton_ref_pkg::mn;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_empty = 0;
  logic blk_valid, blk_ready, has_above, has_left, flag_c, last, el_valid, el_ready;
  block_t cur_blk, above_blk, left_blk;
  logic [5:0] nz7, nz7_above, nz7_left;
  logic [2:0] nzx, nzy, nzx_above, nzy_left;
  logic signed [VAL_W-1:0] dc_res;
  logic [6:0] dcctx;
  el_t el;
  el_t expq [$];

  coef_serializer dut (.*);

  function automatic block_t rnd_blk(int dens);
    block_t b;
    for (int p = 0; p < 64; p++) b[p] = ($urandom_range(0, 99) < dens) ? coef_t'($urandom_range(0, 200) - 100) : '0;
    return b;
  endfunction

  function automatic int cnt(block_t b, int kind);
    int n; n = 0;
    for (int p = 1; p < 64; p++)
      if (b[p] != 0 && ((kind == 0 && p / 8 != 0 && p % 8 != 0) || (kind == 1 && p < 8) || (kind == 2 && p % 8 == 0))) n++;
    return n;
  endfunction

  task automatic push_coefs(int kind, int n, int base_pos);
    int left, k, p;
    int ord [$];
    el_t e;
    if (kind == 0) begin
      for (int z = 0; z < 64; z++) for (int q = 0; q < 64; q++)
        if (q / 8 != 0 && q % 8 != 0 && zz_of(q / 8, q % 8) == z) ord.push_back(q);
    end else for (int i = 1; i < 8; i++) ord.push_back(kind == 1 ? i : i * 8);
    left = n; k = 0;
    while (left > 0) begin
      p = ord[k];
      e = '0;
      e.etype = (kind == 0) ? EL_COEF7 : EL_EDGE; e.flag_c = flag_c;
      e.value = VAL_W'(cur_blk[p]); e.pos = 6'(k + base_pos); e.zz = 6'(zz_of(p / 8, p % 8));
      e.nzl = 6'(left);
      e.prior = 4'(prior_of(has_above ? int'(above_blk[p]) : 0, has_left ? int'(left_blk[p]) : 0));
      e.nzb = 3'(mn(7, int'(nz7) / 7));
      e.nzctx = 4'(((has_above ? int'(nz7_above) : 0) + (has_left ? int'(nz7_left) : 0) + 1) / 2 / 5);
      expq.push_back(e);
      if (cur_blk[p] != 0) left--;
      k++;
    end
  endtask

  task automatic build_expected();
    el_t e, b;
    b = '0; b.flag_c = flag_c;
    b.nzb = 3'(mn(7, int'(nz7) / 7));
    b.nzctx = 4'(((has_above ? int'(nz7_above) : 0) + (has_left ? int'(nz7_left) : 0) + 1) / 2 / 5);
    e = b; e.etype = EL_NZ7; e.value = VAL_W'(nz7); expq.push_back(e);
    push_coefs(0, nz7, 0);
    e = b; e.etype = EL_NZX; e.value = VAL_W'(nzx); e.ectx = has_above ? nzx_above : 3'd0; expq.push_back(e);
    push_coefs(1, nzx, 0);
    e = b; e.etype = EL_NZY; e.value = VAL_W'(nzy); e.ectx = has_left ? nzy_left : 3'd0; expq.push_back(e);
    push_coefs(2, nzy, 7);
    e = b; e.etype = EL_DC; e.value = dc_res; e.dcctx = dcctx; expq.push_back(e);
    if (last) begin e = b; e.etype = EL_FLUSH; expq.push_back(e); end
  endtask

  always @(posedge clk) if (rst_n && el_valid && el_ready) begin
    el_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected element"); end
    else begin
      e = expq.pop_front();
      if (e.etype == EL_FLUSH || e.etype == EL_NZ7 || e.etype == EL_NZX || e.etype == EL_NZY || e.etype == EL_DC) begin
        // only the fields these elements use
        if (el.etype != e.etype || el.value != e.value || el.flag_c != e.flag_c ||
            (e.etype == EL_NZ7 && el.nzctx != e.nzctx) ||
            ((e.etype == EL_NZX || e.etype == EL_NZY) && (el.ectx != e.ectx || el.nzb != e.nzb)) ||
            (e.etype == EL_DC && el.dcctx != e.dcctx)) begin
          failures++; $display("FAIL element type %0d value %0d exp type %0d value %0d", el.etype, el.value, e.etype, e.value);
        end
      end else if (el.etype != e.etype || el.value != e.value || el.pos != e.pos || el.zz != e.zz ||
                   el.nzl != e.nzl || el.prior != e.prior || el.flag_c != e.flag_c) begin
        failures++;
        $display("FAIL coef type %0d value %0d pos %0d nzl %0d prior %0d / exp %0d %0d %0d %0d %0d",
                 el.etype, el.value, el.pos, el.nzl, el.prior, e.etype, e.value, e.pos, e.nzl, e.prior);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_valid = 0; el_ready = 0; last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork forever begin @(negedge clk); el_ready = $urandom_range(0, 3) != 0; end join_none
    for (int t = 0; t < 60; t++) begin
      @(negedge clk);
      cur_blk = rnd_blk((t % 5 == 0) ? 0 : (t % 5 == 1) ? 100 : $urandom_range(1, 40));
      above_blk = rnd_blk(30); left_blk = rnd_blk(30);
      has_above = $urandom_range(0, 1); has_left = $urandom_range(0, 1);
      flag_c = $urandom_range(0, 1); last = (t % 10 == 9);
      nz7 = 6'(cnt(cur_blk, 0)); nzx = 3'(cnt(cur_blk, 1)); nzy = 3'(cnt(cur_blk, 2));
      nz7_above = 6'(cnt(above_blk, 0)); nz7_left = 6'(cnt(left_blk, 0));
      nzx_above = 3'(cnt(above_blk, 1)); nzy_left = 3'(cnt(left_blk, 2));
      if (nz7 == 0) n_empty++;
      dc_res = VAL_W'($urandom_range(0, 400) - 200); dcctx = 7'($urandom_range(0, 101));
      build_expected();
      blk_valid = 1;
      @(posedge clk);
      while (!blk_ready) @(posedge clk);
      @(negedge clk); blk_valid = 0;
      wait (expq.size() == 0);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0 || n_empty == 0) begin failures++; $display("FAIL leftover %0d", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
