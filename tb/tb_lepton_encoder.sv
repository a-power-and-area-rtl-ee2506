// tb_lepton_encoder -- end-to-end test of the Lepton encoder top.
//
// Random images (a luma plane and two chroma planes of random size) are fed
// block by block with random gaps on blk_valid.  A reference model in the
// testbench produces the same stream independently: it binarizes every block
// (lepton_ref_pkg::block_bins), keeps every probability model as a table of
// count pairs (with the same set-associative way limit and interval
// boundaries as the hardware), and codes the bins with a reference boolean
// coder.  The output tokens are expanded to bytes and compared byte for byte.
// A bin whose model overflowed is coded with probability 128 and not counted,
// which the reference copies, so overflowing images are compared exactly too.
//
// Checked per image: the byte stream, the done pulse, irq, ovf_valid, the
// reported overflow model/index, range_err.  Mechanisms that must each be seen
// at least once: back-pressure (blk_valid while !blk_ready), model overflow
// with irq, range error, boundary reconfiguration, 0xFF runs in the output,
// an all-zero image.
//
// The design is built with MAX_W=8 and MEM_DIV=8 (models 8x smaller than
// the default) so that small images reach the overflow mechanism.
module tb_lepton_encoder;
  import lepton_pkg::*;
  import lepton_ref_pkg::*;

  localparam int TB_MAXW = 8;
  localparam int TB_DIV  = 8;
  localparam int N_IMG   = 14;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          img_start, plane_start, blk_valid, blk_ready, blk_flag_c, blk_last;
  logic [15:0]   plane_width;
  block_t        blk;
  logic          cfg_we;
  logic [ID_W-1:0] cfg_model;
  logic [7:0]    cfg_sel;
  logic [17:0]   cfg_val;
  out_tok_t      tok [4];
  logic          done, irq, ovf_valid, range_err;
  logic [ID_W-1:0] ovf_model;
  logic [IDX_WMAX-1:0] ovf_index;

  lepton_encoder #(.MAX_W(TB_MAXW), .MEM_DIV(TB_DIV)) dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_ovf_img = 0, n_range_img = 0, n_cfg = 0, n_ffrun = 0, n_zero_img = 0, n_done = 0;
  byte unsigned got [$];

  function automatic int opt_depth(int id);
    int d;
    d = model_depth(id) / TB_DIV;
    d = ((d + N_WAYS - 1) / N_WAYS) * N_WAYS;
    return (d < N_WAYS) ? N_WAYS : d;
  endfunction

  // boundary registers as written by the test (they survive img_start)
  int bnd_set [int][int];

  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < 4; j++) if (tok[j].valid) begin
      if (tok[j].lead_valid) got.push_back(tok[j].lead_byte);
      for (int r = 0; r < int'(tok[j].run_len); r++) got.push_back(tok[j].run_byte);
      if (tok[j].run_len != 0 && tok[j].run_byte == 8'hff) n_ffrun++;
    end
    if (blk_valid && !blk_ready) n_stall++;
    if (done) n_done++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd_coef(int dens, int big);
    int e, m;
    if ($urandom_range(0, 99) >= dens) return 0;
    e = (big != 0) ? $urandom_range(1, 11) : (($urandom_range(0, 3) == 0) ? $urandom_range(1, 6) : $urandom_range(1, 2));
    m = (1 << (e - 1)) + $urandom_range(0, (1 << (e - 1)) - 1);
    return $urandom_range(0, 1) ? -m : m;
  endfunction

  task automatic send_block(blk_t b, bit fc, bit last);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) @(negedge clk);
    for (int i = 0; i < 64; i++) blk[i] = coef_t'(b[i]);
    blk_flag_c = fc; blk_last = last; blk_valid = 1;
    @(posedge clk);
    while (!blk_ready) @(posedge clk);
    @(negedge clk);
    blk_valid = 0; blk_last = 0;
  endtask

  initial begin
    img_start = 0; plane_start = 0; plane_width = 0; blk_valid = 0; blk = '0;
    blk_flag_c = 0; blk_last = 0; cfg_we = 0; cfg_model = 0; cfg_sel = 0; cfg_val = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    for (int img = 0; img < N_IMG; img++) begin
      model_ref mdl [NUM_MODELS];
      bool_enc  enc;
      int pw [3], ph [3], dens, big, kind, ovf_cnt, rng_exp, nb, ok;
      int ovf_id [$], ovf_ix [$];
      blk_t planes [3][$];
      blk_t zero;

      // variables of this block are static: start from empty
      ovf_id.delete(); ovf_ix.delete();
      for (int pl = 0; pl < 3; pl++) planes[pl].delete();

      // kind: 0 all-zero, 1 sparse, 2 dense (overflow), 3 range error
      kind = (img == 0) ? 0 : (img % 4 == 3) ? 3 : (img % 3 == 2) ? 2 : 1;
      dens = (kind == 1) ? 15 : (kind == 2) ? 60 : (kind == 3) ? 20 : 0;
      big  = (kind == 2) ? 1 : 0;

      // reconfigure the boundaries of one optimized model between images
      if (img == 5 || img == 9) begin
        int id, mm, acc;
        id = (img == 5) ? ID_EXP7 : ID_EXP7 + 1;
        mm = opt_depth(id) / N_WAYS;
        acc = 0;
        for (int i = 1; i < mm; i++) begin
          acc += $urandom_range(1, (2 * model_range(id)) / mm - 1);
          if (acc > model_range(id) - (mm - i)) acc = model_range(id) - (mm - i);
          bnd_set[id][i] = acc;
          @(negedge clk);
          cfg_we = 1; cfg_model = ID_W'(id); cfg_sel = 8'(i); cfg_val = 18'(acc);
          @(negedge clk);
          cfg_we = 0;
          n_cfg++;
        end
      end

      // image
      pw[0] = $urandom_range(1, TB_MAXW); ph[0] = $urandom_range(1, 3);
      pw[1] = (pw[0] + 1) / 2; ph[1] = (ph[0] + 1) / 2;
      pw[2] = pw[1]; ph[2] = ph[1];
      for (int i = 0; i < 64; i++) zero[i] = 0;
      for (int pl = 0; pl < 3; pl++)
        for (int bi = 0; bi < pw[pl] * ph[pl]; bi++) begin
          blk_t b;
          for (int i = 0; i < 64; i++) b[i] = rnd_coef(dens, big);
          b[0] = (kind == 0) ? 0 : $urandom_range(0, 400) - 200;
          planes[pl].push_back(b);
        end
      rng_exp = 0;
      if (kind == 3) begin
        // a DC jump that cannot be coded, or a -2048 coefficient
        if (img % 8 == 3) begin
          planes[0][0][0] = -2000;
          if (pw[0] * ph[0] > 1) planes[0][1][0] = 2047;
          else planes[1][0][5] = -2048;
        end else planes[2][0][9] = -2048;
        rng_exp = 1;
      end

      // reference
      enc = new();
      for (int g = 0; g < NUM_MODELS; g++) begin
        mdl[g] = new(model_is_opt(g), model_range(g), model_is_opt(g) ? opt_depth(g) : 1, N_WAYS);
        if (bnd_set.exists(g)) foreach (bnd_set[g][i]) mdl[g].bnd[i] = bnd_set[g][i];
      end
      for (int pl = 0; pl < 3; pl++)
        for (int r = 0; r < ph[pl]; r++)
          for (int c = 0; c < pw[pl]; c++) begin
            bin_t q [$];
            blk_t ab, lb;
            ab = (r > 0) ? planes[pl][(r - 1) * pw[pl] + c] : zero;
            lb = (c > 0) ? planes[pl][r * pw[pl] + c - 1] : zero;
            q.delete();
            block_bins(q, planes[pl][r * pw[pl] + c], ab, lb, r > 0, c > 0, pl > 0);
            foreach (q[k]) begin
              int p;
              p = mdl[q[k].id].access(q[k].idx, q[k].b);
              if (p < 0) begin ovf_id.push_back(q[k].id); ovf_ix.push_back(q[k].idx); p = 128; end
              enc.put(q[k].b, p);
            end
          end
      enc.finish();
      ovf_cnt = ovf_id.size();

      // hardware
      got.delete();
      n_done = 0;
      @(negedge clk); img_start = 1;
      @(negedge clk); img_start = 0;
      for (int pl = 0; pl < 3; pl++) begin
        @(negedge clk); plane_start = 1; plane_width = 16'(pw[pl]);
        @(negedge clk); plane_start = 0;
        foreach (planes[pl][bi]) send_block(planes[pl][bi], pl > 0, pl == 2 && bi == planes[pl].size() - 1);
      end
      fork
        begin wait (done); end
        begin repeat (200000) @(negedge clk); end
      join_any
      disable fork;
      repeat (3) @(negedge clk);

      // compare
      checks++;
      if (n_done != 1) begin failures++; $display("FAIL img %0d: done pulses %0d", img, n_done); end
      checks++;
      if (got.size() != enc.buffer.size()) begin
        failures++; $display("FAIL img %0d: %0d bytes, expected %0d", img, got.size(), enc.buffer.size());
      end
      nb = 0;
      foreach (enc.buffer[i]) begin
        checks++;
        if (i >= got.size() || got[i] != enc.buffer[i]) begin
          failures++; nb++;
          if (nb < 4) $display("FAIL img %0d byte %0d", img, i);
        end
      end
      checks++;
      if (ovf_valid != (ovf_cnt > 0)) begin failures++; $display("FAIL img %0d: ovf_valid %0d, %0d overflows", img, ovf_valid, ovf_cnt); end
      if (ovf_cnt > 0) begin
        // the first overflowing element: lowest model id among its bins
        checks++;
        ok = 0;
        for (int i = 0; i < ovf_cnt && i < MAX_BINS; i++)
          if (ovf_id[i] == int'(ovf_model) && ovf_ix[i] == int'(ovf_index) && ovf_id[i] <= ovf_id[0]) ok = 1;
        if (!ok) begin failures++; $display("FAIL img %0d: ovf model %0d index %0d, expected %0d/%0d", img, ovf_model, ovf_index, ovf_id[0], ovf_ix[0]); end
        n_ovf_img++;
      end
      checks++;
      if (range_err != rng_exp) begin failures++; $display("FAIL img %0d: range_err %0d", img, range_err); end
      if (range_err) n_range_img++;
      checks++;
      if (irq != (ovf_cnt > 0 || rng_exp != 0)) begin failures++; $display("FAIL img %0d: irq", img); end
      if (kind == 0) n_zero_img++;
      if (nb != 0) begin
        for (int i = 0; i < enc.buffer.size() && i < 16; i++) $write("%02x/%02x ", i < got.size() ? got[i] : 0, enc.buffer[i]);
        $display("");
      end
      $display("image %0d: kind %0d, %0dx%0d blocks, %0d bytes, %0d overflows", img, kind, pw[0], ph[0], got.size(), ovf_cnt);
    end

    checks++;
    if (n_stall == 0 || n_ovf_img == 0 || n_range_img == 0 || n_cfg == 0 || n_ffrun == 0 || n_zero_img == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("mechanisms: stall cycles=%0d overflow images=%0d range-error images=%0d boundary writes=%0d ff-runs=%0d zero images=%0d",
             n_stall, n_ovf_img, n_range_img, n_cfg, n_ffrun, n_zero_img);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
