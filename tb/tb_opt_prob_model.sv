// tb_opt_prob_model -- a small optimized probability model (200 indexes,
// 8 units of 4 ways, 2 units per controller) driven with skewed random
// indexes over several images.  Every answer (probability, bit, 3-cycle
// latency) and every overflow (index) is checked against a reference that
// keeps unlimited bins but allocates ways per interval as the paper
// describes.
module tb_opt_prob_model;
  import lepton_ref_pkg::*;
  localparam int MAXI = 200, DEPTH = 32, N = 4, K = 2, IW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0, n_ovf = 0, n_ok = 0;
  logic clear, en_in, bit_data_in, cfg_we, out_en, bit_data_out, ovf;
  logic [IW-1:0] index_in, ovf_index;
  logic [7:0] cfg_sel, prob_out;
  logic [17:0] cfg_val;
  typedef struct { int cyc; int prob; bit b; int idx; } exp_t;
  exp_t q [$];
  model_ref mr;

  opt_prob_model #(.MAX_INDEX(MAXI), .MEM_DEPTH(DEPTH), .N(N), .K(K), .IDX_W(IW), .REC_W(IW)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  exp_t qo [$];
  always @(negedge clk) if (rst_n) begin
    exp_t e;
    if (ovf) begin
      checks++;
      if (qo.size() == 0) begin failures++; $display("FAIL unexpected overflow"); end
      else begin
        e = qo.pop_front();
        // overflow is reported one cycle after the request
        if (!(ovf_index == IW'(e.idx) && cyc - e.cyc == 1)) begin
          failures++; $display("FAIL overflow idx %0d", e.idx);
        end
        n_ovf++;
      end
    end
    if (out_en) begin
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        e = q.pop_front();
        if (!(int'(prob_out) == e.prob && bit_data_out == e.b && cyc - e.cyc == 3)) begin
          failures++;
          $display("FAIL idx %0d prob %0d exp %0d lat %0d", e.idx, prob_out, e.prob, cyc - e.cyc);
        end else n_ok++;
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; en_in = 0; bit_data_in = 0; index_in = 0; cfg_we = 0; cfg_sel = 0; cfg_val = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int img = 0; img < 6; img++) begin
      mr = new(1, MAXI, DEPTH, N);
      for (int t = 0; t < 400; t++) begin
        int idx, p;
        bit b;
        @(negedge clk);
        // hot indexes in a few intervals, rare ones everywhere
        idx = ($urandom_range(0, 3) != 0) ? $urandom_range(0, 9) * 7 : $urandom_range(0, MAXI - 1);
        if (img == 5) idx = $urandom_range(0, 2) + 30;   // a clean image, no overflow
        b = $urandom_range(0, 3) != 0;
        en_in = 1; index_in = IW'(idx); bit_data_in = b;
        p = mr.access(idx, b);
        if (p < 0) qo.push_back('{cyc, p, b, idx}); else q.push_back('{cyc, p, b, idx});
      end
      @(negedge clk); en_in = 0;
      repeat (5) @(negedge clk);
      clear = 1;
      @(negedge clk); clear = 0;
    end
    repeat (5) @(negedge clk);
    checks++;
    if (q.size() != 0 || qo.size() != 0 || n_ovf == 0 || n_ok == 0) begin
      failures++; $display("FAIL pending %0d ovf %0d ok %0d", q.size(), n_ovf, n_ok);
    end
    $display("answers=%0d overflows=%0d", n_ok, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
