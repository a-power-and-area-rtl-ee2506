// tb_p2s -- random elements (1..22 bins, some models not answering) arrive
// spaced by ceil(bins/4) cycles; the bins must leave four per cycle in order,
// with probability 128 where the model gave no answer, and a flush request
// must come out one cycle after its marker.
module tb_p2s;
  import lepton_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_fallback = 0, n_flush = 0;
  bin_order_t order;
  logic [NUM_MODELS-1:0] m_en;
  logic [NUM_MODELS-1:0][7:0] m_prob;
  coded_bin_t out_bins [4];
  logic flush_out;
  coded_bin_t expq [$];
  int flush_due;

  p2s dut (.*);

  always @(posedge clk) if (rst_n) begin
    int nv;
    nv = 0;
    for (int j = 0; j < 4; j++) if (out_bins[j].valid) begin
      coded_bin_t e;
      nv++;
      checks++;
      if (j > 0 && !out_bins[j-1].valid) begin failures++; $display("FAIL gap"); end
      if (expq.size() == 0) begin failures++; $display("FAIL unexpected bin"); end
      else begin
        e = expq.pop_front();
        if (out_bins[j].bit_v != e.bit_v || out_bins[j].prob != e.prob) begin
          failures++; $display("FAIL bin prob %0d exp %0d", out_bins[j].prob, e.prob);
        end
      end
    end
    // 4 per cycle while more than 4 remain of the current element
    if (flush_out) begin
      n_flush++;
      checks++;
      if (flush_due != 1) begin failures++; $display("FAIL flush timing"); end
    end
    if (flush_due > 0) flush_due--;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    order = '0; m_en = '0; m_prob = '0; flush_due = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      int nb;
      bin_order_t o;
      coded_bin_t c;
      @(negedge clk);
      o = '0;
      o.valid = 1;
      if (t % 50 == 49) begin o.flush = 1; nb = 0; flush_due = 2; end
      else nb = $urandom_range(1, MAX_BINS);
      o.nbins = 5'(nb);
      for (int i = 0; i < NUM_MODELS; i++) begin
        m_en[i] = $urandom_range(0, 15) != 0; m_prob[i] = 8'($urandom_range(1, 255));
      end
      for (int k = 0; k < nb; k++) begin
        o.ids[k] = ID_W'($urandom_range(0, NUM_MODELS - 1));
        o.bits[k] = $urandom_range(0, 1);
        c.valid = 1; c.bit_v = o.bits[k];
        c.prob = m_en[o.ids[k]] ? m_prob[o.ids[k]] : 8'd128;
        if (!m_en[o.ids[k]]) n_fallback++;
        expq.push_back(c);
      end
      order = o;
      @(negedge clk);
      order = '0;
      m_en = '0;
      // element spacing used by the binarizer: ceil(n/4) cycles in all
      for (int c2 = 1; c2 < ((nb + 3) / 4); c2++) begin
        checks++;
        if (expq.size() < 4) begin failures++; $display("FAIL drained too fast"); end
        @(negedge clk);
      end
    end
    repeat (8) @(negedge clk);
    checks++;
    if (expq.size() != 0 || n_fallback == 0 || n_flush == 0) begin failures++; $display("FAIL end %0d", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
