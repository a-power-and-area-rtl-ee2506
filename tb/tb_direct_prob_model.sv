// tb_direct_prob_model -- one bin per index: random accesses over several
// images (clear in between), checked against reference bins, latency 3.
module tb_direct_prob_model;
  import lepton_ref_pkg::*;
  localparam int MAXI = 20, IW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  logic clear, en_in, bit_data_in, out_en, bit_data_out;
  logic [IW-1:0] index_in;
  logic [7:0] prob_out;
  typedef struct { int cyc; int prob; bit b; } exp_t;
  exp_t q [$];
  model_ref mr;

  direct_prob_model #(.MAX_INDEX(MAXI), .IDX_W(IW)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_en) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = q.pop_front();
      if (int'(prob_out) != e.prob || bit_data_out != e.b || cyc - e.cyc != 3) begin
        failures++; $display("FAIL prob %0d exp %0d lat %0d", prob_out, e.prob, cyc - e.cyc);
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
    clear = 0; en_in = 0; bit_data_in = 0; index_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int img = 0; img < 4; img++) begin
      mr = new();
      for (int t = 0; t < 600; t++) begin
        int idx;
        bit b;
        @(negedge clk);
        if ($urandom_range(0, 6) == 0) begin en_in = 0; continue; end
        idx = $urandom_range(0, 3) == 0 ? $urandom_range(0, MAXI - 1) : $urandom_range(0, 2);
        b = $urandom_range(0, 4) != 0;
        en_in = 1; index_in = IW'(idx); bit_data_in = b;
        q.push_back('{cyc, mr.access(idx, b), b});
      end
      @(negedge clk); en_in = 0;
      repeat (5) @(negedge clk);
      clear = 1;
      @(negedge clk); clear = 0;
    end
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL pending %0d", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
