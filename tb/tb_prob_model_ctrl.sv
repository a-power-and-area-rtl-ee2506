// tb_prob_model_ctrl -- probability and bin update of the controller with its
// SRAM: random back-to-back accesses (many to the same address, to exercise
// the write-back forwarding), checked against count-pair reference bins; the
// answer must come exactly two cycles after the request.
module tb_prob_model_ctrl;
  import lepton_ref_pkg::*;
  localparam int D = 8, AW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0, n_b2b = 0;
  logic en_in, new_in, bit_in, rd_en, we, out_en, bit_data_out;
  logic [AW-1:0] addr_in, rd_addr, wr_addr;
  logic [15:0] rd_data, wr_data;
  logic [7:0] prob_out;
  int c0 [D], c1 [D];
  bit used [D];
  typedef struct { int cyc; int prob; bit b; } exp_t;
  exp_t q [$];

  prob_model_ctrl #(.DEPTH(D)) dut (.*);
  prob_sram #(.DEPTH(D), .W(16)) mem (.clk, .rd_en, .rd_addr, .rd_data, .we, .wr_addr, .wr_data);

  always @(posedge clk) cyc <= cyc + 1;

  // output monitor
  always @(negedge clk) if (rst_n) begin
    if (out_en) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        e = q.pop_front();
        if (int'(prob_out) != e.prob || bit_data_out != e.b || cyc - e.cyc != 2) begin
          failures++;
          $display("FAIL prob %0d exp %0d latency %0d", prob_out, e.prob, cyc - e.cyc);
        end
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
    int a, last_a;
    bit b;
    en_in = 0; new_in = 0; bit_in = 0; addr_in = 0; last_a = -1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if ($urandom_range(0, 5) == 0) begin en_in = 0; last_a = -1; continue; end
      a = ($urandom_range(0, 2) == 0) ? $urandom_range(0, D - 1) : $urandom_range(0, 1);
      b = ($urandom_range(0, 9) < 8);       // skewed bits drive counts to saturation
      if (a == last_a) n_b2b++;
      en_in = 1; addr_in = AW'(a); bit_in = b; new_in = !used[a];
      if (!used[a]) begin used[a] = 1; c0[a] = 1; c1[a] = 1; end
      q.push_back('{cyc, bin_prob(c0[a], c1[a]), b});
      bin_update(c0[a], c1[a], b);
      last_a = a;
    end
    @(negedge clk); en_in = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (q.size() != 0 || n_b2b == 0) begin failures++; $display("FAIL left %0d b2b %0d", q.size(), n_b2b); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
