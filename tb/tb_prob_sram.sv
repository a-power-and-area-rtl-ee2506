// tb_prob_sram -- registered read, write, and read-old-data on a same-cycle
// read/write of one address, against an array reference.
module tb_prob_sram;
  localparam int D = 20, AW = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rd_en, we;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [15:0] rd_data, wr_data;
  logic [15:0] ref_mem [D];

  prob_sram #(.DEPTH(D), .W(16)) dut (.*);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] expv;
    rd_en = 0; we = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; wr_addr = AW'(i); wr_data = 16'($urandom); ref_mem[i] = wr_data;
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = AW'($urandom_range(0, D - 1));
      we = $urandom_range(0, 1); wr_addr = ($urandom_range(0, 3) == 0) ? rd_addr : AW'($urandom_range(0, D - 1));
      wr_data = 16'($urandom);
      expv = ref_mem[rd_addr];
      if (we) ref_mem[wr_addr] = wr_data;
      @(negedge clk);
      rd_en = 0; we = 0;
      checks++;
      if (rd_data != expv) begin failures++; $display("FAIL addr %0d", rd_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
