// tb_sa_enable_gen -- checks the interval decode of the enable generator.
// Default boundaries are multiples of ceil(MAX_INDEX/M); the expected unit is
// computed by division.  Then boundaries are rewritten through the
// configuration port to an uneven split and checked by a linear search.
module tb_sa_enable_gen;
  localparam int M = 5, MAXI = 10780, IW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en_in, cfg_we;
  logic [IW-1:0] index_in;
  logic [7:0] cfg_sel;
  logic [17:0] cfg_val;
  logic [M-1:0] en_out;
  int bnd [M+1];

  sa_enable_gen #(.M(M), .MAX_INDEX(MAXI), .IDX_W(IW)) dut (.*);

  task automatic check_one(int idx, bit en);
    logic [M-1:0] exp_v;
    exp_v = '0;
    for (int i = 0; i < M; i++) if (en && idx >= bnd[i] && idx < bnd[i+1]) exp_v[i] = 1'b1;
    index_in = IW'(idx); en_in = en;
    #1;
    checks++;
    if (en_out !== exp_v) begin
      failures++;
      $display("FAIL idx=%0d en=%0d got %b exp %b", idx, en, en_out, exp_v);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en_in = 0; index_in = 0; cfg_we = 0; cfg_sel = 0; cfg_val = 0;
    for (int i = 0; i <= M; i++) bnd[i] = (i == M) ? MAXI : i * ((MAXI + M - 1) / M);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // edges of every interval, then random
    for (int i = 1; i < M; i++) begin check_one(bnd[i] - 1, 1); check_one(bnd[i], 1); end
    check_one(0, 1); check_one(MAXI - 1, 1); check_one(MAXI, 1); check_one(16383, 1);
    for (int t = 0; t < 300; t++) check_one($urandom_range(0, 16383), $urandom_range(0, 3) != 0);
    // reconfigure: a hash-like uneven split
    bnd[1] = 100; bnd[2] = 350; bnd[3] = 2000; bnd[4] = 7000;
    for (int i = 1; i < M; i++) begin
      @(negedge clk); cfg_we = 1; cfg_sel = 8'(i); cfg_val = 18'(bnd[i]);
    end
    @(negedge clk); cfg_we = 0;
    for (int i = 1; i < M; i++) begin check_one(bnd[i] - 1, 1); check_one(bnd[i], 1); end
    for (int t = 0; t < 300; t++) check_one($urandom_range(0, 12000), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
