// tb_line_buffer -- neighbour delivery over two planes of different widths,
// with random input gaps and output stalls.  Every output block is checked
// against the blocks the testbench sent (above = same column one row up,
// left = previous column).
module tb_line_buffer;
  import lepton_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic plane_start, in_valid, in_ready, in_flag_c, in_last;
  logic out_valid, out_ready, has_above, has_left, out_flag_c, out_last;
  logic [15:0] plane_width;
  block_t in_blk, cur_blk, above_blk, left_blk;
  block_t sent [$];
  int width, nout;

  line_buffer #(.MAX_W(6)) dut (.*);

  function automatic block_t rnd_blk();
    block_t b;
    for (int p = 0; p < 64; p++) b[p] = coef_t'($urandom);
    return b;
  endfunction

  logic accepted = 0;
  always @(posedge clk) accepted <= in_valid && in_ready;

  // checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int col, row;
    col = nout % width; row = nout / width;
    checks++;
    if (cur_blk != sent[nout] || has_left != (col != 0) || has_above != (row != 0) ||
        (col != 0 && left_blk != sent[nout-1]) || (row != 0 && above_blk != sent[nout-width]) ||
        out_flag_c != (width == 4) || out_last != (nout == 3 * width - 1)) begin
      failures++; $display("FAIL block %0d (row %0d col %0d)", nout, row, col);
    end
    nout++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    plane_start = 0; in_valid = 0; in_flag_c = 0; in_last = 0; plane_width = 0; out_ready = 0;
    in_blk = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      forever begin @(negedge clk); out_ready = $urandom_range(0, 2) != 0; end
    join_none
    for (int pl = 0; pl < 2; pl++) begin
      wait (nout == sent.size());
      repeat (3) @(negedge clk);
      width = (pl == 0) ? 6 : 4;
      sent.delete(); nout = 0;
      @(negedge clk); plane_start = 1; plane_width = 16'(width);
      @(negedge clk); plane_start = 0;
      for (int i = 0; i < 3 * width; i++) begin
        block_t b;
        b = rnd_blk();
        sent.push_back(b);
        in_blk = b; in_flag_c = (width == 4); in_last = (i == 3 * width - 1);
        in_valid = 1;
        @(posedge clk); #1;
        while (!accepted) begin @(posedge clk); #1; end
        @(negedge clk); in_valid = 0;
        if ($urandom_range(0, 2) == 0) @(negedge clk);
      end
    end
    wait (nout == sent.size());
    checks++;
    if (nout != 12) begin failures++; $display("FAIL count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
