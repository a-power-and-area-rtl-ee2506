// tb_nway_sa_unit -- lookup, in-order allocation, overflow and clear of one
// N-way set-associative unit, against a list-based reference.
module tb_nway_sa_unit;
  localparam int N = 4, IW = 8, AW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_ovf = 0, n_hit = 0, n_alloc = 0;
  logic clear, en_in, addr_en, addr_new, ovf;
  logic [IW-1:0] index_in, ovf_index;
  logic [AW-1:0] addr_out;
  int slots [$];

  nway_sa_unit #(.N(N), .IDX_W(IW), .REC_W(IW)) dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; en_in = 0; index_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int img = 0; img < 20; img++) begin
      slots.delete();
      for (int t = 0; t < 40; t++) begin
        int idx, found;
        bit e;
        idx = $urandom_range(0, 7) + (img % 3) * 100;
        e = $urandom_range(0, 4) != 0;
        @(negedge clk); en_in = e; index_in = IW'(idx);
        @(negedge clk); en_in = 0;
        // outputs registered at the edge in between
        found = -1;
        foreach (slots[i]) if (slots[i] == idx) found = i;
        if (!e) chk(!addr_en && !ovf, "idle");
        else if (found >= 0) begin
          n_hit++;
          chk(addr_en && !addr_new && int'(addr_out) == found && !ovf, $sformatf("hit idx %0d", idx));
        end else if (slots.size() < N) begin
          n_alloc++;
          chk(addr_en && addr_new && int'(addr_out) == slots.size() && !ovf, $sformatf("alloc idx %0d", idx));
          slots.push_back(idx);
        end else begin
          n_ovf++;
          chk(!addr_en && ovf && ovf_index == IW'(idx), $sformatf("ovf idx %0d", idx));
        end
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
    end
    // back-to-back repeat of one index: second access must hit
    @(negedge clk); en_in = 1; index_in = 8'd55;
    @(negedge clk); en_in = 1; index_in = 8'd55;
    chk(addr_en && addr_new && addr_out == 0, "b2b first");
    @(negedge clk); en_in = 0;
    chk(addr_en && !addr_new && addr_out == 0, "b2b second");
    chk(n_ovf > 0 && n_hit > 0 && n_alloc > 0, "all cases seen");
    $display("hits=%0d allocs=%0d overflows=%0d", n_hit, n_alloc, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
