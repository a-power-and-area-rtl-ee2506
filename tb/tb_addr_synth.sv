// tb_addr_synth -- merges K unit outputs into one address: random one-hot
// and idle inputs, expected address k*N + slot.
module tb_addr_synth;
  localparam int K = 3, N = 4, AW = 2, OW = 4;
  int checks = 0, failures = 0;
  logic [K-1:0] addr_en_in, new_in;
  logic [K-1:0][AW-1:0] addr_in;
  logic addr_en, addr_new;
  logic [OW-1:0] addr_out;

  addr_synth #(.K(K), .N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      int k;
      k = $urandom_range(0, K);        // K = idle
      addr_en_in = '0;
      new_in = K'($urandom);
      for (int i = 0; i < K; i++) addr_in[i] = AW'($urandom);
      if (k < K) addr_en_in[k] = 1'b1;
      #1;
      checks++;
      if (k == K) begin
        if (addr_en) begin failures++; $display("FAIL idle"); end
      end else if (!addr_en || int'(addr_out) != k * N + int'(addr_in[k]) || addr_new != new_in[k]) begin
        failures++;
        $display("FAIL k=%0d got %0d", k, addr_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
