// tb_output_synth -- one-hot selection of the answering controller.
module tb_output_synth;
  localparam int C = 4;
  int checks = 0, failures = 0;
  logic [C-1:0] out_en_in, bit_in;
  logic [C-1:0][7:0] prob_in;
  logic out_en, bit_data_out;
  logic [7:0] prob_out;

  output_synth #(.C(C), .PW(8)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      int c;
      c = $urandom_range(0, C);
      out_en_in = '0;
      bit_in = C'($urandom);
      for (int i = 0; i < C; i++) prob_in[i] = 8'($urandom);
      if (c < C) out_en_in[c] = 1'b1;
      #1;
      checks++;
      if (c == C ? out_en : (!out_en || prob_out != prob_in[c] || bit_data_out != bit_in[c])) begin
        failures++;
        $display("FAIL c=%0d", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
