// tb_arith_enc4 -- random bins, 0..4 per cycle, with skewed probabilities,
// over several images (clear between them).  The output tokens are expanded
// to bytes and compared with a reference boolean coder that writes into a
// byte buffer and propagates carries backwards.  Carries and 0xFF runs are
// counted and must both occur.
module tb_arith_enc4;
  import lepton_pkg::*;
  import lepton_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_carry = 0, n_run = 0, ncyc;
  // steering: distance from the coder's low end to a target point; choosing
  // the sub-interval that keeps the target inside makes the pending bits all
  // ones, and reaching the target exactly produces a carry
  longint d;
  logic clear, flush_in, done;
  coded_bin_t in_bins [4];
  out_tok_t tok [4];
  byte unsigned got [$];
  bool_enc ref_enc;

  arith_enc4 dut (.*);

  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < 4; j++) if (tok[j].valid) begin
      if (tok[j].lead_valid) got.push_back(tok[j].lead_byte);
      for (int r = 0; r < int'(tok[j].run_len); r++) got.push_back(tok[j].run_byte);
      if (tok[j].run_len != 0) n_run++;
      if (tok[j].run_byte == 8'h00) n_carry++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; flush_in = 0;
    for (int j = 0; j < 4; j++) in_bins[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int img = 0; img < 16; img++) begin
      ref_enc = new();
      got.delete();
      d = -1;
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      ncyc = (img == 0) ? 3 : $urandom_range(100, 8000);
      for (int t = 0; t < ncyc; t++) begin
        int nv, skew;
        nv = $urandom_range(0, 4);
        skew = img % 3;
        for (int j = 0; j < 4; j++) begin
          in_bins[j] = '0;
          if (j < nv) begin
            in_bins[j].valid = 1;
            in_bins[j].prob  = 8'((skew == 0) ? $urandom_range(1, 255) : (skew == 1) ? $urandom_range(240, 255) : $urandom_range(1, 12));
            // bits mostly follow the probability, sometimes against it
            in_bins[j].bit_v = ($urandom_range(0, 255) >= int'(in_bins[j].prob));
            if (img % 2 == 1) begin
              int unsigned split, r;
              split = 1 + (((ref_enc.range_q - 1) * in_bins[j].prob) >> 8);
              if (d < 0 && $urandom_range(0, 100) == 0) d = $urandom_range(0, ref_enc.range_q - 1);
              if (d >= 0) begin
                in_bins[j].bit_v = (d >= longint'(split));
                if (in_bins[j].bit_v) d -= split;
                r = in_bins[j].bit_v ? ref_enc.range_q - split : split;
                while (r < 128) begin r <<= 1; d <<= 1; end
                if (d == 0) d = -1;
              end
            end
            ref_enc.put(in_bins[j].bit_v, int'(in_bins[j].prob));
          end
        end
        @(negedge clk);
      end
      for (int j = 0; j < 4; j++) in_bins[j] = '0;
      flush_in = 1;
      @(negedge clk); flush_in = 0;
      ref_enc.finish();
      fork
        begin wait (done); end
        begin repeat (20) @(negedge clk); end
      join_any
      disable fork;
      repeat (2) @(negedge clk);
      checks++;
      if (got.size() != ref_enc.buffer.size()) begin
        failures++; $display("FAIL image %0d: %0d bytes, expected %0d", img, got.size(), ref_enc.buffer.size());
      end
      foreach (ref_enc.buffer[i]) begin
        checks++;
        if (i >= got.size() || got[i] != ref_enc.buffer[i]) begin
          failures++;
          if (failures < 10) $display("FAIL image %0d byte %0d", img, i);
        end
      end
    end
    checks++;
    if (n_carry == 0 || n_run == 0) begin failures++; $display("FAIL coverage carry %0d run %0d", n_carry, n_run); end
    $display("carries=%0d ff-runs=%0d", n_carry, n_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
