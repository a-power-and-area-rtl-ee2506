// tb_nz_counter -- region non-zero counts of random sparse blocks.
module tb_nz_counter;
  import lepton_pkg::*;
  int checks = 0, failures = 0;
  block_t blk;
  logic [5:0] nz7;
  logic [2:0] nzx, nzy;

  nz_counter dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int e7, ex, ey, dens;
      dens = $urandom_range(0, 100);
      e7 = 0; ex = 0; ey = 0;
      for (int p = 0; p < 64; p++) begin
        blk[p] = ($urandom_range(0, 99) < dens) ? coef_t'($urandom_range(0, 4095)) : '0;
        if (blk[p] != 0) begin
          if (p / 8 == 0 && p != 0) ex++;
          else if (p % 8 == 0 && p != 0) ey++;
          else if (p != 0) e7++;
        end
      end
      #1;
      checks++;
      if (int'(nz7) != e7 || int'(nzx) != ex || int'(nzy) != ey) begin
        failures++; $display("FAIL %0d/%0d %0d/%0d %0d/%0d", nz7, e7, nzx, ex, nzy, ey);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
