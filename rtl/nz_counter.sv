// nz_counter -- non-zero coefficient counters of one 8x8 block.
//
// Counts the non-zero coefficients of the three regions a block is coded in:
// the 7x7 AC region (rows 1..7, columns 1..7, up to 49), the x edge (row 0,
// columns 1..7) and the y edge (column 0, rows 1..7), up to 7 each.  The
// counts are the first syntax element of each region.  Which edge is called
// x and which y is this design's reading of the paper's region figure.
// Purely combinational.
module nz_counter
  import lepton_pkg::*;
(
  input  block_t     blk,
  output logic [5:0] nz7,
  output logic [2:0] nzx,
  output logic [2:0] nzy
);
  always_comb begin
    nz7 = '0;
    nzx = '0;
    nzy = '0;
    for (int r = 1; r < 8; r++)
      for (int c = 1; c < 8; c++)
        if (blk[r*8+c] != 0) nz7 = nz7 + 6'd1;
    for (int k = 1; k < 8; k++) begin
      if (blk[k]   != 0) nzx = nzx + 3'd1;
      if (blk[k*8] != 0) nzy = nzy + 3'd1;
    end
  end
endmodule
