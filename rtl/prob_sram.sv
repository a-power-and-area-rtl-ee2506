// prob_sram -- bin memory of one probability model controller.
//
// A two-port memory (one read port, one write port) with a registered read:
// rd_data holds mem[rd_addr] one cycle after rd_en.  A read and a write of the
// same address in one cycle return the old data; the controller forwards the
// new data itself.  The paper shows an SRAM macro here; its port count and
// read timing are this design's choice (one read and one write per cycle are
// needed to sustain one model access per cycle).  Contents are not reset:
// the controller ignores stale bins through the initialization flags.
module prob_sram #(
  parameter int DEPTH = 160,
  parameter int W     = 16,
  localparam int AW   = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (we)    mem[wr_addr] <= wr_data;
  end
endmodule
