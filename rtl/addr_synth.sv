// addr_synth -- address synthesizer of an optimized probability model.
//
// Merges the outputs of K N-way set-associative units into one address of a
// K*N deep memory: the enabled unit's number forms the upper address bits and
// its slot number the lower ones.  At most one of the K units answers in a
// cycle (they share one enable generator).  The paper gives the function (a
// controller manages K*N bins, adjustable in steps of N); the one-hot merge is
// this design's.  Purely combinational.
module addr_synth #(
  parameter int K  = 5,
  parameter int N  = 32,
  localparam int AW = (N <= 2) ? 1 : $clog2(N),
  localparam int OW = (K * N <= 2) ? 1 : $clog2(K * N)
) (
  input  logic [K-1:0]         addr_en_in,
  input  logic [K-1:0][AW-1:0] addr_in,
  input  logic [K-1:0]         new_in,
  output logic                 addr_en,
  output logic [OW-1:0]        addr_out,
  output logic                 addr_new
);
  always_comb begin
    addr_en  = 1'b0;
    addr_out = '0;
    addr_new = 1'b0;
    for (int k = 0; k < K; k++) begin
      if (addr_en_in[k]) begin
        addr_en  = 1'b1;
        addr_out = OW'(k * N + int'(addr_in[k]));
        addr_new = new_in[k];
      end
    end
  end
endmodule
