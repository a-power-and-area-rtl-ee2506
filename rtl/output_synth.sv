// output_synth -- picks the answering probability model controller.
//
// Of the C controllers of one model at most one has out_en set in a cycle;
// its probability and bit are passed on.  Purely combinational.  The paper
// names the block and its job; the one-hot mux is this design's.
module output_synth #(
  parameter int C = 2,
  parameter int PW = 8
) (
  input  logic [C-1:0]         out_en_in,
  input  logic [C-1:0][PW-1:0] prob_in,
  input  logic [C-1:0]         bit_in,
  output logic                 out_en,
  output logic [PW-1:0]        prob_out,
  output logic                 bit_data_out
);
  always_comb begin
    out_en       = 1'b0;
    prob_out     = '0;
    bit_data_out = 1'b0;
    for (int c = 0; c < C; c++) begin
      if (out_en_in[c]) begin
        out_en       = 1'b1;
        prob_out     = prob_in[c];
        bit_data_out = bit_in[c];
      end
    end
  end
endmodule
