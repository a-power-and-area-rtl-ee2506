// direct_prob_model -- probability model with one dedicated bin per index.
//
// Used for the small models (non-zero counts, DC, sign, edge low bits) that do
// not gain from the set-associative scheme.  A flag per index records whether
// the bin has been used in the current image, so clear resets the whole model
// in one cycle; the bin memory itself is never cleared.  Latency and outputs
// match opt_prob_model (MODEL_LAT = 3), so both kinds can feed the same
// parallel-to-serial stage.  The paper describes this "original scheme" as a
// dedicated memory per index; the flag array is this design's way to
// re-initialize it per image.
module direct_prob_model #(
  parameter int MAX_INDEX = 500,
  parameter int IDX_W     = (MAX_INDEX <= 2) ? 1 : $clog2(MAX_INDEX)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             en_in,
  input  logic [IDX_W-1:0] index_in,
  input  logic             bit_data_in,
  output logic             out_en,
  output logic [7:0]       prob_out,
  output logic             bit_data_out
);
  logic [MAX_INDEX-1:0] used;
  logic                 s1_en, s1_new, s1_bit;
  logic [IDX_W-1:0]     s1_addr;
  logic                 rd_en, we;
  logic [IDX_W-1:0]     rd_addr, wr_addr;
  logic [15:0]          rd_data, wr_data;
  logic                 in_range;

  assign in_range = int'(index_in) < MAX_INDEX;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0;
      s1_en <= 1'b0; s1_new <= 1'b0; s1_bit <= 1'b0; s1_addr <= '0;
    end else begin
      s1_en   <= en_in && in_range && !clear;
      s1_new  <= !used[index_in];
      s1_bit  <= bit_data_in;
      s1_addr <= index_in;
      if (clear)                      used <= '0;
      else if (en_in && in_range)     used[index_in] <= 1'b1;
    end
  end

  prob_model_ctrl #(.DEPTH(MAX_INDEX)) u_ctrl (
    .clk, .rst_n, .en_in(s1_en), .addr_in(s1_addr), .new_in(s1_new), .bit_in(s1_bit),
    .rd_en, .rd_addr, .rd_data, .we, .wr_addr, .wr_data,
    .out_en, .prob_out, .bit_data_out);

  prob_sram #(.DEPTH(MAX_INDEX), .W(16)) u_sram (
    .clk, .rd_en, .rd_addr, .rd_data, .we, .wr_addr, .wr_data);
endmodule
