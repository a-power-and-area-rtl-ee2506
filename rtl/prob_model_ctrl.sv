// prob_model_ctrl -- probability model controller.
//
// Reads the bin at the synthesized address, turns it into the probability that
// the coded bit is 0, updates the bin with the coded bit and writes it back.
// A bin is two 8-bit counts {c0, c1} of zeros and ones seen, starting at
// {1, 1} (a bin flagged new starts there whatever the memory holds).
//   prob   = clamp(256*c0 / (c0+c1), 1, 255)
//   update : the count of the coded bit is incremented; when it reaches 255
//            both counts are halved (rounding up).
// The paper gives the controller's job only; the count-pair bin (16 bits per
// bin, which matches the paper's "685034 bins ... more than 11M bits") and the
// update rule follow the Lepton reference software as this design reads it.
//
// Timing (one access per cycle, fully pipelined):
//   cycle 1  en/addr/new/bit arrive; SRAM read issued
//   cycle 2  read data (or the bin written in the previous cycle, forwarded)
//            -> prob and update; write-back at the end of the cycle
//   cycle 3  out_en / prob_out / bit_data_out valid (registered)
module prob_model_ctrl #(
  parameter int DEPTH = 160,
  localparam int AW   = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en_in,
  input  logic [AW-1:0] addr_in,
  input  logic          new_in,
  input  logic          bit_in,
  // SRAM ports
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [15:0]   rd_data,
  output logic          we,
  output logic [AW-1:0] wr_addr,
  output logic [15:0]   wr_data,
  // result
  output logic          out_en,
  output logic [7:0]    prob_out,
  output logic          bit_data_out
);
  logic          s2_v, s2_new, s2_bit;
  logic [AW-1:0] s2_addr;
  logic          fw_v;
  logic [AW-1:0] fw_addr;
  logic [15:0]   fw_data;
  logic [15:0]   cur, nxt;
  logic [7:0]    prob;

  assign rd_en   = en_in;
  assign rd_addr = addr_in;

  function automatic logic [7:0] bin_prob(logic [15:0] b);
    logic [8:0]  sum;
    logic [15:0] q;
    sum = {1'b0, b[15:8]} + {1'b0, b[7:0]};
    q   = (sum == 0) ? 16'd128 : 16'(({8'd0, b[15:8]} << 8) / {7'd0, sum});
    if (q < 16'd1)   q = 16'd1;
    if (q > 16'd255) q = 16'd255;
    return q[7:0];
  endfunction

  function automatic logic [15:0] bin_update(logic [15:0] b, logic bv);
    logic [8:0] c0, c1;
    c0 = {1'b0, b[15:8]};
    c1 = {1'b0, b[7:0]};
    if (bv) c1 = c1 + 9'd1; else c0 = c0 + 9'd1;
    if (c0 >= 9'd255 || c1 >= 9'd255) begin
      c0 = (c0 + 9'd1) >> 1;
      c1 = (c1 + 9'd1) >> 1;
    end
    return {c0[7:0], c1[7:0]};
  endfunction

  always_comb begin
    if (s2_new)                       cur = 16'h0101;
    else if (fw_v && fw_addr == s2_addr) cur = fw_data;
    else                              cur = rd_data;
    prob = bin_prob(cur);
    nxt  = bin_update(cur, s2_bit);
  end

  assign we      = s2_v;
  assign wr_addr = s2_addr;
  assign wr_data = nxt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_new <= 1'b0; s2_bit <= 1'b0; s2_addr <= '0;
      fw_v <= 1'b0; fw_addr <= '0; fw_data <= '0;
      out_en <= 1'b0; prob_out <= '0; bit_data_out <= 1'b0;
    end else begin
      s2_v    <= en_in;
      s2_new  <= new_in;
      s2_bit  <= bit_in;
      s2_addr <= addr_in;
      fw_v    <= s2_v;
      fw_addr <= s2_addr;
      fw_data <= nxt;
      out_en       <= s2_v;
      prob_out     <= prob;
      bit_data_out <= s2_bit;
    end
  end
endmodule
