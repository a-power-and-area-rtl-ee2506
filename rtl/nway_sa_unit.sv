// nway_sa_unit -- one N-way set-associative unit of an optimized probability
// model.
//
// The unit owns N memory slots.  Each slot has a 1-bit initialization flag and
// an REC_W-bit index record.  When enabled, the incoming index is compared with
// all valid records at once.  On a hit the slot number is the address; on a
// miss the next free slot (slots are handed out in order 0,1,2,...) is taken:
// its flag is set, the index recorded and the address flagged as new so the
// controller starts that bin from its initial state.  A miss with all N slots
// taken is a probability model overflow: no address is produced, ovf pulses
// and ovf_index reports the index.  clear empties the unit (start of an image).
//
// The record holds the low REC_W bits of the index.  The paper sizes record i
// as ceil(log2(interval width)); two indexes of one interval of width
// <= 2^REC_W always differ in their low REC_W bits, so no subtraction of the
// interval base is needed.  Storing the low bits rather than index-base is this
// design's choice.
//
// Timing: request in cycle t, addr_en/addr_out/addr_new/ovf registered at the
// end of cycle t.  A repeat of the same index in cycle t+1 hits.
module nway_sa_unit #(
  parameter int N     = 32,
  parameter int IDX_W = 14,
  parameter int REC_W = 14,
  localparam int AW   = (N <= 2) ? 1 : $clog2(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             en_in,
  input  logic [IDX_W-1:0] index_in,
  output logic             addr_en,
  output logic [AW-1:0]    addr_out,
  output logic             addr_new,
  output logic             ovf,
  output logic [IDX_W-1:0] ovf_index
);
  logic [N-1:0]     flag;
  logic [REC_W-1:0] rec [N];
  logic [N-1:0]     hit;
  logic             any_hit, full;
  logic [AW-1:0]    hit_slot, free_slot;

  always_comb begin
    hit_slot  = '0;
    free_slot = '0;
    for (int i = 0; i < N; i++) begin
      hit[i] = flag[i] && (rec[i] == index_in[REC_W-1:0]);
      if (hit[i]) hit_slot = AW'(i);
    end
    for (int i = N - 1; i >= 0; i--) if (!flag[i]) free_slot = AW'(i);
    any_hit = |hit;
    full    = &flag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flag      <= '0;
      addr_en   <= 1'b0;
      addr_out  <= '0;
      addr_new  <= 1'b0;
      ovf       <= 1'b0;
      ovf_index <= '0;
    end else begin
      addr_en  <= 1'b0;
      addr_new <= 1'b0;
      ovf      <= 1'b0;
      if (clear) begin
        flag <= '0;
      end else if (en_in) begin
        if (any_hit) begin
          addr_en  <= 1'b1;
          addr_out <= hit_slot;
        end else if (!full) begin
          addr_en         <= 1'b1;
          addr_new        <= 1'b1;
          addr_out        <= free_slot;
          flag[free_slot] <= 1'b1;
        end else begin
          ovf       <= 1'b1;
          ovf_index <= index_in;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && !clear && en_in && !any_hit && !full) rec[free_slot] <= index_in[REC_W-1:0];
  end

  a_single_hit : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hit));
endmodule
