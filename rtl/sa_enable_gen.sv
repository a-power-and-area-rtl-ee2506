// sa_enable_gen -- N-way set-associative unit enable generator of one
// optimized probability model.
//
// The index range of the model [0, MAX_INDEX) is cut into M intervals by M-1
// boundary indexes held in configurable registers.  Every boundary (plus the
// fixed 0 and MAX_INDEX) is compared with the incoming index in parallel
// ("index >= boundary"); the enable of unit i is the XOR of the compare results
// of boundaries i and i+1, ANDed with the request enable.  Exactly one unit is
// enabled for an index inside the range; none for an index >= MAX_INDEX.
// The compare/XOR/AND structure and the configurable boundary registers follow
// the paper.  The default boundaries (equal intervals) are this design's
// choice: the paper derives them offline from image statistics.
//
// Interface: en_in/index_in (combinational to en_out, no clock on that path);
// cfg_we/cfg_sel/cfg_val write boundary cfg_sel (1..M-1) on the clock edge.
// Boundaries must be kept increasing by whoever writes them.
module sa_enable_gen #(
  parameter int M         = 5,
  parameter int MAX_INDEX = 10780,
  parameter int IDX_W     = 14,
  parameter int CFG_W     = 18
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en_in,
  input  logic [IDX_W-1:0]   index_in,
  input  logic               cfg_we,
  input  logic [7:0]         cfg_sel,
  input  logic [CFG_W-1:0]   cfg_val,
  output logic [M-1:0]       en_out
);
  localparam int STEP = (MAX_INDEX + M - 1) / M;

  // bnd[0] = 0 and bnd[M] = MAX_INDEX are constants; 1..M-1 are registers.
  // The MAX_INDEX compare is done on integers: MAX_INDEX itself may need one
  // bit more than CFG_W (res_thres_6 has 2^18 bins).
  logic [CFG_W-1:0] bnd [M];
  logic [M:0]       ge;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i < M; i++) bnd[i] <= CFG_W'(i * STEP);
    end else if (cfg_we) begin
      for (int i = 1; i < M; i++) if (int'(cfg_sel) == i) bnd[i] <= cfg_val;
    end
  end
  assign bnd[0] = '0;

  always_comb begin
    for (int i = 0; i < M; i++) ge[i] = (CFG_W'(index_in) >= bnd[i]);
    ge[M] = (32'(index_in) >= 32'(MAX_INDEX));
    for (int i = 0; i < M; i++)  en_out[i] = (ge[i] ^ ge[i+1]) & en_in;
  end

  a_onehot : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(en_out));
endmodule
