// opt_prob_model -- one probability model built with the hash-based memory
// optimization.
//
// Instead of one bin per index (MAX_INDEX bins), the model owns MEM_DEPTH
// physical bins, MEM_DEPTH = M*N.  The index range is cut into M intervals by
// M-1 boundary indexes (an access-probability-based hash: busy index ranges get
// narrow intervals, rare ones wide); all indexes of an interval share the N
// bins of one N-way set-associative unit, handed out on first use.  Groups of
// K units feed one address synthesizer and one controller with its own
// K*N-deep SRAM; an output synthesizer merges the M/K controllers.
//
//   index_in -> enable generator -> unit array (reg) -> addr synthesizers ->
//   controllers + SRAM (2 cycles) -> output synthesizer -> out_*
//   bit_data_in -> bit data register -> controllers
//
// Structure and the overflow behaviour follow the paper.  Choices of this
// design: equal default intervals; one record width REC_W for all units (the
// paper sizes each unit's records to its own interval; REC_W = IDX_W stays
// correct whatever boundaries are written); on overflow the access gets no
// bin and out_en stays low for it.
//
// Interface: one request per cycle (en_in, index_in, bit_data_in); result
// (out_en, prob_out, bit_data_out) MODEL_LAT = 3 cycles later.  ovf pulses
// with ovf_index one cycle after an access that found its unit full.  clear
// (one cycle) frees all bins for a new image.  cfg_* write boundary registers.
module opt_prob_model #(
  parameter int MAX_INDEX = 10780,
  parameter int MEM_DEPTH = 160,
  parameter int N         = 32,
  parameter int K         = 5,
  parameter int IDX_W     = (MAX_INDEX <= 2) ? 1 : $clog2(MAX_INDEX),
  parameter int REC_W     = IDX_W,
  parameter int CFG_W     = 18
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             en_in,
  input  logic [IDX_W-1:0] index_in,
  input  logic             bit_data_in,
  input  logic             cfg_we,
  input  logic [7:0]       cfg_sel,
  input  logic [CFG_W-1:0] cfg_val,
  output logic             out_en,
  output logic [7:0]       prob_out,
  output logic             bit_data_out,
  output logic             ovf,
  output logic [IDX_W-1:0] ovf_index
);
  localparam int M  = MEM_DEPTH / N;
  localparam int C  = M / K;
  localparam int AW = (N <= 2) ? 1 : $clog2(N);
  localparam int CD = K * N;
  localparam int CAW = (CD <= 2) ? 1 : $clog2(CD);

  initial begin
    assert (MEM_DEPTH % N == 0 && M % K == 0)
      else $error("opt_prob_model: MEM_DEPTH must be a multiple of N*K");
  end

  logic [M-1:0]         en_u;
  logic [M-1:0]         u_en, u_new, u_ovf;
  logic [M-1:0][AW-1:0] u_addr;
  logic [IDX_W-1:0]     u_ovf_idx [M];
  logic                 bit_q;
  logic [C-1:0]         c_out_en, c_bit;
  logic [C-1:0][7:0]    c_prob;

  sa_enable_gen #(.M(M), .MAX_INDEX(MAX_INDEX), .IDX_W(IDX_W), .CFG_W(CFG_W)) u_egen (
    .clk, .rst_n, .en_in, .index_in, .cfg_we, .cfg_sel, .cfg_val, .en_out(en_u));

  for (genvar m = 0; m < M; m++) begin : g_unit
    nway_sa_unit #(.N(N), .IDX_W(IDX_W), .REC_W(REC_W)) u_sa (
      .clk, .rst_n, .clear, .en_in(en_u[m]), .index_in,
      .addr_en(u_en[m]), .addr_out(u_addr[m]), .addr_new(u_new[m]),
      .ovf(u_ovf[m]), .ovf_index(u_ovf_idx[m]));
  end

  // bit data register: aligns the coded bit with the unit outputs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bit_q <= 1'b0;
    else        bit_q <= bit_data_in;
  end

  for (genvar c = 0; c < C; c++) begin : g_ctrl
    logic            a_en, a_new;
    logic [CAW-1:0]  a_addr;
    logic            rd_en, we;
    logic [CAW-1:0]  rd_addr, wr_addr;
    logic [15:0]     rd_data, wr_data;

    addr_synth #(.K(K), .N(N)) u_as (
      .addr_en_in(u_en[c*K +: K]), .addr_in(u_addr[c*K +: K]), .new_in(u_new[c*K +: K]),
      .addr_en(a_en), .addr_out(a_addr), .addr_new(a_new));

    prob_model_ctrl #(.DEPTH(CD)) u_ctrl (
      .clk, .rst_n, .en_in(a_en), .addr_in(a_addr), .new_in(a_new), .bit_in(bit_q),
      .rd_en, .rd_addr, .rd_data, .we, .wr_addr, .wr_data,
      .out_en(c_out_en[c]), .prob_out(c_prob[c]), .bit_data_out(c_bit[c]));

    prob_sram #(.DEPTH(CD), .W(16)) u_sram (
      .clk, .rd_en, .rd_addr, .rd_data, .we, .wr_addr, .wr_data);
  end

  output_synth #(.C(C), .PW(8)) u_osyn (
    .out_en_in(c_out_en), .prob_in(c_prob), .bit_in(c_bit),
    .out_en, .prob_out, .bit_data_out);

  always_comb begin
    ovf       = |u_ovf;
    ovf_index = '0;
    for (int m = 0; m < M; m++) if (u_ovf[m]) ovf_index = u_ovf_idx[m];
  end
endmodule
