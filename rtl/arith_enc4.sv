// arith_enc4 -- four-bin-per-cycle binary arithmetic encoder.
//
// A boolean range coder of the VP8 kind (the coder Lepton uses): 8-bit range,
// 32-bit low register, a bit is coded with the probability prob/256 that it is
// 0.  For every bin
//     split = 1 + ((range-1)*prob >> 8)
//     bit 0: range = split;  bit 1: low += split, range -= split
// then range is renormalized to >= 128 and the shifted-out bits of low leave
// as bytes; a byte can carry into the bytes already produced.  Four such
// steps are chained combinationally per cycle.
//
// Carries are resolved without a byte buffer: the last byte that is not 0xFF
// is held back together with a count of the 0xFF bytes after it.  When a
// byte that is not 0xFF (or a carry) arrives, the held byte (+carry) and the
// run (0xFF, or 0x00 after a carry) are final and leave as one token
// {lead byte, run_len x run_byte}.  Up to four tokens per cycle.
//
// flush_in closes the code: 32 zero bits at probability 128 (8 cycles), then
// a last token with the held bytes, then done pulses.  clear resets the coder
// for a new image.  The paper names the block (4-bit parallel arithmetic
// encoder); the coder arithmetic follows the Lepton/VP8 boolean coder, the
// token output format is this design's.
module arith_enc4
  import lepton_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  coded_bin_t  in_bins [4],
  input  logic        flush_in,
  output out_tok_t    tok [4],
  output logic        done
);
  typedef struct packed {
    logic [31:0] low;
    logic [7:0]  range;
    logic signed [7:0] count;
    logic        has_cache;
    logic [7:0]  cache;
    logic [23:0] ffcnt;
  } st_t;

  st_t       s_q, s_n;
  out_tok_t  tok_n [4];
  logic [3:0] fl_cnt;     // flush cycles left (8 .. 1), 0 = not flushing
  logic       fl_final;
  coded_bin_t b [4];

  function automatic logic [2:0] norm(logic [7:0] r);
    for (int i = 7; i >= 0; i--) if (r[i]) return 3'(7 - i);
    return 3'd7;
  endfunction

  always_comb begin
    logic [7:0]  split;
    logic [2:0]  shift;
    logic signed [7:0] sh;
    int          offset;
    logic        carry;
    logic [7:0]  byte_v;
    logic        bv;
    s_n = s_q;
    split = '0; shift = '0; sh = '0; offset = 0; carry = 1'b0; byte_v = '0; bv = 1'b0;
    for (int j = 0; j < 4; j++) begin
      tok_n[j] = '0;
      b[j] = (fl_cnt != 0) ? coded_bin_t'{valid: 1'b1, bit_v: 1'b0, prob: 8'd128} : in_bins[j];
    end
    for (int j = 0; j < 4; j++) begin
      if (b[j].valid) begin
        split = 8'(1 + ((32'(s_n.range - 8'd1) * 32'(b[j].prob)) >> 8));
        if (b[j].bit_v) begin
          s_n.low   = s_n.low + 32'(split);
          s_n.range = s_n.range - split;
        end else begin
          s_n.range = split;
        end
        shift     = norm(s_n.range);
        s_n.range = s_n.range << shift;
        sh        = 8'(shift);
        s_n.count = s_n.count + sh;
        if (s_n.count >= 0) begin
          offset = int'(sh) - int'(s_n.count);
          carry  = s_n.low[32 - offset];
          byte_v = 8'(s_n.low >> (24 - offset));
          s_n.low = (s_n.low << offset) & 32'h00ff_ffff;
          sh      = s_n.count;
          s_n.count = s_n.count - 8'sd8;
          bv = 1'b1;
        end else begin
          bv = 1'b0;
          carry = 1'b0;
          byte_v = '0;
        end
        s_n.low = s_n.low << sh;
        // carry resolution
        if (bv) begin
          if (byte_v != 8'hff || carry) begin
            if (s_n.has_cache || s_n.ffcnt != 0) begin
              tok_n[j].valid      = 1'b1;
              tok_n[j].lead_valid = s_n.has_cache;
              tok_n[j].lead_byte  = s_n.cache + 8'(carry);
              tok_n[j].run_len    = s_n.ffcnt;
              tok_n[j].run_byte   = carry ? 8'h00 : 8'hff;
            end
            s_n.has_cache = 1'b1;
            s_n.cache     = byte_v;
            s_n.ffcnt     = '0;
          end else begin
            s_n.ffcnt = s_n.ffcnt + 24'd1;
          end
        end
      end
    end
    if (fl_final) begin
      tok_n[0].valid      = s_q.has_cache || s_q.ffcnt != 0;
      tok_n[0].lead_valid = s_q.has_cache;
      tok_n[0].lead_byte  = s_q.cache;
      tok_n[0].run_len    = s_q.ffcnt;
      tok_n[0].run_byte   = 8'hff;
      s_n.has_cache = 1'b0;
      s_n.ffcnt     = '0;
    end
  end

  localparam st_t ST_INIT = '{low: '0, range: 8'd255, count: -8'sd24, has_cache: 1'b0, cache: '0, ffcnt: '0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q      <= ST_INIT;
      fl_cnt   <= '0;
      fl_final <= 1'b0;
      done     <= 1'b0;
      for (int j = 0; j < 4; j++) tok[j] <= '0;
    end else if (clear) begin
      s_q      <= ST_INIT;
      fl_cnt   <= '0;
      fl_final <= 1'b0;
      done     <= 1'b0;
      for (int j = 0; j < 4; j++) tok[j] <= '0;
    end else begin
      s_q      <= s_n;
      tok      <= tok_n;
      done     <= fl_final;
      fl_final <= (fl_cnt == 4'd1);
      if (flush_in)          fl_cnt <= 4'd8;
      else if (fl_cnt != 0)  fl_cnt <= fl_cnt - 4'd1;
    end
  end

  a_no_bins_while_flushing : assert property (@(posedge clk) disable iff (!rst_n)
    (fl_cnt != 0 || fl_final) |-> !(in_bins[0].valid || in_bins[1].valid || in_bins[2].valid || in_bins[3].valid));
endmodule
