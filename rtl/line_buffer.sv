// line_buffer -- block row buffer in front of the preprocess stage.
//
// Blocks of one colour plane arrive in raster order.  The buffer keeps the
// previous block row (MAX_W blocks of 64 coefficients) and the previous block,
// and hands each block on together with the block above it and the block to
// its left, with flags telling whether those neighbours exist (first row,
// first column).  plane_start (one cycle, with plane_width) restarts at the
// top-left corner of a new plane.  Following the paper's Fig. 7 the outputs
// are current, above and left blocks (the text says "upper left"; the figure's
// "above" is what the prediction needs).  The storage layout and handshake are
// this design's.
//
// Interface: valid/ready on both sides; one block per cycle; the output is a
// register stage, so a block appears one cycle after it is accepted.
module line_buffer
  import lepton_pkg::*;
#(
  parameter int MAX_W = 240          // blocks per row: 1920-pixel (FHD) luma
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          plane_start,
  input  logic [15:0]   plane_width,
  input  logic          in_valid,
  output logic          in_ready,
  input  block_t        in_blk,
  input  logic          in_flag_c,
  input  logic          in_last,
  output logic          out_valid,
  input  logic          out_ready,
  output block_t        cur_blk,
  output block_t        above_blk,
  output block_t        left_blk,
  output logic          has_above,
  output logic          has_left,
  output logic          out_flag_c,
  output logic          out_last
);
  localparam int CW = (MAX_W <= 2) ? 1 : $clog2(MAX_W);

  block_t        row_mem [MAX_W];
  block_t        prev_blk;
  logic [CW-1:0] col;
  logic [15:0]   width;
  logic          first_row;
  logic          acc;

  assign in_ready = !out_valid || out_ready;
  assign acc      = in_valid && in_ready && !plane_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      col       <= '0;
      width     <= 16'(MAX_W);
      first_row <= 1'b1;
      has_above <= 1'b0;
      has_left  <= 1'b0;
      out_flag_c <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (plane_start) begin
        col       <= '0;
        width     <= plane_width;
        first_row <= 1'b1;
      end else if (acc) begin
        out_valid  <= 1'b1;
        has_above  <= !first_row;
        has_left   <= (col != '0);
        out_flag_c <= in_flag_c;
        out_last   <= in_last;
        if (32'(col) + 1 >= 32'(width)) begin
          col       <= '0;
          first_row <= 1'b0;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (acc) begin
      cur_blk      <= in_blk;
      above_blk    <= row_mem[col];
      left_blk     <= prev_blk;
      prev_blk     <= in_blk;
      row_mem[col] <= in_blk;
    end
  end

  a_width : assert property (@(posedge clk) disable iff (!rst_n)
                             plane_start |-> (plane_width != 0 && 32'(plane_width) <= MAX_W));
endmodule
