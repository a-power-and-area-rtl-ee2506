// p2s -- probability data parallel-to-serial stage.
//
// The probability models answer all bins of one syntax element in the same
// cycle.  This stage gathers them into a buffer in coding order (the order
// list comes from the binarizer through a delay line matching the model
// latency) and hands them to the arithmetic encoder four per cycle.  A bin
// whose model gave no answer (its set-associative unit overflowed) is coded
// with probability 128; the image is then re-encoded in software anyway.
// The next element arrives no earlier than the buffer empties, because the
// binarizer spaces elements by ceil(bins/4) cycles, so no back-pressure is
// needed.  An order marked flush produces a one-cycle flush_out after the
// buffer is drained.  The paper gives the function (parallel in, four bins out
// in Lepton order); the buffer and spacing scheme are this design's.
//
// Timing: an element loaded at cycle t yields bins 0..3 at t+1, 4..7 at t+2, ...
module p2s
  import lepton_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  bin_order_t  order,
  input  logic [NUM_MODELS-1:0]       m_en,
  input  logic [NUM_MODELS-1:0][7:0]  m_prob,
  output coded_bin_t  out_bins [4],
  output logic        flush_out
);
  coded_bin_t buf_q [MAX_BINS];
  logic [4:0] head, cnt;

  always_comb begin
    for (int j = 0; j < 4; j++) begin
      out_bins[j] = '0;
      if (int'(head) + j < int'(cnt)) out_bins[j] = buf_q[int'(head) + j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0;
      cnt  <= '0;
      flush_out <= 1'b0;
      for (int k = 0; k < MAX_BINS; k++) buf_q[k] <= '0;
    end else begin
      flush_out <= order.valid && order.flush;
      if (order.valid) begin
        head <= '0;
        cnt  <= order.nbins;
        for (int k = 0; k < MAX_BINS; k++) begin
          buf_q[k].valid <= (k < int'(order.nbins));
          buf_q[k].bit_v <= order.bits[k];
          buf_q[k].prob  <= m_en[order.ids[k]] ? m_prob[order.ids[k]] : 8'd128;
        end
      end else if (head < cnt) begin
        head <= head + 5'd4;
      end
    end
  end

  // the previous element must be fully drained when a new one arrives
  a_drained : assert property (@(posedge clk) disable iff (!rst_n)
                               order.valid |-> (int'(head) + 4 >= int'(cnt)));
endmodule
