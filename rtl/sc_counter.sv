// sc_counter: stochastic-to-binary decoder. It counts the ones of a
// bitstream; the count divided by the stream length T is the probability
// the stream carries. The published design decodes every output stream with such a
// counter; its width and the clear/bit_valid handshake are this design's.
//
// Timing: 'clear' zeroes the count on the next edge; on every edge with
// bit_valid high the count grows by bit_in. The count is wide enough for
// MAX_LEN ones and saturates there rather than wrap.
module sc_counter #(
  parameter int unsigned MAX_LEN = 256,
  localparam int unsigned CNT_W  = $clog2(MAX_LEN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             bit_valid,
  input  logic             bit_in,
  output logic [CNT_W-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      count <= '0;
    else if (clear)                  count <= '0;
    else if (bit_valid && bit_in && count != CNT_W'(MAX_LEN))
                                     count <= count + 1'b1;
  end

endmodule
