// inact_counter: inactivity counter of one output physical channel.
//
// Following the deadlock detection scheme the design uses, every output
// physical channel has a counter that is cleared whenever a flit is
// transmitted across the channel and otherwise incremented every clock cycle,
// so it holds the number of cycles the channel has been inactive. One bit of
// the counter, FLAG_BIT, serves as the flag F: it is set once 2**FLAG_BIT idle
// cycles have passed. Here the counter stops counting once the flag is set, so
// the flag stays up until the next transfer (the paper does not say what
// happens past the threshold). The width and flag bit are this design's
// defaults (threshold 32 cycles); the paper gives no value.
// Timing: `xfer` in cycle t clears the count at the end of t.
module inact_counter #(
  parameter int unsigned CNT_W    = 6,
  parameter int unsigned FLAG_BIT = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             xfer,
  output logic [CNT_W-1:0] count,
  output logic             flag
);

  assign flag = count[FLAG_BIT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       count <= '0;
    else if (xfer)    count <= '0;
    else if (!flag)   count <= count + 1'b1;
  end

  initial assert (FLAG_BIT < CNT_W);

endmodule
