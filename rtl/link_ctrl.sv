// link_ctrl: link controller (LC) placed on each side of a physical channel.
//
// It moves flits across the channel under valid/ready flow control: a
// one-flit register stage that accepts a new flit whenever it is empty or its
// flit leaves in the same cycle, so a stream moves at one flit per cycle.
// `xfer` marks the cycles in which a flit crosses the downstream side; the
// router uses it on output channels to reset the inactivity counters.
// The paper places LCs at every channel end but does not give their protocol;
// the valid/ready register stage is this design's choice.
// Timing: one cycle of latency; in_ready depends combinationally on out_ready.
module link_ctrl
  import noc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit,
  output logic  xfer
);

  assign in_ready = !out_valid || out_ready;
  assign xfer     = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_flit  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_flit <= in_flit;
    end
  end

endmodule
