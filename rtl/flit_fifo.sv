// flit_fifo: flit buffer of a router channel (input, injection or ejection).
//
// A circular-buffer FIFO of DEPTH flits with valid/ready on both sides; the
// head flit is presented on out_flit while out_valid is high. in_ready
// depends only on the fill level, never on out_ready: this breaks the ready
// path between routers, which would otherwise form combinational loops around
// the mesh. The buffer depth is not given by the paper; 4 flits is this
// design's default. Timing: a written flit is visible at the head one cycle
// later.
module flit_fifo
  import noc_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t          mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;
  logic [AW:0]    count;
  logic           do_wr, do_rd;

  assign out_valid = (count != 0);
  assign out_flit  = mem[rd_ptr];
  assign do_rd     = out_valid && out_ready;
  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign do_wr     = in_valid && in_ready;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= incr(wr_ptr);
      if (do_rd) rd_ptr <= incr(rd_ptr);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_flit;
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));

endmodule
