// pe_bus_if: receive side of a processing element (PE), joining the router's
// ejection channel and the deadlock-escape bus.
//
// The PE watches the bus through a one-flit output buffer (OB). Every flit on
// the bus is written into every OB; a header addressed to this PE marks the
// rest of that bus message, up to its tail, as this PE's, and all other flits
// are dropped from the OB on the next cycle. Flits of this PE's bus message
// stay in the OB until the PE takes them.
// The PE receives one message at a time from either source. If a message from
// the router is being received, a bus header for this PE waits in the OB until
// the router message's tail has been taken. If a bus header and a router
// header are both waiting, the bus goes first, so that the bus is freed
// quickly; the router message follows the bus message's tail. These rules are
// the paper's; the OB-drop timing and the valid/ready PE port are this
// design's.
// Timing: a bus flit is offered to the PE the cycle after it crosses the bus.
// stat_bus_wait is high while a bus header waits for a router message.
module pe_bus_if
  import noc_pkg::*;
#(
  parameter int unsigned X = 0,
  parameter int unsigned Y = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  // bus side
  input  logic  bus_valid,
  input  flit_t bus_flit,
  output logic  ob_ready,
  // router ejection channel
  input  logic  ej_valid,
  output logic  ej_ready,
  input  flit_t ej_flit,
  // to the PE
  output logic  pe_valid,
  input  logic  pe_ready,
  output flit_t pe_flit,
  output logic  pe_from_bus,
  output logic  stat_bus_wait
);

  typedef enum logic [1:0] {SRC_NONE, SRC_ROUTER, SRC_BUS} src_e;

  logic  ob_valid, ob_mine, bus_pkt_mine, mine_now, ob_pop;
  flit_t ob_flit;
  src_e  state, eff;

  assign mine_now = is_head(bus_flit.ftype)
                  ? (bus_flit.dst_x == COORD_W'(X) && bus_flit.dst_y == COORD_W'(Y))
                  : bus_pkt_mine;

  always_comb begin
    eff = state;
    if (state == SRC_NONE) begin
      if (ob_valid && ob_mine && is_head(ob_flit.ftype)) eff = SRC_BUS;
      else if (ej_valid)                                  eff = SRC_ROUTER;
    end
    pe_from_bus = (eff == SRC_BUS);
    pe_valid    = (eff == SRC_BUS) ? (ob_valid && ob_mine)
                : (eff == SRC_ROUTER) ? ej_valid : 1'b0;
    pe_flit     = (eff == SRC_BUS) ? ob_flit : ej_flit;
    ob_pop      = (eff == SRC_BUS) && ob_valid && ob_mine && pe_ready;
    ej_ready    = (eff == SRC_ROUTER) && pe_ready;
  end

  assign ob_ready      = !ob_valid || !ob_mine || ob_pop;
  assign stat_bus_wait = (state == SRC_ROUTER) && ob_valid && ob_mine;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_valid     <= 1'b0;
      ob_mine      <= 1'b0;
      ob_flit      <= '0;
      bus_pkt_mine <= 1'b0;
      state        <= SRC_NONE;
    end else begin
      if (bus_valid && ob_ready) begin
        ob_valid     <= 1'b1;
        ob_flit      <= bus_flit;
        ob_mine      <= mine_now;
        bus_pkt_mine <= mine_now && !is_tail(bus_flit.ftype);
      end else if (ob_pop || (ob_valid && !ob_mine)) begin
        ob_valid <= 1'b0;
      end
      if (pe_valid && pe_ready) state <= is_tail(pe_flit.ftype) ? SRC_NONE : eff;
    end
  end

  // The bus must not overwrite a flit this PE still has to take.
  assert property (@(posedge clk) disable iff (!rst_n) bus_valid |-> ob_ready);

endmodule
