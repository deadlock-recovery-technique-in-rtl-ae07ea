// router: input-buffered mesh router with a bus escape path for deadlock
// recovery.
//
// Datapath: every input channel (N, E, S, W and the PE injection channel) has
// a link controller followed by a flit buffer; the routing and arbitration
// unit connects buffer heads through the switch to the output channels (N, E,
// S, W through link controllers, and the ejection channel through a buffer and
// a link controller). There are no virtual channels and routing is true fully
// adaptive. Each output channel has an inactivity counter whose flag bit says
// that no flit has crossed it for the threshold time.
//
// Deadlock recovery: when a header cannot route because all its requested
// outputs are reserved by other messages and all their flags are set, the
// router pulses bus_req (BR) to the bus arbiter and waits for bus_grant (BG).
// If the header gets routed normally while waiting, the router pulses
// bus_cancel instead. Once granted, the router copies the message flit by
// flit from that input buffer into the one-flit bus input buffer (IB), which
// drives the global bus; when the tail flit leaves the IB it pulses
// bus_cancel so the arbiter can grant the next router. Only one message per
// router uses the bus at a time (the lowest-numbered deadlocked input).
// The structure follows the paper's router figure and its recovery protocol;
// the pulse encoding of BR and cancellation, the single outstanding request
// and all buffer sizes are this design's choices.
//
// Stat outputs are one-cycle event pulses for observation.
module router
  import noc_pkg::*;
#(
  parameter int unsigned X         = 0,
  parameter int unsigned Y         = 0,
  parameter int unsigned BUF_DEPTH = 4,
  parameter int unsigned CNT_W     = 6,
  parameter int unsigned FLAG_BIT  = 5
) (
  input  logic       clk,
  input  logic       rst_n,
  // mesh channels, index N, E, S, W
  input  logic [3:0] in_valid,
  output logic [3:0] in_ready,
  input  flit_t      in_flit   [4],
  output logic [3:0] out_valid,
  input  logic [3:0] out_ready,
  output flit_t      out_flit  [4],
  // PE injection and ejection channels
  input  logic       inj_valid,
  output logic       inj_ready,
  input  flit_t      inj_flit,
  output logic       ej_valid,
  input  logic       ej_ready,
  output flit_t      ej_flit,
  // bus escape path
  output logic       bus_req,
  output logic       bus_cancel,
  input  logic       bus_grant,
  output logic       ib_valid,
  input  logic       ib_ready,
  output flit_t      ib_flit,
  // observation
  output logic       stat_withdrawn
);

  typedef enum logic [1:0] {BS_IDLE, BS_REQ, BS_SEND} bus_state_e;

  // ---------------------------------------------------------------- inputs
  logic [NUM_PORTS-1:0] lc_in_valid, lc_in_ready, lc_o_valid, lc_o_ready;
  flit_t                lc_in_flit [NUM_PORTS];
  flit_t                lc_o_flit  [NUM_PORTS];
  logic [NUM_PORTS-1:0] head_valid, head_pop;
  flit_t                head_flit  [NUM_PORTS];

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      lc_in_valid[i] = in_valid[i];
      lc_in_flit[i]  = in_flit[i];
      in_ready[i]    = lc_in_ready[i];
    end
    lc_in_valid[P_L] = inj_valid;
    lc_in_flit[P_L]  = inj_flit;
    inj_ready        = lc_in_ready[P_L];
  end

  for (genvar i = 0; i < NUM_PORTS; i++) begin : g_in
    logic unused_xfer;
    link_ctrl u_lc (
      .clk, .rst_n,
      .in_valid (lc_in_valid[i]), .in_ready (lc_in_ready[i]), .in_flit (lc_in_flit[i]),
      .out_valid(lc_o_valid[i]),  .out_ready(lc_o_ready[i]),  .out_flit(lc_o_flit[i]),
      .xfer     (unused_xfer)
    );
    flit_fifo #(.DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid (lc_o_valid[i]), .in_ready (lc_o_ready[i]), .in_flit (lc_o_flit[i]),
      .out_valid(head_valid[i]), .out_ready(head_pop[i]),   .out_flit(head_flit[i])
    );
  end

  // ------------------------------------------------ routing, switch, outputs
  logic [NUM_PORTS-1:0] ra_pop, sw_valid, sw_ready, in_bus;
  logic [PORT_W-1:0]    sw_sel   [NUM_PORTS];
  flit_t                sw_flit  [NUM_PORTS];
  logic [NUM_PORTS-1:0] waiting, out_reserved, routed, out_flag, out_xfer, deadlock;
  logic [NUM_PORTS-1:0] req_mask [NUM_PORTS];

  route_arb #(.X(X), .Y(Y)) u_ra (
    .clk, .rst_n,
    .head_valid, .head_flit, .in_bus, .out_ready(sw_ready),
    .pop(ra_pop), .out_valid(sw_valid), .out_sel(sw_sel),
    .waiting, .req_mask, .out_reserved, .routed
  );

  xbar_switch u_sw (.in_flit(head_flit), .sel(sw_sel), .out_flit(sw_flit));

  for (genvar o = 0; o < 4; o++) begin : g_out
    link_ctrl u_lc (
      .clk, .rst_n,
      .in_valid (sw_valid[o]),  .in_ready (sw_ready[o]),  .in_flit (sw_flit[o]),
      .out_valid(out_valid[o]), .out_ready(out_ready[o]), .out_flit(out_flit[o]),
      .xfer     (out_xfer[o])
    );
  end

  logic  ejb_valid, ejb_ready;
  flit_t ejb_flit;
  flit_fifo #(.DEPTH(BUF_DEPTH)) u_ej_buf (
    .clk, .rst_n,
    .in_valid (sw_valid[P_L]), .in_ready (sw_ready[P_L]), .in_flit (sw_flit[P_L]),
    .out_valid(ejb_valid),     .out_ready(ejb_ready),     .out_flit(ejb_flit)
  );
  link_ctrl u_ej_lc (
    .clk, .rst_n,
    .in_valid (ejb_valid), .in_ready (ejb_ready), .in_flit (ejb_flit),
    .out_valid(ej_valid),  .out_ready(ej_ready),  .out_flit(ej_flit),
    .xfer     (out_xfer[P_L])
  );

  // ------------------------------------------------------ deadlock detection
  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_cnt
    logic [CNT_W-1:0] unused_count;
    inact_counter #(.CNT_W(CNT_W), .FLAG_BIT(FLAG_BIT)) u_cnt (
      .clk, .rst_n, .xfer(out_xfer[o]), .count(unused_count), .flag(out_flag[o])
    );
  end

  deadlock_detect u_dd (.waiting, .req_mask, .out_reserved, .out_flag, .deadlock);

  // ------------------------------------------------- bus escape controller
  bus_state_e        bstate;
  logic [PORT_W-1:0] bsel;
  logic              tail_loaded;
  logic              ib_can_take, ib_load;
  logic [PORT_W-1:0] dl_first;

  always_comb begin
    dl_first = '0;
    for (int i = NUM_PORTS - 1; i >= 0; i--) if (deadlock[i]) dl_first = PORT_W'(i);
  end

  always_comb begin
    in_bus = '0;
    if (bstate == BS_SEND || (bstate == BS_REQ && bus_grant && !routed[bsel]))
      in_bus[bsel] = 1'b1;
  end

  assign ib_can_take = !ib_valid || ib_ready;
  assign ib_load     = (bstate == BS_SEND) && !tail_loaded && head_valid[bsel] && ib_can_take;

  always_comb begin
    head_pop = ra_pop;
    if (ib_load) head_pop[bsel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bstate         <= BS_IDLE;
      bsel           <= '0;
      tail_loaded    <= 1'b0;
      ib_valid       <= 1'b0;
      ib_flit        <= '0;
      bus_req        <= 1'b0;
      bus_cancel     <= 1'b0;
      stat_withdrawn <= 1'b0;
    end else begin
      bus_req        <= 1'b0;
      bus_cancel     <= 1'b0;
      stat_withdrawn <= 1'b0;
      if (ib_valid && ib_ready) ib_valid <= 1'b0;
      if (ib_load) begin
        ib_valid <= 1'b1;
        ib_flit  <= head_flit[bsel];
        if (is_tail(head_flit[bsel].ftype)) tail_loaded <= 1'b1;
      end
      unique case (bstate)
        BS_IDLE: if (deadlock != '0) begin
          bsel    <= dl_first;
          bus_req <= 1'b1;
          bstate  <= BS_REQ;
        end
        BS_REQ: begin
          if (routed[bsel]) begin
            // the header found a free output before the grant came
            bus_cancel     <= 1'b1;
            stat_withdrawn <= 1'b1;
            bstate         <= BS_IDLE;
          end else if (bus_grant) begin
            tail_loaded <= 1'b0;
            bstate      <= BS_SEND;
          end
        end
        BS_SEND: if (ib_valid && ib_ready && is_tail(ib_flit.ftype)) begin
          bus_cancel <= 1'b1;
          bstate     <= BS_IDLE;
        end
        default: bstate <= BS_IDLE;
      endcase
    end
  end

  // The bus carries whole messages: the first flit of a bus transfer is a header.
  assert property (@(posedge clk) disable iff (!rst_n)
    (bstate == BS_SEND && ib_load && !ib_valid && $past(bstate) == BS_REQ) |-> is_head(head_flit[bsel].ftype));
  // Grant only reaches a router that is waiting for it or using the bus.
  assert property (@(posedge clk) disable iff (!rst_n)
    (bus_grant && !bus_cancel && !$past(bus_cancel)) |-> (bstate != BS_IDLE));

endmodule
