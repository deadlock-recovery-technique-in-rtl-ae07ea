// route_arb: routing and arbitration unit of a router (true fully adaptive).
//
// For every input whose buffer head is an unrouted header, the unit computes
// the requested outputs: the productive directions of a minimal path (one or
// two of N/E/S/W), or Local at the destination. Routing is true fully
// adaptive: any requested output that is not reserved by another message may
// be taken, with no turn restrictions and no virtual channels. Inputs are
// served in round-robin order, and each takes its lowest-numbered free
// requested output. The chosen output stays reserved for that input until the
// tail flit has passed (wormhole switching); the unit then drives the switch
// and pops the input buffers as output channels accept flits.
// An input marked in_bus is being drained onto the bus and is not routed.
// The paper gives the routing policy (TFAR) but not its circuit: minimal
// paths, the lowest-index choice and the round-robin order are this design's.
// Timing: a header allocated in cycle t moves through the switch from t+1.
// At an edge or corner router some req_mask bits are constant (a direction
// off the mesh is never productive); that is expected.
module route_arb
  import noc_pkg::*;
#(
  parameter int unsigned X = 0,
  parameter int unsigned Y = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_PORTS-1:0] head_valid,
  input  flit_t                head_flit    [NUM_PORTS],
  input  logic [NUM_PORTS-1:0] in_bus,
  input  logic [NUM_PORTS-1:0] out_ready,
  // switch control
  output logic [NUM_PORTS-1:0] pop,
  output logic [NUM_PORTS-1:0] out_valid,
  output logic [PORT_W-1:0]    out_sel      [NUM_PORTS],
  // state seen by the deadlock detector and the bus controller
  output logic [NUM_PORTS-1:0] waiting,
  output logic [NUM_PORTS-1:0] req_mask     [NUM_PORTS],
  output logic [NUM_PORTS-1:0] out_reserved,
  output logic [NUM_PORTS-1:0] routed
);

  logic [PORT_W-1:0]    out_owner [NUM_PORTS];
  logic [PORT_W-1:0]    in_conn   [NUM_PORTS];
  logic [NUM_PORTS-1:0] alloc_v;
  logic [PORT_W-1:0]    alloc_o   [NUM_PORTS];
  logic [PORT_W-1:0]    rr_ptr;

  // Requested outputs and waiting headers.
  always_comb begin
    for (int i = 0; i < NUM_PORTS; i++) begin
      req_mask[i] = productive_ports(COORD_W'(X), COORD_W'(Y),
                                     head_flit[i].dst_x, head_flit[i].dst_y);
      waiting[i]  = head_valid[i] && is_head(head_flit[i].ftype) && !routed[i] && !in_bus[i];
    end
  end

  // Round-robin allocation of free requested outputs.
  always_comb begin
    logic [NUM_PORTS-1:0] taken;
    logic [NUM_PORTS-1:0] free;
    logic [PORT_W-1:0]    i;
    taken   = out_reserved;
    alloc_v = '0;
    for (int k = 0; k < NUM_PORTS; k++) alloc_o[k] = '0;
    for (int k = 0; k < NUM_PORTS; k++) begin
      i = PORT_W'((32'(rr_ptr) + 32'(k)) % NUM_PORTS);
      free = req_mask[i] & ~taken;
      if (waiting[i] && free != '0) begin
        for (int o = NUM_PORTS - 1; o >= 0; o--) begin
          if (free[o]) alloc_o[i] = PORT_W'(o);
        end
        alloc_v[i] = 1'b1;
        taken[alloc_o[i]] = 1'b1;
      end
    end
  end

  // Switch control for established connections.
  always_comb begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      out_sel[o]   = out_owner[o];
      out_valid[o] = out_reserved[o] && head_valid[out_owner[o]];
    end
    for (int i = 0; i < NUM_PORTS; i++) begin
      pop[i] = routed[i] && head_valid[i] && out_ready[in_conn[i]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_reserved <= '0;
      routed       <= '0;
      rr_ptr       <= '0;
      for (int k = 0; k < NUM_PORTS; k++) begin
        out_owner[k] <= '0;
        in_conn[k]   <= '0;
      end
    end else begin
      for (int i = 0; i < NUM_PORTS; i++) begin
        if (pop[i] && is_tail(head_flit[i].ftype)) begin
          routed[i]                <= 1'b0;
          out_reserved[in_conn[i]] <= 1'b0;
        end
      end
      for (int i = 0; i < NUM_PORTS; i++) begin
        if (alloc_v[i]) begin
          routed[i]                <= 1'b1;
          in_conn[i]               <= alloc_o[i];
          out_reserved[alloc_o[i]] <= 1'b1;
          out_owner[alloc_o[i]]    <= PORT_W'(i);
        end
      end
      if (alloc_v != '0) rr_ptr <= (rr_ptr == PORT_W'(NUM_PORTS - 1)) ? '0 : rr_ptr + 1'b1;
    end
  end

  // An output is owned by at most one input.
  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      out_reserved[o] |-> (routed[out_owner[o]] && in_conn[out_owner[o]] == PORT_W'(o)));
  end

endmodule
