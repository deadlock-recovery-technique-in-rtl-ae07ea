// noc_top: 4x4 mesh network-on-chip with a global bus as deadlock escape path.
//
// Sixteen routers form a two-dimensional mesh; routing inside the mesh is true
// fully adaptive (any minimal direction, no virtual channels), so deadlock is
// possible and is handled by detection and recovery rather than avoidance.
// Beside the mesh runs one global bus with a first-come first-served bus
// arbiter. A router that presumes one of its messages deadlocked queues for
// the bus, and when granted moves that whole message over the bus straight to
// the destination processing element (PE), which frees the channels the
// message held and lets the rest of the deadlock cycle drain. Each tile's PE
// receive interface merges messages from its router and from the bus.
// The PEs themselves are outside this module: every tile exposes its
// injection channel (inj_*) and its receive channel (pe_*), valid/ready
// streams of flits. Node n is tile (x, y) = (n % 4, n / 4); North is +y.
// The stat_* outputs are one-cycle event pulses per tile: a bus request, a
// bus request withdrawn because the header routed normally, and a bus header
// waiting at a PE behind a router message.
module noc_top
  import noc_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 4,
  parameter int unsigned CNT_W     = 6,
  parameter int unsigned FLAG_BIT  = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_NODES-1:0] inj_valid,
  output logic [NUM_NODES-1:0] inj_ready,
  input  flit_t                inj_flit    [NUM_NODES],
  output logic [NUM_NODES-1:0] pe_valid,
  input  logic [NUM_NODES-1:0] pe_ready,
  output flit_t                pe_flit     [NUM_NODES],
  output logic [NUM_NODES-1:0] pe_from_bus,
  output logic [NUM_NODES-1:0] stat_bus_req,
  output logic [NUM_NODES-1:0] stat_withdrawn,
  output logic [NUM_NODES-1:0] stat_bus_wait
);

  // mesh wires, per node and direction (N, E, S, W): what the node sends
  logic [3:0] m_valid [NUM_NODES];
  logic [3:0] m_ready [NUM_NODES];
  flit_t      m_flit  [NUM_NODES][4];
  // what the node receives
  logic [3:0] r_valid [NUM_NODES];
  logic [3:0] r_ready [NUM_NODES];
  flit_t      r_flit  [NUM_NODES][4];

  logic [NUM_NODES-1:0] bus_req, bus_cancel, bus_grant, ib_valid, ib_ready, ob_ready;
  flit_t                ib_flit [NUM_NODES];
  logic                 bus_valid;
  flit_t                bus_flit;

  // Neighbour of node n in direction d, or -1 at the mesh edge.
  function automatic int nbr(int n, int d);
    int x, y;
    x = n % int'(MESH_X);
    y = n / int'(MESH_X);
    case (d)
      0: return (y < int'(MESH_Y) - 1) ? n + int'(MESH_X) : -1;
      1: return (x < int'(MESH_X) - 1) ? n + 1 : -1;
      2: return (y > 0) ? n - int'(MESH_X) : -1;
      default: return (x > 0) ? n - 1 : -1;
    endcase
  endfunction

  for (genvar n = 0; n < NUM_NODES; n++) begin : g_node
    localparam int unsigned NX = n % MESH_X;
    localparam int unsigned NY = n / MESH_X;

    logic  ej_valid, ej_ready;
    flit_t ej_flit;

    // Mesh links: my input d comes from my neighbour in direction d, which
    // sends it on its opposite port (d + 2) % 4.
    for (genvar d = 0; d < 4; d++) begin : g_link
      localparam int NB = nbr(n, d);
      localparam int OD = (d + 2) % 4;
      if (NB >= 0) begin : g_conn
        assign r_valid[n][d]   = m_valid[NB][OD];
        assign r_flit[n][d]    = m_flit[NB][OD];
        assign m_ready[NB][OD] = r_ready[n][d];
      end else begin : g_edge
        assign r_valid[n][d] = 1'b0;
        assign r_flit[n][d]  = '0;
        assign m_ready[n][d] = 1'b1;
      end
    end

    router #(.X(NX), .Y(NY), .BUF_DEPTH(BUF_DEPTH), .CNT_W(CNT_W), .FLAG_BIT(FLAG_BIT)) u_router (
      .clk, .rst_n,
      .in_valid (r_valid[n]), .in_ready (r_ready[n]), .in_flit (r_flit[n]),
      .out_valid(m_valid[n]), .out_ready(m_ready[n]), .out_flit(m_flit[n]),
      .inj_valid(inj_valid[n]), .inj_ready(inj_ready[n]), .inj_flit(inj_flit[n]),
      .ej_valid, .ej_ready, .ej_flit,
      .bus_req(bus_req[n]), .bus_cancel(bus_cancel[n]), .bus_grant(bus_grant[n]),
      .ib_valid(ib_valid[n]), .ib_ready(ib_ready[n]), .ib_flit(ib_flit[n]),
      .stat_withdrawn(stat_withdrawn[n])
    );

    pe_bus_if #(.X(NX), .Y(NY)) u_pe_if (
      .clk, .rst_n,
      .bus_valid, .bus_flit, .ob_ready(ob_ready[n]),
      .ej_valid, .ej_ready, .ej_flit,
      .pe_valid(pe_valid[n]), .pe_ready(pe_ready[n]), .pe_flit(pe_flit[n]),
      .pe_from_bus(pe_from_bus[n]), .stat_bus_wait(stat_bus_wait[n])
    );
  end

  bus_arbiter #(.N(NUM_NODES)) u_arb (
    .clk, .rst_n, .req(bus_req), .cancel(bus_cancel), .grant(bus_grant)
  );

  global_bus #(.N(NUM_NODES)) u_bus (
    .ib_valid, .ib_flit, .grant(bus_grant), .ob_ready, .ib_ready, .bus_valid, .bus_flit
  );

  assign stat_bus_req = bus_req;

endmodule
