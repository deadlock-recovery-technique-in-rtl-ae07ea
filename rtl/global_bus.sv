// global_bus: the shared bus beside the mesh, used as the deadlock escape path.
//
// The router holding the grant drives the bus from its one-flit input buffer
// (IB); every processing element watches the bus through its own one-flit
// output buffer (OB). A flit crosses the bus only in a cycle in which every OB
// can take it, so the broadcast never loses a flit; bus_valid is high exactly
// in those cycles, and ib_ready tells the granted router that its IB flit has
// left. The paper gives the bus's role and the one-flit IB/OB sizes; the
// all-OBs-ready broadcast rule is this design's. A single unsegmented bus.
// Purely combinational.
module global_bus
  import noc_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0] ib_valid,
  input  flit_t        ib_flit [N],
  input  logic [N-1:0] grant,
  input  logic [N-1:0] ob_ready,
  output logic [N-1:0] ib_ready,
  output logic         bus_valid,
  output flit_t        bus_flit
);

  logic all_ready;

  always_comb begin
    all_ready = &ob_ready;
    bus_flit  = '0;
    for (int i = 0; i < int'(N); i++) if (grant[i]) bus_flit = ib_flit[i];
    bus_valid = ((ib_valid & grant) != '0) && all_ready;
    ib_ready  = all_ready ? grant : '0;
  end

endmodule
