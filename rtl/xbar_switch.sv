// xbar_switch: the router's switch, a NUM_PORTS x NUM_PORTS crossbar.
//
// Each output takes the head flit of the input named by sel[o]; whether the
// flit is valid is decided by the routing and arbitration unit. The paper only
// names the switch; a multiplexer crossbar is the simplest circuit for it.
// Purely combinational.
module xbar_switch
  import noc_pkg::*;
(
  input  flit_t             in_flit  [NUM_PORTS],
  input  logic [PORT_W-1:0] sel      [NUM_PORTS],
  output flit_t             out_flit [NUM_PORTS]
);

  always_comb begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      out_flit[o] = '0;
      for (int i = 0; i < NUM_PORTS; i++) begin
        if (sel[o] == PORT_W'(i)) out_flit[o] = in_flit[i];
      end
    end
  end

endmodule
