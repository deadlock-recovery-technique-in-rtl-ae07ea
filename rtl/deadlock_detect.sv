// deadlock_detect: deadlock presumption rule of a router.
//
// An input is presumed deadlocked when its header flit, at the head of the
// input buffer, cannot be routed because every output it requests is reserved
// by another message, and the inactivity flag of every one of those outputs is
// set (the channel has carried no flit for the threshold time). This is the
// rule the paper states; the module is purely combinational.
// Inputs per router input i: waiting[i] (unrouted header at head) and
// req_mask[i] (requested outputs); per output o: out_reserved[o], out_flag[o].
module deadlock_detect
  import noc_pkg::*;
(
  input  logic [NUM_PORTS-1:0] waiting,
  input  logic [NUM_PORTS-1:0] req_mask [NUM_PORTS],
  input  logic [NUM_PORTS-1:0] out_reserved,
  input  logic [NUM_PORTS-1:0] out_flag,
  output logic [NUM_PORTS-1:0] deadlock
);

  always_comb begin
    for (int i = 0; i < NUM_PORTS; i++) begin
      deadlock[i] = waiting[i]
                 && (req_mask[i] != '0)
                 && ((req_mask[i] & ~out_reserved) == '0)
                 && ((req_mask[i] & ~out_flag) == '0);
    end
  end

endmodule
