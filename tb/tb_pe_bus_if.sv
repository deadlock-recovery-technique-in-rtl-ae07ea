// tb_pe_bus_if: checks the PE receive interface of tile (2,1).
// The bus carries random messages of 1 to 6 flits, about half of them for
// this tile, each flit crossing only when the interface's OB can take it (as
// the global bus does). The router's ejection channel brings random messages
// for this tile. The PE side accepts with random backpressure. The checks:
// only this tile's messages are delivered, each whole and never interleaved
// with another, the source flag stays constant within a message, all
// messages arrive in order per source; a router header is never delivered
// while a bus header for this tile was already waiting in the OB (bus first
// on a tie); and a bus header that arrives while a router message is being
// received waits for that message's tail (both situations must occur).
module tb_pe_bus_if;
  import noc_pkg::*;
  localparam int X = 2, Y = 1, MSGS = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bus_valid, ob_ready, ej_valid, ej_ready, pe_valid, pe_ready, pe_from_bus, stat_bus_wait;
  flit_t bus_flit, ej_flit, pe_flit;
  pe_bus_if #(.X(X), .Y(Y)) dut (.*);

  int checks = 0, failures = 0;
  flit_t bus_q[$], ej_q[$];
  flit_t exp_bus[$], exp_ej[$];     // this tile's flits, in order per source
  int pending_bus_hdr = 0;          // bus headers for this tile in the OB, not yet delivered
  bit in_msg = 0; logic msg_bus = 0;
  int n_ties = 0, n_waits = 0, n_bus_msgs = 0, n_ej_msgs = 0;
  logic wait_q = 0;

  task automatic make_msg(bit to_bus, bit mine, int tag);
    int len; len = int'($urandom_range(6, 1));
    for (int k = 0; k < len; k++) begin
      flit_t f;
      f.ftype = (len == 1) ? FT_HEADTAIL : (k == 0) ? FT_HEAD : (k == len - 1) ? FT_TAIL : FT_BODY;
      f.dst_x = mine ? COORD_W'(X) : COORD_W'(X + 1);
      f.dst_y = COORD_W'(Y);
      f.src_x = COORD_W'(to_bus); f.src_y = '0;
      f.data  = {16'(tag), 16'(k)};
      if (to_bus) begin bus_q.push_back(f); if (mine) exp_bus.push_back(f); end
      else begin ej_q.push_back(f); exp_ej.push_back(f); end
    end
  endtask

  // stimulus at the falling edge, after the DUT's ready signals have settled
  always @(negedge clk) if (rst_n) begin
    pe_ready = ($urandom_range(4) != 0);
    ej_valid = ej_q.size() != 0 && ($urandom_range(5) != 0 || ej_valid);
    ej_flit  = (ej_q.size() != 0) ? ej_q[0] : '0;
    #1;
    bus_valid = bus_q.size() != 0 && ob_ready && ($urandom_range(3) != 0);
    bus_flit  = (bus_q.size() != 0) ? bus_q[0] : '0;
  end

  always @(posedge clk) if (rst_n) begin
    wait_q <= stat_bus_wait;
    if (stat_bus_wait && !wait_q) n_waits++;
    if (pe_valid && pe_ready) begin
      checks++;
      if (is_head(pe_flit.ftype)) begin
        if (in_msg) begin failures++; $display("header inside a message"); end
        if (!pe_from_bus && pending_bus_hdr > 0) begin failures++; $display("router header overtook a waiting bus header"); end
        if (pe_from_bus) pending_bus_hdr--;
        in_msg = 1; msg_bus = pe_from_bus;
      end else if (!in_msg || pe_from_bus != msg_bus) begin
        failures++; $display("flit outside its message / source changed");
      end
      if (pe_flit.dst_x != COORD_W'(X)) begin failures++; $display("foreign flit delivered"); end
      if (pe_from_bus) begin
        if (exp_bus.size() == 0 || pe_flit != exp_bus[0]) begin failures++; $display("bus flit wrong"); end
        else void'(exp_bus.pop_front());
      end else begin
        if (exp_ej.size() == 0 || pe_flit != exp_ej[0]) begin failures++; $display("router flit wrong"); end
        else void'(exp_ej.pop_front());
      end
      if (is_tail(pe_flit.ftype)) begin in_msg = 0; if (msg_bus) n_bus_msgs++; else n_ej_msgs++; end
    end
    // a tie: router header offered while a bus header is already waiting, no message open
    if (!in_msg && pending_bus_hdr > 0 && ej_valid && is_head(ej_flit.ftype)) n_ties++;
    if (ej_valid && ej_ready) void'(ej_q.pop_front());
    if (bus_valid) begin
      if (!ob_ready) begin failures++; $display("test drove the bus into a busy OB"); end
      if (is_head(bus_flit.ftype) && bus_flit.dst_x == COORD_W'(X)) pending_bus_hdr++;
      void'(bus_q.pop_front());
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus_valid = 0; bus_flit = '0; ej_valid = 0; ej_flit = '0; pe_ready = 0;
    for (int m = 0; m < MSGS; m++) begin
      make_msg(1'b1, 1'($urandom_range(1)), m);
      make_msg(1'b0, 1'b1, m);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (exp_bus.size() != 0 || exp_ej.size() != 0 || bus_q.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (n_ties == 0 || n_waits == 0) begin failures++; $display("tie or wait not covered"); end
    $display("bus messages %0d, router messages %0d, ties %0d, bus waits %0d", n_bus_msgs, n_ej_msgs, n_ties, n_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
