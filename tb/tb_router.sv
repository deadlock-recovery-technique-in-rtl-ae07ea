// tb_router: checks one router at tile (1,1) with its mesh neighbours,
// PE and bus arbiter played by the testbench, at the default buffer depth
// and a 32-cycle inactivity threshold.
//  1. Normal routing: a packet injected by the PE for (3,1) leaves on East,
//     a packet arriving from West for (1,1) leaves on the ejection channel.
//  2. Deadlock detection and bus escape: East is blocked downstream while
//     packet A (from West, for (3,1)) holds it; packet B (from South, also
//     only East) then waits. The router must request the bus (BR) exactly
//     when East has been idle for 32 cycles, not earlier. After the grant it
//     must send B whole through its bus input buffer and pulse the
//     cancellation as the tail leaves.
//  3. Withdrawal: packet C waits behind A the same way and requests the bus;
//     no grant is given, East is unblocked, C routes normally and the router
//     must cancel its request.
module tb_router;
  import noc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] in_valid, in_ready, out_valid, out_ready;
  flit_t      in_flit [4];
  flit_t      out_flit [4];
  logic inj_valid, inj_ready, ej_valid, ej_ready, bus_req, bus_cancel, bus_grant, ib_valid, ib_ready, stat_withdrawn;
  flit_t inj_flit, ej_flit, ib_flit;
  router #(.X(1), .Y(1)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  flit_t src_q [5][$];             // per input: N, E, S, W, injection
  flit_t got_e[$], got_ej[$], got_bus[$];
  int last_e_xfer = 0, req_cycle = -1, n_req = 0, n_cancel = 0, cancel_cycle = -1;


  // sources: presented from the queues at each falling edge
  always @(negedge clk) begin
    for (int d = 0; d < 4; d++) begin
      in_valid[d] = src_q[d].size() != 0;
      in_flit[d]  = (src_q[d].size() != 0) ? src_q[d][0] : '0;
    end
    inj_valid = src_q[4].size() != 0;
    inj_flit  = (src_q[4].size() != 0) ? src_q[4][0] : '0;
  end
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < 4; d++) if (in_valid[d] && in_ready[d]) void'(src_q[d].pop_front());
    if (inj_valid && inj_ready) void'(src_q[4].pop_front());
    if (out_valid[P_E] && out_ready[P_E]) begin got_e.push_back(out_flit[P_E]); last_e_xfer = cycle; end
    if (ej_valid && ej_ready) got_ej.push_back(ej_flit);
    if (ib_valid && ib_ready) got_bus.push_back(ib_flit);
    if (bus_req) begin n_req++; req_cycle = cycle; end
    if (bus_cancel) begin n_cancel++; cancel_cycle = cycle; end
    for (int d = 0; d < 4; d++) if (d != P_E && out_valid[d]) begin failures++; $display("flit on wrong output %0d", d); end
    cycle++;
  end

  task automatic packet(int q, int len, int dx, int dy, int tag);
    for (int k = 0; k < len; k++) begin
      flit_t f;
      f.ftype = (k == 0) ? FT_HEAD : (k == len - 1) ? FT_TAIL : FT_BODY;
      f.dst_x = COORD_W'(dx); f.dst_y = COORD_W'(dy); f.src_x = '0; f.src_y = '0;
      f.data = {8'(tag), 16'd0, 8'(k)};
      src_q[q].push_back(f);
    end
  endtask

  function automatic logic is_packet(flit_t q[$], int first, int len, int tag);
    if (q.size() < first + len) return 0;
    for (int k = 0; k < len; k++)
      if (q[first + k].data != {8'(tag), 16'd0, 8'(k)}) return 0;
    return is_head(q[first].ftype) && is_tail(q[first + len - 1].ftype);
  endfunction

  task automatic expect_true(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0d: %s", cycle, what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    out_ready = 4'hF; ej_ready = 1; bus_grant = 0; ib_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. normal routing
    packet(4, 5, 3, 1, 1);
    packet(P_W, 4, 1, 1, 2);
    repeat (30) @(posedge clk);
    expect_true(is_packet(got_e, 0, 5, 1), "injected packet not delivered on East");
    expect_true(is_packet(got_ej, 0, 4, 2), "packet from West not ejected");
    expect_true(n_req == 0, "bus request without deadlock");
    // 2. deadlock detection and escape over the bus
    packet(P_W, 10, 3, 1, 3);          // A holds East
    repeat (4) @(posedge clk);
    out_ready[P_E] = 0;                // East blocked downstream
    packet(P_S, 6, 3, 1, 4);           // B needs East too
    wait (n_req == 1 || cycle > 500);
    expect_true(n_req == 1, "no bus request for the blocked header");
    // The counter is cleared by the transfer seen at edge t and reaches 32
    // (flag up) at edge t+32; BR is a flop set at edge t+33 and is seen
    // here, sampling before each edge, at edge t+34.
    expect_true(req_cycle - last_e_xfer == 34, $sformatf("bus request %0d cycles after last East transfer, expected 34", req_cycle - last_e_xfer));
    repeat (5) @(posedge clk);
    expect_true(got_bus.size() == 0, "router used the bus before the grant");
    @(negedge clk) bus_grant = 1;
    wait (n_cancel == 1 || cycle > 1000);
    @(negedge clk) bus_grant = 0;
    expect_true(is_packet(got_bus, 0, 6, 4), "deadlocked packet not sent whole over the bus");
    expect_true(got_bus.size() == 6, "extra flits on the bus");
    expect_true(cancel_cycle >= 0, "no cancellation after the tail");
    // 3. withdrawal: C waits behind A, requests, then routes normally
    packet(P_S, 4, 3, 1, 5);
    wait (n_req == 2 || cycle > 2000);
    expect_true(n_req == 2, "no bus request for the second blocked header");
    repeat (3) @(posedge clk);
    @(negedge clk) out_ready[P_E] = 1;
    wait (n_cancel == 2 || cycle > 3000);
    repeat (2) @(posedge clk);
    expect_true(n_cancel == 2, "request not cancelled when the header routed");
    repeat (40) @(posedge clk);
    expect_true(is_packet(got_e, 5, 10, 3), "packet A incomplete on East");
    expect_true(is_packet(got_e, 15, 4, 5), "packet C not routed normally on East");
    expect_true(got_bus.size() == 6, "withdrawn packet went on the bus");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
