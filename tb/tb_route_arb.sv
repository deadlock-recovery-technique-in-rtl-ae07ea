// tb_route_arb: checks routing and arbitration of a router at (1,1).
// The testbench models the five input buffers and sends 60 random packets of
// 1 to 6 flits into each (destinations anywhere in the 4x4 mesh), while the
// five outputs accept flits with random backpressure. It checks that:
// every flit leaving an output belongs to a packet whose header was switched
// to that output, packets are never interleaved on an output (wormhole
// reservation), each packet leaves through one of its productive minimal
// directions or Local at its destination, each flit is popped from its input
// exactly when it goes out, and every packet is delivered whole and in order.
// A directed check at the start shows that two headers wanting the same single
// direction are served one after the other, and that a header allocated in
// cycle t appears on its output in cycle t+1.
module tb_route_arb;
  import noc_pkg::*;
  localparam int X = 1, Y = 1, PKTS = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NUM_PORTS-1:0] head_valid, in_bus, out_ready, pop, out_valid, waiting, out_reserved, routed;
  flit_t                head_flit [NUM_PORTS];
  logic [PORT_W-1:0]    out_sel   [NUM_PORTS];
  logic [NUM_PORTS-1:0] req_mask  [NUM_PORTS];
  route_arb #(.X(X), .Y(Y)) dut (.*);

  int checks = 0, failures = 0;
  flit_t inq [NUM_PORTS][$];
  int    cur_in  [NUM_PORTS];      // input feeding each output's current packet, -1 none
  int    delivered = 0, total = 0;
  int    exp_idx [NUM_PORTS];

  always @(negedge clk) begin
    for (int i = 0; i < NUM_PORTS; i++) begin
      head_valid[i] = inq[i].size() != 0;
      head_flit[i]  = (inq[i].size() != 0) ? inq[i][0] : '0;
    end
  end

  function automatic logic [NUM_PORTS-1:0] allowed(flit_t f);
    logic [NUM_PORTS-1:0] m = '0;
    if (f.dst_x > 1) m[P_E] = 1;
    if (f.dst_x < 1) m[P_W] = 1;
    if (f.dst_y > 1) m[P_N] = 1;
    if (f.dst_y < 1) m[P_S] = 1;
    if (f.dst_x == 1 && f.dst_y == 1) m[P_L] = 1;
    return m;
  endfunction

  always @(posedge clk) if (rst_n) begin
    logic [NUM_PORTS-1:0] exp_pop;
    exp_pop = '0;
    for (int o = 0; o < NUM_PORTS; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        automatic int i = int'(out_sel[o]);
        automatic flit_t f = inq[i][0];
        checks++;
        if (cur_in[o] < 0) begin
          if (!is_head(f.ftype)) begin failures++; $display("output %0d starts without header", o); end
          if (!allowed(f)[o]) begin failures++; $display("output %0d not productive for dst (%0d,%0d)", o, f.dst_x, f.dst_y); end
          cur_in[o] = i;
        end else if (cur_in[o] != i) begin
          failures++; $display("output %0d interleaves inputs %0d and %0d", o, cur_in[o], i);
        end
        if (int'(f.data[7:0]) != exp_idx[i]) begin failures++; $display("input %0d out of order", i); end
        exp_idx[i] = is_tail(f.ftype) ? 0 : exp_idx[i] + 1;
        if (is_tail(f.ftype)) begin cur_in[o] = -1; delivered++; end
        exp_pop[i] = 1;
      end
    end
    checks++;
    if (pop != exp_pop) begin failures++; $display("pop %b expected %b", pop, exp_pop); end
    for (int i = 0; i < NUM_PORTS; i++) if (pop[i]) void'(inq[i].pop_front());
  end

  task automatic add_packet(int i, int len, int dx, int dy);
    for (int k = 0; k < len; k++) begin
      flit_t f;
      f.ftype = (len == 1) ? FT_HEADTAIL : (k == 0) ? FT_HEAD : (k == len - 1) ? FT_TAIL : FT_BODY;
      f.dst_x = COORD_W'(dx); f.dst_y = COORD_W'(dy);
      f.src_x = '0; f.src_y = '0;
      f.data = {16'(i), 8'(total), 8'(k)};
      inq[i].push_back(f);
    end
    total++;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_bus = '0; out_ready = '1;
    for (int o = 0; o < NUM_PORTS; o++) begin cur_in[o] = -1; exp_idx[o] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed: inputs W and S both want only East (dst (3,1)), 3 flits each
    @(posedge clk); #1;
    add_packet(P_W, 3, 3, 1);
    add_packet(P_S, 3, 3, 1);
    @(negedge clk); #1;      // heads presented, not yet allocated
    checks += 2;
    if (waiting != 5'b01100) begin failures++; $display("waiting %b", waiting); end
    if (req_mask[P_W] != 5'b00010) begin failures++; $display("req_mask %b", req_mask[P_W]); end
    @(negedge clk); #1;      // allocation happened at the edge in between
    checks++;
    if (!(out_valid[P_E] && out_reserved[P_E])) begin failures++; $display("no header on E one cycle after allocation"); end
    repeat (12) @(negedge clk);
    checks++;
    if (delivered != 2 || out_reserved != 0) begin failures++; $display("directed: %0d delivered", delivered); end
    // random traffic with backpressure
    for (int n = 0; n < PKTS; n++)
      for (int i = 0; i < NUM_PORTS; i++)
        add_packet(i, int'($urandom_range(6, 1)), int'($urandom_range(3)), int'($urandom_range(3)));
    while (delivered < total) begin
      @(negedge clk);
      for (int o = 0; o < NUM_PORTS; o++) out_ready[o] = ($urandom_range(3) != 0);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (out_reserved != 0 || routed != 0) begin failures++; $display("reservations left"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
