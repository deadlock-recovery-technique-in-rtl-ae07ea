// tb_noc_top: end-to-end test of the bus-enhanced 4x4 mesh at its default
// parameters.
//
// Every tile injects PKTS packets of 4 to 10 flits as fast as the network
// accepts them (the network is driven far beyond saturation so that true
// fully adaptive routing runs into deadlocks). Each packet's destination
// follows one of four patterns, picked at random per packet: matrix transpose
// (x, y) -> (3-y, 3-x), bit reversal of the node number, butterfly (swap the
// node number's top and bottom bits) and uniform random; a packet whose
// destination equals its source is sent to a random other tile instead.
// Every flit's payload names its source, sequence number, length and index,
// so each receiver checks that every message arrives whole, in order, at the
// right tile and exactly once, whichever of mesh or bus carried it. The
// receivers accept with random backpressure.
// The test also counts the recovery mechanisms and fails if one never
// happened: bus requests (presumed deadlocks), requests withdrawn because the
// header routed normally, messages delivered over the bus, and bus headers
// that had to wait at a PE behind a message arriving from the router.
module tb_noc_top;
  import noc_pkg::*;

  localparam int PKTS     = 150;
  localparam int WATCHDOG = 100000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NUM_NODES-1:0] inj_valid, inj_ready, pe_valid, pe_ready, pe_from_bus;
  logic [NUM_NODES-1:0] stat_bus_req, stat_withdrawn, stat_bus_wait;
  flit_t                inj_flit [NUM_NODES];
  flit_t                pe_flit  [NUM_NODES];

  noc_top dut (.*);

  int checks = 0, failures = 0;
  int n_req = 0, n_withdrawn = 0, n_bus_pkts = 0, n_bus_wait = 0, n_mesh_pkts = 0;
  int unsigned cycle = 0;
  logic [NUM_NODES-1:0] wait_q = '0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cycle, msg);
  endtask

  function automatic int dest_of(int src, int pat);
    int x, y, d;
    x = src % 4; y = src / 4;
    case (pat)
      0: d = (3 - x) * 4 + (3 - y);                                   // transpose
      1: d = int'({src[0], src[1], src[2], src[3]});                          // bit reversal
      2: d = int'({src[0], src[2], src[1], src[3]});                          // butterfly
      default: d = int'($urandom_range(15));
    endcase
    while (d == src) d = int'($urandom_range(15));
    return d;
  endfunction

  // ------------------------------------------------------------ generators
  int        sent     [NUM_NODES];
  int        gen_idx  [NUM_NODES];
  int        gen_len  [NUM_NODES];
  int        gen_dst  [NUM_NODES];

  function automatic flit_t make_flit(int src, int seq, int len, int idx, int dst);
    flit_t f;
    f.ftype = (idx == 0) ? FT_HEAD : (idx == len - 1) ? FT_TAIL : FT_BODY;
    f.dst_x = COORD_W'(dst % 4);
    f.dst_y = COORD_W'(dst / 4);
    f.src_x = COORD_W'(src % 4);
    f.src_y = COORD_W'(src / 4);
    f.data  = {4'(src), 12'(seq), 4'(len), 4'(idx), 8'h5A};
    return f;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < NUM_NODES; n++) begin
        if (!inj_valid[n] || inj_ready[n]) begin
          if (inj_valid[n] && inj_ready[n] && gen_idx[n] == gen_len[n] - 1) sent[n] <= sent[n] + 1;
          if (inj_valid[n] && inj_ready[n] && gen_idx[n] < gen_len[n] - 1) begin
            gen_idx[n]  <= gen_idx[n] + 1;
            inj_flit[n] <= make_flit(n, sent[n], gen_len[n], gen_idx[n] + 1, gen_dst[n]);
          end else if ((inj_valid[n] ? sent[n] + 1 : sent[n]) < PKTS) begin
            int len, dst, seq;
            seq = inj_valid[n] ? sent[n] + 1 : sent[n];
            len = int'($urandom_range(10, 4));
            dst = dest_of(n, int'($urandom_range(3)));
            gen_len[n]   <= len;
            gen_dst[n]   <= dst;
            gen_idx[n]   <= 0;
            inj_valid[n] <= 1'b1;
            inj_flit[n]  <= make_flit(n, seq, len, 0, dst);
          end else begin
            inj_valid[n] <= 1'b0;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------- receivers
  logic [PKTS-1:0] got [NUM_NODES];
  int  rx_active [NUM_NODES];
  int  rx_src    [NUM_NODES];
  int  rx_seq    [NUM_NODES];
  int  rx_len    [NUM_NODES];
  int  rx_idx    [NUM_NODES];
  logic rx_bus   [NUM_NODES];
  int  received = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < NUM_NODES; n++) pe_ready[n] <= ($urandom_range(9) != 0);
      wait_q <= stat_bus_wait;
      for (int n = 0; n < NUM_NODES; n++) begin
        if (stat_bus_req[n])                  n_req++;
        if (stat_withdrawn[n])                n_withdrawn++;
        if (stat_bus_wait[n] && !wait_q[n])   n_bus_wait++;
        if (pe_valid[n] && pe_ready[n]) begin
          automatic flit_t f = pe_flit[n];
          automatic int src = int'(f.data[31:28]);
          automatic int seq = int'(f.data[27:16]);
          automatic int len = int'(f.data[15:12]);
          automatic int idx = int'(f.data[11:8]);
          checks++;
          if (f.dst_x != COORD_W'(n % 4) || f.dst_y != COORD_W'(n / 4))
            fail($sformatf("node %0d got flit for (%0d,%0d)", n, f.dst_x, f.dst_y));
          if (int'({f.src_y, f.src_x}) != src || f.data[7:0] != 8'h5A)
            fail($sformatf("node %0d corrupted flit %h", n, f));
          if (rx_active[n] == 0) begin
            if (f.ftype != FT_HEAD || idx != 0)
              fail($sformatf("node %0d expected a header, got %h", n, f));
            rx_active[n] = 1; rx_src[n] = src; rx_seq[n] = seq; rx_len[n] = len; rx_idx[n] = 0;
            rx_bus[n] = pe_from_bus[n];
          end else begin
            rx_idx[n]++;
            if (src != rx_src[n] || seq != rx_seq[n] || idx != rx_idx[n] || pe_from_bus[n] != rx_bus[n])
              fail($sformatf("node %0d interleaved message: flit %h", n, f));
          end
          if (rx_idx[n] == rx_len[n] - 1) begin
            if (f.ftype != FT_TAIL) fail($sformatf("node %0d missing tail", n));
            if (got[rx_src[n]][rx_seq[n]]) fail($sformatf("duplicate message %0d.%0d", rx_src[n], rx_seq[n]));
            got[rx_src[n]][rx_seq[n]] = 1'b1;
            rx_active[n] = 0;
            received++;
            if (rx_bus[n]) n_bus_pkts++; else n_mesh_pkts++;
          end
        end
      end
    end
  end

  initial begin
    inj_valid = '0;
    pe_ready  = '0;
    for (int n = 0; n < NUM_NODES; n++) begin
      sent[n] = 0; gen_idx[n] = 0; gen_len[n] = 1; gen_dst[n] = 0; inj_flit[n] = '0;
      got[n] = '0; rx_active[n] = 0; rx_src[n] = 0; rx_seq[n] = 0; rx_len[n] = 0; rx_idx[n] = 0;
      rx_bus[n] = 1'b0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (received < NUM_NODES * PKTS && cycle < WATCHDOG) begin
      @(posedge clk);
      cycle++;
    end
    if (cycle >= WATCHDOG) fail($sformatf("watchdog: %0d of %0d messages received", received, NUM_NODES * PKTS));
    repeat (20) @(posedge clk);
    checks++;
    if (received != NUM_NODES * PKTS) fail("message count");
    for (int n = 0; n < NUM_NODES; n++) begin
      checks++;
      if (sent[n] != PKTS || got[n] != '1) fail($sformatf("source %0d: sent %0d, some not received", n, sent[n]));
    end
    $display("messages %0d (mesh %0d, bus %0d) in %0d cycles", received, n_mesh_pkts, n_bus_pkts, cycle);
    $display("bus requests %0d, withdrawn %0d, bus headers waiting at a PE %0d", n_req, n_withdrawn, n_bus_wait);
    checks += 4;
    if (n_req == 0)       fail("no bus request (deadlock presumption) happened");
    if (n_withdrawn == 0) fail("no bus request was withdrawn");
    if (n_bus_pkts == 0)  fail("no message was delivered over the bus");
    if (n_bus_wait == 0)  fail("no bus header waited behind a router message");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // hard stop in case the clocked loop above is itself stuck
  initial begin
    repeat (WATCHDOG + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
