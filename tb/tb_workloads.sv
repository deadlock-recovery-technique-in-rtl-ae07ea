// tb_workloads: the three non-uniform traffic patterns the design is
// evaluated under, on the full 4x4 network at default parameters.
//
// Patterns (node n = 4*y + x, 4-bit node number b3..b0):
//   transpose     (x, y) -> (3-y, 3-x)
//   bit reversal  b3 b2 b1 b0 -> b0 b1 b2 b3
//   butterfly     b3 b2 b1 b0 -> b0 b2 b1 b3
// Tiles whose pattern destination is themselves do not inject. For each
// pattern the packet injection rate is swept over 0.01 ... 0.07
// packets/cycle/tile: in every cycle of a GEN-cycle window each tile creates
// a packet of 4 to 10 flits with that probability and queues it at its
// source; the network then drains. Latency is counted from packet creation
// to the arrival of its tail (source queueing included); throughput is
// flits received per cycle per tile over the window. Every flit is checked
// for integrity, order and destination, and every packet must arrive exactly
// once. The table printed at the end gives, per pattern and rate, the
// average latency, throughput and how many packets escaped over the bus.
module tb_workloads;
  import noc_pkg::*;

  localparam int GEN   = 2000;
  localparam int DRAIN = 60000;
  localparam int NRATE = 7;
  localparam int RATE_PPM [NRATE] = '{10000, 20000, 30000, 40000, 50000, 60000, 70000};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NUM_NODES-1:0] inj_valid, inj_ready, pe_valid, pe_ready, pe_from_bus;
  logic [NUM_NODES-1:0] stat_bus_req, stat_withdrawn, stat_bus_wait;
  flit_t                inj_flit [NUM_NODES];
  flit_t                pe_flit  [NUM_NODES];

  noc_top dut (.*);

  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  int pattern = 0, rate_ppm = 0;
  logic generating = 1'b0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cycle, msg);
  endtask

  function automatic int dest_of(int src, int pat);
    case (pat)
      0: return (3 - src % 4) * 4 + (3 - src / 4);
      1: return int'({src[0], src[1], src[2], src[3]});
      default: return int'({src[0], src[2], src[1], src[3]});
    endcase
  endfunction

  // ------------------------------------------------------------ generators
  int          seq_next [NUM_NODES];
  int          pend_len [NUM_NODES][$];
  int          pend_seq [NUM_NODES][$];
  int unsigned born     [NUM_NODES][4096];
  int          gen_idx  [NUM_NODES];
  int          created = 0;

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
        // packet creation
        if (generating && dest_of(n, pattern) != n && $urandom_range(999999) < rate_ppm) begin
          pend_len[n].push_back(int'($urandom_range(10, 4)));
          pend_seq[n].push_back(seq_next[n] % 4096);
          born[n][seq_next[n] % 4096] = cycle;
          seq_next[n]++;
          created++;
        end
        // injection, one flit per cycle when the router takes it
        if (inj_valid[n] && inj_ready[n]) begin
          if (gen_idx[n] == pend_len[n][0] - 1) begin
            void'(pend_len[n].pop_front());
            void'(pend_seq[n].pop_front());
            gen_idx[n] = 0;
          end else begin
            gen_idx[n]++;
          end
        end
        if (pend_len[n].size() != 0) begin
          inj_valid[n] <= 1'b1;
          inj_flit[n]  <= make_flit(n, pend_seq[n][0], pend_len[n][0], gen_idx[n], dest_of(n, pattern));
        end else begin
          inj_valid[n] <= 1'b0;
        end
      end
    end
  end

  // ------------------------------------------------------------- receivers
  logic got [NUM_NODES][4096];
  int  rx_active [NUM_NODES];
  int  rx_src    [NUM_NODES];
  int  rx_seq    [NUM_NODES];
  int  rx_len    [NUM_NODES];
  int  rx_idx    [NUM_NODES];
  int  received = 0, rx_flits_win = 0, bus_pkts = 0;
  longint lat_sum = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      cycle <= cycle + 1;
      for (int n = 0; n < NUM_NODES; n++) pe_ready[n] <= 1'b1;
      for (int n = 0; n < NUM_NODES; n++) begin
        if (pe_valid[n] && pe_ready[n]) begin
          automatic flit_t f = pe_flit[n];
          automatic int src = int'(f.data[31:28]);
          automatic int seq = int'(f.data[27:16]);
          automatic int len = int'(f.data[15:12]);
          automatic int idx = int'(f.data[11:8]);
          checks++;
          if (generating) rx_flits_win++;
          if (f.dst_x != COORD_W'(n % 4) || f.dst_y != COORD_W'(n / 4) || dest_of(src, pattern) != n)
            fail($sformatf("node %0d got a flit of %0d meant for (%0d,%0d)", n, src, f.dst_x, f.dst_y));
          if (rx_active[n] == 0) begin
            if (f.ftype != FT_HEAD || idx != 0) fail($sformatf("node %0d expected a header", n));
            rx_active[n] = 1; rx_src[n] = src; rx_seq[n] = seq; rx_len[n] = len; rx_idx[n] = 0;
          end else begin
            rx_idx[n]++;
            if (src != rx_src[n] || seq != rx_seq[n] || idx != rx_idx[n])
              fail($sformatf("node %0d interleaved message", n));
          end
          if (rx_idx[n] == rx_len[n] - 1) begin
            if (f.ftype != FT_TAIL) fail("missing tail");
            if (got[src][seq]) fail("duplicate message");
            got[src][seq] = 1'b1;
            rx_active[n] = 0;
            received++;
            lat_sum += longint'(cycle) - longint'(born[src][seq]);
            if (pe_from_bus[n]) bus_pkts++;
          end
        end
      end
    end
  end

  initial begin
    automatic string names [3] = '{"transpose", "bit reversal", "butterfly"};
    inj_valid = '0;
    pe_ready  = '0;
    for (int n = 0; n < NUM_NODES; n++) begin
      seq_next[n] = 0; gen_idx[n] = 0; inj_flit[n] = '0; rx_active[n] = 0;
      rx_src[n] = 0; rx_seq[n] = 0; rx_len[n] = 0; rx_idx[n] = 0;
      for (int s = 0; s < 4096; s++) begin got[n][s] = 1'b0; born[n][s] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    $display("pattern       rate   packets  avg latency  throughput  via bus");
    for (int p = 0; p < 3; p++) begin
      for (int r = 0; r < NRATE; r++) begin
        automatic int unsigned t0;
        created = 0; received = 0; rx_flits_win = 0; bus_pkts = 0; lat_sum = 0;
        @(negedge clk);
        pattern = p; rate_ppm = RATE_PPM[r];
        generating = 1'b1;
        repeat (GEN) @(negedge clk);
        generating = 1'b0;
        t0 = cycle;
        while (received < created && cycle - t0 < DRAIN) @(negedge clk);
        checks++;
        if (received != created) fail($sformatf("%s at %0d ppm: %0d of %0d packets delivered", names[p], RATE_PPM[r], received, created));
        // packets of this run must not be left inside the network
        for (int n = 0; n < NUM_NODES; n++) begin
          checks++;
          if (pend_len[n].size() != 0 || rx_active[n] != 0) fail("network not empty after drain");
        end
        $display("%-12s  %4.2f   %6d  %9.1f  %9.3f   %6d", names[p], real'(RATE_PPM[r]) / 1.0e6,
                 received, (received != 0) ? real'(lat_sum) / real'(received) : 0.0,
                 real'(rx_flits_win) / real'(GEN) / 16.0, bus_pkts);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3 * NRATE * (GEN + DRAIN) + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
