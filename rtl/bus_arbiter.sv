// bus_arbiter: first-come first-served arbiter of the deadlock-escape bus.
//
// Routers that presume a message deadlocked send a one-cycle request pulse
// (BR). The arbiter keeps the numbers of the requesting routers in a queue in
// arrival order and grants the bus (BG, one-hot, a level) to the router at the
// head of the queue. A router withdraws with a one-cycle cancel pulse, either
// after its message's tail has crossed the bus or because the message found a
// normal route while it waited; the arbiter then removes that router's number
// from wherever it is in the queue, and if it was the head the grant passes to
// the new head. The bus counts as busy from grant to cancel, so the head is
// always the bus owner. Requests arriving in the same cycle are queued in
// router-number order (the paper does not say). The queue holds every router
// at most once, so N entries suffice.
// Timing: a request in cycle t is granted at t+1 at the earliest; a cancel in
// cycle t moves the grant at t+1.
module bus_arbiter #(
  parameter int unsigned N = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic [N-1:0] cancel,
  output logic [N-1:0] grant
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned CW = $clog2(N + 1);

  logic [IW-1:0] q      [N];
  logic [IW-1:0] q_nxt  [N];
  logic [CW-1:0] cnt, cnt_nxt;
  logic [N-1:0]  queued, queued_nxt;

  always_comb begin
    int unsigned c;
    c          = 0;
    queued_nxt = '0;
    for (int k = 0; k < int'(N); k++) q_nxt[k] = '0;
    // keep the entries that were not cancelled, in order
    for (int k = 0; k < int'(N); k++) begin
      if (k < int'(cnt) && !cancel[q[k]]) begin
        q_nxt[c[IW-1:0]]  = q[k];
        queued_nxt[q[k]] = 1'b1;
        c = c + 1;
      end
    end
    // append new requests
    for (int i = 0; i < int'(N); i++) begin
      if (req[i] && !queued_nxt[i] && c < N) begin
        q_nxt[c[IW-1:0]] = IW'(i);
        queued_nxt[i]   = 1'b1;
        c = c + 1;
      end
    end
    cnt_nxt = CW'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      queued <= '0;
      for (int k = 0; k < int'(N); k++) q[k] <= '0;
    end else begin
      cnt    <= cnt_nxt;
      queued <= queued_nxt;
      for (int k = 0; k < int'(N); k++) q[k] <= q_nxt[k];
    end
  end

  always_comb begin
    grant = '0;
    if (cnt != '0) grant[q[0]] = 1'b1;
  end

  // Protocol rules: a router requests only when not queued and cancels only
  // a queued request.
  assert property (@(posedge clk) disable iff (!rst_n) (req & queued) == '0);
  assert property (@(posedge clk) disable iff (!rst_n) (cancel & ~queued) == '0);
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));

endmodule
