// tb_bus_arbiter: checks the first-come first-served bus arbiter against a
// queue model. Sixteen simulated routers follow the protocol at random: an
// idle router may request; a queued router may cancel at any time (a waiting
// header that routed normally), and the granted router cancels after a random
// number of cycles on the bus. The grant must always be the one-hot number at
// the head of the model queue, appear the cycle after a request reaches an
// empty queue, and move to the next router the cycle after the head cancels.
// Same-cycle requests are queued in router-number order.
module tb_bus_arbiter;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req, cancel, grant;
  bus_arbiter #(.N(N)) dut (.*);

  int checks = 0, failures = 0, n_mid_cancel = 0, n_grants = 0;
  int model[$];
  logic [N-1:0] queued = '0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check the grant, then update the model with this cycle's req/cancel
  always @(posedge clk) if (rst_n) begin
    logic [N-1:0] exp;
    exp = '0;
    if (model.size() != 0) exp[model[0]] = 1'b1;
    checks++;
    if (grant != exp) begin failures++; $display("grant %h expected %h", grant, exp); end
    for (int k = model.size() - 1; k >= 0; k--)
      if (cancel[model[k]]) begin
        if (k != 0) n_mid_cancel++;
        model.delete(k);
      end
    for (int i = 0; i < N; i++) if (req[i]) model.push_back(i);
    queued = (queued & ~cancel) | req;
    if (exp != 0 && cancel == exp) n_grants++;
  end

  // protocol-following routers
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      req[i] = 0; cancel[i] = 0;
      if (!queued[i]) req[i] = ($urandom_range(30) == 0);
      else if (grant[i]) cancel[i] = ($urandom_range(6) == 0);
      else cancel[i] = ($urandom_range(80) == 0);
    end
  end

  initial begin
    req = '0; cancel = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (5000) @(posedge clk);
    checks++;
    if (n_mid_cancel == 0 || n_grants == 0) begin failures++; $display("scenario not covered"); end
    $display("grants used %0d, cancels from the middle of the queue %0d", n_grants, n_mid_cancel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
