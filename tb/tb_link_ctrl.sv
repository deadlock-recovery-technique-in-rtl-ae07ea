// tb_link_ctrl: checks the link controller's valid/ready register stage.
// A random stream is pushed through with random backpressure; the receiver
// checks order and content against a queue, that `xfer` marks exactly the
// accepted cycles, and that with the receiver always ready a continuous
// stream moves at one flit per cycle after one cycle of latency.
module tb_link_ctrl;
  import noc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, xfer;
  flit_t in_flit, out_flit;
  link_ctrl dut (.*);

  int checks = 0, failures = 0;
  flit_t q[$];
  int n_out = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (xfer != (out_valid && out_ready)) begin failures++; $display("xfer wrong"); end
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || out_flit != q[0]) begin failures++; $display("data mismatch"); end
      else void'(q.pop_front());
      n_out++;
    end
    if (in_valid && in_ready) q.push_back(in_flit);
  end

  initial begin
    in_valid = 0; in_flit = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random phase
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = ($urandom_range(3) != 0);
        in_flit  = flit_t'({$urandom, $urandom});
      end
      out_ready = ($urandom_range(2) != 0);
    end
    // throughput phase: ready always, a 50-flit continuous stream
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    begin
      int start, first, last;
      start = n_out;
      for (int k = 0; k < 50; k++) begin
        in_valid = 1; in_flit = flit_t'({$urandom, $urandom});
        @(posedge clk);
        checks++;
        if (!in_ready) begin failures++; $display("stall at full throughput"); end
        @(negedge clk);
      end
      in_valid = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (n_out - start != 50) begin failures++; $display("throughput: %0d of 50", n_out - start); end
    end
    checks++;
    if (q.size() != 0) begin failures++; $display("flits lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
