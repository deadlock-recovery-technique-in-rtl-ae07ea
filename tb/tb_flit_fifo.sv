// tb_flit_fifo: checks the flit buffer against a queue model: random writes
// and reads, order and content, in_ready low exactly when DEPTH flits are
// held, out_valid high exactly when the buffer is not empty.
module tb_flit_fifo;
  import noc_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  flit_t in_flit, out_flit;
  flit_fifo #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  flit_t q[$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks += 2;
    if (in_ready != (q.size() < DEPTH)) begin failures++; $display("in_ready %0d with %0d held", in_ready, q.size()); end
    if (out_valid != (q.size() != 0)) begin failures++; $display("out_valid wrong"); end
    if (out_valid && out_ready) begin
      checks++;
      if (out_flit != q[0]) begin failures++; $display("data mismatch"); end
      void'(q.pop_front());
    end
    if (in_valid && in_ready) q.push_back(in_flit);
  end

  initial begin
    in_valid = 0; in_flit = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      // phases biased towards filling and towards draining
      in_valid  = ($urandom_range(9) < (((c / 500) % 2 == 1) ? 3 : 8));
      out_ready = ($urandom_range(9) < (((c / 500) % 2 == 1) ? 8 : 3));
      in_flit   = flit_t'({$urandom, $urandom});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
