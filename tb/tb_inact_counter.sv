// tb_inact_counter: checks the inactivity counter and its flag. After a
// transfer the count restarts from zero; the flag must rise exactly 2**FLAG_BIT
// idle cycles after the last transfer, stay up while the channel stays idle,
// and drop at the next transfer. Run at the default width and flag bit.
module tb_inact_counter;
  localparam int CNT_W = 6, FLAG_BIT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic xfer, flag;
  logic [CNT_W-1:0] count;
  inact_counter #(.CNT_W(CNT_W), .FLAG_BIT(FLAG_BIT)) dut (.*);

  int checks = 0, failures = 0;
  int idle = 0;   // model: idle cycles since last transfer (or reset)

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks += 2;
    if (flag != (idle >= (1 << FLAG_BIT))) begin failures++; $display("flag %0d after %0d idle cycles", flag, idle); end
    if (idle < (1 << FLAG_BIT) && count != CNT_W'(idle)) begin failures++; $display("count %0d, expected %0d", count, idle); end
    idle = xfer ? 0 : idle + 1;
  end

  initial begin
    xfer = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      // bursts of activity separated by idle gaps of 0 to 80 cycles
      if ($urandom_range(99) < 3) begin
        xfer = 1;
      end else if (xfer && $urandom_range(1) == 0) begin
        xfer = 1;
      end else begin
        xfer = 0;
      end
    end
    // one long idle stretch
    @(negedge clk); xfer = 1; @(negedge clk); xfer = 0;
    repeat (200) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
