// tb_deadlock_detect: checks the deadlock presumption rule on random and
// directed inputs. Expected value, worked out output by output: a waiting
// header is presumed deadlocked when it requests at least one output and,
// for each output it requests, that output is reserved and its inactivity
// flag is set.
module tb_deadlock_detect;
  import noc_pkg::*;
  logic [NUM_PORTS-1:0] waiting, out_reserved, out_flag, deadlock;
  logic [NUM_PORTS-1:0] req_mask [NUM_PORTS];
  deadlock_detect dut (.*);

  int checks = 0, failures = 0;

  task automatic check();
    #1;
    for (int i = 0; i < NUM_PORTS; i++) begin
      logic exp;
      exp = waiting[i];
      if (req_mask[i] == 0) exp = 0;
      for (int o = 0; o < NUM_PORTS; o++)
        if (req_mask[i][o] && !(out_reserved[o] && out_flag[o])) exp = 0;
      checks++;
      if (deadlock[i] !== exp) begin
        failures++;
        $display("input %0d: waiting %b req %b res %b flag %b -> %b", i, waiting[i], req_mask[i], out_reserved, out_flag, deadlock[i]);
      end
    end
  endtask

  initial begin
    // directed: header requesting E and N, both reserved, only E flagged
    waiting = 5'b00001; out_reserved = 5'b00011; out_flag = 5'b00010;
    for (int i = 0; i < NUM_PORTS; i++) req_mask[i] = 5'b00011;
    check();
    out_flag = 5'b00011; check();          // now both flagged: deadlock
    out_reserved = 5'b00010; check();      // N free: no deadlock
    for (int k = 0; k < 3000; k++) begin
      waiting = 5'($urandom); out_reserved = 5'($urandom | $urandom); out_flag = 5'($urandom | $urandom);
      for (int i = 0; i < NUM_PORTS; i++) req_mask[i] = 5'(1 << $urandom_range(4)) | (($urandom_range(1) == 1) ? 5'(1 << $urandom_range(3)) : 5'b0);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
