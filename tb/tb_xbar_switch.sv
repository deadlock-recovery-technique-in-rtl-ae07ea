// tb_xbar_switch: random flits and selects; every output must carry the flit
// of the input its select names.
module tb_xbar_switch;
  import noc_pkg::*;
  flit_t             in_flit  [NUM_PORTS];
  logic [PORT_W-1:0] sel      [NUM_PORTS];
  flit_t             out_flit [NUM_PORTS];
  xbar_switch dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int k = 0; k < 2000; k++) begin
      for (int i = 0; i < NUM_PORTS; i++) begin
        in_flit[i] = flit_t'({$urandom, $urandom});
        sel[i]     = PORT_W'($urandom_range(NUM_PORTS - 1));
      end
      #1;
      for (int o = 0; o < NUM_PORTS; o++) begin
        checks++;
        if (out_flit[o] !== in_flit[sel[o]]) begin failures++; $display("output %0d wrong", o); end
      end
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
