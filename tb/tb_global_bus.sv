// tb_global_bus: checks the broadcast bus on random inputs. The bus must
// carry the granted router's IB flit, be valid only when that IB holds a flit
// and every PE output buffer can take it, and tell only the granted router
// that its flit has gone.
module tb_global_bus;
  import noc_pkg::*;
  localparam int N = 16;
  logic [N-1:0] ib_valid, grant, ob_ready, ib_ready;
  flit_t ib_flit [N];
  logic bus_valid;
  flit_t bus_flit;
  global_bus #(.N(N)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int k = 0; k < 3000; k++) begin
      int g;
      g = int'($urandom_range(N));           // N means: nobody granted
      grant = (g == N) ? '0 : N'(1) << g;
      ib_valid = N'($urandom);
      ob_ready = (k % 3 == 0) ? N'($urandom) : '1;
      for (int i = 0; i < N; i++) ib_flit[i] = flit_t'({$urandom, $urandom});
      #1;
      checks += 2;
      begin
        logic ev;
        ev = (g != N) && ib_valid[g] && (ob_ready == '1);
        if (bus_valid !== ev) begin failures++; $display("bus_valid %b expected %b", bus_valid, ev); end
        if (ib_ready !== ((g != N && ob_ready == '1) ? grant : '0)) begin failures++; $display("ib_ready wrong"); end
        if (g != N) begin
          checks++;
          if (bus_flit !== ib_flit[g]) begin failures++; $display("bus carries the wrong IB"); end
        end
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
