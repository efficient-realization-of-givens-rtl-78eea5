// tb_local_mem: self-checking testbench of the two-port Local Memory.
// The stimulus and checks are this design's own; the paper gives no test vectors.
// Each cycle both ports may write (distinct halves of the address space) and
// both read random addresses; reads are compared with a model.
module tb_local_mem;
  import ggr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we_a = 0, we_b = 0;
  logic [13:0] waddr_a = '0, raddr_a = '0, waddr_b = '0, raddr_b = '0;
  fp64_t wdata_a = '0, wdata_b = '0, rdata_a, rdata_b;
  fp64_t model [int];
  int checks = 0, failures = 0;

  local_mem dut (.*);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we_a = $urandom[0]; waddr_a = {1'b0, 13'($urandom % 64)}; wdata_a = {$urandom, $urandom};
      we_b = $urandom[0]; waddr_b = {1'b1, 13'($urandom % 64)}; wdata_b = {$urandom, $urandom};
      raddr_a = {$urandom[0], 13'($urandom % 64)};
      raddr_b = {$urandom[0], 13'($urandom % 64)};
      #1;
      if (model.exists(int'(raddr_a))) begin checks++; if (rdata_a !== model[int'(raddr_a)]) failures++; end
      if (model.exists(int'(raddr_b))) begin checks++; if (rdata_b !== model[int'(raddr_b)]) failures++; end
      @(posedge clk);
      if (we_a) model[int'(waddr_a)] = wdata_a;
      if (we_b) model[int'(waddr_b)] = wdata_b;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
