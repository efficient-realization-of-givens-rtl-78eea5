// tb_instr_mem: self-checking testbench of the instruction memory.
// The stimulus and checks are this design's own; the paper gives no test vectors.
// Writes random words at random addresses through the host port (one per
// clock), then reads every written address back combinationally.
module tb_instr_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [11:0] waddr = '0, raddr = '0;
  logic [83:0] wdata = '0, rdata;
  logic [83:0] model [int];
  int checks = 0, failures = 0;

  instr_mem dut (.*);

  initial begin
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      we = 1; waddr = 12'($urandom); wdata = {20'($urandom), $urandom, $urandom};
      model[int'(waddr)] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (model[a]) begin
      raddr = 12'(a); #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
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
