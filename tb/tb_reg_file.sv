// tb_reg_file: self-checking testbench of the FPS register file.
// The stimulus and checks are this design's own; the paper gives no test vectors.
// Checks that reset clears all registers, then for many cycles writes random
// data on up to five ports (distinct registers) and reads nine random
// registers combinationally, comparing with a model array.
module tb_reg_file;
  import ggr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [8:0][7:0] raddr;
  fp64_t [8:0]     rdata;
  logic [4:0]      we;
  logic [4:0][7:0] waddr;
  fp64_t [4:0]     wdata;
  fp64_t model [256];
  int checks = 0, failures = 0;

  reg_file dut (.*);

  initial begin
    raddr = '0; we = '0; waddr = '0; wdata = '0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i += 9) begin
      for (int r = 0; r < 9; r++) raddr[r] = 8'(i + r);
      #1;
      for (int r = 0; r < 9; r++) begin checks++; if (rdata[r] !== '0) failures++; end
    end
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      for (int w = 0; w < 5; w++) begin
        we[w] = $urandom[0];
        waddr[w] = 8'(w * 51 + ($urandom % 51));   // disjoint ranges
        wdata[w] = {$urandom, $urandom};
      end
      for (int r = 0; r < 9; r++) raddr[r] = 8'($urandom);
      #1;
      for (int r = 0; r < 9; r++) begin
        checks++;
        if (rdata[r] !== model[raddr[r]]) begin failures++; $display("FAIL read %0d", raddr[r]); end
      end
      @(posedge clk);
      for (int w = 0; w < 5; w++) if (we[w]) model[waddr[w]] = wdata[w];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
