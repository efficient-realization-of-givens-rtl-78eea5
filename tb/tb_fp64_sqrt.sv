// tb_fp64_sqrt: self-checking testbench of the iterative FP64 sqrt unit.
// The stimulus and checks are this design's own; the paper gives no test vectors.
// Random normal operands (and a few special values) are applied one at a time;
// each result is compared bit for bit with the simulator's own IEEE double
// arithmetic, and the time from 'start' to 'done' is checked against the
// documented 56 cycles.
module tb_fp64_sqrt;
  import ggr_pkg::*;
  import tb_fp_util::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  fp64_t a, b, y;
  int checks = 0, failures = 0;

  fp64_sqrt dut (.clk(clk), .rst_n(rst_n), .start(start), .a(a), .busy(busy), .done(done), .y(y));

  task automatic one(fp64_t ea, fp64_t eb);
    fp64_t e; int lat;
    a = ea; b = eb;
    e = $realtobits($sqrt($bitstoreal(a)));
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (y !== e || lat != 56) begin
      failures++;
      $display("FAIL a=%h b=%h y=%h exp=%h lat=%0d", ea, eb, y, e, lat);
    end
  endtask

  initial begin
    a = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 400; k++) begin
      fp64_t x1, x2;
      a = rand_pos_fp64(300); b = 0;
      x1 = a; x2 = b;
      one(x1, x2);
    end
    one(FP64_ONE, FP64_ONE);
    one(64'h4010_0000_0000_0000, 64'h4000_0000_0000_0000);   // 4 and 2
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
