// tb_rdp: self-checking testbench of the Reconfigurable Data Path.
// The stimulus and checks are this design's own; the paper gives no test vectors.
// For every configuration it streams random operands one per clock, computes
// the expected result with the simulator's own double arithmetic in the same
// order as the tree (so results must match bit for bit), and checks that each
// result appears exactly RDP_LATENCY cycles after its operands. It also
// checks cancellation cases (DET2 of equal products gives +0).
module tb_rdp;
  import ggr_pkg::*;
  import tb_fp_util::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we = 1'b0, in_valid = 1'b0;
  rdp_cfg_e cfg = CFG_DOT1, cfg_q;
  fp64_t [3:0] a, b;
  logic [15:0] tag_in, tag_out;
  logic out_valid, busy;
  fp64_t y0, y1;

  rdp #(.TAG_W(16)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // expected-value queue
  fp64_t exp0_q[$], exp1_q[$];
  longint issue_q[$];
  logic [15:0] tag_q[$];

  function automatic void expect_of(rdp_cfg_e c, fp64_t [3:0] aa, fp64_t [3:0] bb,
                                    output fp64_t e0, output fp64_t e1);
    real p0, p1, p2, p3, s0, s1, r;
    p0 = $bitstoreal(aa[0]) * $bitstoreal(bb[0]);
    p1 = $bitstoreal(aa[1]) * $bitstoreal(bb[1]);
    p2 = $bitstoreal(aa[2]) * $bitstoreal(bb[2]);
    p3 = $bitstoreal(aa[3]) * $bitstoreal(bb[3]);
    e1 = '0;
    case (c)
      CFG_DOT1: r = p0;
      CFG_DOT2: r = p0 + p1;
      CFG_DOT3: begin s0 = p0 + p1; r = s0 + p2; end
      CFG_DOT4: begin s0 = p0 + p1; s1 = p2 + p3; r = s0 + s1; end
      CFG_DET2: r = p0 - p1;
      default: begin r = p0 - p1; s1 = p2 - p3; e1 = $realtobits(s1); end
    endcase
    e0 = $realtobits(r);
  endfunction

  // checker
  always @(posedge clk) begin
    if (out_valid) begin
      fp64_t e0, e1; longint ic; logic [15:0] t;
      checks++;
      if (exp0_q.size() == 0) begin
        failures++; $display("FAIL: unexpected output");
      end else begin
        e0 = exp0_q.pop_front(); e1 = exp1_q.pop_front(); ic = issue_q.pop_front(); t = tag_q.pop_front();
        if (y0 !== e0 || (cfg_q == CFG_DET2X2 && y1 !== e1) || tag_out !== t || (cyc - ic) != RDP_LATENCY) begin
          failures++;
          $display("FAIL cfg=%s y0=%h exp=%h y1=%h exp=%h lat=%0d", cfg_q.name(), y0, e0, y1, e1, cyc - ic);
        end
      end
    end
  end

  task automatic run_cfg(rdp_cfg_e c, int n, bit cancel);
    @(negedge clk); cfg = c; cfg_we = 1'b1;
    @(negedge clk); cfg_we = 1'b0;
    for (int k = 0; k < n; k++) begin
      fp64_t e0, e1;
      for (int i = 0; i < 4; i++) begin a[i] = rand_fp64(30); b[i] = rand_fp64(30); end
      if (cancel) begin a[1] = a[0]; b[1] = b[0]; a[3] = b[2]; b[3] = a[2]; end
      tag_in = 16'($urandom);
      expect_of(c, a, b, e0, e1);
      exp0_q.push_back(e0); exp1_q.push_back(e1); tag_q.push_back(tag_in);
      issue_q.push_back(cyc + 0);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      if (($urandom % 4) == 0) @(negedge clk);   // occasional bubble
    end
    while (busy || exp0_q.size() != 0) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    a = '0; b = '0; tag_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_cfg(CFG_DOT1, 200, 0);
    run_cfg(CFG_DOT2, 200, 0);
    run_cfg(CFG_DOT3, 200, 0);
    run_cfg(CFG_DOT4, 200, 0);
    run_cfg(CFG_DET2, 200, 0);
    run_cfg(CFG_DET2X2, 200, 0);
    run_cfg(CFG_DET2X2, 20, 1);
    run_cfg(CFG_DOT2, 20, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
