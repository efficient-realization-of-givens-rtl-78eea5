// tb_fpau: self-checking testbench of the Floating Point Arithmetic Unit.
// The stimulus and checks are this design's own; the paper gives no test vectors.
// Issues a mix of RDP operations (after reconfiguring to DET2X2 and DOT4),
// an FDIV and an FSQRT running at the same time, and checks every write-back
// port: data against the simulator's double arithmetic, destination register
// and latency (RDP 3 cycles, FDIV/FSQRT 56 cycles).
module tb_fpau;
  import ggr_pkg::*;
  import tb_fp_util::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0, rdp_issue = 0, div_issue = 0, sqrt_issue = 0;
  rdp_cfg_e cfg = CFG_DOT4, cfg_q;
  fp64_t [3:0] a, b;
  reg_idx_t dst0, dst1;
  logic rdp_busy, div_busy, sqrt_busy;
  logic [3:0] wb_valid;
  reg_idx_t [3:0] wb_addr;
  fp64_t [3:0] wb_data;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  fpau dut (.*);

  typedef struct { int port; reg_idx_t d; fp64_t v; longint due; } exp_t;
  exp_t expq[$];

  always @(posedge clk) begin
    for (int p = 0; p < 4; p++) if (rst_n && wb_valid[p]) begin
      int hit;
      hit = -1;
      checks++;
      foreach (expq[i]) if (expq[i].port == p && expq[i].d == wb_addr[p] && hit < 0) hit = i;
      if (hit < 0) begin failures++; $display("FAIL: unexpected wb port %0d reg %0d", p, wb_addr[p]); end
      else begin
        if (wb_data[p] !== expq[hit].v || cyc != expq[hit].due) begin
          failures++;
          $display("FAIL port %0d reg %0d data %h exp %h at %0d due %0d", p, wb_addr[p], wb_data[p], expq[hit].v, cyc, expq[hit].due);
        end
        expq.delete(hit);
      end
    end
  end

  task automatic reconf(rdp_cfg_e c);
    @(negedge clk); cfg = c; cfg_we = 1;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    exp_t e;
    a = '0; b = '0; dst0 = '0; dst1 = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // FDIV and FSQRT started, then RDP work overlaps them
    @(negedge clk);
    a[0] = rand_fp64(10); b[0] = rand_fp64(10); dst0 = 8'd200; div_issue = 1;
    e.port = 2; e.d = 8'd200; e.v = $realtobits($bitstoreal(a[0]) / $bitstoreal(b[0])); e.due = cyc + 56;
    expq.push_back(e);
    @(negedge clk); div_issue = 0;
    a[0] = rand_pos_fp64(10); dst0 = 8'd201; sqrt_issue = 1;
    e.port = 3; e.d = 8'd201; e.v = $realtobits($sqrt($bitstoreal(a[0]))); e.due = cyc + 56;
    expq.push_back(e);
    @(negedge clk); sqrt_issue = 0;
    reconf(CFG_DET2X2);
    for (int k = 0; k < 20; k++) begin
      real p[4];
      for (int i = 0; i < 4; i++) begin a[i] = rand_fp64(10); b[i] = rand_fp64(10); p[i] = $bitstoreal(a[i]) * $bitstoreal(b[i]); end
      dst0 = 8'(2*k); dst1 = 8'(2*k + 1); rdp_issue = 1;
      expq.push_back('{0, dst0, $realtobits(p[0] - p[1]), cyc + 3});
      expq.push_back('{1, dst1, $realtobits(p[2] - p[3]), cyc + 3});
      @(negedge clk); rdp_issue = 0;
    end
    while (rdp_busy) @(negedge clk);
    reconf(CFG_DOT4);
    for (int k = 0; k < 20; k++) begin
      real p[4], s0, s1;
      for (int i = 0; i < 4; i++) begin a[i] = rand_fp64(10); b[i] = rand_fp64(10); p[i] = $bitstoreal(a[i]) * $bitstoreal(b[i]); end
      s0 = p[0] + p[1]; s1 = p[2] + p[3];
      dst0 = 8'(100 + k); rdp_issue = 1;
      expq.push_back('{0, dst0, $realtobits(s0 + s1), cyc + 3});
      @(negedge clk); rdp_issue = 0;
    end
    repeat (80) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL: %0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
