// tb_fps: self-checking testbench for the Floating Point Sequencer.
// The stimulus and checks are this design's own; the paper gives no test vectors.
//
// Test 1 loads 64 random registers through the Load-Store port, then runs a
// random in-order program of RDP, FDIV, FSQRT, CFG and SYNC instructions
// whose operands are picked so that many instructions depend on results
// still in flight. A sequential reference model computes every register with
// the same rounding order as the RDP; after HALT all 256 registers are read
// back and compared bit for bit. The testbench acts as the barrier partner:
// it releases a SYNC a random number of cycles after the FPS arrives.
// Test 2 runs 64 independent DOT4 instructions and checks that they issue at
// one per clock.
// Mechanism counters checked: hazard stalls, reconfigurations, dual DET2,
// division and root counts, barriers met.
`timescale 1ns/1ps
module tb_fps;
  import ggr_pkg::*;
  import tb_fp_util::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        prog_we = 1'b0;
  logic [11:0] prog_addr = '0;
  fps_instr_t  prog_data;
  logic        start = 1'b0, at_sync, sync_release = 1'b0, halted;
  logic        ls_rf_we = 1'b0;
  reg_idx_t    ls_rf_waddr = '0, ls_rf_raddr = '0;
  fp64_t       ls_rf_wdata = '0, ls_rf_rdata;
  logic [31:0] cnt_rdp_ops, cnt_div_ops, cnt_sqrt_ops, cnt_hazard_stalls, cnt_reconfigs, cnt_dual_det2;

  fps dut (.*);

  int checks = 0, failures = 0;
  real    shadow [256];
  logic   known  [256];   // register holds a value usable as an operand
  fps_instr_t prog [$];
  int n_div, n_sqrt, n_dual, n_sync, syncs_seen;

  function automatic logic usable(int r);
    real v;
    v = shadow[r] < 0.0 ? -shadow[r] : shadow[r];
    return known[r] && v > 1.0e-20 && v < 1.0e20;
  endfunction

  function automatic reg_idx_t pick_src(bit positive);
    int r;
    for (int tries = 0; tries < 1000; tries++) begin
      // prefer recently written registers (64..127) to create dependencies
      r = ($urandom % 2) ? 64 + ($urandom % 64) : ($urandom % 64);
      if (usable(r) && (!positive || shadow[r] > 0.0)) return reg_idx_t'(r);
    end
    return reg_idx_t'(0);
  endfunction

  task automatic gen_program(int n);
    fps_instr_t in;
    real p [4];
    int  d0, d1;
    prog.delete();
    n_div = 0; n_sqrt = 0; n_dual = 0; n_sync = 0;
    for (int i = 0; i < n; i++) begin
      in = '0;
      case ($urandom % 10)
        0: in.op = FPS_DOT1;  1: in.op = FPS_DOT2;  2: in.op = FPS_DOT3;
        3: in.op = FPS_DOT4;  4: in.op = FPS_DET2;  5: in.op = FPS_DET2X2;
        6: in.op = FPS_FDIV;  7: in.op = FPS_FSQRT;
        8: in.op = FPS_CFG;   default: in.op = ($urandom % 4 == 0) ? FPS_SYNC : FPS_DOT4;
      endcase
      d0 = 64 + ($urandom % 64);
      d1 = 64 + ($urandom % 64);
      if (d1 == d0) d1 = 64 + ((d0 - 64 + 1) % 64);
      in.dst0 = reg_idx_t'(d0);
      in.dst1 = reg_idx_t'(d1);
      if (in.op == FPS_FSQRT) in.src[0] = pick_src(1'b1);
      else for (int k = 0; k < 8; k++) in.src[k] = pick_src(1'b0);
      if (in.op == FPS_CFG) in.src[0] = reg_idx_t'($urandom % 6);
      for (int k = 0; k < 4; k++) p[k] = shadow[in.src[2*k]] * shadow[in.src[2*k+1]];
      case (in.op)
        FPS_DOT1:   shadow[d0] = p[0];
        FPS_DOT2:   shadow[d0] = p[0] + p[1];
        FPS_DOT3:   shadow[d0] = (p[0] + p[1]) + p[2];
        FPS_DOT4:   shadow[d0] = (p[0] + p[1]) + (p[2] + p[3]);
        FPS_DET2:   shadow[d0] = p[0] - p[1];
        FPS_DET2X2: begin shadow[d0] = p[0] - p[1]; shadow[d1] = p[2] - p[3]; n_dual++; end
        FPS_FDIV:   begin shadow[d0] = shadow[in.src[0]] / shadow[in.src[1]]; n_div++; end
        FPS_FSQRT:  begin shadow[d0] = $sqrt(shadow[in.src[0]]); n_sqrt++; end
        FPS_SYNC:   n_sync++;
        default: ;
      endcase
      if (is_rdp_op(in.op) || in.op inside {FPS_FDIV, FPS_FSQRT}) known[d0] = 1'b1;
      if (in.op == FPS_DET2X2) known[d1] = 1'b1;
      prog.push_back(in);
    end
    in = '0; in.op = FPS_HALT;
    prog.push_back(in);
  endtask

  task automatic load_program();
    foreach (prog[i]) begin
      @(negedge clk);
      prog_we = 1'b1; prog_addr = 12'(i); prog_data = prog[i];
    end
    @(negedge clk); prog_we = 1'b0;
  endtask

  // expected register bits (the reference values stay normal numbers)
  function automatic fp64_t to_bits(real v);
    return $realtobits(v);
  endfunction

  // barrier partner
  always @(negedge clk) begin
    sync_release = 1'b0;
    if (at_sync && ($urandom % 4 == 0)) sync_release = 1'b1;
  end
  always @(posedge clk) if (at_sync && sync_release) syncs_seen++;

  int cyc_start, cyc, run_cycles;
  always @(posedge clk) cyc++;

  task automatic run();
    @(negedge clk); start = 1'b1; cyc_start = cyc;
    @(negedge clk); start = 1'b0;
    while (!halted) @(negedge clk);
    run_cycles = cyc - cyc_start;
  endtask

  task automatic check_rf(string what);
    for (int r = 0; r < 256; r++) begin
      ls_rf_raddr = reg_idx_t'(r);
      #1;
      checks++;
      if (ls_rf_rdata !== to_bits(shadow[r])) begin
        failures++;
        if (failures < 10) $display("FAIL %s: r%0d = %h expected %h", what, r, ls_rf_rdata, to_bits(shadow[r]));
      end
    end
  endtask

  task automatic expect_eq(string what, longint got, longint want);
    checks++;
    if (got != want) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, want); end
  endtask

  task automatic expect_gt(string what, longint got, longint lim);
    checks++;
    if (got <= lim) begin failures++; $display("FAIL %s: got %0d, expected more than %0d", what, got, lim); end
    else $display("  %s = %0d", what, got);
  endtask

  initial begin
    fps_instr_t in;
    for (int r = 0; r < 256; r++) begin shadow[r] = 0.0; known[r] = 1'b0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // preload registers 0..63
    for (int r = 0; r < 64; r++) begin
      @(negedge clk);
      ls_rf_we = 1'b1; ls_rf_waddr = reg_idx_t'(r);
      ls_rf_wdata = rand_fp64(8);
      shadow[r] = $bitstoreal(ls_rf_wdata); known[r] = 1'b1;
    end
    @(negedge clk); ls_rf_we = 1'b0;

    // ---- test 1: random dependent program
    gen_program(400);
    load_program();
    syncs_seen = 0;
    run();
    check_rf("random program");
    expect_eq("syncs met", syncs_seen, n_sync);
    expect_eq("div ops", cnt_div_ops, n_div);
    expect_eq("sqrt ops", cnt_sqrt_ops, n_sqrt);
    expect_eq("dual DET2 ops", cnt_dual_det2, n_dual);
    expect_gt("hazard stalls", cnt_hazard_stalls, 0);
    expect_gt("reconfigurations", cnt_reconfigs, 0);
    expect_gt("barriers met", syncs_seen, 0);
    expect_gt("dual DET2", cnt_dual_det2, 0);

    // ---- test 2: independent DOT4s issue one per clock
    prog.delete();
    for (int i = 0; i < 64; i++) begin
      in = '0; in.op = FPS_DOT4;
      in.dst0 = reg_idx_t'(128 + i);
      for (int k = 0; k < 8; k++) in.src[k] = reg_idx_t'($urandom % 64);
      shadow[128 + i] = (shadow[in.src[0]] * shadow[in.src[1]] + shadow[in.src[2]] * shadow[in.src[3]])
                      + (shadow[in.src[4]] * shadow[in.src[5]] + shadow[in.src[6]] * shadow[in.src[7]]);
      prog.push_back(in);
    end
    in = '0; in.op = FPS_HALT; prog.push_back(in);
    load_program();
    run();
    check_rf("independent DOT4");
    expect_eq("DOT4 ops", cnt_rdp_ops, 64);
    expect_eq("DOT4 stalls", cnt_hazard_stalls, 0);
    checks++;
    // 64 issues + at most one reconfiguration + HALT + RDP drain
    if (run_cycles > 64 + 1 + 1 + RDP_LATENCY + 2) begin
      failures++; $display("FAIL throughput: %0d cycles for 64 DOT4", run_cycles);
    end else $display("  64 independent DOT4 in %0d cycles", run_cycles);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
