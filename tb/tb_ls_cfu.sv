// tb_ls_cfu: self-checking testbench of the Load-Store CFU.
// The stimulus and checks are this design's own; the paper gives no test vectors.
// Global program: load 40 words GM->LM, SYNC, SYNC, store 40 words LM->GM at
// another address (LOOP of 4 x 10 with strides), HALT. Local program: SYNC,
// load 40 LM words into registers 100.., store registers 100.. into LM at
// 1000.. (LOOP of 5 x 8), SYNC, HALT... and the global store then reads from
// LM 1000... The register file is a model that adds 1 to every word it
// receives before it is stored back, so the final GM data shows each word
// went GM->LM->RF->LM->GM. The GM model stalls grants at random; the
// barrier is the same rule as the PE's.
module tb_ls_cfu;
  import ggr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic gprog_we = 0, lprog_we = 0;
  logic [7:0] gprog_addr = '0;
  logic [9:0] lprog_addr = '0;
  ls_instr_t gprog_data, lprog_data;
  logic start = 0, sync_release;
  logic [1:0] at_sync, halted;
  logic gm_req, gm_we, gm_gnt, gm_rvalid;
  logic [31:0] gm_addr;
  fp64_t gm_wdata, gm_rdata;
  logic rf_we;
  reg_idx_t rf_waddr, rf_raddr;
  fp64_t rf_wdata, rf_rdata;
  logic [31:0] cnt_gm_stalls;
  fp64_t rf [256];
  int checks = 0, failures = 0;

  ls_cfu dut (.*);
  gm_model #(.DEPTH(4096), .STALL_PCT(30)) u_gm (
    .clk, .rst_n, .req(gm_req), .we(gm_we), .addr(gm_addr), .wdata(gm_wdata),
    .gnt(gm_gnt), .rvalid(gm_rvalid), .rdata(gm_rdata));

  assign sync_release = (|at_sync) && (&(at_sync | halted));
  assign rf_rdata = rf[rf_raddr];
  always_ff @(posedge clk) if (rf_we) rf[rf_waddr] <= rf_wdata + 64'd1;

  function automatic ls_instr_t mk(ls_op_e op, int len, int a, int b, int sa = 0, int sb = 0);
    mk.op = op; mk.len = 16'(len); mk.addr_a = 32'(a); mk.addr_b = 16'(b);
    mk.stride_a = 16'(sa); mk.stride_b = 16'(sb);
  endfunction

  task automatic wr(bit glob, int addr, ls_instr_t i);
    @(negedge clk);
    if (glob) begin gprog_we = 1; gprog_addr = 8'(addr); gprog_data = i; end
    else      begin lprog_we = 1; lprog_addr = 10'(addr); lprog_data = i; end
    @(negedge clk); gprog_we = 0; lprog_we = 0;
  endtask

  initial begin
    int cyc;
    gprog_data = '0; lprog_data = '0;
    foreach (rf[i]) rf[i] = '0;
    for (int i = 0; i < 40; i++) u_gm.mem[i] = {$urandom, $urandom} & ~64'hFF;
    repeat (2) @(negedge clk); rst_n = 1;
    wr(1, 0, mk(LS_LOAD, 40, 0, 0));
    wr(1, 1, mk(LS_SYNC, 0, 0, 0));
    wr(1, 2, mk(LS_SYNC, 0, 0, 0));
    wr(1, 3, mk(LS_LOOP, 4, 0, 0, 10, 10));
    wr(1, 4, mk(LS_STORE, 10, 2000, 1000));
    wr(1, 5, mk(LS_END_LOOP, 0, 0, 0));
    wr(1, 6, mk(LS_HALT, 0, 0, 0));
    wr(0, 0, mk(LS_SYNC, 0, 0, 0));
    wr(0, 1, mk(LS_LOAD, 40, 0, 100));
    wr(0, 2, mk(LS_LOOP, 5, 0, 0, 8, 8));
    wr(0, 3, mk(LS_STORE, 8, 1000, 100));
    wr(0, 4, mk(LS_END_LOOP, 0, 0, 0));
    wr(0, 5, mk(LS_SYNC, 0, 0, 0));
    wr(0, 6, mk(LS_HALT, 0, 0, 0));
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!(&halted) && cyc < 2000) begin @(negedge clk); cyc++; end
    checks++; if (!(&halted)) begin failures++; $display("FAIL: not halted"); end
    for (int i = 0; i < 40; i++) begin
      checks++;
      if (u_gm.mem[2000 + i] !== u_gm.mem[i] + 64'd1) begin
        failures++; $display("FAIL word %0d: %h vs %h", i, u_gm.mem[2000 + i], u_gm.mem[i]);
      end
    end
    checks++; if (cnt_gm_stalls == 0) begin failures++; $display("FAIL: no GM stall seen"); end
    // 40 local loads + 40 local stores take one cycle each: at least 80 cycles
    checks++; if (cyc < 80 + 80) begin failures++; $display("FAIL: too fast (%0d)", cyc); end
    $display("cycles %0d, GM stalls %0d", cyc, cnt_gm_stalls);
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
