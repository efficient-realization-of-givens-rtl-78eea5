// tb_ls_seq: self-checking testbench of the Load-Store stream sequencer.
// The stimulus and checks are this design's own; the paper gives no test vectors.
// Runs a program with NOP, LOAD, a LOOP of STORE/LOAD with address strides,
// SYNC, an empty LOAD and HALT, with a randomly stalling xfer_ready. The list
// of transfers is compared with one expanded by hand from the program; the
// sequencer must wait at SYNC until released and then report 'halted'.
module tb_ls_seq;
  import ggr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, xfer_valid, xfer_store, xfer_ready, at_sync, sync_release = 0, halted;
  logic [9:0] pc;
  ls_instr_t instr;
  logic [31:0] xfer_addr_a;
  logic [15:0] xfer_addr_b;
  ls_instr_t prog [16];
  int checks = 0, failures = 0;

  ls_seq dut (.*);
  assign instr = prog[pc[3:0]];

  function automatic ls_instr_t mk(ls_op_e op, int len, int a, int b, int sa = 0, int sb = 0);
    mk.op = op; mk.len = 16'(len); mk.addr_a = 32'(a); mk.addr_b = 16'(b);
    mk.stride_a = 16'(sa); mk.stride_b = 16'(sb);
  endfunction

  typedef struct { bit st; int a; int b; } xf_t;
  xf_t expq[$];
  int  sync_cycles = 0;

  always @(posedge clk) begin
    if (rst_n && xfer_valid && xfer_ready) begin
      xf_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL: extra transfer"); end
      else begin
        e = expq.pop_front();
        if (xfer_store !== e.st || xfer_addr_a !== 32'(e.a) || xfer_addr_b !== 16'(e.b)) begin
          failures++;
          $display("FAIL: got %0d %0d %0d exp %0d %0d %0d", xfer_store, xfer_addr_a, xfer_addr_b, e.st, e.a, e.b);
        end
      end
    end
    if (at_sync) sync_cycles++;
  end

  initial begin
    foreach (prog[i]) prog[i] = mk(LS_HALT, 0, 0, 0);
    prog[0] = mk(LS_NOP, 0, 0, 0);
    prog[1] = mk(LS_LOAD, 3, 100, 10);
    prog[2] = mk(LS_LOOP, 3, 0, 0, 16, 4);
    prog[3] = mk(LS_STORE, 2, 200, 20);
    prog[4] = mk(LS_LOAD, 1, 300, 30);
    prog[5] = mk(LS_END_LOOP, 0, 0, 0);
    prog[6] = mk(LS_SYNC, 0, 0, 0);
    prog[7] = mk(LS_LOAD, 0, 0, 0);
    prog[8] = mk(LS_HALT, 0, 0, 0);
    for (int i = 0; i < 3; i++) expq.push_back('{0, 100 + i, 10 + i});
    for (int it = 0; it < 3; it++) begin
      expq.push_back('{1, 200 + 16*it, 20 + 4*it});
      expq.push_back('{1, 201 + 16*it, 21 + 4*it});
      expq.push_back('{0, 300 + 16*it, 30 + 4*it});
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (!halted) failures++;       // idle before start
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!at_sync) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL: missing transfers"); end
    repeat (5) @(negedge clk);
    checks++; if (!at_sync || pc != 10'd6) begin failures++; $display("FAIL: did not wait at SYNC"); end
    sync_release = 1;
    @(negedge clk); sync_release = 0;
    repeat (4) @(negedge clk);
    checks++; if (!halted) begin failures++; $display("FAIL: not halted"); end
    checks++; if (sync_cycles != 6) begin failures++; $display("FAIL: sync cycles %0d", sync_cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) xfer_ready <= ($urandom % 3) != 0;
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
