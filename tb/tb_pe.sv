// tb_pe: end-to-end testbench of the PE at its default parameters.
// The stimulus and checks are this design's own; the paper gives no test vectors.
//
// It QR-factorises random NxN matrices (N = 4, then N = 8) with Generalized
// Givens Rotation, one column step after another. For each step with m
// trailing rows it generates the three programs:
//   global stream: load A and the constant 1.0 from GM into LM, wait at the
//                  barriers, finally store R back to GM (a LOOP with strides);
//   local stream : per step, load the pivot column and (LOOP) the trailing
//                  columns into registers, barrier, barrier, store the new
//                  values back to LM (LOOP);
//   FPS          : per step, the partial norms q_i = x_i^2 + q_{i+1} (DOT2),
//                  p_i = FSQRT(q_i), 1/p_i = FDIV(1, p_i), the sums
//                  s_ij = x_{i+1} y_{i+1,j} + s_{i+1,j}, the new first row
//                  (DOT2/DOT3/DOT4 then DOT1 by 1/p_0), k and l factors and
//                  the new rows k*s - l*y as DET2, paired into DET2X2.
// Every generated instruction is also executed on a shadow register file and
// shadow LM in the simulator's real arithmetic, in the same order, so the
// R read back from GM must equal the shadow bit for bit. Independently, R is
// checked mathematically: R'R must equal A'A to a relative 1e-9, and the
// diagonal of R must be positive except its last entry (whose sign the
// final rotation leaves free). The test also requires that each mechanism
// happened: RDP operations in all configurations, DET2X2, FDIV, FSQRT,
// hazard stalls, RDP reconfigurations, GM wait cycles and 2N barriers.
module tb_pe;
  import ggr_pkg::*;
  import tb_fp_util::*;

  localparam int RBASE = 4096;   // R is written to GM[RBASE + col*N + row]

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             prog_we = 1'b0;
  logic [1:0]       prog_sel = '0;
  logic [15:0]      prog_addr = '0;
  logic [LS_IW-1:0] prog_data = '0;
  logic             start = 1'b0, busy, done;
  logic             gm_req, gm_we, gm_gnt, gm_rvalid;
  logic [31:0]      gm_addr;
  fp64_t            gm_wdata, gm_rdata;
  pe_stats_t        stats;

  pe dut (.*);

  gm_model #(.DEPTH(8192), .STALL_PCT(25)) u_gm (
    .clk, .rst_n, .req(gm_req), .we(gm_we), .addr(gm_addr), .wdata(gm_wdata),
    .gnt(gm_gnt), .rvalid(gm_rvalid), .rdata(gm_rdata));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------------
  // program buffers and shadow machine
  fps_instr_t fprog[$];
  ls_instr_t  gprog[$], lprog[$];
  real        srf[256];
  real        slm[int];
  int         next_reg;
  int         nsync_l, nsync_f;
  int         used_cfg[6];

  typedef struct { int d; int s[4]; } det_t;
  det_t det_q[$];

  function automatic int alloc(int n);
    int b = next_reg;
    next_reg += n;
    if (next_reg > 256) $fatal(1, "register budget exceeded");
    return b;
  endfunction

  function automatic void emit(fps_op_e op, int d0, int d1, int s[8]);
    fps_instr_t ins;
    real p[4];
    ins.op = op; ins.dst0 = reg_idx_t'(d0); ins.dst1 = reg_idx_t'(d1);
    for (int k = 0; k < 8; k++) ins.src[k] = reg_idx_t'(s[k]);
    fprog.push_back(ins);
    for (int k = 0; k < 4; k++) p[k] = srf[s[2*k]] * srf[s[2*k+1]];
    case (op)
      FPS_DOT1:   srf[d0] = p[0];
      FPS_DOT2:   srf[d0] = p[0] + p[1];
      FPS_DOT3:   begin real t = p[0] + p[1]; srf[d0] = t + p[2]; end
      FPS_DOT4:   begin real t = p[0] + p[1]; real u = p[2] + p[3]; srf[d0] = t + u; end
      FPS_DET2:   srf[d0] = p[0] - p[1];
      FPS_DET2X2: begin srf[d0] = p[0] - p[1]; srf[d1] = p[2] - p[3]; end
      FPS_FDIV:   srf[d0] = srf[s[0]] / srf[s[1]];
      FPS_FSQRT:  srf[d0] = $sqrt(srf[s[0]]);
      default: ;
    endcase
    if (is_rdp_op(op)) used_cfg[op2cfg(op)]++;
  endfunction

  function automatic void op2(fps_op_e op, int d, int a0, int b0, int a1 = 0, int b1 = 0,
                              int a2 = 0, int b2 = 0, int a3 = 0, int b3 = 0);
    int s[8] = '{a0, b0, a1, b1, a2, b2, a3, b3};
    emit(op, d, 0, s);
  endfunction

  function automatic void det2(int d, int a0, int b0, int a1, int b1);
    det_t t;
    t.d = d; t.s = '{a0, b0, a1, b1};
    det_q.push_back(t);
  endfunction

  // emit queued DET2 operations, two at a time when possible
  function automatic void flush_det2();
    while (det_q.size() >= 2) begin
      det_t x = det_q.pop_front();
      det_t y = det_q.pop_front();
      int s[8] = '{x.s[0], x.s[1], x.s[2], x.s[3], y.s[0], y.s[1], y.s[2], y.s[3]};
      emit(FPS_DET2X2, x.d, y.d, s);
    end
    if (det_q.size() == 1) begin
      det_t x = det_q.pop_front();
      op2(FPS_DET2, x.d, x.s[0], x.s[1], x.s[2], x.s[3]);
    end
  endfunction

  function automatic ls_instr_t lsi(ls_op_e op, int len, int a, int b, int sa = 0, int sb = 0);
    ls_instr_t i;
    i.op = op; i.len = 16'(len); i.addr_a = 32'(a); i.addr_b = 16'(b);
    i.stride_a = 16'(sa); i.stride_b = 16'(sb);
    return i;
  endfunction

  // local stream: LM <-> registers, with shadow
  function automatic void l_load(int lm, int r, int len);
    lprog.push_back(lsi(LS_LOAD, len, lm, r));
    for (int i = 0; i < len; i++) srf[r+i] = slm[lm+i];
  endfunction
  function automatic void l_store(int lm, int r, int len);
    lprog.push_back(lsi(LS_STORE, len, lm, r));
    for (int i = 0; i < len; i++) slm[lm+i] = srf[r+i];
  endfunction
  function automatic void l_loop(bit store, int cnt, int lm, int r, int len, int sa, int sb);
    lprog.push_back(lsi(LS_LOOP, cnt, 0, 0, sa, sb));
    lprog.push_back(lsi(store ? LS_STORE : LS_LOAD, len, lm, r));
    lprog.push_back(lsi(LS_END_LOOP, 0, 0, 0));
    for (int it = 0; it < cnt; it++)
      for (int i = 0; i < len; i++)
        if (store) slm[lm + it*sa + i] = srf[r + it*sb + i];
        else       srf[r + it*sb + i] = slm[lm + it*sa + i];
  endfunction
  function automatic void sync_lf();
    lprog.push_back(lsi(LS_SYNC, 0, 0, 0));
    op2(FPS_SYNC, 0, 0, 0);
    nsync_l++; nsync_f++;
  endfunction

  // ------------------------------------------------------------------
  // one GGR column step on the trailing (m x m) block starting at (c, c)
  function automatic void ggr_step(int N, int c);
    int m = N - c;
    int ONE = 0;
    int x, y, q, P, rP, s, nw, k, l, tt, num, cs, sn;
    next_reg = 1;
    x  = alloc(m);            // pivot column x_0..x_{m-1}
    y  = alloc(m * (m - 1));  // trailing columns, column jj at y + jj*m
    q  = alloc(m);
    P  = alloc(m);
    rP = alloc(m);
    s  = alloc(m * (m - 1));  // s(jj, i) at s + jj*m + i
    nw = alloc(m * (m - 1));  // new values, column jj at nw + jj*m
    k  = alloc(m); l = alloc(m); tt = alloc(m);
    num = alloc(m); cs = alloc(1); sn = alloc(1);
    // local loads
    l_load(c*N + c, x, m);
    l_loop(1'b0, m - 1, (c+1)*N + c, y, m, N, m);
    sync_lf();
    // norms
    op2(FPS_DOT2, q + m-2, x + m-2, x + m-2, x + m-1, x + m-1);
    for (int i = m-3; i >= 0; i--) op2(FPS_DOT2, q + i, x + i, x + i, q + i+1, ONE);
    for (int i = 0; i <= m-2; i++) op2(FPS_FSQRT, P + i, q + i, 0);
    for (int i = 0; i <= m-2; i++) op2(FPS_FDIV, rP + i, ONE, P + i);
    // inner products s(jj, i) = sum_{t>i} x_t y_t
    for (int jj = 0; jj < m-1; jj++) begin
      int Y = y + jj*m, S = s + jj*m;
      op2(FPS_DOT1, S + m-2, x + m-1, Y + m-1);
      for (int i = m-3; i >= 0; i--) op2(FPS_DOT2, S + i, x + i+1, Y + i+1, S + i+1, ONE);
    end
    // first row: (x_0 y_0 + s_0) / p_0
    for (int jj = 0; jj < m-1; jj++) begin
      int Y = y + jj*m, S = s + jj*m;
      if (m == 2)      op2(FPS_DOT2, num + jj, x, Y, x+1, Y+1);
      else if (m == 3) op2(FPS_DOT3, num + jj, x, Y, x+1, Y+1, x+2, Y+2);
      else             op2(FPS_DOT4, num + jj, x, Y, x+1, Y+1, x+2, Y+2, S+2, ONE);
    end
    for (int jj = 0; jj < m-1; jj++) op2(FPS_DOT1, nw + jj*m, num + jj, rP);
    // k_r = x_{r-1} / (p_{r-1} p_r), l_r = p_r / p_{r-1}
    for (int r = 1; r <= m-2; r++) begin
      op2(FPS_DOT1, tt + r, x + r-1, rP + r-1);
      op2(FPS_DOT1, k + r, tt + r, rP + r);
      op2(FPS_DOT1, l + r, P + r, rP + r-1);
    end
    op2(FPS_DOT1, cs, x + m-2, rP + m-2);
    op2(FPS_DOT1, sn, x + m-1, rP + m-2);
    // rows 1..m-1 of every trailing column
    for (int jj = 0; jj < m-1; jj++) begin
      int Y = y + jj*m, S = s + jj*m;
      for (int r = 1; r <= m-2; r++) det2(nw + jj*m + r, k + r, S + r-1, l + r, Y + r-1);
      det2(nw + jj*m + m-1, cs, Y + m-1, sn, Y + m-2);
    end
    flush_det2();
    sync_lf();
    // local stores: diagonal p_0 and the new trailing columns
    l_store(c*N + c, P, 1);
    l_loop(1'b1, m - 1, (c+1)*N + c, nw, m, N, m);
  endfunction

  function automatic void build(int N);
    fprog.delete(); gprog.delete(); lprog.delete();
    nsync_l = 0; nsync_f = 0;
    // start: global loads A and 1.0; everyone meets
    gprog.push_back(lsi(LS_LOAD, N*N + 1, 0, 0));
    gprog.push_back(lsi(LS_SYNC, 0, 0, 0));
    lprog.push_back(lsi(LS_SYNC, 0, 0, 0));
    op2(FPS_SYNC, 0, 0, 0);
    nsync_l++; nsync_f++;
    l_load(N*N, 0, 1);                       // register 0 = 1.0
    for (int c = 0; c < N-1; c++) ggr_step(N, c);
    // final meeting, then global stores R
    lprog.push_back(lsi(LS_SYNC, 0, 0, 0));
    op2(FPS_SYNC, 0, 0, 0);
    nsync_l++; nsync_f++;
    lprog.push_back(lsi(LS_HALT, 0, 0, 0));
    op2(FPS_HALT, 0, 0, 0);
    gprog.push_back(lsi(LS_LOOP, nsync_l - 1, 0, 0));
    gprog.push_back(lsi(LS_SYNC, 0, 0, 0));
    gprog.push_back(lsi(LS_END_LOOP, 0, 0, 0));
    gprog.push_back(lsi(LS_LOOP, N, 0, 0, N, N));
    gprog.push_back(lsi(LS_STORE, N, RBASE, 0));
    gprog.push_back(lsi(LS_END_LOOP, 0, 0, 0));
    gprog.push_back(lsi(LS_HALT, 0, 0, 0));
  endfunction

  task automatic load_prog();
    foreach (fprog[i]) begin
      @(negedge clk); prog_we = 1; prog_sel = 0; prog_addr = 16'(i); prog_data = LS_IW'(fprog[i]);
    end
    foreach (gprog[i]) begin
      @(negedge clk); prog_we = 1; prog_sel = 1; prog_addr = 16'(i); prog_data = gprog[i];
    end
    foreach (lprog[i]) begin
      @(negedge clk); prog_we = 1; prog_sel = 2; prog_addr = 16'(i); prog_data = lprog[i];
    end
    @(negedge clk); prog_we = 0;
  endtask

  // ------------------------------------------------------------------
  task automatic run_qr(int N);
    real A[][];
    real R[][];
    int  cyc;
    A = new[N]; R = new[N];
    foreach (A[i]) begin A[i] = new[N]; R[i] = new[N]; end
    slm.delete();
    foreach (used_cfg[i]) used_cfg[i] = 0;
    for (int j = 0; j < N; j++)
      for (int i = 0; i < N; i++) begin
        fp64_t v = rand_fp64(3);
        A[i][j] = $bitstoreal(v);
        u_gm.mem[j*N + i] = v;
        slm[j*N + i] = A[i][j];
      end
    u_gm.mem[N*N] = FP64_ONE;
    slm[N*N] = 1.0;
    for (int i = 0; i < N*N; i++) u_gm.mem[RBASE + i] = FP64_ZERO;
    build(N);
    $display("N=%0d: FPS %0d, global %0d, local %0d instructions", N, fprog.size(), gprog.size(), lprog.size());
    load_prog();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 200000) begin @(negedge clk); cyc++; end
    check(done, $sformatf("N=%0d done", N));
    // bitwise comparison with the shadow machine, upper triangle
    for (int j = 0; j < N; j++)
      for (int i = 0; i <= j; i++) begin
        fp64_t got = u_gm.mem[RBASE + j*N + i];
        fp64_t exp = $realtobits(slm[j*N + i]);
        R[i][j] = $bitstoreal(got);
        check(got === exp, $sformatf("N=%0d R[%0d][%0d] = %h, shadow %h", N, i, j, got, exp));
      end
    // R'R = A'A and positive diagonal
    for (int a = 0; a < N; a++) begin
      if (a < N-1) check(R[a][a] > 0.0, $sformatf("N=%0d diag %0d positive", N, a));
      for (int b = a; b < N; b++) begin
        real ra = 0.0, aa = 0.0, scale = 0.0;
        for (int t = 0; t <= a; t++) ra += R[t][a] * R[t][b];
        for (int t = 0; t < N; t++) begin aa += A[t][a] * A[t][b]; scale += A[t][a]*A[t][a] + A[t][b]*A[t][b]; end
        check((ra - aa) <= 1e-9 * scale && (aa - ra) <= 1e-9 * scale,
              $sformatf("N=%0d (R'R)[%0d][%0d]=%f (A'A)=%f", N, a, b, ra, aa));
      end
    end
    // mechanisms
    $display("N=%0d cycles=%0d rdp=%0d dual_det2=%0d div=%0d sqrt=%0d hazard_stalls=%0d reconfigs=%0d barriers=%0d gm_stalls=%0d",
             N, stats.cycles, stats.rdp_ops, stats.dual_det2, stats.div_ops, stats.sqrt_ops,
             stats.hazard_stalls, stats.reconfigs, stats.barriers, stats.gm_stalls);
    check(stats.barriers == 32'(2*N), "barrier count is 2N");
    check(stats.div_ops == 32'(N*(N-1)/2), "one FDIV per norm");
    check(stats.sqrt_ops == 32'(N*(N-1)/2), "one FSQRT per norm");
    check(stats.dual_det2 > 0, "DET2X2 used");
    check(stats.hazard_stalls > 0, "hazard stalls happened");
    check(stats.reconfigs > 0, "RDP reconfigured");
    check(stats.gm_stalls > 0, "GM wait cycles happened");
    check(stats.rdp_ops == 32'(fprog.size() - stats.div_ops - stats.sqrt_ops - 2*N - 1), "RDP op count");
    for (int g = 0; g < 6; g++)
      if (N >= 4) check(used_cfg[g] > 0, $sformatf("configuration %0d used", g));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_qr(4);
    run_qr(8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
