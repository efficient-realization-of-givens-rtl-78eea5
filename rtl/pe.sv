// pe: Processing Element for Generalized Givens Rotation QR factorization.
//
// Top of the design. The PE couples a Load-Store CFU (Global Memory <-> Local
// Memory <-> register file) with a Floating Point Sequencer whose arithmetic
// unit contains the Reconfigurable Data Path (DOT1..DOT4, DET2, two DET2 in
// parallel), FDIV and FSQRT. A host writes the three programs through prog_*
// (prog_sel 0 = FPS, 1 = global Load/Store, 2 = local Load/Store; the low
// bits of prog_data hold the instruction), then pulses 'start'. All three
// streams start at address 0, meet at SYNC barriers and the PE raises 'done'
// once all have executed HALT and every result is written.
// The Global Memory (the paper's "memory hierarchy") is outside the PE; its
// request/grant port with one-cycle read latency is brought out as gm_*.
// 'stats' counts cycles from start to done and how often each mechanism was
// used (RDP operations, dual DET2, FDIV, FSQRT, hazard stalls, RDP
// reconfigurations, barriers, GM wait cycles).
//
// The block structure follows the paper; programs, protocol and sizes are
// this design's choices (see the submodules).
module pe
  import ggr_pkg::*;
#(
  parameter int unsigned LM_DEPTH        = 16384,
  parameter int unsigned RF_DEPTH        = 256,
  parameter int unsigned FPS_IMEM_DEPTH  = 4096,
  parameter int unsigned GLS_IMEM_DEPTH  = 256,
  parameter int unsigned LLS_IMEM_DEPTH  = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         prog_we,
  input  logic [1:0]   prog_sel,
  input  logic [15:0]  prog_addr,
  input  logic [LS_IW-1:0] prog_data,
  input  logic         start,
  output logic         busy,
  output logic         done,
  output logic         gm_req,
  output logic         gm_we,
  output logic [31:0]  gm_addr,
  output fp64_t        gm_wdata,
  input  logic         gm_gnt,
  input  logic         gm_rvalid,
  input  fp64_t        gm_rdata,
  output pe_stats_t    stats
);
  localparam int unsigned FPC_W = $clog2(FPS_IMEM_DEPTH);
  localparam int unsigned GPC_W = $clog2(GLS_IMEM_DEPTH);
  localparam int unsigned LPC_W = $clog2(LLS_IMEM_DEPTH);

  logic       sync_release;
  logic [1:0] ls_at_sync, ls_halted;
  logic       fps_at_sync, fps_halted;

  logic     rf_we;
  reg_idx_t rf_waddr, rf_raddr;
  fp64_t    rf_wdata, rf_rdata;

  ls_cfu #(.LM_DEPTH(LM_DEPTH), .GIMEM_DEPTH(GLS_IMEM_DEPTH), .LIMEM_DEPTH(LLS_IMEM_DEPTH)) u_ls (
    .clk, .rst_n,
    .gprog_we(prog_we && prog_sel == 2'd1), .gprog_addr(prog_addr[GPC_W-1:0]), .gprog_data(ls_instr_t'(prog_data)),
    .lprog_we(prog_we && prog_sel == 2'd2), .lprog_addr(prog_addr[LPC_W-1:0]), .lprog_data(ls_instr_t'(prog_data)),
    .start, .sync_release(sync_release), .at_sync(ls_at_sync), .halted(ls_halted),
    .gm_req, .gm_we, .gm_addr, .gm_wdata, .gm_gnt, .gm_rvalid, .gm_rdata,
    .rf_we, .rf_waddr, .rf_wdata, .rf_raddr, .rf_rdata,
    .cnt_gm_stalls(stats.gm_stalls));

  fps #(.IMEM_DEPTH(FPS_IMEM_DEPTH), .RF_DEPTH(RF_DEPTH)) u_fps (
    .clk, .rst_n,
    .prog_we(prog_we && prog_sel == 2'd0), .prog_addr(prog_addr[FPC_W-1:0]),
    .prog_data(fps_instr_t'(prog_data[FPS_IW-1:0])),
    .start, .at_sync(fps_at_sync), .sync_release(sync_release), .halted(fps_halted),
    .ls_rf_we(rf_we), .ls_rf_waddr(rf_waddr), .ls_rf_wdata(rf_wdata),
    .ls_rf_raddr(rf_raddr), .ls_rf_rdata(rf_rdata),
    .cnt_rdp_ops(stats.rdp_ops), .cnt_div_ops(stats.div_ops), .cnt_sqrt_ops(stats.sqrt_ops),
    .cnt_hazard_stalls(stats.hazard_stalls), .cnt_reconfigs(stats.reconfigs),
    .cnt_dual_det2(stats.dual_det2));

  sync_barrier #(.N(3)) u_bar (
    .at_sync({fps_at_sync, ls_at_sync}), .halted({fps_halted, ls_halted}), .release_o(sync_release));

  // run state and PE-level counters
  logic all_halted;
  assign all_halted = fps_halted && (&ls_halted);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; stats.cycles <= '0; stats.barriers <= '0;
    end else begin
      if (start) begin
        busy <= 1'b1; done <= 1'b0; stats.cycles <= '0; stats.barriers <= '0;
      end else if (busy) begin
        stats.cycles <= stats.cycles + 1;
        if (sync_release) stats.barriers <= stats.barriers + 1;
        if (all_halted) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
