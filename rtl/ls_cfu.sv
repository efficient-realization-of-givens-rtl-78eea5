// ls_cfu: Load-Store CFU of the GGR processing element.
//
// Two instruction streams share the Local Memory (LM):
//  * the global stream (global Load/Store instruction memory + ls_seq) moves
//    words between Global Memory (GM) and LM port A;
//  * the local stream (local Load/Store instruction memory + ls_seq) moves
//    words between LM port B and the register file of the Floating Point
//    Sequencer, one word per clock.
// GM port: a request (gm_req, gm_we, gm_addr, gm_wdata) is taken in the cycle
// gm_gnt is high. Read data must come back on gm_rvalid/gm_rdata exactly one
// cycle after the granted read; it is written into LM then. A store sends
// the LM word in the request itself. The global stream signals 'at_sync'
// only once its last read has returned, so no stream passes a barrier before
// LM holds the data.
// Counts the cycles a GM request waits for its grant (gm_stalls, cleared on
// 'start').
//
// The division into global and local streams, LM and the four steps of PE
// operation follow the paper; the GM protocol, one-level loops and the
// barrier are this design's choice.
module ls_cfu
  import ggr_pkg::*;
#(
  parameter int unsigned LM_DEPTH     = 16384,
  parameter int unsigned GIMEM_DEPTH  = 256,
  parameter int unsigned LIMEM_DEPTH  = 1024,
  localparam int unsigned LM_AW       = $clog2(LM_DEPTH),
  localparam int unsigned GPC_W       = $clog2(GIMEM_DEPTH),
  localparam int unsigned LPC_W       = $clog2(LIMEM_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // program load
  input  logic             gprog_we,
  input  logic [GPC_W-1:0] gprog_addr,
  input  ls_instr_t        gprog_data,
  input  logic             lprog_we,
  input  logic [LPC_W-1:0] lprog_addr,
  input  ls_instr_t        lprog_data,
  // control
  input  logic             start,
  input  logic             sync_release,
  output logic [1:0]       at_sync,    // [0] global, [1] local
  output logic [1:0]       halted,
  // Global Memory
  output logic             gm_req,
  output logic             gm_we,
  output logic [31:0]      gm_addr,
  output fp64_t            gm_wdata,
  input  logic             gm_gnt,
  input  logic             gm_rvalid,
  input  fp64_t            gm_rdata,
  // register file of the FPS
  output logic             rf_we,
  output reg_idx_t         rf_waddr,
  output fp64_t            rf_wdata,
  output reg_idx_t         rf_raddr,
  input  fp64_t            rf_rdata,
  output logic [31:0]      cnt_gm_stalls
);
  // ---------------- instruction memories and sequencers ----------------
  logic [GPC_W-1:0] gpc;
  logic [LPC_W-1:0] lpc;
  ls_instr_t        gins, lins;

  instr_mem #(.WIDTH(LS_IW), .DEPTH(GIMEM_DEPTH)) u_gimem (
    .clk, .we(gprog_we), .waddr(gprog_addr), .wdata(gprog_data), .raddr(gpc), .rdata(gins));
  instr_mem #(.WIDTH(LS_IW), .DEPTH(LIMEM_DEPTH)) u_limem (
    .clk, .we(lprog_we), .waddr(lprog_addr), .wdata(lprog_data), .raddr(lpc), .rdata(lins));

  logic        g_valid, g_store, g_ready, g_sync;
  logic [31:0] g_addr_a;
  logic [15:0] g_addr_b;
  logic        l_valid, l_store, l_sync;
  logic [31:0] l_addr_a;
  logic [15:0] l_addr_b;

  ls_seq #(.PC_W(GPC_W)) u_gseq (
    .clk, .rst_n, .start, .pc(gpc), .instr(gins),
    .xfer_valid(g_valid), .xfer_store(g_store), .xfer_addr_a(g_addr_a), .xfer_addr_b(g_addr_b),
    .xfer_ready(g_ready), .at_sync(g_sync), .sync_release(sync_release && at_sync[0]),
    .halted(halted[0]));

  ls_seq #(.PC_W(LPC_W)) u_lseq (
    .clk, .rst_n, .start, .pc(lpc), .instr(lins),
    .xfer_valid(l_valid), .xfer_store(l_store), .xfer_addr_a(l_addr_a), .xfer_addr_b(l_addr_b),
    .xfer_ready(1'b1), .at_sync(l_sync), .sync_release(sync_release && at_sync[1]),
    .halted(halted[1]));

  // ---------------- Local Memory ----------------
  logic             lm_we_a, lm_we_b;
  logic [LM_AW-1:0] lm_waddr_a, lm_raddr_a, lm_waddr_b, lm_raddr_b;
  fp64_t            lm_wdata_a, lm_rdata_a, lm_wdata_b, lm_rdata_b;

  local_mem #(.DEPTH(LM_DEPTH)) u_lm (
    .clk,
    .we_a(lm_we_a), .waddr_a(lm_waddr_a), .wdata_a(lm_wdata_a), .raddr_a(lm_raddr_a), .rdata_a(lm_rdata_a),
    .we_b(lm_we_b), .waddr_b(lm_waddr_b), .wdata_b(lm_wdata_b), .raddr_b(lm_raddr_b), .rdata_b(lm_rdata_b));

  // ---------------- global side: GM <-> LM port A ----------------
  logic             rd_pend;
  logic [LM_AW-1:0] rd_lm_addr;

  always_comb begin
    gm_req     = g_valid;
    gm_we      = g_store;
    gm_addr    = g_addr_a;
    lm_raddr_a = g_addr_b[LM_AW-1:0];
    gm_wdata   = lm_rdata_a;
    g_ready    = gm_gnt;
    lm_we_a    = gm_rvalid;
    lm_waddr_a = rd_lm_addr;
    lm_wdata_a = gm_rdata;
    at_sync[0] = g_sync && !rd_pend;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend <= 1'b0; rd_lm_addr <= '0; cnt_gm_stalls <= '0;
    end else begin
      rd_pend <= gm_req && !gm_we && gm_gnt;
      if (gm_req && !gm_we && gm_gnt) rd_lm_addr <= g_addr_b[LM_AW-1:0];
      if (start) cnt_gm_stalls <= '0;
      else if (gm_req && !gm_gnt) cnt_gm_stalls <= cnt_gm_stalls + 1;
    end
  end

  // ---------------- local side: LM port B <-> register file ----------------
  always_comb begin
    lm_raddr_b = l_addr_a[LM_AW-1:0];
    rf_we      = l_valid && !l_store;
    rf_waddr   = l_addr_b[REG_AW-1:0];
    rf_wdata   = lm_rdata_b;
    rf_raddr   = l_addr_b[REG_AW-1:0];
    lm_we_b    = l_valid && l_store;
    lm_waddr_b = l_addr_a[LM_AW-1:0];
    lm_wdata_b = rf_rdata;
    at_sync[1] = l_sync;
  end

  // GM protocol: read data only where a read was granted the cycle before
  a_rvalid_expected: assert property (@(posedge clk) disable iff (!rst_n)
    gm_rvalid |-> rd_pend);
endmodule
