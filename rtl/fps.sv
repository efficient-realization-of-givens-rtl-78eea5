// fps: Floating Point Sequencer of the GGR processing element.
//
// Holds the FPS instruction memory, the instruction decoder, the register
// file and the Floating Point Arithmetic Unit (RDP, FDIV, FSQRT). After
// 'start' it fetches instructions from address 0, one per clock, and issues
// them in order:
//   DOT1..DOT4, DET2, DET2X2  to the RDP (a_k = src[2k], b_k = src[2k+1])
//   FDIV  dst0 = src0 / src1      FSQRT dst0 = sqrt(src0)
//   CFG   load RDP configuration src0[2:0]
//   SYNC  wait until every result has been written, then wait at the
//         barrier shared with the Load-Store CFU streams
//   HALT  stop ('halted' once all results are written)
// Hazards: a scoreboard bit per register is set when an instruction that
// writes it issues and cleared when its result is written. An instruction
// waits while any register it reads or writes is pending (a stall), and an
// FDIV/FSQRT waits while its unit is busy. An RDP instruction whose
// configuration differs from the RDP's current one waits until the RDP
// pipeline is empty and then spends one cycle reconfiguring it.
// The Load-Store CFU reads and writes the register file through ls_rf_*.
// The cnt_* counters clear on 'start'.
//
// The instruction names and the RDP configurations follow the paper; the
// encoding, the scoreboard and the reconfiguration rule are this design's.
module fps
  import ggr_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 4096,
  parameter int unsigned RF_DEPTH   = 256,
  localparam int unsigned PC_W      = $clog2(IMEM_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // program load
  input  logic            prog_we,
  input  logic [PC_W-1:0] prog_addr,
  input  fps_instr_t      prog_data,
  // control
  input  logic            start,
  output logic            at_sync,
  input  logic            sync_release,
  output logic            halted,
  // register file port of the Load-Store CFU
  input  logic            ls_rf_we,
  input  reg_idx_t        ls_rf_waddr,
  input  fp64_t           ls_rf_wdata,
  input  reg_idx_t        ls_rf_raddr,
  output fp64_t           ls_rf_rdata,
  // counters
  output logic [31:0]     cnt_rdp_ops,
  output logic [31:0]     cnt_div_ops,
  output logic [31:0]     cnt_sqrt_ops,
  output logic [31:0]     cnt_hazard_stalls,
  output logic [31:0]     cnt_reconfigs,
  output logic [31:0]     cnt_dual_det2
);
  // the package fixes the register index width
  if (RF_DEPTH != (1 << REG_AW)) begin : g_bad_rf
    $error("fps: RF_DEPTH must equal 2**REG_AW");
  end

  logic [PC_W-1:0] pc;
  fps_instr_t      ins;
  logic            running;

  instr_mem #(.WIDTH(FPS_IW), .DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .we(prog_we), .waddr(prog_addr), .wdata(prog_data), .raddr(pc), .rdata(ins)
  );

  // register file: read ports 0..7 = src[0..7], 8 = Load-Store CFU
  //                write ports 0..3 = FPAU write-backs, 4 = Load-Store CFU
  logic [8:0][REG_AW-1:0] rf_raddr;
  fp64_t [8:0]            rf_rdata;
  logic [4:0]             rf_we;
  logic [4:0][REG_AW-1:0] rf_waddr;
  fp64_t [4:0]            rf_wdata;

  reg_file #(.DEPTH(RF_DEPTH), .NR(9), .NW(5)) u_rf (
    .clk, .rst_n, .raddr(rf_raddr), .rdata(rf_rdata), .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata)
  );

  // FPAU
  logic            cfg_we, rdp_issue, div_issue, sqrt_issue;
  rdp_cfg_e        cfg_new, cfg_q;
  logic            rdp_busy, div_busy, sqrt_busy;
  logic [3:0]      wb_valid;
  reg_idx_t [3:0]  wb_addr;
  fp64_t [3:0]     wb_data;
  fp64_t [3:0]     op_a, op_b;

  fpau u_fpau (
    .clk, .rst_n, .cfg_we, .cfg(cfg_new), .cfg_q,
    .rdp_issue, .div_issue, .sqrt_issue, .a(op_a), .b(op_b),
    .dst0(ins.dst0), .dst1(ins.dst1),
    .rdp_busy, .div_busy, .sqrt_busy, .wb_valid, .wb_addr, .wb_data
  );

  always_comb begin
    for (int k = 0; k < 8; k++) rf_raddr[k] = ins.src[k];
    rf_raddr[8] = ls_rf_raddr;
    for (int k = 0; k < 4; k++) begin
      op_a[k] = rf_rdata[2*k];
      op_b[k] = rf_rdata[2*k+1];
    end
    rf_we    = {ls_rf_we, wb_valid};
    rf_waddr = {ls_rf_waddr, wb_addr};
    rf_wdata = {ls_rf_wdata, wb_data};
  end
  assign ls_rf_rdata = rf_rdata[8];

  // scoreboard
  logic [RF_DEPTH-1:0] pend;
  logic [7:0]          src_used;
  logic                dst1_used, dst0_used;
  logic                hazard, rdp_op, cfg_mismatch, units_idle, issue_ok;

  always_comb begin
    rdp_op    = is_rdp_op(ins.op);
    src_used  = 8'h00;
    dst0_used = 1'b0;
    dst1_used = 1'b0;
    case (ins.op)
      FPS_DOT1:   begin src_used = 8'h03; dst0_used = 1'b1; end
      FPS_DOT2,
      FPS_DET2:   begin src_used = 8'h0F; dst0_used = 1'b1; end
      FPS_DOT3:   begin src_used = 8'h3F; dst0_used = 1'b1; end
      FPS_DOT4:   begin src_used = 8'hFF; dst0_used = 1'b1; end
      FPS_DET2X2: begin src_used = 8'hFF; dst0_used = 1'b1; dst1_used = 1'b1; end
      FPS_FDIV:   begin src_used = 8'h03; dst0_used = 1'b1; end
      FPS_FSQRT:  begin src_used = 8'h01; dst0_used = 1'b1; end
      default: ;
    endcase
    hazard = (dst0_used && pend[ins.dst0]) || (dst1_used && pend[ins.dst1]);
    for (int k = 0; k < 8; k++)
      if (src_used[k] && pend[ins.src[k]]) hazard = 1'b1;
    cfg_mismatch = rdp_op && (op2cfg(ins.op) != cfg_q);
    units_idle   = (pend == '0) && !rdp_busy && !div_busy && !sqrt_busy;
  end

  // issue control
  always_comb begin
    cfg_we     = 1'b0;
    cfg_new    = op2cfg(ins.op);
    rdp_issue  = 1'b0;
    div_issue  = 1'b0;
    sqrt_issue = 1'b0;
    issue_ok   = 1'b0;
    at_sync    = 1'b0;
    if (running) begin
      case (ins.op)
        FPS_DOT1, FPS_DOT2, FPS_DOT3, FPS_DOT4, FPS_DET2, FPS_DET2X2: begin
          if (cfg_mismatch) begin
            cfg_we = !rdp_busy;
          end else if (!hazard) begin
            rdp_issue = 1'b1;
            issue_ok  = 1'b1;
          end
        end
        FPS_FDIV:  if (!hazard && !div_busy)  begin div_issue  = 1'b1; issue_ok = 1'b1; end
        FPS_FSQRT: if (!hazard && !sqrt_busy) begin sqrt_issue = 1'b1; issue_ok = 1'b1; end
        FPS_CFG: begin
          cfg_new = rdp_cfg_e'(ins.src[0][2:0]);
          if (!rdp_busy) begin cfg_we = 1'b1; issue_ok = 1'b1; end
        end
        FPS_SYNC: begin
          at_sync  = units_idle;
          issue_ok = units_idle && sync_release;
        end
        FPS_HALT: issue_ok = 1'b1;
        default:  issue_ok = 1'b1;   // NOP
      endcase
    end
  end

  assign halted = !running && (pend == '0) && !rdp_busy && !div_busy && !sqrt_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; pc <= '0; pend <= '0;
      cnt_rdp_ops <= '0; cnt_div_ops <= '0; cnt_sqrt_ops <= '0;
      cnt_hazard_stalls <= '0; cnt_reconfigs <= '0; cnt_dual_det2 <= '0;
    end else begin
      // scoreboard: clear on write-back, set on issue
      for (int w = 0; w < 4; w++)
        if (wb_valid[w]) pend[wb_addr[w]] <= 1'b0;
      if (rdp_issue || div_issue || sqrt_issue) begin
        pend[ins.dst0] <= 1'b1;
        if (dst1_used) pend[ins.dst1] <= 1'b1;
      end
      if (start) begin
        running <= 1'b1; pc <= '0;
      end else if (running) begin
        if (issue_ok) begin
          if (ins.op == FPS_HALT) running <= 1'b0;
          else pc <= pc + 1'b1;
        end
      end
      if (start) begin
        cnt_rdp_ops <= '0; cnt_div_ops <= '0; cnt_sqrt_ops <= '0;
        cnt_hazard_stalls <= '0; cnt_reconfigs <= '0; cnt_dual_det2 <= '0;
      end else begin
      if (rdp_issue)  cnt_rdp_ops  <= cnt_rdp_ops + 1;
      if (rdp_issue && ins.op == FPS_DET2X2) cnt_dual_det2 <= cnt_dual_det2 + 1;
      if (div_issue)  cnt_div_ops  <= cnt_div_ops + 1;
      if (sqrt_issue) cnt_sqrt_ops <= cnt_sqrt_ops + 1;
      if (cfg_we)     cnt_reconfigs <= cnt_reconfigs + 1;
      if (running && hazard && !issue_ok && ins.op inside {FPS_DOT1, FPS_DOT2, FPS_DOT3, FPS_DOT4,
          FPS_DET2, FPS_DET2X2, FPS_FDIV, FPS_FSQRT})
        cnt_hazard_stalls <= cnt_hazard_stalls + 1;
      end
    end
  end

  // a result never lands on a register that is not pending
  for (genvar w = 0; w < 4; w++) begin : g_wb_chk
    a_wb_pending: assert property (@(posedge clk) disable iff (!rst_n)
      wb_valid[w] |-> pend[wb_addr[w]]);
  end
endmodule
