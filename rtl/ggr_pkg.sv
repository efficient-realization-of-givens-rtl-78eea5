// ggr_pkg: types and constants shared by the GGR processing element.
//
// The processing element (PE) runs Generalized Givens Rotation QR factorization
// with three instruction streams: the Floating Point Sequencer (FPS) stream, and
// the global and local streams of the Load-Store CFU. This package defines the
// instruction formats of those streams, the configurations of the Reconfigurable
// Data Path (RDP) and a few FP64 constants.
//
// The instruction names (DOT1..DOT4, DET2, a reconfigure instruction, LOOP,
// LOAD, STORE, END_LOOP) follow the paper; the encodings, field widths and the
// SYNC/HALT instructions are this design's own choice.
package ggr_pkg;

  typedef logic [63:0] fp64_t;

  localparam fp64_t FP64_ZERO = 64'h0000_0000_0000_0000;
  localparam fp64_t FP64_ONE  = 64'h3FF0_0000_0000_0000;
  localparam fp64_t FP64_QNAN = 64'h7FF8_0000_0000_0000;

  // Register file geometry (default 256 registers -> 8-bit register index)
  localparam int unsigned REG_AW = 8;
  typedef logic [REG_AW-1:0] reg_idx_t;

  // RDP configurations (Fig. 23 of the paper plus DOT4 and the dual DET2)
  typedef enum logic [2:0] {
    CFG_DOT1   = 3'd0,  // y0 = a0*b0
    CFG_DOT2   = 3'd1,  // y0 = a0*b0 + a1*b1
    CFG_DOT3   = 3'd2,  // y0 = (a0*b0 + a1*b1) + a2*b2
    CFG_DOT4   = 3'd3,  // y0 = (a0*b0 + a1*b1) + (a2*b2 + a3*b3)
    CFG_DET2   = 3'd4,  // y0 = a0*b0 - a1*b1
    CFG_DET2X2 = 3'd5   // y0 = a0*b0 - a1*b1 ; y1 = a2*b2 - a3*b3
  } rdp_cfg_e;

  localparam int unsigned RDP_LATENCY = 3;

  // FPS opcodes
  typedef enum logic [3:0] {
    FPS_NOP    = 4'd0,
    FPS_DOT1   = 4'd1,
    FPS_DOT2   = 4'd2,
    FPS_DOT3   = 4'd3,
    FPS_DOT4   = 4'd4,
    FPS_DET2   = 4'd5,
    FPS_DET2X2 = 4'd6,
    FPS_FDIV   = 4'd7,   // dst0 = src0 / src1
    FPS_FSQRT  = 4'd8,   // dst0 = sqrt(src0)
    FPS_CFG    = 4'd9,   // reconfigure RDP to cfg field (src0[2:0])
    FPS_SYNC   = 4'd10,  // wait for own results, then meet the other streams
    FPS_HALT   = 4'd11
  } fps_op_e;

  // FPS instruction: RDP operands are a_k = src[2k], b_k = src[2k+1]
  typedef struct packed {
    fps_op_e        op;
    reg_idx_t       dst0;
    reg_idx_t       dst1;
    reg_idx_t [7:0] src;
  } fps_instr_t;

  localparam int unsigned FPS_IW = $bits(fps_instr_t);

  // Load-Store CFU instruction (global stream: A side = GM, B side = LM;
  //                              local stream:  A side = LM, B side = register file)
  typedef enum logic [2:0] {
    LS_NOP      = 3'd0,
    LS_LOAD     = 3'd1,  // B[addr_b+i] <- A[addr_a+i], i < len
    LS_STORE    = 3'd2,  // A[addr_a+i] <- B[addr_b+i], i < len
    LS_LOOP     = 3'd3,  // repeat body up to END_LOOP len times; addresses advance by strides
    LS_END_LOOP = 3'd4,
    LS_SYNC     = 3'd5,
    LS_HALT     = 3'd6
  } ls_op_e;

  typedef struct packed {
    ls_op_e      op;
    logic [15:0] len;
    logic [31:0] addr_a;
    logic [15:0] addr_b;
    logic [15:0] stride_a;
    logic [15:0] stride_b;
  } ls_instr_t;

  localparam int unsigned LS_IW = $bits(ls_instr_t);

  // Map an RDP opcode to its configuration
  function automatic rdp_cfg_e op2cfg(fps_op_e op);
    case (op)
      FPS_DOT1:   return CFG_DOT1;
      FPS_DOT2:   return CFG_DOT2;
      FPS_DOT3:   return CFG_DOT3;
      FPS_DOT4:   return CFG_DOT4;
      FPS_DET2:   return CFG_DET2;
      default:    return CFG_DET2X2;
    endcase
  endfunction

  function automatic logic is_rdp_op(fps_op_e op);
    return op inside {FPS_DOT1, FPS_DOT2, FPS_DOT3, FPS_DOT4, FPS_DET2, FPS_DET2X2};
  endfunction

  // Performance / mechanism counters reported by the PE
  typedef struct packed {
    logic [31:0] cycles;
    logic [31:0] rdp_ops;
    logic [31:0] div_ops;
    logic [31:0] sqrt_ops;
    logic [31:0] hazard_stalls;
    logic [31:0] reconfigs;
    logic [31:0] barriers;
    logic [31:0] gm_stalls;
    logic [31:0] dual_det2;
  } pe_stats_t;

endpackage
