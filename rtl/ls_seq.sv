// ls_seq: instruction sequencer and decoder of one Load-Store CFU stream.
//
// The Load-Store CFU has two of these: the global stream moves words between
// Global Memory (side A) and Local Memory (side B), the local stream between
// Local Memory (side A) and the register file (side B). The sequencer reads
// the instruction at 'pc' from its instruction memory and executes:
//   LOAD  len words A[addr_a + off_a + i] -> B[addr_b + off_b + i]
//   STORE len words B[addr_b + off_b + i] -> A[addr_a + off_a + i]
//   LOOP  (count = len, strides stride_a/stride_b) ... END_LOOP:
//         the body runs 'count' times, and each pass adds the strides to
//         the offsets off_a/off_b used by LOAD and STORE (one loop level)
//   SYNC  wait at the barrier ('at_sync') until 'sync_release'
//   HALT  stop; 'halted' stays high until the next 'start'
//   NOP
// A transfer is requested with xfer_valid/xfer_store/xfer_addr_a/xfer_addr_b
// and counts as done in the cycle xfer_ready is high: one word per clock at
// best. LOAD/STORE with len = 0 and LOOP with count 0 do one pass of nothing
// and one pass of the body respectively.
//
// The instruction names LOOP/LOAD/STORE/END_LOOP are the paper's (its figure
// of the Load-Store CFU memory contents); fields, strides, SYNC and HALT
// are this design's choice.
module ls_seq
  import ggr_pkg::*;
#(
  parameter int unsigned PC_W = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic [PC_W-1:0] pc,
  input  ls_instr_t       instr,
  output logic            xfer_valid,
  output logic            xfer_store,
  output logic [31:0]     xfer_addr_a,
  output logic [15:0]     xfer_addr_b,
  input  logic            xfer_ready,
  output logic            at_sync,
  input  logic            sync_release,
  output logic            halted
);
  logic            running;
  logic [15:0]     idx;
  logic [PC_W-1:0] loop_pc;
  logic [15:0]     loop_cnt, loop_iter, str_a, str_b;
  logic [31:0]     off_a;
  logic [15:0]     off_b;
  logic            last_word;

  always_comb begin
    xfer_valid  = running && (instr.op == LS_LOAD || instr.op == LS_STORE) && (instr.len != 16'd0);
    xfer_store  = (instr.op == LS_STORE);
    xfer_addr_a = instr.addr_a + off_a + {16'd0, idx};
    xfer_addr_b = instr.addr_b + off_b + idx;
    at_sync     = running && (instr.op == LS_SYNC);
    halted      = !running;
    last_word   = (idx + 16'd1 >= instr.len);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; pc <= '0; idx <= '0;
      loop_pc <= '0; loop_cnt <= '0; loop_iter <= '0; str_a <= '0; str_b <= '0;
      off_a <= '0; off_b <= '0;
    end else if (start) begin
      running <= 1'b1; pc <= '0; idx <= '0; off_a <= '0; off_b <= '0;
      loop_iter <= '0;
    end else if (running) begin
      case (instr.op)
        LS_LOAD, LS_STORE: begin
          if (instr.len == 16'd0) pc <= pc + 1'b1;
          else if (xfer_ready) begin
            if (last_word) begin idx <= '0; pc <= pc + 1'b1; end
            else idx <= idx + 16'd1;
          end
        end
        LS_LOOP: begin
          loop_pc   <= pc + 1'b1;
          loop_cnt  <= instr.len;
          loop_iter <= 16'd0;
          str_a     <= instr.stride_a;
          str_b     <= instr.stride_b;
          off_a     <= '0;
          off_b     <= '0;
          pc        <= pc + 1'b1;
        end
        LS_END_LOOP: begin
          if (loop_iter + 16'd1 < loop_cnt) begin
            loop_iter <= loop_iter + 16'd1;
            off_a     <= off_a + {16'd0, str_a};
            off_b     <= off_b + str_b;
            pc        <= loop_pc;
          end else begin
            off_a <= '0; off_b <= '0;
            pc    <= pc + 1'b1;
          end
        end
        LS_SYNC:  if (sync_release) pc <= pc + 1'b1;
        LS_HALT:  running <= 1'b0;
        default:  pc <= pc + 1'b1;
      endcase
    end
  end
endmodule
