// rdp: Reconfigurable Data Path of the GGR processing element.
//
// Four FP64 multipliers feed two add/subtract nodes, which feed one final
// adder (the tree printed in the paper's PE figure). A configuration register
// selects how the tree is used:
//   DOT1   y0 = a0*b0                       (scalar multiply)
//   DOT2   y0 = a0*b0 + a1*b1
//   DOT3   y0 = (a0*b0 + a1*b1) + a2*b2
//   DOT4   y0 = (a0*b0 + a1*b1) + (a2*b2 + a3*b3)
//   DET2   y0 = a0*b0 - a1*b1               (2x2 determinant)
//   DET2X2 y0 = a0*b0 - a1*b1, y1 = a2*b2 - a3*b3 (two DET2 at once)
// Nodes a configuration does not use are bypassed by multiplexers, so a
// shorter expression is rounded exactly as written above.
//
// Timing: fully pipelined, one operation per clock, RDP_LATENCY = 3 cycles
// (registers after the multipliers, after the add/subtract nodes and after the
// final adder). 'tag_in' travels with the operation (the sequencer puts the
// destination registers there). The configuration is written with cfg_we and
// applies to every stage at once, so the caller must let the pipeline drain
// (busy = 0) before changing it; an assertion checks this.
//
// The tree and the configurations follow the paper; the pipelining, the
// bypasses and the reconfiguration rule are this design's choices.
module rdp
  import ggr_pkg::*;
#(
  parameter int unsigned TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  rdp_cfg_e         cfg,
  output rdp_cfg_e         cfg_q,
  input  logic             in_valid,
  input  fp64_t [3:0]      a,
  input  fp64_t [3:0]      b,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output fp64_t            y0,
  output fp64_t            y1,
  output logic [TAG_W-1:0] tag_out,
  output logic             busy
);
  // stage 1: multipliers
  fp64_t [3:0] p_d, p_q;
  for (genvar i = 0; i < 4; i++) begin : g_mul
    fp64_mul u_mul (.a(a[i]), .b(b[i]), .y(p_d[i]));
  end

  // stage 2: add/subtract nodes
  logic  sub;
  fp64_t s0_d, s1_d, s0_q, s1_q;
  fp64_t s0_sum, s1_sum;
  assign sub = (cfg_q == CFG_DET2) || (cfg_q == CFG_DET2X2);
  fp64_add u_as0 (.a(p_q[0]), .b(p_q[1]), .sub(sub), .y(s0_sum));
  fp64_add u_as1 (.a(p_q[2]), .b(p_q[3]), .sub(sub), .y(s1_sum));
  always_comb begin
    s0_d = (cfg_q == CFG_DOT1) ? p_q[0] : s0_sum;
    s1_d = (cfg_q == CFG_DOT3) ? p_q[2] : s1_sum;
  end

  // stage 3: final adder
  fp64_t r_sum, y0_d;
  fp64_add u_add (.a(s0_q), .b(s1_q), .sub(1'b0), .y(r_sum));
  always_comb
    y0_d = (cfg_q inside {CFG_DOT3, CFG_DOT4}) ? r_sum : s0_q;

  logic [TAG_W-1:0] tag1, tag2;
  logic             v1, v2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q <= CFG_DOT4;
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      p_q <= '0; s0_q <= '0; s1_q <= '0; y0 <= '0; y1 <= '0;
      tag1 <= '0; tag2 <= '0; tag_out <= '0;
    end else begin
      if (cfg_we) cfg_q <= cfg;
      v1 <= in_valid;
      v2 <= v1;
      out_valid <= v2;
      if (in_valid) begin p_q <= p_d; tag1 <= tag_in; end
      if (v1) begin s0_q <= s0_d; s1_q <= s1_d; tag2 <= tag1; end
      if (v2) begin y0 <= y0_d; y1 <= s1_q; tag_out <= tag2; end
    end
  end

  assign busy = v1 | v2;

  // the configuration may only change when no operation is in flight
  a_cfg_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> !(v1 || v2 || in_valid));
endmodule
