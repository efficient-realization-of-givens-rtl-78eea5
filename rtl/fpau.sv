// fpau: Floating Point Arithmetic Unit of the Floating Point Sequencer.
//
// Holds the three units the paper draws in it: the Reconfigurable Data Path
// (shown as DOT4), FDIV and FSQRT. The sequencer issues at most one operation
// per clock:
//   rdp_issue  : operands a[0..3], b[0..3]; results go to dst0 (and dst1
//                when the RDP is in the DET2X2 configuration) 3 cycles later
//   div_issue  : dst0 = a[0] / b[0], 56 cycles later; one division at a time
//   sqrt_issue : dst0 = sqrt(a[0]), 56 cycles later; one root at a time
// cfg_we/cfg reconfigure the RDP (only while rdp_busy is low).
// Results leave on four write-back ports: 0 = RDP y0, 1 = RDP y1,
// 2 = FDIV, 3 = FSQRT, each with its destination register.
//
// Grouping and write-back ports are this design's choice; the paper names
// the units only.
module fpau
  import ggr_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cfg_we,
  input  rdp_cfg_e     cfg,
  output rdp_cfg_e     cfg_q,
  input  logic         rdp_issue,
  input  logic         div_issue,
  input  logic         sqrt_issue,
  input  fp64_t [3:0]  a,
  input  fp64_t [3:0]  b,
  input  reg_idx_t     dst0,
  input  reg_idx_t     dst1,
  output logic         rdp_busy,
  output logic         div_busy,
  output logic         sqrt_busy,
  output logic [3:0]   wb_valid,
  output reg_idx_t [3:0] wb_addr,
  output fp64_t [3:0]  wb_data
);
  // RDP: the tag carries both destinations
  logic              rdp_ov;
  fp64_t             y0, y1;
  logic [2*REG_AW-1:0] tag_out;
  rdp #(.TAG_W(2*REG_AW)) u_rdp (
    .clk, .rst_n, .cfg_we, .cfg, .cfg_q,
    .in_valid(rdp_issue), .a, .b, .tag_in({dst1, dst0}),
    .out_valid(rdp_ov), .y0, .y1, .tag_out, .busy(rdp_busy)
  );

  // FDIV / FSQRT with their destination registers
  logic     div_done, sqrt_done;
  fp64_t    div_y, sqrt_y;
  reg_idx_t div_dst, sqrt_dst;
  fp64_div  u_div  (.clk, .rst_n, .start(div_issue),  .a(a[0]), .b(b[0]), .busy(div_busy),  .done(div_done),  .y(div_y));
  fp64_sqrt u_sqrt (.clk, .rst_n, .start(sqrt_issue), .a(a[0]),           .busy(sqrt_busy), .done(sqrt_done), .y(sqrt_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_dst <= '0; sqrt_dst <= '0;
    end else begin
      if (div_issue && !div_busy)   div_dst  <= dst0;
      if (sqrt_issue && !sqrt_busy) sqrt_dst <= dst0;
    end
  end

  always_comb begin
    wb_valid[0] = rdp_ov;
    wb_addr[0]  = tag_out[REG_AW-1:0];
    wb_data[0]  = y0;
    wb_valid[1] = rdp_ov && (cfg_q == CFG_DET2X2);
    wb_addr[1]  = tag_out[2*REG_AW-1:REG_AW];
    wb_data[1]  = y1;
    wb_valid[2] = div_done;
    wb_addr[2]  = div_dst;
    wb_data[2]  = div_y;
    wb_valid[3] = sqrt_done;
    wb_addr[3]  = sqrt_dst;
    wb_data[3]  = sqrt_y;
  end

  a_div_not_busy:  assert property (@(posedge clk) disable iff (!rst_n) div_issue  |-> !div_busy);
  a_sqrt_not_busy: assert property (@(posedge clk) disable iff (!rst_n) sqrt_issue |-> !sqrt_busy);
endmodule
