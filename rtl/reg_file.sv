// reg_file: FP64 register file of the Floating Point Sequencer.
//
// DEPTH registers of 64 bits with NR combinational read ports and NW write
// ports written on the rising clock edge. In the PE, read ports 0..7 supply
// the eight RDP operands (or the FDIV/FSQRT operands), port 8 serves the
// Load-Store CFU; write ports 0..3 take FPAU results and port 4 takes data
// from Local Memory. Reset clears every register.
//
// The paper draws the register file between the Load-Store CFU and the
// arithmetic unit but gives no size or port count; 256 registers and the
// port counts are this design's choice. Two ports must never write the same
// register in one cycle (the sequencer's scoreboard guarantees it); an
// assertion checks this, and if it happened the higher port would win.
module reg_file
  import ggr_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned NR    = 9,
  parameter int unsigned NW    = 5,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NR-1:0][AW-1:0]  raddr,
  output fp64_t [NR-1:0]         rdata,
  input  logic [NW-1:0]          we,
  input  logic [NW-1:0][AW-1:0]  waddr,
  input  fp64_t [NW-1:0]         wdata
);
  fp64_t regs [DEPTH];

  always_comb
    for (int r = 0; r < NR; r++) rdata[r] = regs[raddr[r]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) regs[i] <= FP64_ZERO;
    end else begin
      for (int w = 0; w < NW; w++)
        if (we[w]) regs[waddr[w]] <= wdata[w];
    end
  end

  // no two write ports on the same register in one cycle
  for (genvar i = 0; i < NW; i++) begin : g_wa
    for (genvar j = i + 1; j < NW; j++) begin : g_wb
      a_no_dup_write: assert property (@(posedge clk) disable iff (!rst_n)
        !(we[i] && we[j] && waddr[i] == waddr[j]));
    end
  end
endmodule
