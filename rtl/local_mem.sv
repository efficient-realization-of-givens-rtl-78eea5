// local_mem: Local Memory (LM) of the Load-Store CFU.
//
// DEPTH FP64 words with two independent ports, A and B. Each port has a
// combinational read (raddr -> rdata) and a write on the rising clock edge.
// In the PE port A faces Global Memory (loads write, stores read) and port B
// faces the register file (loads read, stores write). Contents are not reset.
//
// The paper names the Local Memory but not its size or ports; 16384 words
// (room for a 120x120 matrix, the largest PE workload evaluated) and two
// ports are this design's choice. Writing one word from both ports in the
// same cycle is not allowed (checked by an assertion; port B would win).
module local_mem
  import ggr_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we_a,
  input  logic [AW-1:0] waddr_a,
  input  fp64_t         wdata_a,
  input  logic [AW-1:0] raddr_a,
  output fp64_t         rdata_a,
  input  logic          we_b,
  input  logic [AW-1:0] waddr_b,
  input  fp64_t         wdata_b,
  input  logic [AW-1:0] raddr_b,
  output fp64_t         rdata_b
);
  fp64_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_a) mem[waddr_a] <= wdata_a;
    if (we_b) mem[waddr_b] <= wdata_b;
  end

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];

  a_no_dup_write: assert property (@(posedge clk)
    !(we_a && we_b && waddr_a == waddr_b));
endmodule
