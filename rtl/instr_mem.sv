// instr_mem: instruction memory, used three times in the PE (Floating Point
// Sequencer, global Load/Store stream, local Load/Store stream).
//
// DEPTH words of WIDTH bits. A host writes the program through the write port
// (we/waddr/wdata, one word per clock) before starting the PE; the sequencer
// reads the word at 'raddr' combinationally. Contents are not reset.
//
// The paper shows the three instruction memories but not their size or how
// they are loaded; both are this design's choice.
module instr_mem #(
  parameter int unsigned WIDTH = 84,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];
endmodule
