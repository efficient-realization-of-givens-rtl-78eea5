// sync_barrier: meeting point of the PE's instruction streams.
//
// Each of N streams reports 'at_sync' while it waits at a SYNC instruction and
// 'halted' once it has executed HALT (or has not been started). 'release'
// ('release_o') is high, for one cycle, when at least one stream waits and every stream
// either waits or has halted; all waiting streams then step past their SYNC
// together. Purely combinational.
//
// The paper does not say how the Load-Store CFU and the Floating Point
// Sequencer are kept in step; this barrier is this design's choice.
module sync_barrier #(
  parameter int unsigned N = 3
) (
  input  logic [N-1:0] at_sync,
  input  logic [N-1:0] halted,
  output logic         release_o
);
  assign release_o = (|at_sync) && (&(at_sync | halted));
endmodule
