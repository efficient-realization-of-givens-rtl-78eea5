// gm_model: behavioural model of the Global Memory seen by the PE (the
// paper's "memory hierarchy", which it does not design). Not synthesizable
// intent: a plain array with a request/grant port. A request is granted in a
// cycle with probability (100 - STALL_PCT)%; a granted read returns its word on
// rvalid/rdata in the next cycle; a granted write updates the array at that
// clock edge. Testbenches read and write 'mem' directly.
module gm_model
  import ggr_pkg::*;
#(
  parameter int unsigned DEPTH     = 8192,
  parameter int unsigned STALL_PCT = 25
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  fp64_t       wdata,
  output logic        gnt,
  output logic        rvalid,
  output fp64_t       rdata
);
  fp64_t mem [DEPTH];
  logic  gnt_roll;

  always @(negedge clk) gnt_roll <= (($urandom % 100) >= STALL_PCT);
  assign gnt = req && gnt_roll;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0; rdata <= '0;
    end else begin
      rvalid <= gnt && !we;
      if (gnt && !we) rdata <= mem[addr % DEPTH];
      if (gnt && we)  mem[addr % DEPTH] <= wdata;
    end
  end
endmodule
