// instr_mem: instruction store of the main controller (the "I-Cache" of the
// paper's block diagram).
//
// DEPTH 64-bit instruction words, written by the host before a run and read
// by the main controller with one cycle of latency. The paper calls it a
// cache but does not describe tags or refills, so it is built as a plain
// memory that holds the whole program.
module instr_mem
  import sosa_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
)(
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output instr_t                   rdata,
  input  logic                     host_we,
  input  logic [$clog2(DEPTH)-1:0] host_addr,
  input  instr_t                   host_wdata
);

  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (host_we) mem[host_addr] <= host_wdata;
    rdata <= mem[raddr];
  end

endmodule
