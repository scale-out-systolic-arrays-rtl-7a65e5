// sram_bank: single-ported on-chip SRAM bank.
//
// One row is read or written per cycle (en, we). A read returns the row one
// cycle later on rdata; rdata holds its value until the next read. The paper
// models its 256 KB banks with Cacti-P; here the macro is written as a plain
// memory array so that it simulates and maps onto any SRAM compiler.
// 256 KB = DEPTH x WIDTH/8 bytes: 8192 rows of 32 bytes for activation and
// weight banks, 4096 rows of 64 bytes for partial-sum banks.
module sram_bank #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 256
)(
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
