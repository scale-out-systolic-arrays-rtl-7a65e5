// sosa_pe: one weight-stationary processing element.
//
// psum_out = psum_in + act * w[wsel], all signed, wrapping to PSUM_W bits.
// The PE holds two weight registers: while the array computes with one of
// them, the weights of the next tile are written into the other (double
// buffering, as drawn with two weight registers per PE in the paper's array
// figure). The multiply-add is combinational; the activation and partial-sum
// registers are placed by the surrounding array, once per group of U columns
// and V rows (with U = V = 1 every PE has one of each, the classic array).
//
// Interface: act/wsel/psum_in from the array, wl_* write one weight
// register at the clock edge. Timing: psum_out is valid in the same cycle.
module sosa_pe
  import sosa_pkg::*;
(
  input  logic                     clk,
  input  logic signed [ACT_W-1:0]  act,
  input  logic                     wsel,
  input  logic signed [PSUM_W-1:0] psum_in,
  output logic signed [PSUM_W-1:0] psum_out,
  input  logic                     wl_en,
  input  logic                     wl_bank,
  input  logic signed [ACT_W-1:0]  wl_data
);

  logic signed [ACT_W-1:0] w [2];

  always_ff @(posedge clk) begin
    if (wl_en) w[wl_bank] <= wl_data;
  end

  logic signed [2*ACT_W-1:0] prod;
  always_comb begin
    prod     = act * w[wsel];
    psum_out = psum_in + PSUM_W'(prod);
  end

endmodule
