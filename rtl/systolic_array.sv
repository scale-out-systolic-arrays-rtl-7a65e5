// systolic_array: R x C weight-stationary systolic array with activation
// multicast (U) and partial-sum fan-in (V).
//
// Activations enter at the left, one per row, and move right; partial sums
// enter at the top, one per column, and move down; weights stay in the PEs.
// Following the paper, an activation reaches U consecutive PEs of its row in
// the same cycle and a partial sum passes V PEs of its column per cycle. This
// is built with one activation register per group of U columns and one
// partial-sum register per group of V rows; inside a group the signals are
// combinational. With NG = C/U column groups and NB = R/V row groups:
//   * activation row t for array row i must be applied at t + i/V   (skew)
//   * input psum t for column j must be applied at t + j/U          (skew)
//   * output psum t of column j leaves at t + j/U + NB              (skewed)
// The skew and deskew are done outside the array (skew_buffer).
//
// Weights are written row by row: wl_row selects the PE row, wl_bank the
// weight register (the one not in use). The write is broadcast down each
// column; for column group g it is delayed by g cycles so that it follows the
// activation wavefront and a row can be overwritten right after its last
// use. Which weight register an activation uses travels with it (wsel_in).
// Writing weights by broadcast instead of shifting them PE to PE, and the
// per-group write delay, are this design's choices.
module systolic_array
  import sosa_pkg::*;
#(
  parameter int unsigned R = 32,
  parameter int unsigned C = 32,
  parameter int unsigned U = 16,
  parameter int unsigned V = 16
)(
  input  logic                               clk,
  input  logic signed [R-1:0][ACT_W-1:0]     act_in,
  input  logic        [R-1:0]                wsel_in,
  input  logic signed [C-1:0][PSUM_W-1:0]    psum_in,
  output logic signed [C-1:0][PSUM_W-1:0]    psum_out,
  input  logic                               wl_valid,
  input  logic        [$clog2(R)-1:0]        wl_row,
  input  logic                               wl_bank,
  input  logic signed [C-1:0][ACT_W-1:0]     wl_data
);

  localparam int unsigned NG = (C + U - 1) / U;  // column groups
  localparam int unsigned NB = (R + V - 1) / V;  // row groups

  // activation (and its weight select) at the entry of each column group
  logic signed [R-1:0][ACT_W-1:0] a_g [NG];
  logic        [R-1:0]            s_g [NG];
  assign a_g[0] = act_in;
  assign s_g[0] = wsel_in;

  // weight write port at each column group, delayed by g cycles
  logic                         wv_g [NG];
  logic [$clog2(R)-1:0]         wr_g [NG];
  logic                         wb_g [NG];
  logic signed [C-1:0][ACT_W-1:0] wd_g [NG];
  assign wv_g[0] = wl_valid;
  assign wr_g[0] = wl_row;
  assign wb_g[0] = wl_bank;
  assign wd_g[0] = wl_data;

  for (genvar g = 1; g < NG; g++) begin : g_colpipe
    always_ff @(posedge clk) begin
      a_g[g]  <= a_g[g-1];
      s_g[g]  <= s_g[g-1];
      wv_g[g] <= wv_g[g-1];
      wr_g[g] <= wr_g[g-1];
      wb_g[g] <= wb_g[g-1];
      wd_g[g] <= wd_g[g-1];
    end
  end

  // registered partial sums at the end of each row group
  logic signed [PSUM_W-1:0] p_reg [NB][C];

  for (genvar i = 0; i < R; i++) begin : g_row
    for (genvar j = 0; j < C; j++) begin : g_col
      localparam int unsigned G = j / U;
      localparam int unsigned B = i / V;
      logic signed [PSUM_W-1:0] pin, pout;   // partial sum into / out of PE (i,j)
      if (i == 0) begin : g_top
        assign pin = psum_in[j];
      end else if (i % V == 0) begin : g_grp
        assign pin = p_reg[B-1][j];
      end else begin : g_chain
        assign pin = g_row[i-1].g_col[j].pout;
      end

      sosa_pe u_pe (
        .clk      (clk),
        .act      (a_g[G][i]),
        .wsel     (s_g[G][i]),
        .psum_in  (pin),
        .psum_out (pout),
        .wl_en    (wv_g[G] && (wr_g[G] == i[$clog2(R)-1:0])),
        .wl_bank  (wb_g[G]),
        .wl_data  (wd_g[G][j])
      );

      if (i % V == V - 1 || i == R - 1) begin : g_reg
        always_ff @(posedge clk) p_reg[B][j] <= pout;
      end
    end
  end

  for (genvar j = 0; j < C; j++) begin : g_out
    assign psum_out[j] = p_reg[NB-1][j];
  end

endmodule
