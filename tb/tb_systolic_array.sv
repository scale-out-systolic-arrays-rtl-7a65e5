// tb_systolic_array: full-size (32 x 32, U = V = 16) array, three tiles back
// to back. Tile A uses weight register 0 while register 1 is loaded with
// tile B's weights; tile B follows A without a gap while register 0 is
// reloaded with tile C's weights right behind A's last use; then tile C.
// Inputs are skewed as the array requires (act row i at t + i/V, psum
// column j at t + j/U) and output row t of column j is checked exactly at
// cycle t + j/U + R/V against a reference matrix product.
// The multicast / fan-in organisation with U = V = 16 follows the publication; the skew convention being checked is this design's.
module tb_systolic_array;
  import sosa_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int R = 32, C = 32, U = 16, V = 16, T = R;
  localparam int NB = R / V, NG = C / U;

  logic signed [R-1:0][ACT_W-1:0]  act_in;
  logic        [R-1:0]             wsel_in;
  logic signed [C-1:0][PSUM_W-1:0] psum_in, psum_out;
  logic                            wl_valid, wl_bank;
  logic        [$clog2(R)-1:0]     wl_row;
  logic signed [C-1:0][ACT_W-1:0]  wl_data;
  int checks = 0, failures = 0;

  systolic_array #(.R(R), .C(C), .U(U), .V(V)) dut (.*);

  logic signed [ACT_W-1:0]  X [3][T][R];
  logic signed [ACT_W-1:0]  W [3][R][C];
  logic signed [PSUM_W-1:0] P [3][T][C];
  logic signed [PSUM_W-1:0] Y [3][T][C];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tile n starts (row 0 at the array's left edge) at cycle S0 + n*T
  localparam int S0 = 40;
  initial begin
    for (int n = 0; n < 3; n++) begin
      for (int t = 0; t < T; t++) for (int i = 0; i < R; i++) X[n][t][i] = ACT_W'($urandom);
      for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) W[n][i][j] = ACT_W'($urandom);
      for (int t = 0; t < T; t++) for (int j = 0; j < C; j++) P[n][t][j] = PSUM_W'($urandom);
      for (int t = 0; t < T; t++) for (int j = 0; j < C; j++) begin
        logic signed [PSUM_W-1:0] acc;
        acc = P[n][t][j];
        for (int i = 0; i < R; i++) acc = acc + PSUM_W'(X[n][t][i] * W[n][i][j]);
        Y[n][t][j] = acc;
      end
    end
  end

  initial begin
    act_in = '0; wsel_in = '0; psum_in = '0; wl_valid = 0; wl_bank = 0; wl_row = '0; wl_data = '0;
    for (int c = 0; c < S0 + 3 * T + 10; c++) begin
      @(negedge clk);
      // check outputs present in this cycle
      for (int j = 0; j < C; j++) begin
        int t, n;
        t = c - S0 - j / U - NB;
        if (t >= 0 && t < 3 * T) begin
          n = t / T;
          checks++;
          if (psum_out[j] !== Y[n][t % T][j]) begin
            failures++;
            if (failures < 5) $display("c=%0d tile %0d row %0d col %0d got %0d exp %0d", c, n, t % T, j, psum_out[j], Y[n][t % T][j]);
          end
        end
      end
      // weight loads: A into reg 0 at cycles 0..R-1, B into reg 1 while A
      // runs, C into reg 0 while B runs
      wl_valid = 0;
      if (c < R) begin
        wl_valid = 1; wl_bank = 0; wl_row = c[$clog2(R)-1:0];
        for (int j = 0; j < C; j++) wl_data[j] = W[0][c][j];
      end else if (c >= S0 && c < S0 + R) begin
        wl_valid = 1; wl_bank = 1; wl_row = 5'(c - S0);
        for (int j = 0; j < C; j++) wl_data[j] = W[1][c - S0][j];
      end else if (c >= S0 + T && c < S0 + T + R) begin
        wl_valid = 1; wl_bank = 0; wl_row = 5'(c - S0 - T);
        for (int j = 0; j < C; j++) wl_data[j] = W[2][c - S0 - T][j];
      end
      // skewed activations and input partial sums
      for (int i = 0; i < R; i++) begin
        int t;
        t = c - S0 - i / V;
        act_in[i]  = (t >= 0 && t < 3 * T) ? X[t / T][t % T][i] : '0;
        wsel_in[i] = (t >= 0 && t < 3 * T) ? ((t / T) == 1) : 1'b0;
      end
      for (int j = 0; j < C; j++) begin
        int t;
        t = c - S0 - j / U;
        psum_in[j] = (t >= 0 && t < 3 * T) ? P[t / T][t % T][j] : '0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
