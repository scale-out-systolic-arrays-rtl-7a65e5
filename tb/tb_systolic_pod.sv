// tb_systolic_pod: one full-size pod (32 x 32, U = V = 16, KMAX = 4) run over
// five time slices through its control bus:
//   slice 1: load weight tile A
//   slice 2: compute X1 * A + P1 (input partial sums) while loading B
//   slice 3: compute a convolution tile (kernel width 2) with B, no psums
//   slice 4: no task for this pod (idle; arriving rows must be ignored)
//   slice 5: compute X3 * B (weights kept from slice 2)
// Input partial-sum rows are offered in every slice; only tasks with
// use_pin may add them. Output rows are checked against a reference product, and each must appear
// exactly PIPE = KMAX + C/U - 1 + R/V cycles after its activation row.
// The pod's parts follow the publication; the task encoding and latency are this design's.
module tb_systolic_pod;
  import sosa_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int R = 32, C = 32, U = 16, V = 16, KMAX = 4, S = 48;
  localparam int PIPE = KMAX + C / U - 1 + R / V;

  logic rst_n, slice_start, x_valid, w_valid, pin_valid, pout_valid, busy;
  logic [7:0] slice_id;
  ctrl_bus_t ctrl;
  logic [R-1:0][ACT_W-1:0]  x_data;
  logic [C-1:0][ACT_W-1:0]  w_data;
  logic [C-1:0][PSUM_W-1:0] pin_data, pout_data;
  int checks = 0, failures = 0, nrows = 0;

  systolic_pod #(.R(R), .C(C), .U(U), .V(V), .KMAX(KMAX)) dut (
    .clk, .rst_n, .pod_id(10'd5), .ctrl, .slice_start, .slice_id,
    .x_valid, .x_data, .w_valid, .w_data, .pin_valid, .pin_data, .pout_valid, .pout_data, .busy);

  logic signed [ACT_W-1:0]  WA [R][C], WB [R][C];
  logic signed [ACT_W-1:0]  XS [3][R+1][R];   // pixel / row streams per computing slice
  logic signed [PSUM_W-1:0] P1 [R][C];
  logic signed [PSUM_W-1:0] EXP [int][C];     // expected output by cycle
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare outputs every cycle
  always @(negedge clk) if (rst_n) begin
    if (EXP.exists(cyc)) begin
      checks++;
      if (!pout_valid) failures++;
      else begin
        for (int j = 0; j < C; j++) begin
          checks++;
          if ($signed(pout_data[j]) !== EXP[cyc][j]) failures++;
        end
        nrows++;
      end
    end else if (pout_valid) begin
      checks++; failures++;
    end
  end

  task automatic push_task(input logic [7:0] sl, input logic [7:0] flags);
    @(negedge clk);
    ctrl = '0; ctrl.valid = 1; ctrl.slice = sl;
    ctrl.instr.op = OP_POD; ctrl.instr.a = 10'd5; ctrl.instr.flags = flags;
    @(negedge clk);
    ctrl = '0;
    // an instruction for another pod must be ignored
    ctrl.valid = 1; ctrl.slice = sl; ctrl.instr.op = OP_POD; ctrl.instr.a = 10'd6; ctrl.instr.flags = 8'h03;
    @(negedge clk);
    ctrl = '0;
  endtask

  // one slice: pulse, then stream nw weight rows, nx activation rows
  task automatic slice(input logic [7:0] id, input int nw, input logic signed [ACT_W-1:0] Wt [R][C],
                       input int xi, input int nx, input bit pin);
    int t0;
    @(negedge clk);
    slice_start = 1; slice_id = id; t0 = cyc;
    @(negedge clk);
    slice_start = 0;
    for (int c = 0; c < S - 2; c++) begin
      w_valid = (c < nw); x_valid = (c < nx); pin_valid = (c < R);
      for (int j = 0; j < C; j++) w_data[j] = (c < nw) ? Wt[c][j] : '0;
      for (int i = 0; i < R; i++) x_data[i] = (c < nx) ? XS[xi][c][i] : '0;
      for (int j = 0; j < C; j++) pin_data[j] = (c < R) ? P1[c][j] : '0;
      @(negedge clk);
    end
    w_valid = 0; x_valid = 0; pin_valid = 0;
  endtask

  // expected rows of a compute slice whose first input row arrives at cycle tx
  task automatic expect_rows(input int tx, input int xi, input bit conv, input bit pin,
                             input logic signed [ACT_W-1:0] Wt [R][C]);
    for (int t = 0; t < R; t++) begin
      for (int j = 0; j < C; j++) begin
        logic signed [PSUM_W-1:0] acc;
        acc = pin ? P1[t][j] : '0;
        for (int f = 0; f < R; f++) begin
          logic signed [ACT_W-1:0] a;
          a = conv ? XS[xi][t + f / (R / 2)][f % (R / 2)] : XS[xi][t][f];
          acc = acc + PSUM_W'(a * Wt[f][j]);
        end
        EXP[tx + t + PIPE][j] = acc;
      end
    end
  endtask

  initial begin
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
      WA[i][j] = ACT_W'($urandom); WB[i][j] = ACT_W'($urandom); P1[i][j] = PSUM_W'($urandom);
    end
    for (int n = 0; n < 3; n++) for (int t = 0; t <= R; t++) for (int i = 0; i < R; i++)
      XS[n][t][i] = ACT_W'($urandom);
    rst_n = 0; slice_start = 0; slice_id = 0; ctrl = '0;
    x_valid = 0; w_valid = 0; pin_valid = 0; x_data = '0; w_data = '0; pin_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // tasks: flags = {log2_kw, conv, use_pin, compute, load_w}
    push_task(8'd1, 8'b00_0_0_0_1);
    push_task(8'd2, 8'b00_0_1_1_1);
    push_task(8'd3, 8'b01_1_0_1_0);
    slice(8'd1, R, WA, 0, 0, 0);
    // slice 2: rows arrive from the cycle after the pulse (pulse cycle + 1)
    fork
      slice(8'd2, R, WB, 0, R, 1);
      begin @(negedge clk); expect_rows(cyc + 1, 0, 0, 1, WA); end
    join
    push_task(8'd5, 8'b00_0_0_1_0);
    fork
      slice(8'd3, 0, WA, 1, R + 1, 0);
      begin @(negedge clk); expect_rows(cyc + 1, 1, 1, 0, WB); end
    join
    slice(8'd4, R, WA, 2, R, 1);       // idle pod: nothing expected
    fork
      slice(8'd5, 0, WA, 2, R, 0);
      begin @(negedge clk); expect_rows(cyc + 1, 2, 0, 0, WB); end
    join
    repeat (20) @(negedge clk);
    checks++;
    if (nrows != 3 * R) failures++;
    $display("rows=%0d", nrows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
