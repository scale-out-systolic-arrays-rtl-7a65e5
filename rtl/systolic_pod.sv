// systolic_pod: one pod of the accelerator.
//
// Datapath (paper Fig. 9, right): activation rows from the X interconnect
// pass the CONV-to-GEMM converter and the activation skew buffer into the
// systolic array; input partial sums from the Pin interconnect pass their own
// skew buffer into the top of the array; output partial sums leave the array
// through the deskew buffer to the Pout interconnect. Weight rows from the W
// interconnect are written into the idle weight registers of the array.
// Control: the task queue is filled from the control bus (OP_POD addressed to
// pod_id); the FSM runs one task per time slice.
//
// Timing: activation row t and input psum row t arrive in the same cycle
// T+t; output row t leaves at T+t+PIPE with
// PIPE = KMAX + C/U - 1 + R/V (sosa_pkg::pod_lat); out_valid marks the rows.
// Rows of a task without input partial sums (use_pin = 0) start from zero.
// The pod number is an input so that all pods share one module body.
module systolic_pod
  import sosa_pkg::*;
#(
  parameter int unsigned R      = 32,
  parameter int unsigned C      = 32,
  parameter int unsigned U      = 16,
  parameter int unsigned V      = 16,
  parameter int unsigned KMAX   = 4,
  parameter int unsigned QDEPTH = 4
)(
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [9:0]                     pod_id,
  input  ctrl_bus_t                      ctrl,
  input  logic                           slice_start,
  input  logic [7:0]                     slice_id,
  input  logic                           x_valid,
  input  logic [R-1:0][ACT_W-1:0]        x_data,
  input  logic                           w_valid,
  input  logic [C-1:0][ACT_W-1:0]        w_data,
  input  logic                           pin_valid,
  input  logic [C-1:0][PSUM_W-1:0]       pin_data,
  output logic                           pout_valid,
  output logic [C-1:0][PSUM_W-1:0]       pout_data,
  output logic                           busy
);

  localparam int unsigned PIPE = pod_lat(R, C, U, V, KMAX);

  // ---------------------------------------------------------------- control
  pod_task_t q_din, q_head;
  logic      q_push, q_pop, q_empty, q_full;

  assign q_push = ctrl.valid && ctrl.instr.op == OP_POD && ctrl.instr.a == pod_id;
  always_comb begin
    q_din         = '0;
    q_din.slice   = ctrl.slice;
    q_din.load_w  = ctrl.instr.flags[0];
    q_din.compute = ctrl.instr.flags[1];
    q_din.use_pin = ctrl.instr.flags[2];
    q_din.conv_en = ctrl.instr.flags[3];
    q_din.log2_kw = ctrl.instr.flags[5:4];
  end

  task_queue #(.DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n, .push(q_push), .din(q_din), .pop(q_pop), .dout(q_head),
    .empty(q_empty), .full(q_full)
  );

  logic                 wl_valid, wl_bank, conv_en, use_pin, arr_wsel;
  logic [$clog2(R)-1:0] wl_row;
  logic [1:0]           log2_kw;

  pod_fsm #(.R(R), .KMAX(KMAX), .PIPE(PIPE)) u_fsm (
    .clk, .rst_n, .slice_start, .slice_id,
    .q_head, .q_empty, .q_pop,
    .w_valid, .x_valid,
    .wl_valid, .wl_row, .wl_bank, .conv_en, .log2_kw, .use_pin, .arr_wsel,
    .out_valid(pout_valid), .busy
  );

  // ---------------------------------------------------------------- datapath
  logic [R-1:0][ACT_W-1:0] x_gemm;
  conv2gemm #(.R(R), .KMAX(KMAX)) u_c2g (
    .clk, .in_data(x_data), .conv_en, .log2_kw, .out_data(x_gemm)
  );

  // activation skew: {wsel, act} per row, delayed by row group
  logic [R-1:0][ACT_W:0] a_unsk, a_sk;
  for (genvar i = 0; i < R; i++) begin : g_a
    assign a_unsk[i] = {arr_wsel, x_gemm[i]};
  end
  skew_buffer #(.LANES(R), .WIDTH(ACT_W+1), .GROUP(V), .BASE(0), .REVERSE(1'b0)) u_askew (
    .clk, .din(a_unsk), .dout(a_sk)
  );

  logic signed [R-1:0][ACT_W-1:0] arr_act;
  logic        [R-1:0]            arr_sel;
  for (genvar i = 0; i < R; i++) begin : g_as
    assign arr_act[i] = a_sk[i][ACT_W-1:0];
    assign arr_sel[i] = a_sk[i][ACT_W];
  end

  // input partial sums: zero unless the task uses them, delayed by the
  // converter latency plus the column-group skew
  logic [C-1:0][PSUM_W-1:0] pin_g, pin_sk;
  assign pin_g = (use_pin && pin_valid) ? pin_data : '0;
  skew_buffer #(.LANES(C), .WIDTH(PSUM_W), .GROUP(U), .BASE(KMAX), .REVERSE(1'b0)) u_pskew (
    .clk, .din(pin_g), .dout(pin_sk)
  );

  logic signed [C-1:0][PSUM_W-1:0] arr_out;
  systolic_array #(.R(R), .C(C), .U(U), .V(V)) u_array (
    .clk,
    .act_in   (arr_act),
    .wsel_in  (arr_sel),
    .psum_in  (pin_sk),
    .psum_out (arr_out),
    .wl_valid (wl_valid),
    .wl_row   (wl_row),
    .wl_bank  (wl_bank),
    .wl_data  (w_data)
  );

  // output deskew
  skew_buffer #(.LANES(C), .WIDTH(PSUM_W), .GROUP(U), .BASE(0), .REVERSE(1'b1)) u_deskew (
    .clk, .din(arr_out), .dout(pout_data)
  );

endmodule
