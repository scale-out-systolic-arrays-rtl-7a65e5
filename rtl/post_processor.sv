// post_processor: a pair of SIMD post-processor lanes (lanes 2p and 2p+1).
//
// Each lane receives one partial-sum row (C values) per cycle from the
// partial-sum banks. Its operation for the next slice is set over the
// control bus (OP_PP, a = lane), is staged at slice_start and becomes
// active at slice_go, when the first rows of the new slice arrive:
//   PP_ACT     lane n:  act_n  = sat8(relu(in_n) >>> shift)
//   PP_ADD     lane 2p: psum_0 = in_0 + in_1          (tile aggregation)
//   PP_ADD_ACT lane 2p: act_0  = sat8(relu(in_0 + in_1) >>> shift)
// A pair operation is set on the even lane and uses both lanes' inputs, so
// the pair aggregates two tiles at the rate a pod produces one, as the paper
// describes ("post-processors work in pairs"). The activation function
// (ReLU, arithmetic right shift, saturation to 8 bits) is this design's
// choice; the paper only says an activation function is applied.
// Timing: results are registered, PP_LAT = 1 cycle after the inputs.
// The odd lane's partial-sum output is always idle (valid = 0): a pair sum is
// produced only on the even lane. The port is kept so that every lane has the
// same interface towards the partial-sum interconnect.
module post_processor
  import sosa_pkg::*;
#(
  parameter int unsigned C = 32
)(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [9:0]                   pair_id,
  input  ctrl_bus_t                    ctrl,
  input  logic                         slice_start,  // next-slice ops -> staged
  input  logic                         slice_go,     // staged -> active (first rows arrive)
  input  logic [1:0]                   in_valid,
  input  logic [1:0][C-1:0][PSUM_W-1:0] in_data,
  output logic [1:0]                   act_valid,
  output logic [1:0][C-1:0][ACT_W-1:0] act_data,
  output logic [1:0]                   psum_valid,
  output logic [1:0][C-1:0][PSUM_W-1:0] psum_data
);

  pp_op_t     op_sh [2], op_st [2], op_ac [2];
  logic [3:0] sh_sh [2], sh_st [2], sh_ac [2];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int l = 0; l < 2; l++) begin
        op_sh[l] <= PP_NONE; op_st[l] <= PP_NONE; op_ac[l] <= PP_NONE;
        sh_sh[l] <= '0; sh_st[l] <= '0; sh_ac[l] <= '0;
      end
    end else begin
      if (slice_go) begin
        for (int l = 0; l < 2; l++) begin
          op_ac[l] <= op_st[l]; sh_ac[l] <= sh_st[l];
        end
      end
      if (slice_start) begin
        for (int l = 0; l < 2; l++) begin
          op_st[l] <= op_sh[l]; sh_st[l] <= sh_sh[l];
          op_sh[l] <= PP_NONE;
        end
      end
      if (ctrl.valid && ctrl.instr.op == OP_PP && ctrl.instr.a[9:1] == pair_id[8:0]) begin
        op_sh[ctrl.instr.a[0]] <= pp_op_t'(ctrl.instr.flags[1:0]);
        sh_sh[ctrl.instr.a[0]] <= ctrl.instr.addr[3:0];
      end
    end
  end

  function automatic logic [ACT_W-1:0] activate(logic signed [PSUM_W:0] x, logic [3:0] sh);
    logic signed [PSUM_W:0] r;
    r = (x < 0) ? '0 : (x >>> sh);
    return sat_act(r);
  endfunction

  logic pair;       // even lane runs a pair operation
  assign pair = (op_ac[0] == PP_ADD) || (op_ac[0] == PP_ADD_ACT);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act_valid  <= '0;
      psum_valid <= '0;
    end else begin
      act_valid[0]  <= (op_ac[0] == PP_ACT && in_valid[0]) || (op_ac[0] == PP_ADD_ACT && &in_valid);
      psum_valid[0] <= (op_ac[0] == PP_ADD && &in_valid);
      act_valid[1]  <= !pair && op_ac[1] == PP_ACT && in_valid[1];
      psum_valid[1] <= 1'b0;
    end
    for (int j = 0; j < C; j++) begin
      logic signed [PSUM_W:0] a0, a1;
      a0 = {in_data[0][j][PSUM_W-1], in_data[0][j]};
      a1 = {in_data[1][j][PSUM_W-1], in_data[1][j]};
      act_data[0][j]  <= (op_ac[0] == PP_ADD_ACT) ? activate(a0 + a1, sh_ac[0]) : activate(a0, sh_ac[0]);
      psum_data[0][j] <= in_data[0][j] + in_data[1][j];
      act_data[1][j]  <= activate(a1, sh_ac[1]);
      psum_data[1][j] <= '0;
    end
  end

endmodule
