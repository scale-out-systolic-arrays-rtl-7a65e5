// tb_post_processor: one post-processor pair (C = 8) run through a sequence
// of slices with random operations per lane: NONE, ACT with a random shift,
// and the pair operations ADD and ADD_ACT on the even lane. The operation
// for slice n+1 is written during slice n, staged by slice_start and must
// take effect only at slice_go, two cycles later; the rows in between still
// use the old operation. Outputs are compared one cycle (PP_LAT) after the
// inputs with a reference written from the operation definitions.
// Pairs of post-processors for tile aggregation follow the publication; the operations' encoding and the activation function are this design's.
module tb_post_processor;
  import sosa_pkg::*;
  localparam int C = 8;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, slice_start, slice_go;
  ctrl_bus_t ctrl;
  logic [1:0] in_valid, act_valid, psum_valid;
  logic [1:0][C-1:0][PSUM_W-1:0] in_data, psum_data;
  logic [1:0][C-1:0][ACT_W-1:0]  act_data;
  int checks = 0, failures = 0;
  int n_op [4];

  post_processor #(.C(C)) dut (.clk, .rst_n, .pair_id(10'd2), .ctrl, .slice_start, .slice_go,
    .in_valid, .in_data, .act_valid, .act_data, .psum_valid, .psum_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ACT_W-1:0] ref_act(int x, int sh);
    int r = (x < 0) ? 0 : (x >>> sh);
    if (r > 127) r = 127;
    return ACT_W'(r);
  endfunction

  int cur_op [2], cur_sh [2];     // active operation (reference)
  int nxt_op [2], nxt_sh [2];

  // expected outputs of the last row, due one cycle (PP_LAT) after it
  bit                exp_av [2], exp_pv [2];
  logic [ACT_W-1:0]  exp_ad [2][C];
  logic [PSUM_W-1:0] exp_pd [C];
  bit                have = 0;
  // drive one row and work out its outputs under the active operation
  // check the outputs of the previous row
  function automatic void check();
    if (!have) return;
    for (int l = 0; l < 2; l++) begin
      checks++;
      if (act_valid[l] !== exp_av[l] || psum_valid[l] !== exp_pv[l]) failures++;
      for (int j = 0; j < C; j++) if (exp_av[l]) begin
        checks++;
        if (act_data[l][j] !== exp_ad[l][j]) failures++;
      end
    end
    if (exp_pv[0]) for (int j = 0; j < C; j++) begin
      checks++;
      if (psum_data[0][j] !== exp_pd[j]) failures++;
    end
  endfunction

  task automatic row();
    bit pair;
    check();
    for (int l = 0; l < 2; l++) begin
      in_valid[l] = ($urandom % 4) != 0;
      for (int j = 0; j < C; j++) in_data[l][j] = PSUM_W'($urandom % 2400) - PSUM_W'(1200);
    end
    pair = cur_op[0] == int'(PP_ADD) || cur_op[0] == int'(PP_ADD_ACT);
    exp_av[0] = (cur_op[0] == int'(PP_ACT) && in_valid[0]) || (cur_op[0] == int'(PP_ADD_ACT) && &in_valid);
    exp_pv[0] = cur_op[0] == int'(PP_ADD) && &in_valid;
    exp_av[1] = !pair && cur_op[1] == int'(PP_ACT) && in_valid[1];
    exp_pv[1] = 0;
    for (int j = 0; j < C; j++) begin
      int a0 = int'($signed(in_data[0][j])), a1 = int'($signed(in_data[1][j]));
      exp_ad[0][j] = ref_act(cur_op[0] == int'(PP_ADD_ACT) ? a0 + a1 : a0, cur_sh[0]);
      exp_ad[1][j] = ref_act(a1, cur_sh[1]);
      exp_pd[j] = PSUM_W'(a0 + a1);
    end
    have = 1;
    @(negedge clk);
  endtask

  initial begin
    rst_n = 0; slice_start = 0; slice_go = 0; ctrl = '0; in_valid = '0; in_data = '0;
    for (int l = 0; l < 2; l++) begin cur_op[l] = 0; cur_sh[l] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 60; s++) begin
      // program next slice's operations (an instruction for pair 3 is ignored)
      for (int l = 0; l < 2; l++) begin
        nxt_op[l] = (l == 1) ? ((($urandom % 2) != 0) ? int'(PP_ACT) : int'(PP_NONE)) : $urandom % 4;
        nxt_sh[l] = $urandom % 6;
        n_op[nxt_op[l]]++;
        ctrl = '0; ctrl.valid = 1; ctrl.instr.op = OP_PP; ctrl.instr.a = 10'(4 + l);
        ctrl.instr.flags = 8'(nxt_op[l]); ctrl.instr.addr = 16'(nxt_sh[l]);
        row();
      end
      ctrl = '0; ctrl.valid = 1; ctrl.instr.op = OP_PP; ctrl.instr.a = 10'd6; ctrl.instr.flags = 8'd2;
      row();
      ctrl = '0;
      repeat (3) row();
      slice_start = 1;
      row();
      slice_start = 0;
      row();                 // still the old operation
      slice_go = 1;
      row();
      slice_go = 0;
      cur_op = nxt_op; cur_sh = nxt_sh;
      repeat (4) row();
    end
    check();
    checks++;
    if (n_op[PP_ACT] == 0 || n_op[PP_ADD] == 0 || n_op[PP_ADD_ACT] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
