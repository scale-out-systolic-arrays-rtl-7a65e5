// tb_pod_fsm: drives slices with tasks and row arrivals into the pod FSM and
// checks: tasks are taken only in their own slice, weight rows go to rows
// 0..R-1 of the idle register, the register flips after a full load, the
// weight tag follows the slice's task, and out_valid appears PIPE cycles
// after each accepted activation row (R rows per task).
// The publication names the pod FSM; the sequencing checked here is this design's.
module tb_pod_fsm;
  import sosa_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int R = 4, KMAX = 2, PIPE = 5;
  logic rst_n, slice_start, q_empty, q_pop, w_valid, x_valid;
  logic [7:0] slice_id;
  pod_task_t q_head;
  logic wl_valid, wl_bank, conv_en, use_pin, arr_wsel, out_valid, busy;
  logic [$clog2(R)-1:0] wl_row;
  logic [1:0] log2_kw;
  int checks = 0, failures = 0;
  int cyc = 0;
  int xin_cyc [$];
  int nout = 0, nwl = 0;

  pod_fsm #(.R(R), .KMAX(KMAX), .PIPE(PIPE)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker: every out_valid must be PIPE cycles after an accepted row
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      nout++;
      if (xin_cyc.size() == 0 || xin_cyc[0] + PIPE != cyc) failures++;
      else void'(xin_cyc.pop_front());
    end
  end

  task automatic run_slice(input logic [7:0] id, input bit has_task, input pod_task_t t,
                           input int nw, input int nx, input bit exp_bank);
    @(negedge clk);
    slice_start = 1; slice_id = id;
    q_empty = !has_task; q_head = t;
    #1;
    checks++;
    if (q_pop !== (has_task && t.slice == id)) failures++;
    @(negedge clk);
    slice_start = 0; q_empty = 1;
    for (int c = 0; c < 12; c++) begin
      w_valid = (c < nw); x_valid = (c < nx);
      #1;
      if (w_valid && has_task && t.slice == id && t.load_w) begin
        checks += 2;
        if (!(wl_valid && wl_row == c[$clog2(R)-1:0])) failures++;
        if (wl_bank !== exp_bank) failures++;
        nwl++;
      end else begin
        checks++;
        if (wl_valid) failures++;
      end
      if (x_valid && has_task && t.slice == id && t.compute && c < R) xin_cyc.push_back(cyc);
      @(negedge clk);
    end
    w_valid = 0; x_valid = 0;
  endtask

  initial begin
    pod_task_t t;
    rst_n = 0; slice_start = 0; slice_id = 0; q_empty = 1; q_head = '0; w_valid = 0; x_valid = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // slice 1: load weights into register 0
    t = '0; t.slice = 1; t.load_w = 1;
    run_slice(1, 1, t, R, 0, 1'b0);
    // slice 2: compute (uses register 0) and load register 1; 6 rows arrive, 4 accepted
    t = '0; t.slice = 2; t.load_w = 1; t.compute = 1; t.use_pin = 1;
    run_slice(2, 1, t, R, 6, 1'b1);
    checks += 2;
    if (use_pin !== 1'b1) failures++;
    if (busy !== 1'b1) failures++;
    // slice 3: head belongs to slice 4 -> idle, rows ignored
    t = '0; t.slice = 4; t.compute = 1;
    run_slice(3, 1, t, 0, R, 1'b0);
    checks++;
    if (busy !== 1'b0) failures++;
    // slice 4: compute with register 1 (check the tag at the converter output)
    t = '0; t.slice = 4; t.compute = 1;
    fork
      run_slice(4, 1, t, 0, R, 1'b0);
      begin
        repeat (2 + KMAX) @(negedge clk);
        checks++;
        if (arr_wsel !== 1'b1) failures++;
      end
    join
    repeat (10) @(negedge clk);
    checks += 2;
    if (nout != 2 * R) failures++;
    if (xin_cyc.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
