// tb_main_controller: the main controller with its instruction memory
// (SLICE = 8, DRAIN = 12) running random programs twice over.
//
// A program is a list of slices, each a random number (0..12) of
// instructions, some of them NOPs, followed by SYNC, and ends with END. The
// reference timing: the controller issues one instruction per cycle, so a
// SYNC fires at max(previous start + n + 1, previous start + SLICE), where n
// is the number of instructions of the slice (the first SYNC fires at once);
// a slice that needs more than SLICE cycles starts late and is counted as
// stretched. Every non-NOP instruction must appear on the control bus in
// program order in exactly its cycle, tagged with the number of the slice it
// prepares; done must rise DRAIN cycles after the last slice start.
// Lock-step time slices follow the publication; the instruction set and the stretching rule are this design's.
module tb_main_controller;
  import sosa_pkg::*;
  localparam int SLICE = 8, DRAIN = 12, AW = 10;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, slice_start, busy, done, host_we;
  logic [AW-1:0] imem_raddr, host_addr;
  instr_t imem_rdata, host_wdata;
  ctrl_bus_t ctrl;
  logic [7:0] slice_id;
  logic [31:0] n_slices, n_stretched;
  int checks = 0, failures = 0;

  instr_mem #(.DEPTH(1 << AW)) u_imem (.clk, .host_we, .host_addr, .host_wdata,
                                       .raddr(imem_raddr), .rdata(imem_rdata));
  main_controller #(.SLICE(SLICE), .DRAIN(DRAIN), .IMEM_AW(AW)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // expected events by cycle
  instr_t exp_instr [int];
  int     exp_tag [int];
  bit     exp_start [int];
  int     exp_done_cyc, exp_stretched, exp_slices;
  int     tag_base, st_base;

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (ctrl.valid !== exp_instr.exists(cyc)) failures++;
    else if (ctrl.valid && (ctrl.instr !== exp_instr[cyc] || int'(ctrl.slice) != exp_tag[cyc])) failures++;
    checks++;
    if (slice_start !== exp_start.exists(cyc)) failures++;
  end

  task automatic run_program();
    int nsl = 3 + $urandom % 8;
    int pc = 0, t, t0;
    instr_t ins;
    instr_t bi [int]; int bt [int]; bit bs [int];   // reference, in program-relative cycles
    exp_instr.delete(); exp_tag.delete(); exp_start.delete();
    exp_stretched = 0;
    // write program and the reference timing; t = cycle of the current instruction
    @(negedge clk);
    t0 = cyc + 1;               // start is seen at the next edge
    t = t0 + 2;                 // fetch, then first instruction
    for (int s = 0; s <= nsl; s++) begin
      int n = $urandom % 13;
      int tprev = t;
      for (int i = 0; i < n; i++) begin
        ins = instr_t'({$urandom, $urandom});
        if ($urandom % 4 == 0) ins.op = OP_NOP;
        else ins.op = opcode_t'(1 + $urandom % 5);
        host_we = 1; host_addr = AW'(pc); host_wdata = ins; @(negedge clk); pc++;
        if (ins.op != OP_NOP) begin bi[t] = ins; bt[t] = tag_base + s; end
        t++;
      end
      ins = '0;
      if (s < nsl) begin
        ins.op = OP_SYNC;
        if (s > 0) begin
          if (t - (tprev - 1) > SLICE) exp_stretched++;
          if (t < tprev - 1 + SLICE) t = tprev - 1 + SLICE;
        end
        bs[t] = 1;
      end else begin
        ins.op = OP_END;
        if (t < tprev - 1 + DRAIN) t = tprev - 1 + DRAIN;
        exp_done_cyc = t + 1;
      end
      host_we = 1; host_addr = AW'(pc); host_wdata = ins; @(negedge clk); pc++;
      t++;
    end
    host_we = 0;
    // shift expectations to the real start cycle
    begin
      automatic int d = cyc - t0;
      foreach (bi[k]) begin exp_instr[k + d] = bi[k]; exp_tag[k + d] = bt[k]; end
      foreach (bs[k]) exp_start[k + d] = 1;
      exp_done_cyc += d;
    end
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (cyc != exp_done_cyc) failures++;
    checks++;
    if (int'(n_stretched) != st_base + exp_stretched || int'(n_slices) != nsl + exp_slices) failures++;
    exp_slices += nsl;
    st_base += exp_stretched;
    tag_base += nsl;
    $display("slices=%0d stretched=%0d done@%0d exp %0d", n_slices, n_stretched, cyc, exp_done_cyc);
  endtask

  initial begin
    rst_n = 0; start = 0; host_we = 0; host_addr = '0; host_wdata = '0;
    exp_slices = 0; tag_base = 1; st_base = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // a second start without reset continues counting slices and tags
    run_program();
    run_program();
    rst_n = 0; @(negedge clk); rst_n = 1;
    exp_slices = 0; tag_base = 1; st_base = 0;
    for (int p = 0; p < 20; p++) begin
      run_program();
      rst_n = 0; @(negedge clk); rst_n = 1;
      exp_slices = 0; tag_base = 1; st_base = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
