// tb_bank_ctrl: one bank controller (64 rows of 16 bits, R = 4) checked
// against a reference memory array.
//
// Each round: random host writes and read-backs (read data one cycle after
// the request); a read command for the next slice (R + extra rows from a
// random address), whose rows must appear with rd_valid exactly
// BANK_RD_LAT = 2 cycles after slice_start and one per cycle after that;
// then a write command (from pods or from post-processors, alternately)
// whose rows, offered with random gaps after the matching arm pulse, must
// land at consecutive addresses (R rows, further rows ignored). Commands
// addressed to another bank must be ignored. A final round schedules a
// write on top of a read and expects port_clash.
// Single-ported banks follow the publication; bursts, arming and the host port are this design's.
module tb_bank_ctrl;
  import sosa_pkg::*;
  localparam int DEPTH = 64, W = 16, R = 4, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, slice_start, arm_pod, arm_pp, rd_valid, port_clash;
  logic wr_pod_valid, wr_pp_valid, host_en, host_we;
  logic [W-1:0] rd_data, wr_pod_data, wr_pp_data, host_wdata, host_rdata;
  logic [AW-1:0] host_addr;
  ctrl_bus_t ctrl;
  int checks = 0, failures = 0, n_clash = 0;
  logic [W-1:0] ref_mem [DEPTH];

  bank_ctrl #(.DEPTH(DEPTH), .WIDTH(W), .R(R), .GRP(GRP_PSUM)) dut (
    .clk, .rst_n, .bank_id(10'd3), .ctrl, .slice_start, .arm_pod, .arm_pp,
    .rd_valid, .rd_data, .wr_pod_valid, .wr_pod_data, .wr_pp_valid, .wr_pp_data,
    .host_en, .host_we, .host_addr, .host_wdata, .host_rdata, .port_clash);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (port_clash) n_clash++;

  task automatic host_write(int a, logic [W-1:0] d);
    host_en = 1; host_we = 1; host_addr = AW'(a); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
    ref_mem[a] = d;
  endtask

  task automatic host_check(int a);
    host_en = 1; host_we = 0; host_addr = AW'(a);
    @(negedge clk);
    host_en = 0;
    checks++;
    if (host_rdata !== ref_mem[a]) failures++;
  endtask

  task automatic send(opcode_t op, int bank, int addr, logic [7:0] flags);
    ctrl = '0; ctrl.valid = 1; ctrl.instr.op = op; ctrl.instr.tgt = 3'(GRP_PSUM);
    ctrl.instr.a = 10'(bank); ctrl.instr.addr = 16'(addr); ctrl.instr.flags = flags;
    @(negedge clk);
    ctrl = '0;
  endtask

  initial begin
    rst_n = 0; slice_start = 0; arm_pod = 0; arm_pp = 0; ctrl = '0;
    wr_pod_valid = 0; wr_pp_valid = 0; wr_pod_data = '0; wr_pp_data = '0;
    host_en = 0; host_we = 0; host_addr = '0; host_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) host_write(a, W'($urandom));
    for (int round = 0; round < 40; round++) begin
      automatic int ra = $urandom % (DEPTH - 20), ex = $urandom % 4;
      automatic int wa = $urandom % (DEPTH - 8);
      automatic bit pp = round[0];
      automatic int got = 0, wrote = 0, k = 0;
      for (int n = 0; n < 4; n++) host_write($urandom % DEPTH, W'($urandom));
      for (int n = 0; n < 4; n++) host_check($urandom % DEPTH);
      // read command for the next slice, plus one for another bank
      send(OP_RD, 3, ra, 8'(ex));
      send(OP_RD, 4, 0, 8'd0);
      send(OP_WR, 5, 0, 8'd0);
      slice_start = 1;
      @(negedge clk);
      slice_start = 0;
      // cycle T0+1: nothing yet; T0+2 .. : rows
      checks++;
      if (rd_valid) failures++;
      @(negedge clk);
      for (int n = 0; n < R + ex + 2; n++) begin
        checks++;
        if (n < R + ex) begin
          if (!rd_valid || rd_data !== ref_mem[ra + n]) failures++;
        end else if (rd_valid) failures++;
        @(negedge clk);
      end
      // write command
      send(OP_WR, 3, wa, {7'd0, pp});
      slice_start = 1;
      @(negedge clk);
      slice_start = 0;
      repeat (3) @(negedge clk);
      if (pp) arm_pp = 1; else arm_pod = 1;
      // the wrong writer offers rows too; they must be ignored
      while (k < 3 * R) begin
        automatic bit v = ($urandom % 3) != 0;
        automatic logic [W-1:0] d = W'($urandom);
        wr_pod_valid = pp ? 1'b1 : v;  wr_pod_data = pp ? ~d : d;
        wr_pp_valid  = pp ? v : 1'b1;  wr_pp_data  = pp ? d : ~d;
        if (v && wrote < R) begin ref_mem[wa + wrote] = d; wrote++; end
        @(negedge clk);
        arm_pp = 0; arm_pod = 0;
        k++;
      end
      wr_pod_valid = 0; wr_pp_valid = 0;
      for (int n = 0; n < R + 1; n++) host_check(wa + n);
    end
    // clash: a pod write armed while a read runs
    send(OP_RD, 3, 0, 8'd0);
    send(OP_WR, 3, 8, 8'd0);
    slice_start = 1;
    @(negedge clk);
    slice_start = 0;
    @(negedge clk);
    arm_pod = 1; wr_pod_valid = 1; wr_pod_data = 16'h1234;
    @(negedge clk);
    arm_pod = 0; wr_pod_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (n_clash != 1) failures++;
    $display("clash=%0d", n_clash);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
