// tb_task_queue: pushes and pops random tasks, compares with a reference
// queue, and checks the empty/full flags.
// The publication names a task queue; its FIFO behaviour and depth are this design's.
module tb_task_queue;
  import sosa_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, push, pop, empty, full;
  pod_task_t din, dout;
  int checks = 0, failures = 0;
  pod_task_t ref_q [$];

  task_queue #(.DEPTH(4)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; push = 0; pop = 0; din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      checks++;
      if (empty !== (ref_q.size() == 0) || full !== (ref_q.size() == 4)) failures++;
      if (ref_q.size() > 0) begin
        checks++;
        if (dout !== ref_q[0]) failures++;
      end
      push = ($urandom_range(0, 99) < 50) && ref_q.size() < 4;
      pop  = ($urandom_range(0, 99) < 45) && ref_q.size() > 0;
      din  = pod_task_t'($urandom);
      #1;
      @(posedge clk);
      if (pop) void'(ref_q.pop_front());
      if (push) ref_q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
