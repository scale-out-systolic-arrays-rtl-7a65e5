// task_queue: FIFO of pod tasks (the "task queue" next to the pod FSM).
//
// The main controller pushes a task word over the control bus; the pod FSM
// reads the head and pops it when its slice begins. Plain circular buffer
// with registered state; head is visible combinationally (first-word
// fall-through). Depth is this design's choice; a push to a full queue is
// dropped and reported by an assertion.
module task_queue
  import sosa_pkg::*;
#(
  parameter int unsigned DEPTH = 4
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       push,
  input  pod_task_t  din,
  input  logic       pop,
  output pod_task_t  dout,
  output logic       empty,
  output logic       full
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  pod_task_t          mem [DEPTH];
  logic [AW-1:0]      rp, wp;
  logic [AW:0]        cnt;

  assign empty = (cnt == 0);
  assign full  = (cnt == (AW+1)'(DEPTH));
  assign dout  = mem[rp];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rp  <= '0;
      wp  <= '0;
      cnt <= '0;
    end else begin
      if (do_push) begin
        mem[wp] <= din;
        wp      <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (do_pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("task_queue: push to full queue");

endmodule
