// pod_fsm: local controller of a systolic pod.
//
// At every slice_start the FSM looks at the head of the task queue. If the
// head is tagged with the slice that is starting, it is popped and becomes the
// current task (state RUN); otherwise the pod is idle for this slice (IDLE).
// During the slice the FSM reacts to rows arriving from the interconnects:
//   * weight rows (if load_w): row n is written to row n of the weight
//     register that is not in use (double buffering); after R rows that
//     register becomes the one the next tile uses;
//   * activation rows (if compute): the first R rows are marked valid and
//     tagged with the weight register chosen at the start of the slice.
// The valid mark and the weight tag are delayed along with the data; the
// output rows are valid PIPE cycles after their activation rows arrived.
// The paper only names this FSM; its behaviour is this design's own.
module pod_fsm
  import sosa_pkg::*;
#(
  parameter int unsigned R    = 32,
  parameter int unsigned KMAX = 4,   // converter latency
  parameter int unsigned PIPE = 8    // input row to output row
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 slice_start,
  input  logic [7:0]           slice_id,     // slice that starts now
  // task queue
  input  pod_task_t            q_head,
  input  logic                 q_empty,
  output logic                 q_pop,
  // arrivals
  input  logic                 w_valid,
  input  logic                 x_valid,
  // to the datapath
  output logic                 wl_valid,
  output logic [$clog2(R)-1:0] wl_row,
  output logic                 wl_bank,
  output logic                 conv_en,
  output logic [1:0]           log2_kw,
  output logic                 use_pin,
  output logic                 arr_wsel,     // weight register, aligned with converter output
  output logic                 out_valid,    // output psum row valid
  output logic                 busy
);

  typedef enum logic {IDLE, RUN} state_t;
  state_t               state;
  pod_task_t            task_q;
  logic [$clog2(R):0]   w_cnt, x_cnt;
  logic                 load_bank;    // register being loaded
  logic                 ready_bank;   // register holding the latest full tile
  logic                 comp_bank;    // register used by the current task

  assign q_pop = slice_start && !q_empty && (q_head.slice == slice_id);
  assign busy  = (state == RUN);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= IDLE;
      task_q     <= '0;
      w_cnt      <= '0;
      x_cnt      <= '0;
      load_bank  <= 1'b0;
      ready_bank <= 1'b1;
      comp_bank  <= 1'b1;
    end else begin
      if (slice_start) begin
        w_cnt <= '0;
        x_cnt <= '0;
        if (q_pop) begin
          state     <= RUN;
          task_q    <= q_head;
          comp_bank <= ready_bank;
        end else begin
          state  <= IDLE;
          task_q <= '0;
        end
      end else if (state == RUN) begin
        if (w_valid && task_q.load_w && w_cnt < ($clog2(R)+1)'(R)) begin
          w_cnt <= w_cnt + 1'b1;
          if (w_cnt == ($clog2(R)+1)'(R - 1)) begin
            ready_bank <= load_bank;
            load_bank  <= ~load_bank;
          end
        end
        if (x_valid && task_q.compute && x_cnt < ($clog2(R)+1)'(R)) x_cnt <= x_cnt + 1'b1;
      end
    end
  end

  assign wl_valid = (state == RUN) && !slice_start && w_valid && task_q.load_w && w_cnt < ($clog2(R)+1)'(R);
  assign wl_row   = w_cnt[$clog2(R)-1:0];
  assign wl_bank  = load_bank;
  assign conv_en  = task_q.conv_en;
  assign log2_kw  = task_q.log2_kw;
  assign use_pin  = task_q.use_pin;

  logic row_valid;
  assign row_valid = (state == RUN) && !slice_start && x_valid && task_q.compute && x_cnt < ($clog2(R)+1)'(R);

  // weight tag through the converter (KMAX), valid through the whole pod (PIPE)
  logic [KMAX-1:0] wsel_d;
  logic [PIPE-1:0] val_d;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wsel_d <= '0;
      val_d  <= '0;
    end else begin
      wsel_d <= {wsel_d[KMAX-2:0], comp_bank};
      val_d  <= {val_d[PIPE-2:0], row_valid};
    end
  end
  assign arr_wsel  = wsel_d[KMAX-1];
  assign out_valid = val_d[PIPE-1];

endmodule
