// main_controller: fetches the program and keeps all pods in lock step.
//
// After start, the controller reads one instruction per cycle from the
// instruction memory and broadcasts it on the control bus together with the
// number of the slice it belongs to (the slice that the next SYNC starts).
// Pods, banks, post-processors and interconnects pick the instructions
// addressed to them and keep them as their next-slice setting.
// OP_SYNC ends a slice: the controller waits until at least SLICE cycles
// have passed since the previous slice_start, then pulses slice_start for
// one cycle with slice_id = number of the new slice. A slice whose
// instructions take longer than SLICE cycles to issue starts late (the whole
// accelerator stalls); such slices are counted in n_stretched.
// OP_END waits DRAIN cycles after the last slice start for the last results
// to reach the banks, then raises done.
// The paper states only that the controller fetches instructions, issues
// them to the pods and keeps them in lock step; the rest is this design's.
module main_controller
  import sosa_pkg::*;
#(
  parameter int unsigned SLICE   = 32,
  parameter int unsigned DRAIN   = 64,
  parameter int unsigned IMEM_AW = 10
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic [IMEM_AW-1:0] imem_raddr,
  input  instr_t             imem_rdata,
  output ctrl_bus_t          ctrl,
  output logic               slice_start,
  output logic [7:0]         slice_id,
  output logic               busy,
  output logic               done,
  output logic [31:0]        n_slices,
  output logic [31:0]        n_stretched
);

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_EXEC, S_DONE} state_t;
  state_t             state;
  logic [IMEM_AW-1:0] pc;
  logic [15:0]        timer;       // cycles since the last slice_start
  logic               first;       // no slice started yet
  logic [7:0]         next_slice;

  logic advance, sync_ok, end_ok;
  assign sync_ok = first || timer >= 16'(SLICE);
  assign end_ok  = first || timer >= 16'(DRAIN);

  always_comb begin
    advance     = 1'b0;
    slice_start = 1'b0;
    ctrl        = '0;
    ctrl.slice  = next_slice;
    ctrl.instr  = imem_rdata;
    if (state == S_EXEC) begin
      case (imem_rdata.op)
        OP_SYNC: if (sync_ok) begin slice_start = 1'b1; advance = 1'b1; end
        OP_END:  advance = 1'b0;
        default: begin ctrl.valid = (imem_rdata.op != OP_NOP); advance = 1'b1; end
      endcase
    end
    imem_raddr = advance ? pc + 1'b1 : pc;
  end

  assign slice_id = next_slice;
  assign busy     = (state == S_FETCH) || (state == S_EXEC);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      pc          <= '0;
      timer       <= '0;
      first       <= 1'b1;
      next_slice  <= 8'd1;
      done        <= 1'b0;
      n_slices    <= '0;
      n_stretched <= '0;
    end else begin
      if (timer != '1) timer <= timer + 1'b1;
      case (state)
        S_IDLE:  if (start) begin state <= S_FETCH; pc <= '0; done <= 1'b0; end
        S_FETCH: state <= S_EXEC;
        S_EXEC: begin
          if (advance) pc <= pc + 1'b1;
          if (slice_start) begin
            timer      <= 16'd1;
            first      <= 1'b0;
            next_slice <= next_slice + 1'b1;
            n_slices   <= n_slices + 1;
            if (!first && timer > 16'(SLICE)) n_stretched <= n_stretched + 1;
          end
          if (imem_rdata.op == OP_END && end_ok) begin
            state <= S_DONE;
            done  <= 1'b1;
          end
        end
        S_DONE: if (start) begin state <= S_FETCH; pc <= '0; done <= 1'b0; first <= 1'b1; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
