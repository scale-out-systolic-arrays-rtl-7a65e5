// skew_buffer: per-lane delay line used as the activation skew buffer, the
// input-partial-sum skew buffer and the output-partial-sum deskew buffer of a
// systolic pod.
//
// Lane l is delayed by BASE + l/GROUP cycles, or with REVERSE = 1 by
// BASE + (last group - l/GROUP) cycles. GROUP is the multicast (U) or fan-in
// (V) factor of the array, so one cycle of skew is applied per group of lanes
// rather than per lane. A lane with zero delay is a wire. The paper names
// these buffers and their purpose; the per-group amounts follow from the
// array built here.
//
// Timing: dout[l] at cycle t equals din[l] at cycle t - delay(l).
module skew_buffer #(
  parameter int unsigned LANES   = 32,
  parameter int unsigned WIDTH   = 8,
  parameter int unsigned GROUP   = 16,
  parameter int unsigned BASE    = 0,
  parameter bit          REVERSE = 1'b0
)(
  input  logic                         clk,
  input  logic [LANES-1:0][WIDTH-1:0]  din,
  output logic [LANES-1:0][WIDTH-1:0]  dout
);

  localparam int unsigned NGRP = (LANES + GROUP - 1) / GROUP;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam int unsigned D = BASE + (REVERSE ? (NGRP - 1 - l / GROUP) : (l / GROUP));
    if (D == 0) begin : g_wire
      assign dout[l] = din[l];
    end else begin : g_dly
      logic [WIDTH-1:0] sr [D];
      always_ff @(posedge clk) begin
        sr[0] <= din[l];
        for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
      end
      assign dout[l] = sr[D-1];
    end
  end

endmodule
