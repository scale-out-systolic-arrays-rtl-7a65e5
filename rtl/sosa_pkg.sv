// sosa_pkg: types and constants shared by the scale-out systolic array
// (SOSA) accelerator.
//
// Number formats follow the paper: 8-bit signed weights and activations,
// 16-bit signed partial sums (wrapping arithmetic is this design's choice).
// The 64-bit instruction word, the pod task word and the control-bus bundle
// are this design's own encoding; the paper does not give one.
//
// Timing convention used by every block: the main controller pulses
// slice_start for one cycle (cycle T0) at the start of each time slice.
// Banks begin their reads after T0; everything that has to happen a fixed
// number of cycles later (writes of results, switch settings of output
// networks) is derived from the latency functions below.
package sosa_pkg;

  localparam int unsigned ACT_W  = 8;    // weights and activations
  localparam int unsigned PSUM_W = 16;   // partial sums

  // ---------------------------------------------------------------- opcodes
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_ROUTE = 4'd1,  // set one route in an interconnect for the next slice
    OP_RD    = 4'd2,  // bank reads R (+extra) rows in the next slice
    OP_WR    = 4'd3,  // bank writes incoming rows in the next slice
    OP_POD   = 4'd4,  // push a task into a pod's task queue
    OP_PP    = 4'd5,  // post-processor lane operation for the next slice
    OP_SYNC  = 4'd6,  // end of slice: wait, then pulse slice_start
    OP_END   = 4'd7   // end of program
  } opcode_t;

  // interconnects (target of OP_ROUTE)
  typedef enum logic [2:0] {
    NET_X      = 3'd0,  // activation banks  -> pods
    NET_W      = 3'd1,  // weight banks      -> pods
    NET_PIN    = 3'd2,  // psum banks        -> pods (input partial sums)
    NET_POUT   = 3'd3,  // pods              -> psum banks
    NET_PPIN   = 3'd4,  // psum banks        -> post-processors
    NET_PPACT  = 3'd5,  // post-processors   -> activation banks
    NET_PPPSUM = 3'd6   // post-processors   -> psum banks
  } net_t;

  // bank groups (target of OP_RD / OP_WR)
  typedef enum logic [2:0] {
    GRP_ACT  = 3'd0,
    GRP_W    = 3'd1,
    GRP_PSUM = 3'd2
  } grp_t;

  // post-processor operations
  typedef enum logic [1:0] {
    PP_NONE    = 2'd0,
    PP_ACT     = 2'd1,  // act  = sat8(relu(a) >>> shift)
    PP_ADD     = 2'd2,  // psum = a + b            (lane pair)
    PP_ADD_ACT = 2'd3   // act  = sat8(relu(a + b) >>> shift) (lane pair)
  } pp_op_t;

  // Instruction word. Field use per opcode:
  //   ROUTE: tgt = net_t, sub = copy of the Butterfly-k, a = source, b = destination
  //   RD   : tgt = grp_t, a = bank, addr = first row, flags[3:0] = extra rows
  //   WR   : tgt = grp_t, a = bank, addr = first row,
  //          flags[0] = writer of a psum bank (0: pods, 1: post-processors)
  //   POD  : a = pod, flags = {log2_kw[1:0], conv_en, use_pin, compute, load_w} (LSB first)
  //   PP   : a = lane, flags[1:0] = pp_op_t, addr[3:0] = right shift
  typedef struct packed {
    opcode_t     op;     // 4
    logic [2:0]  tgt;    // 3
    logic [2:0]  sub;    // 3
    logic [9:0]  a;      // 10
    logic [9:0]  b;      // 10
    logic [15:0] addr;   // 16
    logic [7:0]  flags;  // 8
    logic [9:0]  rsvd;   // 10
  } instr_t;             // 64 bits

  // Control bus from the main controller (one instruction per cycle).
  typedef struct packed {
    logic       valid;
    logic [7:0] slice;   // slice the instruction belongs to
    instr_t     instr;
  } ctrl_bus_t;

  // Task kept in a pod's task queue.
  typedef struct packed {
    logic [7:0] slice;   // slice in which the task runs
    logic       load_w;  // a weight tile arrives in this slice
    logic       compute; // an activation tile arrives in this slice
    logic       use_pin; // add input partial sums (else zeros)
    logic       conv_en; // CONV-to-GEMM conversion on
    logic [1:0] log2_kw; // kernel width 1, 2 or 4
  } pod_task_t;

  function automatic int unsigned cdiv(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Cycles from the slice_start cycle to the cycle in which the first read row
  // of a bank is on the bank's read output.
  localparam int unsigned BANK_RD_LAT = 2;
  // Interconnect latency (output register).
  localparam int unsigned NET_LAT = 1;
  // Post-processor latency (one register).
  localparam int unsigned PP_LAT = 1;

  // Latency through a pod, from the first activation row on its input to the
  // first output row on its output: converter (KMAX) + wavefront through the
  // array (column groups - 1 after deskew) + one register per row group.
  function automatic int unsigned pod_lat(int unsigned r, int unsigned c, int unsigned u,
                                          int unsigned v, int unsigned kmax);
    return kmax + cdiv(c, u) - 1 + cdiv(r, v);
  endfunction

  // Cycle (after slice_start) in which the first result row of a pod is at the
  // write input of a psum bank.
  function automatic int unsigned pod_wr_delay(int unsigned r, int unsigned c, int unsigned u,
                                               int unsigned v, int unsigned kmax);
    return BANK_RD_LAT + NET_LAT + pod_lat(r, c, u, v, kmax) + NET_LAT;
  endfunction

  // Same for a post-processor result at an activation or psum bank.
  localparam int unsigned PP_WR_DELAY = BANK_RD_LAT + NET_LAT + PP_LAT + NET_LAT;

  // Signed saturation of a wide value to ACT_W bits.
  function automatic logic signed [ACT_W-1:0] sat_act(logic signed [PSUM_W:0] x);
    if (x > $signed((PSUM_W+1)'(2**(ACT_W-1) - 1)))  return ACT_W'(2**(ACT_W-1) - 1);
    if (x < -$signed((PSUM_W+1)'(2**(ACT_W-1))))     return ACT_W'(-(2**(ACT_W-1)));
    return x[ACT_W-1:0];
  endfunction

endpackage
