// sosa_top: Scale-out Systolic Array (SOSA) accelerator.
//
// N systolic pods (R x C weight-stationary arrays) share three groups of N
// single-ported memory banks (activations, weights, partial sums) through
// Butterfly-K interconnects, and N SIMD post-processor lanes finish the
// results. A main controller reads a statically scheduled program from the
// instruction memory and runs the whole chip in lock-step time slices.
//
// Interconnects (all Butterfly-K, N x N):
//   X      activation banks -> pods          W      weight banks -> pods
//   PIN    psum banks -> pods                POUT   pods -> psum banks
//   PPIN   psum banks -> post-processors     PPACT  post-processors -> activation banks
//   PPPSUM post-processors -> psum banks
// The paper's diagram draws two interconnects on each side of the
// partial-sum banks carrying data both ways; here each direction is its own
// network.
//
// Slice timing (T0 = cycle of slice_start):
//   T0        banks start reading; shadow commands are staged
//   T0+1      X, W, PIN, PPIN networks switch to the new routes
//   T0+2      pods take their task for the slice; post-processors their op
//   T0+3      first rows reach pods and post-processors
//   T0+POD_D  first pod result reaches a psum bank (POD_D = pod_wr_delay)
//   T0+PP_D   first post-processor result reaches a bank (PP_D = PP_WR_DELAY)
// The output networks switch two cycles before their first row. Back-to-back
// slices need SLICE >= R and SLICE >= POD_D. Results land until
// T0+POD_D+R-1 (T0+42 at full size), which is past the slice end: a bank
// written in slice n may not be read in slice n+1 (the schedule must respect
// this; a clash is flagged on bank_clash). A convolution tile reads R+KW-1
// rows, so its bank stays busy into the next slice too.
//
// The host port loads and unloads the banks and the program; it stands in
// for the off-chip DRAM interface and host CPU, which are not designed here.
module sosa_top
  import sosa_pkg::*;
#(
  parameter int unsigned N          = 256,
  parameter int unsigned K          = 2,
  parameter int unsigned R          = 32,
  parameter int unsigned C          = 32,
  parameter int unsigned U          = 16,
  parameter int unsigned V          = 16,
  parameter int unsigned KMAX       = 4,
  parameter int unsigned QDEPTH     = 4,
  parameter int unsigned SLICE      = 32,
  parameter int unsigned ACT_DEPTH  = 8192,
  parameter int unsigned W_DEPTH    = 8192,
  parameter int unsigned PS_DEPTH   = 4096,
  parameter int unsigned IMEM_DEPTH = 1024
)(
  input  logic                          clk,
  input  logic                          rst_n,
  // program load
  input  logic                          host_imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] host_imem_addr,
  input  instr_t                        host_imem_wdata,
  // bank load / unload (grp: 0 act, 1 weight, 2 psum); read data 1 cycle later
  input  logic                          host_en,
  input  logic                          host_we,
  input  logic [1:0]                    host_grp,
  input  logic [9:0]                    host_bank,
  input  logic [15:0]                   host_addr,
  input  logic [C*PSUM_W-1:0]           host_wdata,
  output logic [C*PSUM_W-1:0]           host_rdata,
  // run control and status
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic [31:0]                   n_slices,
  output logic [31:0]                   n_stretched,
  output logic [N-1:0]                  pod_busy,      // pod runs a task this slice
  output logic [6:0]                    net_conflict,  // sticky per network
  output logic                          bank_clash     // sticky
);

  localparam int unsigned AWD   = R * ACT_W;    // activation row
  localparam int unsigned WWD   = C * ACT_W;    // weight row
  localparam int unsigned PWD   = C * PSUM_W;   // partial-sum row
  localparam int unsigned POD_D = pod_wr_delay(R, C, U, V, KMAX);
  localparam int unsigned PP_D  = PP_WR_DELAY;
  localparam int unsigned DRAIN = POD_D + R + 2;
  localparam int unsigned DL    = (POD_D > PP_D) ? POD_D : PP_D;

  // ------------------------------------------------------------- controller
  ctrl_bus_t                     ctrl;
  logic                          slice_start;
  logic [7:0]                    slice_id, cur_slice;
  logic [$clog2(IMEM_DEPTH)-1:0] imem_raddr;
  instr_t                        imem_rdata;

  instr_mem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .raddr(imem_raddr), .rdata(imem_rdata),
    .host_we(host_imem_we), .host_addr(host_imem_addr), .host_wdata(host_imem_wdata)
  );

  main_controller #(.SLICE(SLICE), .DRAIN(DRAIN), .IMEM_AW($clog2(IMEM_DEPTH))) u_ctrl (
    .clk, .rst_n, .start, .imem_raddr, .imem_rdata, .ctrl, .slice_start, .slice_id,
    .busy, .done, .n_slices, .n_stretched
  );

  // slice_start delayed: dly[k] is high in cycle T0+k+1
  logic [DL-1:0] dly;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dly       <= '0;
      cur_slice <= '0;
    end else begin
      dly <= {dly[DL-2:0], slice_start};
      if (slice_start) cur_slice <= slice_id;
    end
  end
  logic in_swap, go, pout_swap, ppo_swap, arm_pod, arm_pp;
  assign in_swap   = dly[0];          // T0+1
  assign go        = dly[1];          // T0+2
  assign pout_swap = dly[POD_D-3];    // T0+POD_D-2
  assign ppo_swap  = dly[PP_D-3];     // T0+PP_D-2
  assign arm_pod   = dly[POD_D-1];    // T0+POD_D
  assign arm_pp    = dly[PP_D-1];     // T0+PP_D

  // ------------------------------------------------------------- banks
  logic [N-1:0]          act_rv, w_rv, ps_rv;
  logic [N-1:0][AWD-1:0] act_rd;
  logic [N-1:0][WWD-1:0] w_rd;
  logic [N-1:0][PWD-1:0] ps_rd;
  logic [N-1:0]          act_wv, ps_wv_pod, ps_wv_pp;
  logic [N-1:0][AWD-1:0] act_wd;
  logic [N-1:0][PWD-1:0] ps_wd_pod, ps_wd_pp;
  logic [N-1:0][AWD-1:0] act_hr;
  logic [N-1:0][WWD-1:0] w_hr;
  logic [N-1:0][PWD-1:0] ps_hr;
  logic [N-1:0]          clash_a, clash_w, clash_p;

  for (genvar b = 0; b < N; b++) begin : g_bank
    logic he_a, he_w, he_p;
    assign he_a = host_en && host_grp == 2'd0 && host_bank == 10'(b);
    assign he_w = host_en && host_grp == 2'd1 && host_bank == 10'(b);
    assign he_p = host_en && host_grp == 2'd2 && host_bank == 10'(b);

    bank_ctrl #(.DEPTH(ACT_DEPTH), .WIDTH(AWD), .R(R), .GRP(GRP_ACT)) u_act (
      .clk, .rst_n, .bank_id(10'(b)), .ctrl, .slice_start, .arm_pod(1'b0), .arm_pp,
      .rd_valid(act_rv[b]), .rd_data(act_rd[b]),
      .wr_pod_valid(1'b0), .wr_pod_data('0), .wr_pp_valid(act_wv[b]), .wr_pp_data(act_wd[b]),
      .host_en(he_a), .host_we, .host_addr(host_addr[$clog2(ACT_DEPTH)-1:0]),
      .host_wdata(host_wdata[AWD-1:0]), .host_rdata(act_hr[b]), .port_clash(clash_a[b])
    );
    bank_ctrl #(.DEPTH(W_DEPTH), .WIDTH(WWD), .R(R), .GRP(GRP_W)) u_w (
      .clk, .rst_n, .bank_id(10'(b)), .ctrl, .slice_start, .arm_pod(1'b0), .arm_pp(1'b0),
      .rd_valid(w_rv[b]), .rd_data(w_rd[b]),
      .wr_pod_valid(1'b0), .wr_pod_data('0), .wr_pp_valid(1'b0), .wr_pp_data('0),
      .host_en(he_w), .host_we, .host_addr(host_addr[$clog2(W_DEPTH)-1:0]),
      .host_wdata(host_wdata[WWD-1:0]), .host_rdata(w_hr[b]), .port_clash(clash_w[b])
    );
    bank_ctrl #(.DEPTH(PS_DEPTH), .WIDTH(PWD), .R(R), .GRP(GRP_PSUM)) u_ps (
      .clk, .rst_n, .bank_id(10'(b)), .ctrl, .slice_start, .arm_pod, .arm_pp,
      .rd_valid(ps_rv[b]), .rd_data(ps_rd[b]),
      .wr_pod_valid(ps_wv_pod[b]), .wr_pod_data(ps_wd_pod[b]),
      .wr_pp_valid(ps_wv_pp[b]), .wr_pp_data(ps_wd_pp[b]),
      .host_en(he_p), .host_we, .host_addr(host_addr[$clog2(PS_DEPTH)-1:0]),
      .host_wdata(host_wdata), .host_rdata(ps_hr[b]), .port_clash(clash_p[b])
    );
  end

  // host read mux (sram output is one cycle after the request)
  logic [1:0] hr_grp;
  logic [9:0] hr_bank;
  always_ff @(posedge clk) begin
    hr_grp  <= host_grp;
    hr_bank <= host_bank;
  end
  always_comb begin
    case (hr_grp)
      2'd0:    host_rdata = PWD'(act_hr[hr_bank[$clog2(N)-1:0]]);
      2'd1:    host_rdata = PWD'(w_hr[hr_bank[$clog2(N)-1:0]]);
      default: host_rdata = ps_hr[hr_bank[$clog2(N)-1:0]];
    endcase
  end

  // ------------------------------------------------------------- pods
  logic [N-1:0]          x_v, w_v, pin_v, pout_v;
  logic [N-1:0][AWD-1:0] x_d;
  logic [N-1:0][WWD-1:0] w_d;
  logic [N-1:0][PWD-1:0] pin_d, pout_d;

  for (genvar p = 0; p < N; p++) begin : g_pod
    systolic_pod #(.R(R), .C(C), .U(U), .V(V), .KMAX(KMAX), .QDEPTH(QDEPTH)) u_pod (
      .clk, .rst_n, .pod_id(10'(p)), .ctrl, .slice_start(go), .slice_id(cur_slice),
      .x_valid(x_v[p]), .x_data(x_d[p]),
      .w_valid(w_v[p]), .w_data(w_d[p]),
      .pin_valid(pin_v[p]), .pin_data(pin_d[p]),
      .pout_valid(pout_v[p]), .pout_data(pout_d[p]),
      .busy(pod_busy[p])
    );
  end

  // ------------------------------------------------------------- post-processors
  logic [N-1:0]          ppi_v, ppa_v, ppp_v;
  logic [N-1:0][PWD-1:0] ppi_d, ppp_d;
  logic [N-1:0][WWD-1:0] ppa_d;
  logic [N-1:0][AWD-1:0] ppa_dx;

  for (genvar q = 0; q < N / 2; q++) begin : g_pp
    post_processor #(.C(C)) u_pp (
      .clk, .rst_n, .pair_id(10'(q)), .ctrl, .slice_start, .slice_go(go),
      .in_valid(ppi_v[2*q+1:2*q]), .in_data(ppi_d[2*q+1:2*q]),
      .act_valid(ppa_v[2*q+1:2*q]), .act_data(ppa_d[2*q+1:2*q]),
      .psum_valid(ppp_v[2*q+1:2*q]), .psum_data(ppp_d[2*q+1:2*q])
    );
  end
  for (genvar q = 0; q < N; q++) begin : g_ppx
    assign ppa_dx[q] = AWD'(ppa_d[q]);
  end

  // ------------------------------------------------------------- interconnects
  logic [6:0] cfg_v, conf;
  for (genvar n = 0; n < 7; n++) begin : g_cfg
    assign cfg_v[n] = ctrl.valid && ctrl.instr.op == OP_ROUTE && ctrl.instr.tgt == 3'(n);
  end

  butterfly_network #(.N(N), .K(K), .WIDTH(AWD)) u_net_x (
    .clk, .rst_n, .src_valid(act_rv), .src_data(act_rd), .dst_valid(x_v), .dst_data(x_d),
    .cfg_valid(cfg_v[NET_X]), .cfg_link(ctrl.instr.sub), .cfg_src(ctrl.instr.a), .cfg_dst(ctrl.instr.b),
    .stage(slice_start), .swap(in_swap), .conflict(conf[NET_X]));
  butterfly_network #(.N(N), .K(K), .WIDTH(WWD)) u_net_w (
    .clk, .rst_n, .src_valid(w_rv), .src_data(w_rd), .dst_valid(w_v), .dst_data(w_d),
    .cfg_valid(cfg_v[NET_W]), .cfg_link(ctrl.instr.sub), .cfg_src(ctrl.instr.a), .cfg_dst(ctrl.instr.b),
    .stage(slice_start), .swap(in_swap), .conflict(conf[NET_W]));
  butterfly_network #(.N(N), .K(K), .WIDTH(PWD)) u_net_pin (
    .clk, .rst_n, .src_valid(ps_rv), .src_data(ps_rd), .dst_valid(pin_v), .dst_data(pin_d),
    .cfg_valid(cfg_v[NET_PIN]), .cfg_link(ctrl.instr.sub), .cfg_src(ctrl.instr.a), .cfg_dst(ctrl.instr.b),
    .stage(slice_start), .swap(in_swap), .conflict(conf[NET_PIN]));
  butterfly_network #(.N(N), .K(K), .WIDTH(PWD)) u_net_pout (
    .clk, .rst_n, .src_valid(pout_v), .src_data(pout_d), .dst_valid(ps_wv_pod), .dst_data(ps_wd_pod),
    .cfg_valid(cfg_v[NET_POUT]), .cfg_link(ctrl.instr.sub), .cfg_src(ctrl.instr.a), .cfg_dst(ctrl.instr.b),
    .stage(slice_start), .swap(pout_swap), .conflict(conf[NET_POUT]));
  butterfly_network #(.N(N), .K(K), .WIDTH(PWD)) u_net_ppin (
    .clk, .rst_n, .src_valid(ps_rv), .src_data(ps_rd), .dst_valid(ppi_v), .dst_data(ppi_d),
    .cfg_valid(cfg_v[NET_PPIN]), .cfg_link(ctrl.instr.sub), .cfg_src(ctrl.instr.a), .cfg_dst(ctrl.instr.b),
    .stage(slice_start), .swap(in_swap), .conflict(conf[NET_PPIN]));
  butterfly_network #(.N(N), .K(K), .WIDTH(AWD)) u_net_ppact (
    .clk, .rst_n, .src_valid(ppa_v), .src_data(ppa_dx), .dst_valid(act_wv), .dst_data(act_wd),
    .cfg_valid(cfg_v[NET_PPACT]), .cfg_link(ctrl.instr.sub), .cfg_src(ctrl.instr.a), .cfg_dst(ctrl.instr.b),
    .stage(slice_start), .swap(ppo_swap), .conflict(conf[NET_PPACT]));
  butterfly_network #(.N(N), .K(K), .WIDTH(PWD)) u_net_pppsum (
    .clk, .rst_n, .src_valid(ppp_v), .src_data(ppp_d), .dst_valid(ps_wv_pp), .dst_data(ps_wd_pp),
    .cfg_valid(cfg_v[NET_PPPSUM]), .cfg_link(ctrl.instr.sub), .cfg_src(ctrl.instr.a), .cfg_dst(ctrl.instr.b),
    .stage(slice_start), .swap(ppo_swap), .conflict(conf[NET_PPPSUM]));

  // ------------------------------------------------------------- status
  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      net_conflict <= '0;
      bank_clash   <= 1'b0;
    end else begin
      net_conflict <= net_conflict | conf;
      bank_clash   <= bank_clash | (|clash_a) | (|clash_w) | (|clash_p);
    end
  end

  initial begin
    assert (SLICE >= R && SLICE >= POD_D) else $error("sosa_top: SLICE too short for back-to-back slices");
    assert (R == C) else $error("sosa_top: activation rows written by post-processors need R == C");
  end

endmodule
