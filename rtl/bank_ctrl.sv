// bank_ctrl: port controller of one memory bank (activation, weight or
// partial-sum group), wrapped around its sram_bank.
//
// Commands come over the control bus during the slice before they run
// (OP_RD / OP_WR with tgt = GRP and a = bank_id) and are kept in a shadow
// register:
//   * read: at slice_start the bank starts reading R (+extra) consecutive
//     rows from the given address; row n is on rd_data (rd_valid = 1) in
//     cycle T0 + BANK_RD_LAT + n.
//   * write: the command waits for its arm pulse (slice_start delayed by the
//     fixed latency of the writer: arm_pod for pod results, arm_pp for
//     post-processor results) and from then writes each valid incoming row of
//     that writer to consecutive addresses, R rows at most.
// The bank is single ported, as in the paper: the host port wins, then a
// write, then a read. A read and a write in the same cycle is a scheduling
// error; it is counted on port_clash and reported by an assertion.
// Address generation in the bank is this design's choice.
module bank_ctrl
  import sosa_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 256,
  parameter int unsigned R     = 32,
  parameter grp_t        GRP   = GRP_ACT
)(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [9:0]               bank_id,
  input  ctrl_bus_t                ctrl,
  input  logic                     slice_start,
  input  logic                     arm_pod,
  input  logic                     arm_pp,
  // read stream
  output logic                     rd_valid,
  output logic [WIDTH-1:0]         rd_data,
  // write streams
  input  logic                     wr_pod_valid,
  input  logic [WIDTH-1:0]         wr_pod_data,
  input  logic                     wr_pp_valid,
  input  logic [WIDTH-1:0]         wr_pp_data,
  // host port
  input  logic                     host_en,
  input  logic                     host_we,
  input  logic [$clog2(DEPTH)-1:0] host_addr,
  input  logic [WIDTH-1:0]         host_wdata,
  output logic [WIDTH-1:0]         host_rdata,
  output logic                     port_clash
);

  localparam int unsigned AW = $clog2(DEPTH);

  // shadow commands
  logic          rd_sh_v, wr_sh_v, wr_sh_src;
  logic [AW-1:0] rd_sh_addr, wr_sh_addr;
  logic [3:0]    rd_sh_extra;
  // armed write commands (one per writer)
  logic          pend_pod_v, pend_pp_v;
  logic [AW-1:0] pend_pod_addr, pend_pp_addr;
  // running transfers
  logic [5:0]    rd_cnt;
  logic [AW-1:0] rd_ptr;
  logic          wr_src;
  logic [5:0]    wr_cnt;
  logic [AW-1:0] wr_ptr;

  logic is_me;
  assign is_me = ctrl.valid && ctrl.instr.tgt == 3'(GRP) && ctrl.instr.a == bank_id;

  // write that happens this cycle
  logic          arm;
  logic [5:0]    w_cnt_now;
  logic          w_now_act, w_now_src;
  logic [AW-1:0] w_now_ptr;
  logic          w_in_v;
  logic [WIDTH-1:0] w_in_d;
  always_comb begin
    arm       = (arm_pod && pend_pod_v) || (arm_pp && pend_pp_v);
    w_cnt_now = arm ? 6'(R) : wr_cnt;
    w_now_act = (w_cnt_now != 0);
    w_now_src = wr_src;
    w_now_ptr = wr_ptr;
    if (arm_pod && pend_pod_v) begin
      w_now_src = 1'b0; w_now_ptr = pend_pod_addr;
    end else if (arm_pp && pend_pp_v) begin
      w_now_src = 1'b1; w_now_ptr = pend_pp_addr;
    end
    w_in_v = w_now_src ? wr_pp_valid : wr_pod_valid;
    w_in_d = w_now_src ? wr_pp_data  : wr_pod_data;
  end

  logic do_wr, do_rd;
  assign do_wr = w_now_act && w_in_v;
  assign do_rd = (rd_cnt != 0);

  // SRAM port
  logic          m_en, m_we;
  logic [AW-1:0] m_addr;
  logic [WIDTH-1:0] m_wdata, m_rdata;
  always_comb begin
    if (host_en) begin
      m_en = 1'b1; m_we = host_we; m_addr = host_addr; m_wdata = host_wdata;
    end else if (do_wr) begin
      m_en = 1'b1; m_we = 1'b1; m_addr = w_now_ptr; m_wdata = w_in_d;
    end else begin
      m_en = do_rd; m_we = 1'b0; m_addr = rd_ptr; m_wdata = '0;
    end
  end

  sram_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_sram (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata)
  );
  assign rd_data    = m_rdata;
  assign host_rdata = m_rdata;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_sh_v <= 1'b0; wr_sh_v <= 1'b0; wr_sh_src <= 1'b0;
      rd_sh_addr <= '0; wr_sh_addr <= '0; rd_sh_extra <= '0;
      pend_pod_v <= 1'b0; pend_pp_v <= 1'b0;
      pend_pod_addr <= '0; pend_pp_addr <= '0;
      rd_cnt <= '0; rd_ptr <= '0;
      wr_src <= 1'b0; wr_cnt <= '0; wr_ptr <= '0;
      rd_valid <= 1'b0;
      port_clash <= 1'b0;
    end else begin
      rd_valid   <= do_rd && !host_en && !do_wr;
      port_clash <= do_rd && do_wr;

      // reads
      if (slice_start) begin
        rd_cnt <= rd_sh_v ? 6'(R) + 6'(rd_sh_extra) : '0;
        rd_ptr <= rd_sh_addr;
      end else if (do_rd) begin
        rd_cnt <= rd_cnt - 1'b1;
        rd_ptr <= rd_ptr + 1'b1;
      end

      // writes
      if (do_wr) begin
        wr_ptr <= w_now_ptr + 1'b1;
        wr_cnt <= w_cnt_now - 1'b1;
        wr_src <= w_now_src;
      end else if (arm) begin
        wr_ptr <= w_now_ptr;
        wr_cnt <= w_cnt_now;
        wr_src <= w_now_src;
      end
      if (arm_pod) pend_pod_v <= 1'b0;
      if (arm_pp)  pend_pp_v  <= 1'b0;

      // shadow commands become pending / active at slice_start
      if (slice_start) begin
        rd_sh_v <= 1'b0;
        wr_sh_v <= 1'b0;
        if (wr_sh_v && !wr_sh_src) begin pend_pod_v <= 1'b1; pend_pod_addr <= wr_sh_addr; end
        if (wr_sh_v &&  wr_sh_src) begin pend_pp_v  <= 1'b1; pend_pp_addr  <= wr_sh_addr; end
      end
      if (is_me && ctrl.instr.op == OP_RD) begin
        rd_sh_v     <= 1'b1;
        rd_sh_addr  <= ctrl.instr.addr[AW-1:0];
        rd_sh_extra <= ctrl.instr.flags[3:0];
      end
      if (is_me && ctrl.instr.op == OP_WR) begin
        wr_sh_v    <= 1'b1;
        wr_sh_addr <= ctrl.instr.addr[AW-1:0];
        wr_sh_src  <= ctrl.instr.flags[0];
      end
    end
  end

  a_single_port: assert property (@(posedge clk) disable iff (!rst_n) !(do_rd && do_wr))
    else $warning("bank_ctrl: read and write in the same cycle");

endmodule
