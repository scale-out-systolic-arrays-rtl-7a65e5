// butterfly_network: Butterfly-K interconnect with N sources and N
// destinations (the paper's expanded Butterfly, K = 2 in the proposed design).
//
// Structure (paper Fig. 8): K copies of an N x N butterfly, log2(N) stages of
// N/2 two-by-two switches each. Every source drives input s of every copy.
// Copy m serves destinations m*N/K .. (m+1)*N/K-1, and destination d owns the
// K adjacent outputs o = (d mod N/K)*K + e, e = 0..K-1, of its copy. The K
// links give K disjoint paths to every destination, which is where the extra
// routing freedom of the expansion comes from.
//
// Stage k of a copy pairs positions that differ in address bit k. Each switch
// output picks one of the two switch inputs, so a switch can pass, cross or
// broadcast (multicast). On the path from source s to output o, the output
// of stage k at position {s[n-1:k+1], o[k:0]} selects the input whose bit k
// equals s[k]. The wiring from sources to copies and the switch internals are
// this design's choices; the figure only shows the topology.
//
// Routes are computed offline. One cfg command (copy link e, source, dest)
// writes the log2(N) switch settings of one path into a shadow configuration.
// stage (the slice start) moves the shadow into a staged copy and clears it
// for the following slice; swap, a fixed number of cycles later when the
// first row of the new slice reaches the network, makes the staged copy
// active. A
// command that needs a switch output already set the other way in the same
// slice raises conflict (sticky until stage) and is reported by an assertion.
//
// Timing: switches are combinational, destination outputs are registered
// (latency sosa_pkg::NET_LAT = 1 cycle). A destination without a route
// outputs valid = 0.
module butterfly_network #(
  parameter int unsigned N     = 256,
  parameter int unsigned K     = 2,
  parameter int unsigned WIDTH = 256
)(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [N-1:0]                src_valid,
  input  logic [N-1:0][WIDTH-1:0]     src_data,
  output logic [N-1:0]                dst_valid,
  output logic [N-1:0][WIDTH-1:0]     dst_data,
  // configuration
  input  logic                        cfg_valid,
  input  logic [2:0]                  cfg_link,
  input  logic [9:0]                  cfg_src,
  input  logic [9:0]                  cfg_dst,
  input  logic                        stage,
  input  logic                        swap,
  output logic                        conflict
);

  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned NPK  = N / K;           // destinations per copy
  localparam int unsigned LK   = (K > 1) ? $clog2(K) : 1;

  // switch-output settings, shadow (being written) and active
  logic [N-1:0] sel_sh [K][LOGN];
  logic [N-1:0] set_sh [K][LOGN];
  logic [N-1:0] sel_st [K][LOGN];   // staged: complete setting of the next slice
  logic [N-1:0] sel_ac [K][LOGN];
  // per destination: routed, and which of its K links
  logic [N-1:0]         dv_sh, dv_st, dv_ac;
  logic [LK-1:0]        dl_sh [N];
  logic [LK-1:0]        dl_st [N];
  logic [LK-1:0]        dl_ac [N];

  // ------------------------------------------------------------ configuration
  logic [LOGN-1:0] c_s, c_d, c_o;
  int unsigned     c_m;
  assign c_s = cfg_src[LOGN-1:0];
  assign c_d = cfg_dst[LOGN-1:0];
  assign c_m = int'(c_d) / NPK;
  assign c_o = LOGN'((int'(c_d) % NPK) * K + (int'(cfg_link) % K));

  // position of the path after stage k
  function automatic logic [LOGN-1:0] path_pos(logic [LOGN-1:0] s, logic [LOGN-1:0] o, int k);
    logic [LOGN-1:0] lo;
    lo = LOGN'((1 << (k + 1)) - 1);
    return (s & ~lo) | (o & lo);
  endfunction

  logic cfg_clash;
  always_comb begin
    cfg_clash = 1'b0;
    for (int k = 0; k < LOGN; k++) begin
      if (set_sh[c_m][k][path_pos(c_s, c_o, k)] && sel_sh[c_m][k][path_pos(c_s, c_o, k)] != c_s[k])
        cfg_clash = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int m = 0; m < K; m++)
        for (int k = 0; k < LOGN; k++) begin
          sel_sh[m][k] <= '0;
          set_sh[m][k] <= '0;
          sel_st[m][k] <= '0;
          sel_ac[m][k] <= '0;
        end
      dv_sh    <= '0;
      dv_st    <= '0;
      dv_ac    <= '0;
      conflict <= 1'b0;
      for (int d = 0; d < N; d++) begin
        dl_sh[d] <= '0;
        dl_st[d] <= '0;
        dl_ac[d] <= '0;
      end
    end else begin
      // staged -> active when the data of the new slice reaches the network
      if (swap) begin
        for (int m = 0; m < K; m++)
          for (int k = 0; k < LOGN; k++) sel_ac[m][k] <= sel_st[m][k];
        dv_ac <= dv_st;
        for (int d = 0; d < N; d++) dl_ac[d] <= dl_st[d];
      end
      // shadow -> staged at the slice start; shadow starts empty again
      if (stage) begin
        for (int m = 0; m < K; m++)
          for (int k = 0; k < LOGN; k++) begin
            sel_st[m][k] <= sel_sh[m][k];
            sel_sh[m][k] <= '0;
            set_sh[m][k] <= '0;
          end
        dv_st    <= dv_sh;
        dv_sh    <= '0;
        conflict <= 1'b0;
        for (int d = 0; d < N; d++) dl_st[d] <= dl_sh[d];
      end else if (cfg_valid) begin
        for (int k = 0; k < LOGN; k++) begin
          sel_sh[c_m][k][path_pos(c_s, c_o, k)] <= c_s[k];
          set_sh[c_m][k][path_pos(c_s, c_o, k)] <= 1'b1;
        end
        dv_sh[c_d] <= 1'b1;
        dl_sh[c_d] <= LK'(int'(cfg_link) % K);
        if (cfg_clash) conflict <= 1'b1;
      end
    end
  end

  a_no_clash: assert property (@(posedge clk) disable iff (!rst_n) !(cfg_valid && !stage && cfg_clash))
    else $warning("butterfly_network: route conflicts with an earlier route of this slice");

  // ------------------------------------------------------------ switch fabric
  for (genvar m = 0; m < K; m++) begin : g_copy
    // g_lv[k].v: {valid, data} at each position after k stages
    for (genvar k = 0; k <= LOGN; k++) begin : g_lv
      logic [WIDTH:0] v [N];
      for (genvar p = 0; p < N; p++) begin : g_sw
        if (k == 0) begin : g_src
          assign v[p] = {src_valid[p], src_data[p]};
        end else begin : g_mux
          localparam int unsigned P0 = p & ~(1 << (k - 1));
          localparam int unsigned P1 = p | (1 << (k - 1));
          assign v[p] = sel_ac[m][k-1][p] ? g_lv[k-1].v[P1] : g_lv[k-1].v[P0];
        end
      end
    end
  end

  for (genvar d = 0; d < N; d++) begin : g_dst
    localparam int unsigned M  = d / NPK;
    localparam int unsigned OB = (d % NPK) * K;
    logic [WIDTH:0] links [K];
    for (genvar e = 0; e < K; e++) begin : g_link
      assign links[e] = g_copy[M].g_lv[LOGN].v[OB + e];
    end
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        dst_valid[d] <= 1'b0;
      end else begin
        dst_valid[d] <= dv_ac[d] && links[dl_ac[d]][WIDTH];
      end
      dst_data[d] <= links[dl_ac[d]][WIDTH-1:0];
    end
  end

endmodule
