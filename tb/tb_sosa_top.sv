// tb_sosa_top: end-to-end test of the accelerator at reduced size
// (N = 4 pods of 4 x 4, U = V = 2, KMAX = 4, Butterfly-2, SLICE = 16).
//
// The testbench loads banks and a program through the host ports, starts
// the controller and reads the results back. The program is a small static
// schedule of two layers, built slice by slice the way an offline scheduler
// would:
//   slice 1  pods 0..3 load the four 4 x 4 tiles of an 8 x 8 weight matrix
//            (routes blocked on the first Butterfly link take the second)
//   slice 2  pods 0, 1, 3 compute; activation bank 0 is multicast to pods 0
//            and 1; pod 0 adds a bias read from a psum bank; pod 1 loads its
//            next (convolution) weights while it computes
//   slice 3  pod 2 computes and adds pod 0's partial sums (psum chaining
//            through a bank); a post-processor pair adds pods 1 and 3's
//            partial sums and applies the activation (ADD_ACT); pod 0 loads
//            the second-layer weights
//   slice 4  post-processor lane 2 activates pod 2's result (ACT); the pair
//            also writes the plain sum (ADD) back to a psum bank
//   slice 5  pod 0 runs the second layer on the activations written in
//            slice 4; pod 1 runs a convolution tile (kernel width 2)
//   slice 6  too many instructions for one slice (the slice stretches), a
//            conflicting route, and a pod write onto a bank that is being
//            read (port clash)
// Every result row is compared with a reference computed here. Each
// mechanism is counted from the design's signals and must occur.
// The schedule mirrors the publication's tiling example (tile products, psum chaining, aggregation in post-processor pairs); the program format is this design's.
module tb_sosa_top;
  import sosa_pkg::*;
  localparam int N = 4, K = 2, R = 4, C = 4, U = 2, V = 2, KMAX = 4, SLICE = 16;
  localparam int AD = 64, WD = 64, PD = 64, ID = 256;
  localparam int SH = 2;   // activation shift
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, host_imem_we, host_en, host_we, start, busy, done, bank_clash;
  logic [7:0] host_imem_addr;
  instr_t host_imem_wdata;
  logic [1:0] host_grp;
  logic [9:0] host_bank;
  logic [15:0] host_addr;
  logic [C*PSUM_W-1:0] host_wdata, host_rdata;
  logic [31:0] n_slices, n_stretched;
  logic [N-1:0] pod_busy;
  logic [6:0] net_conflict;
  int checks = 0, failures = 0;

  sosa_top #(.N(N), .K(K), .R(R), .C(C), .U(U), .V(V), .KMAX(KMAX), .QDEPTH(4), .SLICE(SLICE),
             .ACT_DEPTH(AD), .W_DEPTH(WD), .PS_DEPTH(PD), .IMEM_DEPTH(ID)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- data
  int X [R][8];          // layer-1 input: 4 pixels x 8 features
  int Wm [8][8];         // layer-1 weights
  int B [R][C];          // bias for output columns 0..3
  int W2 [R][C];         // layer-2 weights (features 0..3 of H)
  int Z [R+1][R];        // convolution input: 5 pixels x 4 bytes (2 channels used)
  int WC [R][C];         // convolution weights, feature f = k*2 + c

  function automatic int s16(int v); return int'($signed(16'(v))); endfunction
  function automatic int act(int v);
    int r = (v < 0) ? 0 : (v >>> SH);
    return (r > 127) ? 127 : r;
  endfunction

  // ---------------------------------------------------------------- host access
  task automatic host_wr(int grp, int bank, int addr, logic [C*PSUM_W-1:0] d);
    host_en = 1; host_we = 1; host_grp = 2'(grp); host_bank = 10'(bank); host_addr = 16'(addr);
    host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask
  task automatic host_rd(int grp, int bank, int addr, output logic [C*PSUM_W-1:0] d);
    host_en = 1; host_we = 0; host_grp = 2'(grp); host_bank = 10'(bank); host_addr = 16'(addr);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask
  function automatic logic [C*PSUM_W-1:0] pack8(int v0, int v1, int v2, int v3);
    return (C*PSUM_W)'({8'(v3), 8'(v2), 8'(v1), 8'(v0)});
  endfunction

  // ---------------------------------------------------------------- program
  int pc = 0;
  task automatic emit(instr_t i);
    host_imem_we = 1; host_imem_addr = 8'(pc); host_imem_wdata = i;
    @(negedge clk);
    host_imem_we = 0;
    pc++;
  endtask
  // Route choice as an offline scheduler makes it: per network and slice, a
  // model of the switch outputs in use; take link 0 unless a switch on that
  // path is already set the other way, then link 1.
  localparam int LOGN = 2, NPK = N / K;
  int use_m [7][K][LOGN][N];
  int n_link1_used = 0;
  function automatic bit blocked(int net, int s, int d, int e);
    int m = d / NPK, o = (d % NPK) * K + e, pos = s;
    for (int k = 0; k < LOGN; k++) begin
      pos = (pos & ~(1 << k)) | (o & (1 << k));
      if (use_m[net][m][k][pos] != -1 && use_m[net][m][k][pos] != ((s >> k) & 1)) return 1;
    end
    return 0;
  endfunction
  function automatic void claim(int net, int s, int d, int e);
    int m = d / NPK, o = (d % NPK) * K + e, pos = s;
    for (int k = 0; k < LOGN; k++) begin
      pos = (pos & ~(1 << k)) | (o & (1 << k));
      use_m[net][m][k][pos] = (s >> k) & 1;
    end
  endfunction
  task automatic aroute(net_t net, int src, int dst);
    int e = blocked(int'(net), src, dst, 0) ? 1 : 0;
    if (blocked(int'(net), src, dst, e)) begin
      failures++;
      $display("no free path for %s %0d -> %0d", net.name(), src, dst);
    end
    claim(int'(net), src, dst, e);
    if (e == 1) n_link1_used++;
    route(net, e, src, dst);
  endtask

  task automatic route(net_t net, int link, int src, int dst);
    instr_t i = '0;
    i.op = OP_ROUTE; i.tgt = 3'(net); i.sub = 3'(link); i.a = 10'(src); i.b = 10'(dst);
    emit(i);
  endtask
  task automatic rd(grp_t g, int bank, int addr, int extra = 0);
    instr_t i = '0;
    i.op = OP_RD; i.tgt = 3'(g); i.a = 10'(bank); i.addr = 16'(addr); i.flags = 8'(extra);
    emit(i);
  endtask
  task automatic wr(grp_t g, int bank, int addr, bit from_pp);
    instr_t i = '0;
    i.op = OP_WR; i.tgt = 3'(g); i.a = 10'(bank); i.addr = 16'(addr); i.flags = {7'd0, from_pp};
    emit(i);
  endtask
  task automatic pod(int p, bit load_w, bit compute, bit use_pin, bit conv = 0, int log2_kw = 0);
    instr_t i = '0;
    i.op = OP_POD; i.a = 10'(p); i.flags = {2'b00, 2'(log2_kw), conv, use_pin, compute, load_w};
    emit(i);
  endtask
  task automatic pp(int lane, pp_op_t op);
    instr_t i = '0;
    i.op = OP_PP; i.a = 10'(lane); i.flags = 8'(op); i.addr = 16'(SH);
    emit(i);
  endtask
  task automatic op(opcode_t o);
    instr_t i = '0;
    i.op = o;
    emit(i);
    if (o == OP_SYNC) foreach (use_m[a, b, c, d]) use_m[a][b][c][d] = -1;
  endtask

  task automatic build_program();
    // slice 1: weight tiles (f, o) -> pod 2f + o
    for (int p = 0; p < 4; p++) begin
      rd(GRP_W, p, 0);
      aroute(NET_W, p, p);
      pod(p, 1, 0, 0);
    end
    op(OP_SYNC);
    // slice 2
    rd(GRP_ACT, 0, 0); rd(GRP_ACT, 1, 0);
    aroute(NET_X, 0, 0); aroute(NET_X, 0, 1); aroute(NET_X, 1, 3);
    rd(GRP_PSUM, 2, 8); aroute(NET_PIN, 2, 0);
    rd(GRP_W, 2, 8); aroute(NET_W, 2, 1);
    pod(0, 0, 1, 1); pod(1, 1, 1, 0); pod(3, 0, 1, 0);
    wr(GRP_PSUM, 0, 0, 0); aroute(NET_POUT, 0, 0);
    wr(GRP_PSUM, 1, 0, 0); aroute(NET_POUT, 1, 1);
    wr(GRP_PSUM, 3, 0, 0); aroute(NET_POUT, 3, 3);
    op(OP_SYNC);
    // slice 3
    rd(GRP_ACT, 1, 0); aroute(NET_X, 1, 2);
    rd(GRP_PSUM, 0, 0); aroute(NET_PIN, 0, 2);
    pod(2, 0, 1, 1);
    wr(GRP_PSUM, 2, 0, 0); aroute(NET_POUT, 2, 2);
    rd(GRP_PSUM, 1, 0); rd(GRP_PSUM, 3, 0);
    aroute(NET_PPIN, 1, 0); aroute(NET_PPIN, 3, 1);
    pp(0, PP_ADD_ACT);
    aroute(NET_PPACT, 0, 3); wr(GRP_ACT, 3, 0, 1);
    rd(GRP_W, 1, 8); aroute(NET_W, 1, 0); pod(0, 1, 0, 0);
    op(OP_SYNC);
    // slice 4
    rd(GRP_PSUM, 2, 0); aroute(NET_PPIN, 2, 2);
    pp(2, PP_ACT); aroute(NET_PPACT, 2, 2); wr(GRP_ACT, 2, 0, 1);
    rd(GRP_PSUM, 1, 0); rd(GRP_PSUM, 3, 0);
    aroute(NET_PPIN, 1, 0); aroute(NET_PPIN, 3, 1);
    pp(0, PP_ADD); aroute(NET_PPPSUM, 0, 0); wr(GRP_PSUM, 0, 8, 1);
    op(OP_SYNC);
    // slice 5
    rd(GRP_ACT, 2, 0); aroute(NET_X, 2, 0); pod(0, 0, 1, 0);
    wr(GRP_PSUM, 0, 16, 0); aroute(NET_POUT, 0, 0);
    rd(GRP_ACT, 0, 16, 1); aroute(NET_X, 0, 1); pod(1, 0, 1, 0, 1, 1);
    wr(GRP_PSUM, 1, 16, 0); aroute(NET_POUT, 1, 1);
    op(OP_SYNC);
    // slice 6
    for (int n = 0; n < SLICE + 4; n++) op(OP_NOP);
    route(NET_PPPSUM, 0, 0, 0); route(NET_PPPSUM, 0, 1, 0);   // blocked: same switch output
    rd(GRP_ACT, 1, 0); aroute(NET_X, 1, 3); pod(3, 0, 1, 0);
    wr(GRP_PSUM, 3, 32, 0); aroute(NET_POUT, 3, 3);
    rd(GRP_PSUM, 3, 40, 15);
    op(OP_SYNC);
    op(OP_END);
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_wrow, n_xrow, n_overlap, n_pin, n_mcast, n_conv, n_link1, n_addact, n_act, n_add, n_idle;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < N; p++) begin
      n_wrow += int'(dut.w_v[p]);
      n_xrow += int'(dut.x_v[p]);
      n_pin  += int'(dut.pin_v[p]);
      n_overlap += int'(dut.w_v[p] && dut.x_v[p]);
      for (int q = p + 1; q < N; q++)
        n_mcast += int'(dut.x_v[p] && dut.x_v[q] && dut.x_d[p] == dut.x_d[q]);
      if (dut.go) n_idle += int'(!pod_busy[p]);
    end
    n_conv  += int'(dut.g_pod[1].u_pod.conv_en && dut.x_v[1]);
    for (int d = 0; d < N; d++)
      n_link1 += int'((dut.u_net_x.dl_ac[d] == 1'b1 && dut.x_v[d]) ||
                      (dut.u_net_w.dl_ac[d] == 1'b1 && dut.w_v[d]) ||
                      (dut.u_net_pin.dl_ac[d] == 1'b1 && dut.pin_v[d]) ||
                      (dut.u_net_pout.dl_ac[d] == 1'b1 && dut.ps_wv_pod[d]) ||
                      (dut.u_net_ppin.dl_ac[d] == 1'b1 && dut.ppi_v[d]) ||
                      (dut.u_net_ppact.dl_ac[d] == 1'b1 && dut.act_wv[d]));
    n_addact += int'(dut.g_pp[0].u_pp.act_valid[0] && dut.g_pp[0].u_pp.op_ac[0] == PP_ADD_ACT);
    n_act   += int'(dut.g_pp[1].u_pp.act_valid[0] && dut.g_pp[1].u_pp.op_ac[0] == PP_ACT);
    n_add   += int'(dut.g_pp[0].u_pp.psum_valid[0]);
  end

  task automatic count(string name, int v);
    checks++;
    if (v == 0) failures++;
    $display("  %-28s %0d", name, v);
  endtask

  // ---------------------------------------------------------------- checks
  task automatic check_psum(int bank, int addr, int exp [R][C], string what);
    logic [C*PSUM_W-1:0] d;
    for (int t = 0; t < R; t++) begin
      host_rd(2, bank, addr + t, d);
      for (int j = 0; j < C; j++) begin
        checks++;
        if (s16(int'(d[j*PSUM_W +: PSUM_W])) != s16(exp[t][j])) begin
          failures++;
          $display("%s row %0d col %0d: got %0d expected %0d", what, t, j,
                   s16(int'(d[j*PSUM_W +: PSUM_W])), s16(exp[t][j]));
        end
      end
    end
  endtask
  task automatic check_act(int bank, int addr, int exp [R][C], string what);
    logic [C*PSUM_W-1:0] d;
    for (int t = 0; t < R; t++) begin
      host_rd(0, bank, addr + t, d);
      for (int j = 0; j < C; j++) begin
        checks++;
        if (int'($signed(d[j*8 +: 8])) != exp[t][j]) begin
          failures++;
          $display("%s row %0d col %0d: got %0d expected %0d", what, t, j, $signed(d[j*8 +: 8]), exp[t][j]);
        end
      end
    end
  endtask

  int P0 [R][C], P1 [R][C], P3 [R][C], P2 [R][C], A3 [R][C], A2 [R][C], S [R][C], Y2 [R][C], YC [R][C];
  longint t_start, t_done;

  initial begin
    rst_n = 0; host_imem_we = 0; host_imem_addr = '0; host_imem_wdata = '0;
    host_en = 0; host_we = 0; host_grp = '0; host_bank = '0; host_addr = '0; host_wdata = '0;
    start = 0;
    {n_wrow, n_xrow, n_overlap, n_pin, n_mcast, n_conv, n_link1, n_addact, n_act, n_add, n_idle} = '0;
    foreach (X[i, j])  X[i][j]  = int'($urandom % 32) - 16;
    foreach (Wm[i, j]) Wm[i][j] = int'($urandom % 32) - 16;
    foreach (B[i, j])  B[i][j]  = int'($urandom % 2000) - 1000;
    foreach (W2[i, j]) W2[i][j] = int'($urandom % 32) - 16;
    foreach (Z[i, j])  Z[i][j]  = int'($urandom % 256) - 128;
    foreach (WC[i, j]) WC[i][j] = int'($urandom % 32) - 16;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // banks
    for (int t = 0; t < R; t++) begin
      host_wr(0, 0, t, pack8(X[t][0], X[t][1], X[t][2], X[t][3]));
      host_wr(0, 1, t, pack8(X[t][4], X[t][5], X[t][6], X[t][7]));
    end
    for (int t = 0; t <= R; t++) host_wr(0, 0, 16 + t, pack8(Z[t][0], Z[t][1], Z[t][2], Z[t][3]));
    for (int p = 0; p < 4; p++)
      for (int i = 0; i < R; i++)
        host_wr(1, p, i, pack8(Wm[4*(p/2)+i][4*(p%2)+0], Wm[4*(p/2)+i][4*(p%2)+1],
                               Wm[4*(p/2)+i][4*(p%2)+2], Wm[4*(p/2)+i][4*(p%2)+3]));
    for (int i = 0; i < R; i++) begin
      host_wr(1, 1, 8 + i, pack8(W2[i][0], W2[i][1], W2[i][2], W2[i][3]));
      host_wr(1, 2, 8 + i, pack8(WC[i][0], WC[i][1], WC[i][2], WC[i][3]));
      host_wr(2, 2, 8 + i, {16'(B[i][3]), 16'(B[i][2]), 16'(B[i][1]), 16'(B[i][0])});
    end
    foreach (use_m[a, b, c, d]) use_m[a][b][c][d] = -1;
    build_program();
    // run
    start = 1;
    @(negedge clk);
    start = 0;
    t_start = $time;
    wait (done);
    t_done = $time;
    @(negedge clk);

    // reference
    for (int t = 0; t < R; t++)
      for (int j = 0; j < C; j++) begin
        P0[t][j] = B[t][j]; P1[t][j] = 0; P3[t][j] = 0;
        for (int f = 0; f < 4; f++) begin
          P0[t][j] += X[t][f] * Wm[f][j];
          P1[t][j] += X[t][f] * Wm[f][4 + j];
          P3[t][j] += X[t][4 + f] * Wm[4 + f][4 + j];
        end
        P2[t][j] = P0[t][j];
        for (int f = 0; f < 4; f++) P2[t][j] += X[t][4 + f] * Wm[4 + f][j];
        A3[t][j] = act(s16(P1[t][j]) + s16(P3[t][j]));
        A2[t][j] = act(s16(P2[t][j]));
        S[t][j]  = P1[t][j] + P3[t][j];
      end
    for (int t = 0; t < R; t++)
      for (int j = 0; j < C; j++) begin
        Y2[t][j] = 0; YC[t][j] = 0;
        for (int f = 0; f < 4; f++) begin
          Y2[t][j] += A2[t][f] * W2[f][j];
          YC[t][j] += Z[t + f / 2][f % 2] * WC[f][j];
        end
      end
    check_psum(0, 0, P0, "pod0 X0*W00+bias");
    check_psum(1, 0, P1, "pod1 X0*W01");
    check_psum(3, 0, P3, "pod3 X1*W11");
    check_psum(2, 0, P2, "pod2 chained");
    check_act(3, 0, A3, "pp add_act");
    check_act(2, 0, A2, "pp act");
    check_psum(0, 8, S, "pp add");
    check_psum(0, 16, Y2, "layer 2");
    check_psum(1, 16, YC, "conv");

    // status
    checks++;
    if (n_slices != 6) failures++;
    checks++;
    if (net_conflict != 7'(1 << NET_PPPSUM)) failures++;
    $display("slices=%0d stretched=%0d conflict=%b clash=%b cycles=%0d", n_slices, n_stretched,
             net_conflict, bank_clash, (t_done - t_start) / 10);
    $display("mechanisms:");
    count("weight rows loaded", n_wrow);
    count("activation rows computed", n_xrow);
    count("load during compute", n_overlap);
    count("input psum rows", n_pin);
    count("multicast rows", n_mcast);
    count("conv rows", n_conv);
    count("second butterfly link rows", n_link1);
    count("pp add+act rows", n_addact);
    count("pp act rows", n_act);
    count("pp add rows", n_add);
    count("idle pod slices", n_idle);
    count("stretched slices", int'(n_stretched));
    count("route conflicts", int'(net_conflict[NET_PPPSUM]));
    count("bank port clashes", int'(bank_clash));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
