// tb_butterfly_network: a 16-port Butterfly-2 network (K = 2 copies) checked
// against a reference model of the butterfly paths.
//
// Each round the testbench writes a random set of routes for the next slice
// (one source per destination, many destinations may share a source, which
// is multicast) while the current slice's data flows, then pulses stage and,
// three cycles later, swap. Routes that the model finds blocked on link 0 are
// placed on link 1; routes blocked on both links are left out. Every routed
// destination must deliver its source's word one cycle later; unrouted ones
// must show valid = 0. Some rounds deliberately add a blocked route: the
// conflict flag must then be set before stage, and clear in the other rounds.
// The Butterfly-2 topology follows the publication; the switch wiring, route commands and swap timing are this design's.
module tb_butterfly_network;
  localparam int N = 16, K = 2, W = 16, LOGN = 4, NPK = N / K;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, cfg_valid, stage, swap, conflict;
  logic [2:0] cfg_link;
  logic [9:0] cfg_src, cfg_dst;
  logic [N-1:0] src_valid, dst_valid;
  logic [N-1:0][W-1:0] src_data, dst_data;
  int checks = 0, failures = 0, n_multicast = 0, n_link1 = 0, n_conflict = 0;

  butterfly_network #(.N(N), .K(K), .WIDTH(W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: which input each switch output of each copy/stage takes
  // (-1 free, 0 / 1 = the input whose bit k is 0 / 1)
  int use_m [K][LOGN][N];
  int rt_src_n [N], rt_src_a [N];   // next slice / active: source or -1
  bit bad_n, bad_a;                 // slice contains a blocked route

  function automatic bit blocked(int s, int d, int e);
    int m = d / NPK, o = (d % NPK) * K + e, pos = s;
    for (int k = 0; k < LOGN; k++) begin
      // after stage k the path sits at the position whose bit k is o's bit k
      pos = (pos & ~(1 << k)) | (o & (1 << k));
      if (use_m[m][k][pos] != -1 && use_m[m][k][pos] != ((s >> k) & 1)) return 1;
    end
    return 0;
  endfunction

  function automatic void claim(int s, int d, int e);
    int m = d / NPK, o = (d % NPK) * K + e, pos = s;
    for (int k = 0; k < LOGN; k++) begin
      pos = (pos & ~(1 << k)) | (o & (1 << k));
      use_m[m][k][pos] = (s >> k) & 1;
    end
  endfunction

  task automatic cfg(int s, int d, int e);
    cfg_valid = 1; cfg_src = 10'(s); cfg_dst = 10'(d); cfg_link = 3'(e);
    @(negedge clk);
    cfg_valid = 0;
  endtask

  // data check: the word registered at the last edge is the one driven at the
  // previous falling edge (src_* still holds it here)
  bit                  check_en = 0;
  always @(negedge clk) begin
    if (check_en && !bad_a) begin
      for (int d = 0; d < N; d++) begin
        checks++;
        if (rt_src_a[d] < 0) begin
          if (dst_valid[d]) failures++;
        end else begin
          if (dst_valid[d] !== src_valid[rt_src_a[d]]) begin failures++; if (failures < 6) $display("v d=%0d s=%0d got %b", d, rt_src_a[d], dst_valid[d]); end
          else if (dst_valid[d] && dst_data[d] !== src_data[rt_src_a[d]]) begin failures++; if (failures < 6) $display("t=%0t d=%0d s=%0d got %h exp %h cur %h", $time, d, rt_src_a[d], dst_data[d], src_data[rt_src_a[d]], src_data[rt_src_a[d]]); end
        end
      end
    end
    src_data = {N{16'(0)}};
    for (int s = 0; s < N; s++) begin
      src_data[s] = W'($urandom);
      src_valid[s] = ($urandom % 8) != 0;
    end
  end

  initial begin
    rst_n = 0; cfg_valid = 0; stage = 0; swap = 0; cfg_link = 0; cfg_src = 0; cfg_dst = 0;
    src_valid = '0; src_data = '0;
    for (int d = 0; d < N; d++) begin rt_src_n[d] = -1; rt_src_a[d] = -1; end
    bad_a = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      automatic int nsrc [N];
      automatic bit want_bad = (round % 5 == 4);
      foreach (use_m[m, k, p]) use_m[m][k][p] = -1;
      foreach (nsrc[i]) nsrc[i] = 0;
      bad_n = 0;
      // routes of the next slice, written while the current one runs
      for (int d = 0; d < N; d++) begin
        automatic int s = (round % 3 == 0) ? int'($urandom % 4) : int'($urandom % N);  // heavy multicast
        rt_src_n[d] = -1;
        if ($urandom % 6 == 0) continue;
        if (!blocked(s, d, 0)) begin
          claim(s, d, 0); cfg(s, d, 0); rt_src_n[d] = s; nsrc[s]++;
        end else if (!blocked(s, d, 1)) begin
          claim(s, d, 1); cfg(s, d, 1); rt_src_n[d] = s; nsrc[s]++; n_link1++;
        end else if (want_bad && !bad_n) begin
          cfg(s, d, 0); bad_n = 1; n_conflict++;
        end
      end
      foreach (nsrc[i]) if (nsrc[i] > 1) n_multicast++;
      check_en = 1;
      @(negedge clk);
      checks++;
      if (conflict !== bad_n) failures++;
      stage = 1;
      @(negedge clk);
      stage = 0;
      @(negedge clk);
      checks++;
      if (conflict !== 0) failures++;
      @(negedge clk);
      swap = 1;
      @(negedge clk);
      swap = 0;
      check_en = 0;           // the first cycle after swap carries the new routes
      for (int d = 0; d < N; d++) rt_src_a[d] = rt_src_n[d];
      bad_a = bad_n;
      @(negedge clk);
      check_en = 1;
      repeat (4) @(negedge clk);
    end
    checks++;
    if (n_multicast == 0 || n_link1 == 0 || n_conflict == 0) failures++;
    $display("multicast=%0d link1=%0d conflicts=%0d", n_multicast, n_link1, n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
