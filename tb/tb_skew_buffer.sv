// tb_skew_buffer: checks the per-lane delays of a skew buffer (BASE 1,
// groups of 2 lanes) and of a deskew buffer (REVERSE) with random data.
// Skew by row or column group follows from the publication's multicast and fan-in array; the delay convention is this design's.
module tb_skew_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int L = 8, G = 2, BASE = 1, W = 8, NGRP = L / G;

  logic [L-1:0][W-1:0] din, dsk, ddsk;
  int checks = 0, failures = 0;

  skew_buffer #(.LANES(L), .WIDTH(W), .GROUP(G), .BASE(BASE), .REVERSE(1'b0)) u_sk (.clk, .din, .dout(dsk));
  skew_buffer #(.LANES(L), .WIDTH(W), .GROUP(G), .BASE(0),    .REVERSE(1'b1)) u_dsk (.clk, .din, .dout(ddsk));

  logic [L-1:0][W-1:0] hist [200];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 200; c++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) din[l] = W'($urandom);
      hist[c] = din;
      #1;
      // check outputs of this cycle against inputs of earlier cycles
      if (c >= 10) begin
        for (int l = 0; l < L; l++) begin
          int d1, d2;
          d1 = BASE + l / G;
          d2 = NGRP - 1 - l / G;
          checks += 2;
          if (dsk[l]  !== hist[c - d1][l]) failures++;
          if (ddsk[l] !== hist[c - d2][l]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
