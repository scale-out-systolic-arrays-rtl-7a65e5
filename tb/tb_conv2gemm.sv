// tb_conv2gemm: streams random pixels through the CONV-to-GEMM converter in
// GEMM mode and with kernel widths 2 and 4, and checks every output row
// KMAX cycles later against the im2col rows built in the testbench.
// The publication only names the converter; the 1-D window checked here is this design's.
module tb_conv2gemm;
  import sosa_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int R = 32, KMAX = 4, T = 40;
  logic [R-1:0][ACT_W-1:0] in_data, out_data;
  logic conv_en;
  logic [1:0] log2_kw;
  int checks = 0, failures = 0;
  logic [R-1:0][ACT_W-1:0] pix [T];

  conv2gemm #(.R(R), .KMAX(KMAX)) dut (.clk, .in_data, .conv_en, .log2_kw, .out_data);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_data = '0; conv_en = 0; log2_kw = 0;
    for (int mode = 0; mode < 3; mode++) begin
      int kw, ch;
      kw = (mode == 0) ? 1 : (mode == 1 ? 2 : 4);
      ch = R / kw;
      conv_en = (mode != 0);
      log2_kw = 2'(mode);
      for (int t = 0; t < T; t++)
        for (int l = 0; l < R; l++) pix[t][l] = ACT_W'($urandom);
      for (int c = 0; c < T + KMAX; c++) begin
        @(negedge clk);
        // output row t = c - KMAX
        if (c - KMAX >= 0 && c - KMAX + kw - 1 < T) begin
          int t;
          t = c - KMAX;
          for (int f = 0; f < R; f++) begin
            logic [ACT_W-1:0] e;
            e = conv_en ? pix[t + f / ch][f % ch] : pix[t][f];
            checks++;
            if (out_data[f] !== e) failures++;
          end
        end
        in_data = (c < T) ? pix[c] : '0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
