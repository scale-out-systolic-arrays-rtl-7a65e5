// conv2gemm: CONV-to-GEMM converter of a systolic pod.
//
// A convolution reads the same input pixel for several output positions.
// Instead of storing the im2col matrix in the banks, the converter receives
// each input pixel once and builds the GEMM rows itself. This is the simplest
// form: a 1-D sliding window of KW pixels along the image width. A pixel
// arrives as one bank row whose low R/KW lanes hold its channels; GEMM row t
// is the concatenation of pixels t .. t+KW-1 (lanes k*R/KW .. of the row hold
// pixel t+k). KW is 1, 2 or 4 (log2_kw), up to KMAX. The converter is cited,
// not described, in the paper; the window shape is this design's choice.
//
// With conv_en = 0 rows pass unchanged (plain GEMM). The latency is KMAX
// cycles in both modes: out_data at cycle T+KMAX belongs to the row whose
// first pixel arrived at T, so for R GEMM rows the source sends R+KW-1 pixels.
module conv2gemm
  import sosa_pkg::*;
#(
  parameter int unsigned R    = 32,
  parameter int unsigned KMAX = 4
)(
  input  logic                      clk,
  input  logic [R-1:0][ACT_W-1:0]   in_data,
  input  logic                      conv_en,
  input  logic [1:0]                log2_kw,
  output logic [R-1:0][ACT_W-1:0]   out_data
);

  // p[d] holds the pixel that arrived d+1 cycles ago
  logic [R-1:0][ACT_W-1:0] p [KMAX];

  always_ff @(posedge clk) begin
    p[0] <= in_data;
    for (int d = 1; d < KMAX; d++) p[d] <= p[d-1];
  end

  always_comb begin
    int unsigned kw, ch;
    kw = 1 << log2_kw;
    if (kw > KMAX) kw = KMAX;
    ch = R / kw;
    out_data = p[KMAX-1];
    if (conv_en) begin
      for (int f = 0; f < R; f++) begin
        // feature f = k*ch + c  -> pixel t+k, channel c
        out_data[f] = p[KMAX-1-(f/ch)][f%ch];
      end
    end
  end

endmodule
