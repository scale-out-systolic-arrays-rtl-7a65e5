// tb_sosa_pe: random test of one processing element.
// Loads random weights into both weight registers, then checks
// psum_out = psum_in + act * w[wsel] (16-bit wrap) against a reference.
// The multiply-accumulate and the two weight registers follow the publication; stimulus and reference are this test's own.
module tb_sosa_pe;
  import sosa_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [ACT_W-1:0]  act, wl_data;
  logic                     wsel, wl_en, wl_bank;
  logic signed [PSUM_W-1:0] psum_in, psum_out;
  int checks = 0, failures = 0;

  sosa_pe dut (.clk, .act, .wsel, .psum_in, .psum_out, .wl_en, .wl_bank, .wl_data);

  logic signed [ACT_W-1:0] w_ref [2];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl_en = 0; wl_bank = 0; wl_data = 0; act = 0; wsel = 0; psum_in = 0;
    for (int it = 0; it < 50; it++) begin
      // write both weight registers
      for (int b = 0; b < 2; b++) begin
        @(negedge clk);
        wl_en = 1; wl_bank = b[0]; wl_data = ACT_W'($urandom); w_ref[b] = wl_data;
      end
      @(negedge clk); wl_en = 0;
      for (int k = 0; k < 20; k++) begin
        logic signed [PSUM_W-1:0] exp_v;
        act = ACT_W'($urandom); wsel = $urandom_range(0, 1); psum_in = PSUM_W'($urandom);
        if (k == 0) begin act = -128; psum_in = 16'sh7fff; end   // wrap case
        #1;
        exp_v = psum_in + PSUM_W'(act * w_ref[wsel]);
        checks++;
        if (psum_out !== exp_v) begin
          failures++;
          if (failures < 10) $display("mismatch: act=%0d w=%0d pin=%0d got %0d exp %0d", act, w_ref[wsel], psum_in, psum_out, exp_v);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
