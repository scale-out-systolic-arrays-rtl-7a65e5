// tb_sram_bank: writes random rows to random addresses of a full-size bank
// and reads them back (one-cycle read latency, rdata held between reads).
// Single-ported banks follow the publication; the registered read is this design's.
module tb_sram_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int D = 8192, W = 256;
  logic en, we;
  logic [$clog2(D)-1:0] addr;
  logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_m [int];

  sram_bank dut (.clk, .en, .we, .addr, .wdata, .rdata);

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    logic [W-1:0] held;
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      a = (i < 2) ? i * (D - 1) : $urandom_range(0, D - 1);
      en = 1; we = 1; addr = a[$clog2(D)-1:0]; wdata = rnd(); ref_m[a] = wdata;
    end
    foreach (ref_m[k]) begin
      @(negedge clk);
      en = 1; we = 0; addr = k[$clog2(D)-1:0];
      @(negedge clk);
      en = 0;
      checks++;
      if (rdata !== ref_m[k]) failures++;
      held = rdata;
      @(negedge clk);
      checks++;
      if (rdata !== held) failures++;   // held while idle
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
