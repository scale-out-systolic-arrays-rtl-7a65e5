// tb_instr_mem: host writes a program, the read port returns each word one
// cycle after its address.
// The publication has an instruction cache; this memory and its test are this design's stand-in.
module tb_instr_mem;
  import sosa_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [9:0] raddr, host_addr;
  instr_t rdata, host_wdata;
  logic host_we;
  int checks = 0, failures = 0;
  instr_t ref_m [1024];

  instr_mem dut (.clk, .raddr, .rdata, .host_we, .host_addr, .host_wdata);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_we = 0; raddr = 0; host_addr = 0; host_wdata = '0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      host_we = 1; host_addr = 10'(i); host_wdata = {$urandom, $urandom}; ref_m[i] = host_wdata;
    end
    @(negedge clk); host_we = 0;
    for (int i = 0; i < 1024; i++) begin
      raddr = 10'((i * 37) % 1024);
      @(negedge clk);
      checks++;
      if (rdata !== ref_m[(i * 37) % 1024]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
