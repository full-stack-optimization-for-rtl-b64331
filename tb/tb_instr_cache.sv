// tb_instr_cache: fills a 16-word cache with random instructions, reads
// them back in random order and checks the one-cycle read latency.
module tb_instr_cache;
  import rtm_ap_pkg::*;
  logic clk = 0, we = 0, rd_en = 0;
  logic [3:0] waddr = '0, raddr = '0;
  instr_t wdata, rd_data, ref_m [16];
  instr_cache #(.DEPTH(16)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin : main
    wdata = '0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); we = 1; waddr = 4'(i);
      wdata = instr_t'({$urandom, $urandom, $urandom, $urandom});
      ref_m[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 100; t++) begin
      int a;
      a = $urandom_range(0, 15);
      @(negedge clk); rd_en = 1; raddr = 4'(a);
      @(negedge clk); rd_en = 0; raddr = 4'($urandom);
      checks++;
      if (rd_data != ref_m[a]) begin failures++; $display("addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
