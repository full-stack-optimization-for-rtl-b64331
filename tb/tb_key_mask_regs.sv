// tb_key_mask_regs: random operand fields scattered onto 16 columns;
// checks key and mask after load, and that they hold without load.
module tb_key_mask_regs;
  import rtm_ap_pkg::*;
  localparam int C = 16, NF = 7;
  logic clk = 0, rst_n = 0, load;
  logic [NF-1:0] f_en, f_bit;
  logic [NF-1:0][COL_W-1:0] f_col;
  logic [C-1:0] key, mask, ek, em;
  key_mask_regs #(.COLS(C), .NF(NF)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin : main
    load = 0; f_en = '0; f_bit = '0; f_col = '0; ek = '0; em = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      load = ($urandom_range(0, 3) != 0);
      f_en = NF'($urandom); f_bit = NF'($urandom);
      for (int f = 0; f < NF; f++) f_col[f] = COL_W'($urandom_range(0, C + 2));
      @(posedge clk);
      if (load) begin
        ek = '0; em = '0;
        for (int f = 0; f < NF; f++)
          if (f_en[f] && f_col[f] < C) begin em[f_col[f]] = 1; ek[f_col[f]] = f_bit[f]; end
      end
      #1;
      checks++;
      if (key != ek || mask != em) begin
        failures++; $display("t%0d key %h/%h mask %h/%h", t, key, ek, mask, em);
      end
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
