// tb_tag_register: random capture / set_all sequences against a model.
module tb_tag_register;
  localparam int R = 16;
  logic clk = 0, rst_n = 0, capture, set_all, any_tag;
  logic [R-1:0] match, tag, mtag;
  tag_register #(.ROWS(R)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin : main
    capture = 0; set_all = 0; match = '0;
    repeat (2) @(negedge clk);
    checks++; if (tag != '0) failures++;
    rst_n = 1; mtag = '0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      capture = 1'($urandom); set_all = 1'($urandom);
      match = ($urandom_range(0, 4) == 0) ? '0 : R'($urandom);
      @(posedge clk);
      if (capture) mtag = match; else if (set_all) mtag = '1;
      #1;
      checks++;
      if (tag != mtag || any_tag != (mtag != '0)) begin
        failures++; $display("t%0d tag %h exp %h", t, tag, mtag);
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
