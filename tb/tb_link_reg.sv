// tb_link_reg: random valid / ready on both sides; every packet must come
// out once, in order, unchanged; in_ready must equal "register empty".
module tb_link_reg;
  import rtm_ap_pkg::*;
  localparam int DW = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  pkt_hdr_t in_hdr, out_hdr;
  logic [DW-1:0] in_data, out_data;
  link_reg #(.DW(DW)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, sent = 0, got = 0;
  logic [DW-1:0] q [$];
  always_ff @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      q.push_back(in_data); sent <= sent + 1;
      in_valid <= 0;
    end else if (!in_valid || $urandom_range(0, 2) == 0) in_valid <= 1'($urandom);
    if (!in_valid || in_ready) begin
      in_data <= DW'($urandom);
      in_hdr  <= pkt_hdr_t'($urandom);
    end
    out_ready <= 1'($urandom);
    if (out_valid && out_ready) begin
      logic [DW-1:0] e;
      e = q.pop_front();
      checks++; got <= got + 1;
      if (out_data != e) begin failures++; $display("data %h exp %h", out_data, e); end
    end
  end
  always_ff @(posedge clk) if (rst_n) begin
    checks++;
    if (in_ready != !out_valid) failures++;
  end
  initial begin : main
    in_valid = 0; out_ready = 0; in_data = '0; in_hdr = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (1000) @(posedge clk);
    checks++;
    if (got < 100) begin failures++; $display("only %0d delivered", got); end
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
