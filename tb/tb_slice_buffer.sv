// tb_slice_buffer: host writes, network writes, network read requests
// (answer goes back to the requester with the stored slice, one cycle
// later, while the input is held off) and host reads, against a model.
module tb_slice_buffer;
  import rtm_ap_pkg::*;
  localparam int DEPTH = 32, DW = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, host_we, host_re;
  pkt_hdr_t in_hdr, out_hdr;
  logic [DW-1:0] in_data, out_data, host_wdata, host_rdata;
  logic [4:0] host_addr;
  net_addr_t my_addr;
  slice_buffer #(.DEPTH(DEPTH), .DW(DW)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, answers = 0;
  logic [DW-1:0] m [DEPTH];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : main
    my_addr = '{tile: 3'd4, ep: 3'd0};
    {in_valid, out_ready, host_we, host_re} = '0;
    in_hdr = '0; in_data = '0; host_wdata = '0; host_addr = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); host_we = 1; host_addr = 5'(a); host_wdata = DW'($urandom); m[a] = host_wdata;
    end
    @(negedge clk); host_we = 0;
    for (int t = 0; t < 200; t++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      in_valid = 1;
      in_hdr = '{kind: pkt_kind_e'($urandom_range(0, 1)), dst: my_addr,
                 src: '{tile: 3'($urandom), ep: 3'($urandom)}, addr: BADR_W'(a)};
      in_data = DW'($urandom);
      chk(in_ready, "ready when idle");
      @(posedge clk);
      if (in_hdr.kind == PK_WR) m[a] = in_data;
      #1;
      in_valid = 0;
      if (in_hdr.kind == PK_RDREQ) begin
        chk(out_valid && !in_ready, "answer offered, input held");
        chk(out_data == m[a] && out_hdr.dst == in_hdr.src && out_hdr.src == my_addr
            && out_hdr.kind == PK_WR && out_hdr.addr == BADR_W'(a), "answer content");
        answers++;
        @(negedge clk); out_ready = 1;
        @(negedge clk); out_ready = 0;
        chk(!out_valid, "answer taken");
      end
    end
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); host_re = 1; host_addr = 5'(a);
      @(negedge clk); host_re = 0;
      chk(host_rdata == m[a], $sformatf("host read %0d", a));
    end
    chk(answers > 20, "read requests exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
