// tb_ap: one associative processor on a 16x16 array with 16 domains.
// A program receives three 8-bit operands per row over the network input
// (x at domain 0, a second channel x2 at domain 8, y), runs out-of-place add
// with two extra copies, in-place subtract, in-place add, out-of-place
// subtract and RELU, and sends five results back. The testbench plays the
// network (with random backpressure on the output) and compares every row
// with integer arithmetic. It also checks that each add/sub spends exactly
// 8 (in-place) or 10 (out-of-place) search/write cycles per bit.
module tb_ap;
  import rtm_ap_pkg::*;
  import tb_prog_pkg::*;

  localparam int ROWS = 16, COLS = 16, DOM = 16, ICD = 32, NB = 8;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic im_we = 0;
  logic [4:0] im_addr = '0;
  instr_t im_wdata = '0;
  logic out_valid, out_ready, in_valid, in_ready;
  pkt_hdr_t out_hdr, in_hdr;
  logic [ROWS-1:0] out_data, in_data;

  ap #(.ROWS(ROWS), .COLS(COLS), .DOMAINS(DOM), .IC_DEPTH(ICD)) dut (
    .clk, .rst_n, .my_addr('{tile: 3'd1, ep: 3'd2}), .start, .done,
    .im_we, .im_addr, .im_wdata,
    .out_valid, .out_ready, .out_hdr, .out_data,
    .in_valid, .in_ready, .in_hdr, .in_data);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // network input queue
  logic [ROWS-1:0] inq [$];
  int in_idx = 0;
  assign in_valid = in_idx < inq.size();
  assign in_data  = in_valid ? inq[in_idx] : '0;
  assign in_hdr   = '0;
  always_ff @(posedge clk) if (in_valid && in_ready) in_idx <= in_idx + 1;

  // network output capture
  logic [ROWS-1:0] outq [$];
  pkt_hdr_t        outh [$];
  always_ff @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (out_valid && out_ready) begin
      outq.push_back(out_data);
      outh.push_back(out_hdr);
    end
  end

  always_ff @(posedge clk) if ($test$plusargs("trace") && rst_n) $display("%0t st=%0d pc=%0d bit=%0d inq=%0d", $time, dut.u_ctrl.st, dut.u_ctrl.pc, dut.u_ctrl.bitk, in_idx);
  // search/write cycles per instruction (pc has advanced past it)
  int sw_cyc [ICD];
  always_ff @(posedge clk)
    if (rst_n && (int'(dut.u_ctrl.st) == 4 || int'(dut.u_ctrl.st) == 5))
      sw_cyc[int'(dut.u_ctrl.pc) - 1]++;

  logic [NB-1:0] x [ROWS], x2 [ROWS], y [ROWS];
  instr_t prog [$];

  function automatic logic [NB-1:0] get_out(int k, int r);
    logic [NB-1:0] v;
    for (int b = 0; b < NB; b++) v[b] = outq[k*NB + b][r];
    return v;
  endfunction

  initial begin : main
    instr_t t;
    foreach (sw_cyc[i]) sw_cyc[i] = 0;
    out_ready = 0;
    for (int r = 0; r < ROWS; r++) begin
      x[r] = NB'($urandom); x2[r] = NB'($urandom); y[r] = NB'($urandom);
    end
    // Program. Columns: 0 x/x2, 1 y, 2 sum, 3 carry, 4-5 copies, 6 diff.
    prog.push_back(i_recv(0, 0, NB));
    prog.push_back(i_recv(0, 8, NB));
    prog.push_back(i_recv(1, 0, NB));
    prog.push_back(i_set(2, 0, NB, 0));
    prog.push_back(i_set(4, 0, NB, 0));
    prog.push_back(i_set(5, 0, NB, 0));
    prog.push_back(i_set(3, 0, 1, 0));
    t = i_arith(OP_ADD_OP, 0, 0, 1, 0, 2, 0, 3, 0, NB);       // 7: s = x + y
    t = i_copy(t, 0, 4); t = i_copy(t, 2, 5);
    prog.push_back(t);
    prog.push_back(i_set(3, 0, 1, 0));
    prog.push_back(i_arith(OP_SUB_IP, 0, 8, 1, 0, 0, 0, 3, 0, NB)); // 9: y -= x2
    prog.push_back(i_set(3, 0, 1, 0));
    prog.push_back(i_arith(OP_ADD_IP, 0, 0, 4, 0, 0, 0, 3, 0, NB)); // 11: c4 += x
    prog.push_back(i_set(6, 0, NB, 0));
    prog.push_back(i_set(3, 0, 1, 0));
    prog.push_back(i_arith(OP_SUB_OP, 1, 0, 5, 0, 6, 0, 3, 0, NB)); // 14: d = c5 - y
    prog.push_back(i_relu(6, 0, NB));
    prog.push_back(i_send(2, 0, NB, 4, 0, 0));
    prog.push_back(i_send(1, 0, NB, 4, 0, 8));
    prog.push_back(i_send(4, 0, NB, 4, 0, 16));
    prog.push_back(i_send(6, 0, NB, 4, 0, 24));
    prog.push_back(i_send(5, 0, NB, 4, 0, 32));
    prog.push_back(i_halt());
    for (int b = 0; b < NB; b++) begin
      logic [ROWS-1:0] s; for (int r = 0; r < ROWS; r++) s[r] = x[r][b]; inq.push_back(s);
    end
    for (int b = 0; b < NB; b++) begin
      logic [ROWS-1:0] s; for (int r = 0; r < ROWS; r++) s[r] = x2[r][b]; inq.push_back(s);
    end
    for (int b = 0; b < NB; b++) begin
      logic [ROWS-1:0] s; for (int r = 0; r < ROWS; r++) s[r] = y[r][b]; inq.push_back(s);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (prog[i]) begin
      @(negedge clk); im_we = 1; im_addr = 5'(i); im_wdata = prog[i];
    end
    @(negedge clk); im_we = 0; start = 1;
    @(negedge clk); start = 0;
    wait (done);
    repeat (2) @(posedge clk);
    chk(outq.size() == 5 * NB, $sformatf("%0d slices sent", outq.size()));
    chk(in_idx == inq.size(), "all input consumed");
    for (int k = 0; k < 5 * NB && k < outh.size(); k++)
      chk(outh[k].kind == PK_WR && outh[k].dst.tile == 3'd4 && outh[k].addr == BADR_W'(k)
          && outh[k].src.tile == 3'd1 && outh[k].src.ep == 3'd2, $sformatf("header %0d", k));
    if (outq.size() == 5 * NB) begin
      for (int r = 0; r < ROWS; r++) begin
        logic [NB-1:0] s, yd, s4, d;
        s  = x[r] + y[r];
        yd = y[r] - x2[r];
        s4 = s + x[r];
        d  = s - yd;
        if (d[NB-1]) d = '0;
        chk(get_out(0, r) == s,  $sformatf("row %0d add_op %h != %h", r, get_out(0, r), s));
        chk(get_out(1, r) == yd, $sformatf("row %0d sub_ip %h != %h", r, get_out(1, r), yd));
        chk(get_out(2, r) == s4, $sformatf("row %0d add_ip %h != %h", r, get_out(2, r), s4));
        chk(get_out(3, r) == d,  $sformatf("row %0d sub_op+relu %h != %h", r, get_out(3, r), d));
        chk(get_out(4, r) == s,  $sformatf("row %0d copy %h != %h", r, get_out(4, r), s));
      end
    end
    chk(sw_cyc[7]  == 10 * NB, $sformatf("add_op cycles %0d", sw_cyc[7]));
    chk(sw_cyc[9]  ==  8 * NB, $sformatf("sub_ip cycles %0d", sw_cyc[9]));
    chk(sw_cyc[11] ==  8 * NB, $sformatf("add_ip cycles %0d", sw_cyc[11]));
    chk(sw_cyc[14] == 10 * NB, $sformatf("sub_op cycles %0d", sw_cyc[14]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
