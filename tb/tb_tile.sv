// tb_tile: a tile of two APs (16 rows, 8 columns, 16 domains).
// The testbench sends x (4-bit per row) down the bank link to AP0. AP0 sends
// x to AP1 and to the tile buffer; AP1 receives it, reads it back from the
// tile buffer with read requests, computes 2x out of place and sends it up
// the bank link to the global buffer address. Checks the uplink packets
// (header and data per row) and that AP-to-AP, AP-to-buffer, buffer read
// and uplink traffic all happened.
module tb_tile;
  import rtm_ap_pkg::*;
  import tb_prog_pkg::*;
  localparam int ROWS = 16, NB = 4;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic im_we = 0;
  logic [2:0] im_ap = '0;
  logic [3:0] im_addr = '0;
  instr_t im_wdata = '0;
  logic up_valid, up_ready, dn_valid, dn_ready;
  pkt_hdr_t up_hdr, dn_hdr;
  logic [ROWS-1:0] up_data, dn_data;

  tile #(.ROWS(ROWS), .COLS(8), .DOMAINS(16), .IC_DEPTH(16), .NAP(2), .TBUF_DEPTH(16)) dut (
    .clk, .rst_n, .my_tile(3'd1), .start, .done, .im_we, .im_ap, .im_addr, .im_wdata,
    .up_valid, .up_ready, .up_hdr, .up_data, .dn_valid, .dn_ready, .dn_hdr, .dn_data);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [NB-1:0] x [ROWS];
  logic [ROWS-1:0] dq [$], uq [$];
  pkt_hdr_t uh [$];
  int di = 0;
  assign dn_valid = di < dq.size();
  assign dn_data  = dn_valid ? dq[di] : '0;
  assign dn_hdr   = '{kind: PK_WR, dst: '{tile: 3'd1, ep: 3'd0}, src: '{tile: 3'd2, ep: 3'd0},
                      addr: BADR_W'(di)};
  int n_ap2ap = 0, n_ap2buf = 0, n_rdreq = 0;
  always_ff @(posedge clk) begin
    if (rst_n && dn_valid && dn_ready) di <= di + 1;
    up_ready <= 1'($urandom);
    if (up_valid && up_ready) begin uq.push_back(up_data); uh.push_back(up_hdr); end
    if (dut.b_out_valid[1] && dut.b_out_hdr.src.ep == 3'd0) n_ap2ap++;
    if (dut.b_out_valid[2] && dut.b_out_hdr.kind == PK_WR) n_ap2buf++;
    if (dut.b_out_valid[2] && dut.b_out_hdr.kind == PK_RDREQ) n_rdreq++;
  end

  always_ff @(posedge clk) if ($test$plusargs("trace")) $display("%0t a0 %0d/%0d a1 %0d/%0d di=%0d up=%0d", $time, dut.g_ap[0].u_ap.u_ctrl.st, dut.g_ap[0].u_ap.u_ctrl.pc, dut.g_ap[1].u_ap.u_ctrl.st, dut.g_ap[1].u_ap.u_ctrl.pc, di, uq.size());
  task automatic load(int a, int addr, instr_t i);
    @(negedge clk); im_we = 1; im_ap = 3'(a); im_addr = 4'(addr); im_wdata = i;
  endtask

  initial begin : main
    instr_t t;
    up_ready = 0;
    for (int r = 0; r < ROWS; r++) x[r] = NB'($urandom);
    for (int b = 0; b < NB; b++) begin
      logic [ROWS-1:0] s; for (int r = 0; r < ROWS; r++) s[r] = x[r][b]; dq.push_back(s);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    load(0, 0, i_recv(0, 0, NB));
    load(0, 1, i_send(0, 0, NB, 1, 1, 0));     // to AP1
    load(0, 2, i_send(0, 0, NB, 1, 2, 3));     // to tile buffer, slots 3..
    load(0, 3, i_halt());
    load(1, 0, i_recv(0, 0, NB));
    load(1, 1, i_set(2, 0, NB, 0));
    load(1, 2, i_set(3, 0, 1, 0));
    load(1, 3, i_loadb(1, 0, NB, 1, 2, 3));
    load(1, 4, i_arith(OP_ADD_OP, 0, 0, 1, 0, 2, 0, 3, 0, NB));
    load(1, 5, i_send(2, 0, NB, 4, 0, 8));     // to the bank's global buffer
    load(1, 6, i_halt());
    @(negedge clk); im_we = 0; start = 1;
    @(negedge clk); start = 0;
    wait (done);
    repeat (10) @(posedge clk);
    chk(uq.size() == NB, $sformatf("%0d uplink slices", uq.size()));
    for (int k = 0; k < uq.size(); k++)
      chk(uh[k].dst.tile == 3'd4 && uh[k].addr == BADR_W'(8 + k) && uh[k].src.tile == 3'd1
          && uh[k].src.ep == 3'd1, "uplink header");
    if (uq.size() == NB)
      for (int r = 0; r < ROWS; r++) begin
        logic [NB-1:0] v, e;
        for (int b = 0; b < NB; b++) v[b] = uq[b][r];
        e = x[r] + x[r];
        chk(v == e, $sformatf("row %0d: %h != %h", r, v, e));
      end
    chk(n_ap2ap == NB && n_ap2buf == NB && n_rdreq == NB,
        $sformatf("traffic %0d %0d %0d", n_ap2ap, n_ap2buf, n_rdreq));
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
