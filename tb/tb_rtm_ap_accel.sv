// tb_rtm_ap_accel: end-to-end run of the accelerator on a ternary
// convolution slice (reduced size: 2 banks x 2 tiles x 2 APs, 256 x 32 arrays,
// 64 domains). Each row of an array is one output pixel; each pixel has a
// 6-tap patch in 4 input channels of 4-bit activations, and 6 output channels
// are computed with the shared-subexpression program of tb_prog_pkg.
// In every bank the host writes the patches to the global buffer; the first
// AP of tile 0 (root) and the last AP of the last tile (leaf) each load two
// channels, run the channel-wise phase and add their two channels locally;
// the leaf then sends its partial sums across tiles to the root, which adds
// them, applies RELU and writes the outputs to the global buffer, where the
// host reads them back. Other APs halt at once. Results are compared with
// integer arithmetic (modulo 2^NB, as the hardware computes). The testbench
// also counts the mechanisms the design has and fails if one never occurred.
module tb_rtm_ap_accel;
  import rtm_ap_pkg::*;
  import tb_prog_pkg::*;
  localparam int ROWS = 256, COLS = 32, DOMAINS = 64, IC_DEPTH = 128;
  localparam int NAP = 2, NTILE = 2, NBANK = 2, GBUF_DEPTH = 512;
  localparam int NB = 10, OUT = 300, BW = (NBANK > 1) ? $clog2(NBANK) : 1;
  localparam int IAW = $clog2(IC_DEPTH), GAW = $clog2(GBUF_DEPTH);

  logic clk = 0, rst_n = 0, start = 0, done;
  logic im_we = 0, gb_we = 0, gb_re = 0;
  logic [BW-1:0] im_bank = '0, gb_bank = '0;
  logic [TID_W-1:0] im_tile = '0;
  logic [EID_W-1:0] im_ap = '0;
  logic [IAW-1:0] im_addr = '0;
  instr_t im_wdata = '0;
  logic [GAW-1:0] gb_addr = '0;
  logic [ROWS-1:0] gb_wdata = '0, gb_rdata;

  rtm_ap_accel #(.ROWS(ROWS), .COLS(COLS), .DOMAINS(DOMAINS), .IC_DEPTH(IC_DEPTH),
                 .NAP(NAP), .NTILE(NTILE), .NBANK(NBANK), .GBUF_DEPTH(GBUF_DEPTH)) dut (
    .clk, .rst_n, .start, .done, .im_we, .im_bank, .im_tile, .im_ap, .im_addr, .im_wdata,
    .gb_we, .gb_re, .gb_bank, .gb_addr, .gb_wdata, .gb_rdata);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---- mechanism counters (bank 0) ----
  localparam int NM = 13;
  string mname [NM] = '{"add_in_place", "add_out_of_place", "sub_in_place", "sub_out_of_place",
                        "result_copy", "rtm_align_shift", "relu_clear", "buffer_load",
                        "ap_send", "ap_recv", "cross_tile_link", "bus_contention",
                        "send_stall"};
  int mcount [NM];
  `define ROOT dut.g_bank[0].u_bank.g_tile[0].u_tile.g_ap[0].u_ap
  `define LEAF dut.g_bank[0].u_bank.g_tile[NTILE-1].u_tile.g_ap[NAP-1].u_ap
  task automatic count_ap(int st, op_e op, logic [NCOPY-1:0] cp, logic [COLS-1:0] sh, logic anyt,
                          logic ov, logic ordy);
    if (st == 2) begin   // S_DECODE, instruction word on the cache output
      if (op == OP_ADD_IP) mcount[0]++;
      if (op == OP_ADD_OP) mcount[1]++;
      if (op == OP_SUB_IP) mcount[2]++;
      if (op == OP_SUB_OP) mcount[3]++;
      if (op inside {OP_ADD_OP, OP_SUB_OP} && cp != '0) mcount[4]++;
      if (op == OP_LOADB) mcount[7]++;
      if (op == OP_SEND) mcount[8]++;
      if (op == OP_RECV) mcount[9]++;
    end
    if (st == 3 && sh != '0) mcount[5]++;          // S_ALIGN shifting
    if (st == 8 && anyt) mcount[6]++;              // S_RWR clearing rows
    if (ov && !ordy) mcount[12]++;
  endtask
  always_ff @(posedge clk) if (rst_n) begin
    count_ap(int'(`ROOT.u_ctrl.st), `ROOT.ic_rdata.op, `ROOT.ic_rdata.cp_en, `ROOT.shift,
             `ROOT.any_tag, `ROOT.c_out_valid, `ROOT.c_out_ready);
    count_ap(int'(`LEAF.u_ctrl.st), `LEAF.ic_rdata.op, `LEAF.ic_rdata.cp_en, `LEAF.shift,
             `LEAF.any_tag, `LEAF.c_out_valid, `LEAF.c_out_ready);
    if (dut.g_bank[0].u_bank.b_busy && dut.g_bank[0].u_bank.b_out_hdr.kind == PK_WR
        && dut.g_bank[0].u_bank.b_out_hdr.dst.tile < TID_W'(NTILE)
        && dut.g_bank[0].u_bank.b_out_hdr.src.tile < TID_W'(NTILE)
        && dut.g_bank[0].u_bank.b_out_hdr.src.tile != dut.g_bank[0].u_bank.b_out_hdr.dst.tile)
      mcount[10]++;
    if ($countones(dut.g_bank[0].u_bank.u_bus.elig) > 1) mcount[11]++;
  end

  // ---- data ----
  logic [3:0] x [NBANK][ROWS][4][6];   // activations per bank, row, channel, tap

  function automatic logic [NB-1:0] expect_y(int b, int r, int k);
    int acc = 0;
    for (int c = 0; c < 4; c++)
      for (int i = 0; i < 6; i++) acc += W[k][i] * int'(x[b][r][c][i]);
    acc = acc & ((1 << NB) - 1);
    if (acc >= (1 << (NB - 1))) acc = 0;     // RELU on the NB-bit two's complement value
    return NB'(acc);
  endfunction

  initial begin : main
    instr_t q[$];
    int cyc0, cyc;
    foreach (mcount[i]) mcount[i] = 0;
    for (int b = 0; b < NBANK; b++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < 4; c++)
          for (int i = 0; i < 6; i++) x[b][r][c][i] = 4'($urandom);
    repeat (3) @(negedge clk); rst_n = 1;
    // global buffers: channel c, tap i, bit k at address (c*6+i)*NB + k
    for (int b = 0; b < NBANK; b++)
      for (int c = 0; c < 4; c++)
        for (int i = 0; i < 6; i++)
          for (int k = 0; k < NB; k++) begin
            @(negedge clk);
            gb_we = 1; gb_bank = BW'(b); gb_addr = GAW'((c * 6 + i) * NB + k);
            for (int r = 0; r < ROWS; r++) gb_wdata[r] = (k < 4) ? x[b][r][c][i][k] : 1'b0;
          end
    @(negedge clk); gb_we = 0;
    // programs
    for (int b = 0; b < NBANK; b++)
      for (int t = 0; t < NTILE; t++)
        for (int a = 0; a < NAP; a++) begin
          q.delete();
          if (t == 0 && a == 0)
            eq1_program(q, 0, NB, NTILE, 1'b1, 0, 0, OUT);
          else if (t == NTILE - 1 && a == NAP - 1)
            eq1_program(q, 2, NB, NTILE, 1'b0, 0, 0, OUT);
          else
            q.push_back(i_halt());
          if (b == 0 && t == 0 && a == 0)
            chk(q.size() <= IC_DEPTH, $sformatf("program of %0d words fits", q.size()));
          foreach (q[n]) begin
            @(negedge clk);
            im_we = 1; im_bank = BW'(b); im_tile = TID_W'(t); im_ap = EID_W'(a);
            im_addr = IAW'(n); im_wdata = q[n];
          end
        end
    @(negedge clk); im_we = 0; start = 1;
    cyc0 = 0;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc0++; end
    $display("run took %0d cycles", cyc0);
    for (int b = 0; b < NBANK; b++)
      for (int k = 0; k < 6; k++) begin
        logic [NB-1:0] v [ROWS];
        for (int n = 0; n < NB; n++) begin
          @(negedge clk); gb_re = 1; gb_bank = BW'(b); gb_addr = GAW'(OUT + k * NB + n);
          @(negedge clk); gb_re = 0;
          for (int r = 0; r < ROWS; r++) v[r][n] = gb_rdata[r];
        end
        for (int r = 0; r < ROWS; r++)
          chk(v[r] == expect_y(b, r, k),
              $sformatf("bank %0d row %0d y%0d: %0d != %0d", b, r, k, v[r], expect_y(b, r, k)));
      end
    for (int m = 0; m < NM; m++) begin
      $display("mechanism %-22s %0d", mname[m], mcount[m]);
      chk(mcount[m] > 0, {"mechanism never seen: ", mname[m]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
