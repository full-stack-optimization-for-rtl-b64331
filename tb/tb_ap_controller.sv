// tb_ap_controller: the control unit alone, with a model instruction cache,
// a model of the columns' port positions and a model of the key/mask
// registers. For an in-place add, an out-of-place add with a copy, SET and
// RELU it checks that every search cycle presents the LUT key of the right
// pass on the right columns with the operands aligned to the right bit, that
// every write cycle presents the right pattern, the number of search/write
// cycles (8 per bit in-place, 10 out-of-place), the carry column never moves
// during an add, and done after HALT.
module tb_ap_controller;
  import rtm_ap_pkg::*;
  import tb_prog_pkg::*;
  localparam int COLS = 8, DOM = 16, ICD = 16, NF = 7;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic ic_rd_en, km_load, tag_capture, tag_set_all, cam_wen, slice_we;
  logic [3:0] ic_raddr;
  instr_t ic_rdata;
  logic [NF-1:0] f_en, f_bit;
  logic [NF-1:0][COL_W-1:0] f_col;
  logic [2:0] slice_col, rd_col;
  logic [COLS-1:0] shift, shift_up;
  logic [COLS-1:0][3:0] pos;
  logic out_valid, out_ready, in_valid, in_ready;
  pkt_hdr_t out_hdr;

  ap_controller #(.ROWS(8), .COLS(COLS), .DOMAINS(DOM), .IC_DEPTH(ICD)) dut (
    .clk, .rst_n, .my_addr('0), .start, .done, .ic_rd_en, .ic_raddr, .ic_rdata,
    .km_load, .f_en, .f_col, .f_bit, .tag_capture, .tag_set_all, .cam_wen,
    .slice_we, .slice_col, .rd_col, .shift, .shift_up, .pos,
    .out_valid, .out_ready, .out_hdr, .in_valid, .in_ready);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  instr_t prog [ICD];
  always_ff @(posedge clk) if (ic_rd_en) ic_rdata <= prog[ic_raddr];

  logic [COLS-1:0] key, mask;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin pos <= '0; key <= '0; mask <= '0; end
    else begin
      for (int c = 0; c < COLS; c++)
        if (shift[c]) pos[c] <= shift_up[c] ? pos[c] + 1'b1 : pos[c] - 1'b1;
      if (km_load) begin
        key <= '0; mask <= '0;
        for (int f = 0; f < NF; f++) if (f_en[f]) begin
          mask[f_col[f]] <= 1'b1; key[f_col[f]] <= f_bit[f];
        end
      end
    end
  end

  // expected LUT sequences {C,B,A} / {C,D}
  logic [2:0] ip_s [4] = '{3'b011, 3'b001, 3'b100, 3'b110};
  logic [1:0] ip_w [4] = '{2'b10, 2'b01, 2'b01, 2'b10};
  logic [2:0] op_s [5] = '{3'b001, 3'b010, 3'b100, 3'b111, 3'b011};
  logic [1:0] op_w [5] = '{2'b01, 2'b01, 2'b01, 2'b11, 2'b10};

  int phase = 0;     // 1: ADD_IP running, 2: ADD_OP running
  int nsrch = 0, nwr = 0, ssrch [3], swr [3];
  always_ff @(posedge clk) if (rst_n) begin
    if (tag_capture && phase == 1) begin
      int p, b;
      p = nsrch % 4; b = nsrch / 4;
      chk(mask == 8'b0000_1011 && key[3] == ip_s[p][2] && key[1] == ip_s[p][1]
          && key[0] == ip_s[p][0], $sformatf("ip search %0d key %b mask %b", nsrch, key, mask));
      chk(int'(pos[0]) == 2 + b && int'(pos[1]) == b && int'(pos[3]) == 5, "ip alignment");
      nsrch++;
    end
    if (cam_wen && phase == 1) begin
      int p;
      p = nwr % 4;
      chk(mask == 8'b0000_1010 && key[3] == ip_w[p][1] && key[1] == ip_w[p][0], "ip write");
      nwr++;
    end
    if (tag_capture && phase == 2) begin
      int p, b;
      p = nsrch % 5; b = nsrch / 5;
      chk(mask == 8'b0000_1011 && key[3] == op_s[p][2] && key[1] == op_s[p][1]
          && key[0] == op_s[p][0], $sformatf("op search %0d", nsrch));
      chk(int'(pos[0]) == b && int'(pos[1]) == 4 + b && int'(pos[2]) == 1 + b
          && int'(pos[5]) == 1 + b && int'(pos[3]) == 5, "op alignment");
      nsrch++;
    end
    if (cam_wen && phase == 2) begin
      int p;
      p = nwr % 5;
      chk(mask == 8'b0010_1100 && key[3] == op_w[p][1] && key[2] == op_w[p][0]
          && key[5] == op_w[p][0], "op write");
      nwr++;
    end
    if (cam_wen && phase == 3) begin
      chk(mask == 8'b0100_0000 && key[6] == 1'b1 && tag_set_all == 1'b0, "set write");
      nwr++;
    end
  end

  initial begin : main
    instr_t t;
    foreach (prog[i]) prog[i] = i_halt();
    prog[0] = i_arith(OP_ADD_IP, 0, 2, 1, 0, 0, 0, 3, 5, 3);
    t = i_arith(OP_ADD_OP, 0, 0, 1, 4, 2, 1, 3, 5, 2);
    prog[1] = i_copy(t, 1, 5);
    prog[2] = i_set(6, 3, 4, 1);
    prog[3] = i_halt();
    {out_ready, in_valid} = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; phase = 1;
    @(negedge clk); start = 0;
    wait (dut.pc == 2);
    ssrch[0] = nsrch; swr[0] = nwr; nsrch = 0; nwr = 0; phase = 2;
    wait (dut.pc == 3);
    ssrch[1] = nsrch; swr[1] = nwr; nsrch = 0; nwr = 0; phase = 3;
    wait (done);
    swr[2] = nwr;
    chk(ssrch[0] == 12 && swr[0] == 12, $sformatf("ip: %0d searches %0d writes", ssrch[0], swr[0]));
    chk(ssrch[1] == 10 && swr[1] == 10, $sformatf("op: %0d searches %0d writes", ssrch[1], swr[1]));
    chk(swr[2] == 4, "set: 4 writes");
    chk(int'(pos[6]) == 7, "set stepped 4 domains");
    repeat (3) @(posedge clk);
    chk(done, "done holds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
