// tb_prog_pkg: helpers for testbenches that build AP programs.
// Each function returns one rtm_ap_pkg::instr_t; unused fields are zero.
package tb_prog_pkg;
  import rtm_ap_pkg::*;

  function automatic instr_t i_arith(op_e op, int a, int ad, int b, int bd,
                                     int r, int rd, int c, int cd, int n);
    instr_t i = '0;
    i.op = op;
    i.a_col = COL_W'(a); i.a_dom = DOM_W'(ad);
    i.b_col = COL_W'(b); i.b_dom = DOM_W'(bd);
    i.r_col = COL_W'(r); i.r_dom = DOM_W'(rd);
    i.c_col = COL_W'(c); i.c_dom = DOM_W'(cd);
    i.nbits = NB_W'(n);
    return i;
  endfunction

  function automatic instr_t i_copy(instr_t i, int k, int col);
    i.cp_en[k]  = 1'b1;
    i.cp_col[k] = COL_W'(col);
    return i;
  endfunction

  function automatic instr_t i_set(int r, int rd, int n, bit v);
    instr_t i = '0;
    i.op = OP_SET; i.r_col = COL_W'(r); i.r_dom = DOM_W'(rd);
    i.nbits = NB_W'(n); i.imm = v;
    return i;
  endfunction

  function automatic instr_t i_relu(int a, int ad, int n);
    instr_t i = '0;
    i.op = OP_RELU; i.a_col = COL_W'(a); i.a_dom = DOM_W'(ad); i.nbits = NB_W'(n);
    return i;
  endfunction

  function automatic instr_t i_send(int a, int ad, int n, int ptile, int pep, int baddr);
    instr_t i = '0;
    i.op = OP_SEND; i.a_col = COL_W'(a); i.a_dom = DOM_W'(ad); i.nbits = NB_W'(n);
    i.peer.tile = TID_W'(ptile); i.peer.ep = EID_W'(pep); i.baddr = BADR_W'(baddr);
    return i;
  endfunction

  function automatic instr_t i_recv(int r, int rd, int n);
    instr_t i = '0;
    i.op = OP_RECV; i.r_col = COL_W'(r); i.r_dom = DOM_W'(rd); i.nbits = NB_W'(n);
    return i;
  endfunction

  function automatic instr_t i_loadb(int r, int rd, int n, int ptile, int pep, int baddr);
    instr_t i = '0;
    i.op = OP_LOADB; i.r_col = COL_W'(r); i.r_dom = DOM_W'(rd); i.nbits = NB_W'(n);
    i.peer.tile = TID_W'(ptile); i.peer.ep = EID_W'(pep); i.baddr = BADR_W'(baddr);
    return i;
  endfunction

  function automatic instr_t i_halt();
    instr_t i = '0;
    i.op = OP_HALT;
    return i;
  endfunction

  // ------------------------------------------------------------------
  // Ternary convolution slice of the worked example: six inputs x0..x5 per
  // row (one im2col patch per row), weights
  //   [ 1 -1  0  1  0 -1 ]
  //   [ 0  0 -1  1  0 -1 ]
  //   [ 0  0  0 -1  0  1 ]
  //   [ 0 -1  0 -1  0  1 ]
  //   [ 1 -1  0 -1  0  0 ]
  //   [ 1 -1 -1  1  0 -1 ]
  // computed with shared subexpressions x8 = x0 - x1, x7 = x3 - x5,
  // x6 = x7 + x8, then y0 = x6, y1 = x7 - x2, y2 = 0 - x7, y3 = y2 - x1,
  // y4 = x8 - x3, y5 = x6 - x2.
  // Column plan: 0-5 x, 6 x8 (or y4 in place), 7 x7, 8 x6, 22 zero,
  // 23 carry; all operands of one channel sit at domain xd.
  const int W [6][6] = '{'{1, -1, 0, 1, 0, -1}, '{0, 0, -1, 1, 0, -1},
                         '{0, 0, 0, -1, 0, 1}, '{0, -1, 0, -1, 0, 1},
                         '{1, -1, 0, -1, 0, 0}, '{1, -1, -1, 1, 0, -1}};
  localparam int CARRY = 23, ZERO = 22;
  const int YA [6] = '{9, 10, 11, 12, 6, 14};    // channel computed with y4 in place
  const int YB [6] = '{16, 17, 18, 19, 20, 21};

  function automatic void cfill(ref instr_t q[$], input instr_t i);
    q.push_back(i_set(CARRY, 0, 1, 0));
    q.push_back(i);
  endfunction

  function automatic void eq1_channel(ref instr_t q[$], input int xd, input bit y4_in_place,
                                      input int nb);
    int y[6];
    instr_t t;
    y = y4_in_place ? YA : YB;
    foreach (y[k]) if (!(k == 4 && y4_in_place)) q.push_back(i_set(y[k], xd, nb, 0));
    q.push_back(i_set(6, xd, nb, 0));
    q.push_back(i_set(7, xd, nb, 0));
    q.push_back(i_set(8, xd, nb, 0));
    q.push_back(i_set(ZERO, xd, nb, 0));
    // The worked example's text writes x8 = x0 + x1, but its matrix (and
    // every y that uses x8) needs x0 - x1; the matrix is followed here.
    cfill(q, i_arith(OP_SUB_OP, 1, xd, 0, xd, 6, xd, CARRY, 0, nb));      // x8
    cfill(q, i_arith(OP_SUB_OP, 5, xd, 3, xd, 7, xd, CARRY, 0, nb));      // x7
    t = i_arith(OP_ADD_OP, 7, xd, 6, xd, 8, xd, CARRY, 0, nb);            // x6, y0
    cfill(q, i_copy(t, 0, y[0]));
    cfill(q, i_arith(OP_SUB_OP, 2, xd, 7, xd, y[1], xd, CARRY, 0, nb));   // y1
    cfill(q, i_arith(OP_SUB_OP, 7, xd, ZERO, xd, y[2], xd, CARRY, 0, nb)); // y2
    cfill(q, i_arith(OP_SUB_OP, 1, xd, y[2], xd, y[3], xd, CARRY, 0, nb)); // y3
    if (y4_in_place)
      cfill(q, i_arith(OP_SUB_IP, 3, xd, 6, xd, 0, 0, CARRY, 0, nb));     // y4 in x8
    else
      cfill(q, i_arith(OP_SUB_OP, 3, xd, 6, xd, y[4], xd, CARRY, 0, nb));
    cfill(q, i_arith(OP_SUB_OP, 2, xd, 8, xd, y[5], xd, CARRY, 0, nb));   // y5
  endfunction

  // Program of one AP holding two input channels (ch0, ch0+1): load both from
  // the global buffer (6*nb slices per channel, channel c at c*6*nb), run the
  // channel-wise DFG for each, accumulate locally. A leaf then sends its six
  // partial outputs to the root; the root receives and adds them, applies
  // RELU and stores y0..y5 to the global buffer at out_base + k*nb.
  function automatic void eq1_program(ref instr_t q[$], input int ch0, input int nb,
                                      input int gb_tile, input bit is_root,
                                      input int root_tile, input int root_ep,
                                      input int out_base);
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < 6; i++)
        q.push_back(i_loadb(i, c * nb, nb, gb_tile, 0, ((ch0 + c) * 6 + i) * nb));
    eq1_channel(q, 0, 1'b1, nb);
    eq1_channel(q, nb, 1'b0, nb);
    for (int k = 0; k < 6; k++)
      cfill(q, i_arith(OP_ADD_IP, YB[k], nb, YA[k], 0, 0, 0, CARRY, 0, nb));
    if (!is_root) begin
      for (int k = 0; k < 6; k++) q.push_back(i_send(YA[k], 0, nb, root_tile, root_ep, 0));
    end else begin
      for (int k = 0; k < 6; k++) q.push_back(i_recv(YB[k], nb, nb));
      for (int k = 0; k < 6; k++)
        cfill(q, i_arith(OP_ADD_IP, YB[k], nb, YA[k], 0, 0, 0, CARRY, 0, nb));
      for (int k = 0; k < 6; k++) q.push_back(i_relu(YA[k], 0, nb));
      for (int k = 0; k < 6; k++) q.push_back(i_send(YA[k], 0, nb, gb_tile, 0, out_base + k * nb));
    end
    q.push_back(i_halt());
  endfunction
endpackage
