// tb_ap_lut: runs every LUT of ap_lut on all eight {C,B,A} row values at once,
// as the AP would (all passes in order, each a search over every row followed
// by a write of the matching rows), and compares the final {C,D} of each row
// with the integer full adder / full subtractor. Also checks pass counts.
module tb_ap_lut;
  import rtm_ap_pkg::*;
  int checks = 0, failures = 0;
  op_e op;
  logic [2:0] pass, skey, npass;
  logic [1:0] wpat;
  logic valid_op;

  ap_lut dut (.op, .pass, .skey, .wpat, .npass, .valid_op);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : main
    op_e ops[4] = '{OP_ADD_IP, OP_ADD_OP, OP_SUB_IP, OP_SUB_OP};
    foreach (ops[k]) begin
      logic [2:0] cba [8];
      logic       d   [8];
      bit oop, sub;
      op  = ops[k];
      oop = (op == OP_ADD_OP || op == OP_SUB_OP);
      sub = (op == OP_SUB_IP || op == OP_SUB_OP);
      #1;
      chk(valid_op && npass == (oop ? 3'd5 : 3'd4), $sformatf("npass %s", op.name()));
      for (int v = 0; v < 8; v++) begin
        cba[v] = 3'(v);
        d[v]   = oop ? 1'b0 : cba[v][1];    // R starts at zero; in-place D is B
      end
      for (int p = 0; p < int'(npass); p++) begin
        bit hit [8];
        pass = 3'(p); #1;
        for (int v = 0; v < 8; v++) hit[v] = (cba[v] == skey);
        for (int v = 0; v < 8; v++) if (hit[v]) begin
          cba[v][2] = wpat[1];
          d[v]      = wpat[0];
          if (!oop) cba[v][1] = wpat[0];
        end
      end
      for (int v = 0; v < 8; v++) begin
        int a, b, c, s, co;
        a = v & 1; b = (v >> 1) & 1; c = (v >> 2) & 1;
        if (!sub) begin s = (a + b + c) & 1; co = (a + b + c) >> 1; end
        else begin s = (b - a - c) & 1; co = (b - a - c) < 0; end
        chk(d[v] == s[0] && cba[v][2] == co[0],
            $sformatf("%s row %0d: got c=%0d d=%0d want c=%0d d=%0d",
                      op.name(), v, cba[v][2], d[v], co, s));
      end
    end
    op = OP_SEND; #1;
    chk(!valid_op, "SEND has no LUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
