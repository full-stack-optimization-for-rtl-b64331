// ap_lut: lookup tables of masked search keys and write patterns for the
// bit-serial 1-bit adder and subtractor, in-place and out-of-place.
//
// For pass p of operation op it returns the search key {C,B,A} (C is the
// carry or borrow) and the write pattern {C,D}, where D is B for in-place
// operations and the result column R for out-of-place ones. Rows of the truth
// table that need no change are skipped, so in-place operations take 4 passes
// (8 search+write cycles per bit) and out-of-place ones 5 (10 cycles per bit).
// The pass order is the run order of the source's LUT table and must be kept
// so that a row written by one pass is not matched again by a later one.
//
// Out-of-place operations assume R was zero before (rows marked "no change"
// leave R untouched). Out-of-place addition departs from the printed table:
// the printed table marks row C,B,A=011 (result carry 1, sum 0) "NC" and row
// 110 "4th". With R zeroed row 110 needs no write, while row 011 must set the
// carry; and it must run after row 111 or the rewritten row would match 111.
// This module therefore uses the order 001, 010, 100, 111, 011: still five
// passes. All other tables follow the source exactly.
// Purely combinational.
module ap_lut
  import rtm_ap_pkg::*;
(
  input  op_e        op,
  input  logic [2:0] pass,
  output logic [2:0] skey,    // {C, B, A}
  output logic [1:0] wpat,    // {C, D}
  output logic [2:0] npass,
  output logic       valid_op
);

  always_comb begin
    skey     = 3'b000;
    wpat     = 2'b00;
    npass    = 3'd0;
    valid_op = 1'b1;
    unique case (op)
      OP_ADD_IP: begin
        npass = 3'd4;
        case (pass)
          3'd0:    begin skey = 3'b011; wpat = 2'b10; end
          3'd1:    begin skey = 3'b001; wpat = 2'b01; end
          3'd2:    begin skey = 3'b100; wpat = 2'b01; end
          default: begin skey = 3'b110; wpat = 2'b10; end
        endcase
      end
      OP_ADD_OP: begin
        npass = 3'd5;
        case (pass)
          3'd0:    begin skey = 3'b001; wpat = 2'b01; end
          3'd1:    begin skey = 3'b010; wpat = 2'b01; end
          3'd2:    begin skey = 3'b100; wpat = 2'b01; end
          3'd3:    begin skey = 3'b111; wpat = 2'b11; end
          default: begin skey = 3'b011; wpat = 2'b10; end
        endcase
      end
      OP_SUB_IP: begin
        npass = 3'd4;
        case (pass)
          3'd0:    begin skey = 3'b001; wpat = 2'b11; end
          3'd1:    begin skey = 3'b011; wpat = 2'b00; end
          3'd2:    begin skey = 3'b110; wpat = 2'b00; end
          default: begin skey = 3'b100; wpat = 2'b11; end
        endcase
      end
      OP_SUB_OP: begin
        npass = 3'd5;
        case (pass)
          3'd0:    begin skey = 3'b001; wpat = 2'b11; end
          3'd1:    begin skey = 3'b010; wpat = 2'b01; end
          3'd2:    begin skey = 3'b100; wpat = 2'b11; end
          3'd3:    begin skey = 3'b110; wpat = 2'b00; end
          default: begin skey = 3'b111; wpat = 2'b11; end
        endcase
      end
      default: valid_op = 1'b0;
    endcase
  end

endmodule
