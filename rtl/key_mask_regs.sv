// key_mask_regs: the AP's search/write KEY register and MASK register.
//
// A LUT entry speaks of operands (carry, B, A, result); the CAM array needs a
// key bit and a mask bit per column. On load this module scatters NF operand
// fields {en, col, bit} onto the COLS-wide registers: mask[c] is set when an
// enabled field names column c, key[c] takes that field's bit (the highest
// numbered field wins if two name the same column). Columns no field names
// are masked off and take key 0. The same pair of registers serves the search
// phase and the write phase; the controller reloads them in between.
// Timing: the registers change one cycle after load.
module key_mask_regs
  import rtm_ap_pkg::*;
#(
  parameter int unsigned COLS = 256,
  parameter int unsigned NF   = 7
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       load,
  input  logic [NF-1:0]              f_en,
  input  logic [NF-1:0][COL_W-1:0]   f_col,
  input  logic [NF-1:0]              f_bit,
  output logic [COLS-1:0]            key,
  output logic [COLS-1:0]            mask
);

  logic [COLS-1:0] key_d, mask_d;

  always_comb begin
    key_d  = '0;
    mask_d = '0;
    for (int f = 0; f < NF; f++) begin
      if (f_en[f] && int'(f_col[f]) < COLS) begin
        mask_d[f_col[f]] = 1'b1;
        key_d[f_col[f]]  = f_bit[f];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key  <= '0;
      mask <= '0;
    end else if (load) begin
      key  <= key_d;
      mask <= mask_d;
    end
  end

endmodule
