// instr_cache: the AP's instruction store.
//
// DEPTH instruction words (rtm_ap_pkg::instr_t), written by the host before a
// run and read by the AP controller. The read is synchronous: rd_en at cycle
// t gives rd_data at t+1. A write and a read of the same address in one cycle
// return the old word. Depth is this design's choice; the source gives none.
module instr_cache
  import rtm_ap_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic    clk,
  input  logic    we,
  input  logic [AW-1:0] waddr,
  input  instr_t  wdata,
  input  logic    rd_en,
  input  logic [AW-1:0] raddr,
  output instr_t  rd_data
);

  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rd_data <= mem[raddr];
  end

endmodule
