// rtm_ap_accel: top level of the racetrack-memory associative processor
// accelerator: NBANK independent banks of NTILE tiles of NAP APs.
//
// Each AP is a 256 x 256 CAM of racetrack cells with 64 domains per cell and
// runs its own program. The host loads programs (im_*, selecting bank, tile
// and AP), loads input data into a bank's global buffer (gb_*), pulses start
// and waits for done (every AP of every bank halted), then reads the outputs
// back from the global buffer. gb_rdata is valid one cycle after gb_re.
// The hierarchy and the array size follow the source; the tile and AP counts
// are those of its architecture drawing; NBANK = 3 is this design's choice
// (the smallest count whose 72 arrays hold the largest network evaluated,
// which needs 49 arrays).
module rtm_ap_accel
  import rtm_ap_pkg::*;
#(
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 256,
  parameter int unsigned DOMAINS    = 64,
  parameter int unsigned IC_DEPTH   = 256,
  parameter int unsigned NAP        = 6,
  parameter int unsigned NTILE      = 4,
  parameter int unsigned NBANK      = 3,
  parameter int unsigned TBUF_DEPTH = 256,
  parameter int unsigned GBUF_DEPTH = 1024,
  localparam int unsigned IAW       = $clog2(IC_DEPTH),
  localparam int unsigned GAW       = $clog2(GBUF_DEPTH),
  localparam int unsigned BW        = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             done,
  input  logic             im_we,
  input  logic [BW-1:0]    im_bank,
  input  logic [TID_W-1:0] im_tile,
  input  logic [EID_W-1:0] im_ap,
  input  logic [IAW-1:0]   im_addr,
  input  instr_t           im_wdata,
  input  logic             gb_we,
  input  logic             gb_re,
  input  logic [BW-1:0]    gb_bank,
  input  logic [GAW-1:0]   gb_addr,
  input  logic [ROWS-1:0]  gb_wdata,
  output logic [ROWS-1:0]  gb_rdata
);

  logic [NBANK-1:0]           b_done;
  logic [NBANK-1:0][ROWS-1:0] b_rdata;
  logic [BW-1:0]              rd_bank_q;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    bank #(.ROWS(ROWS), .COLS(COLS), .DOMAINS(DOMAINS), .IC_DEPTH(IC_DEPTH),
           .NAP(NAP), .NTILE(NTILE), .TBUF_DEPTH(TBUF_DEPTH),
           .GBUF_DEPTH(GBUF_DEPTH)) u_bank (
      .clk, .rst_n, .start, .done(b_done[b]),
      .im_we    (im_we && im_bank == BW'(b)),
      .im_tile, .im_ap, .im_addr, .im_wdata,
      .gb_we    (gb_we && gb_bank == BW'(b)),
      .gb_re    (gb_re && gb_bank == BW'(b)),
      .gb_addr, .gb_wdata,
      .gb_rdata (b_rdata[b]));
  end

  assign done = &b_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_bank_q <= '0;
    else if (gb_re) rd_bank_q <= gb_bank;
  end

  assign gb_rdata = b_rdata[rd_bank_q];

endmodule
