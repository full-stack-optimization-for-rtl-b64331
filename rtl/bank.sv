// bank: NTILE tiles, the global buffer and the bank intercommunication.
//
// The bank's bus_switch has NTILE+1 ports: port t is tile t's up/downlink,
// port NTILE the global buffer. A packet goes to the tile named by dst.tile,
// or to the global buffer when dst.tile >= NTILE (the global buffer's address
// is tile NTILE, endpoint 0). The host reaches the global buffer through its
// host port (to load input feature maps and read back output feature maps)
// and writes the APs' instruction caches through im_*. done is high when all
// tiles are done. Banks do not talk to each other: the source draws no link
// between them.
// Lint note: the bank bus's busy flag is left unconnected to logic; it is
// an observation point for bus activity.
module bank
  import rtm_ap_pkg::*;
#(
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 256,
  parameter int unsigned DOMAINS    = 64,
  parameter int unsigned IC_DEPTH   = 256,
  parameter int unsigned NAP        = 6,
  parameter int unsigned NTILE      = 4,
  parameter int unsigned TBUF_DEPTH = 256,
  parameter int unsigned GBUF_DEPTH = 1024,
  localparam int unsigned IAW       = $clog2(IC_DEPTH),
  localparam int unsigned GAW       = $clog2(GBUF_DEPTH),
  localparam int unsigned NPORT     = NTILE + 1,
  localparam int unsigned PIW       = $clog2(NPORT)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             done,
  input  logic             im_we,
  input  logic [TID_W-1:0] im_tile,
  input  logic [EID_W-1:0] im_ap,
  input  logic [IAW-1:0]   im_addr,
  input  instr_t           im_wdata,
  input  logic             gb_we,
  input  logic             gb_re,
  input  logic [GAW-1:0]   gb_addr,
  input  logic [ROWS-1:0]  gb_wdata,
  output logic [ROWS-1:0]  gb_rdata
);

  logic [NPORT-1:0]           b_in_valid, b_in_ready, b_out_valid, b_out_ready;
  pkt_hdr_t [NPORT-1:0]       b_in_hdr;
  logic [NPORT-1:0][ROWS-1:0] b_in_data;
  logic [NPORT-1:0][PIW-1:0]  b_in_dport;
  pkt_hdr_t                   b_out_hdr;
  logic [ROWS-1:0]            b_out_data;
  logic                       b_busy;
  logic [NTILE-1:0]           t_done;

  for (genvar t = 0; t < NTILE; t++) begin : g_tile
    tile #(.ROWS(ROWS), .COLS(COLS), .DOMAINS(DOMAINS), .IC_DEPTH(IC_DEPTH),
           .NAP(NAP), .TBUF_DEPTH(TBUF_DEPTH)) u_tile (
      .clk, .rst_n,
      .my_tile  (TID_W'(t)),
      .start, .done(t_done[t]),
      .im_we    (im_we && im_tile == TID_W'(t)),
      .im_ap, .im_addr, .im_wdata,
      .up_valid (b_in_valid[t]),  .up_ready(b_in_ready[t]),
      .up_hdr   (b_in_hdr[t]),    .up_data (b_in_data[t]),
      .dn_valid (b_out_valid[t]), .dn_ready(b_out_ready[t]),
      .dn_hdr   (b_out_hdr),      .dn_data (b_out_data));
  end

  assign done = &t_done;

  slice_buffer #(.DEPTH(GBUF_DEPTH), .DW(ROWS)) u_gbuf (
    .clk, .rst_n,
    .my_addr    ('{tile: TID_W'(NTILE), ep: '0}),
    .in_valid   (b_out_valid[NTILE]),
    .in_ready   (b_out_ready[NTILE]),
    .in_hdr     (b_out_hdr),
    .in_data    (b_out_data),
    .out_valid  (b_in_valid[NTILE]),
    .out_ready  (b_in_ready[NTILE]),
    .out_hdr    (b_in_hdr[NTILE]),
    .out_data   (b_in_data[NTILE]),
    .host_we    (gb_we),
    .host_re    (gb_re),
    .host_addr  (gb_addr),
    .host_wdata (gb_wdata),
    .host_rdata (gb_rdata));

  always_comb begin
    for (int i = 0; i < NPORT; i++)
      b_in_dport[i] = (int'(b_in_hdr[i].dst.tile) < NTILE) ?
                      PIW'(b_in_hdr[i].dst.tile) : PIW'(NTILE);
  end

  bus_switch #(.NPORT(NPORT), .DW(ROWS)) u_bus (
    .clk, .rst_n,
    .in_valid(b_in_valid), .in_ready(b_in_ready), .in_hdr(b_in_hdr),
    .in_data(b_in_data), .in_dport(b_in_dport),
    .out_valid(b_out_valid), .out_ready(b_out_ready),
    .out_hdr(b_out_hdr), .out_data(b_out_data), .busy(b_busy));

endmodule
