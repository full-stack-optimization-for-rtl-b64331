// tile: NAP associative processors, a tile buffer and the tile
// intercommunication.
//
// The intercommunication is a bus_switch with NAP+2 ports: ports 0..NAP-1 are
// the APs, port NAP the tile buffer, port NAP+1 the link to the bank. A packet
// whose destination tile is this tile goes to endpoint dst.ep (an AP, or the
// tile buffer for ep == NAP); any other packet leaves through the uplink. The
// up- and downlink each pass through a link_reg, so the bank and tile
// arbiters never form a combinational loop. All APs start together from the
// common start pulse; done is high when every AP has reached HALT.
// The arrangement of APs around a shared intercommunication and a tile buffer
// follows the source's tile drawing; the routing rule is this design's own.
// Lint note: the tile bus's busy flag is left unconnected to logic; it is
// an observation point for bus activity.
module tile
  import rtm_ap_pkg::*;
#(
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 256,
  parameter int unsigned DOMAINS    = 64,
  parameter int unsigned IC_DEPTH   = 256,
  parameter int unsigned NAP        = 6,
  parameter int unsigned TBUF_DEPTH = 256,
  localparam int unsigned IAW       = $clog2(IC_DEPTH),
  localparam int unsigned NPORT     = NAP + 2,
  localparam int unsigned PIW       = $clog2(NPORT)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TID_W-1:0] my_tile,
  input  logic             start,
  output logic             done,
  input  logic             im_we,
  input  logic [EID_W-1:0] im_ap,
  input  logic [IAW-1:0]   im_addr,
  input  instr_t           im_wdata,
  output logic             up_valid,
  input  logic             up_ready,
  output pkt_hdr_t         up_hdr,
  output logic [ROWS-1:0]  up_data,
  input  logic             dn_valid,
  output logic             dn_ready,
  input  pkt_hdr_t         dn_hdr,
  input  logic [ROWS-1:0]  dn_data
);

  logic [NPORT-1:0]           b_in_valid, b_in_ready, b_out_valid, b_out_ready;
  pkt_hdr_t [NPORT-1:0]       b_in_hdr;
  logic [NPORT-1:0][ROWS-1:0] b_in_data;
  logic [NPORT-1:0][PIW-1:0]  b_in_dport;
  pkt_hdr_t                   b_out_hdr;
  logic [ROWS-1:0]            b_out_data;
  logic                       b_busy;
  logic [NAP-1:0]             ap_done;

  for (genvar i = 0; i < NAP; i++) begin : g_ap
    ap #(.ROWS(ROWS), .COLS(COLS), .DOMAINS(DOMAINS), .IC_DEPTH(IC_DEPTH)) u_ap (
      .clk, .rst_n,
      .my_addr   ('{tile: my_tile, ep: EID_W'(i)}),
      .start, .done(ap_done[i]),
      .im_we     (im_we && im_ap == EID_W'(i)),
      .im_addr, .im_wdata,
      .out_valid (b_in_valid[i]),
      .out_ready (b_in_ready[i]),
      .out_hdr   (b_in_hdr[i]),
      .out_data  (b_in_data[i]),
      .in_valid  (b_out_valid[i]),
      .in_ready  (b_out_ready[i]),
      .in_hdr    (b_out_hdr),
      .in_data   (b_out_data));
  end

  assign done = &ap_done;

  logic [ROWS-1:0] unused_rdata;

  slice_buffer #(.DEPTH(TBUF_DEPTH), .DW(ROWS)) u_tbuf (
    .clk, .rst_n,
    .my_addr    ('{tile: my_tile, ep: EID_W'(NAP)}),
    .in_valid   (b_out_valid[NAP]),
    .in_ready   (b_out_ready[NAP]),
    .in_hdr     (b_out_hdr),
    .in_data    (b_out_data),
    .out_valid  (b_in_valid[NAP]),
    .out_ready  (b_in_ready[NAP]),
    .out_hdr    (b_in_hdr[NAP]),
    .out_data   (b_in_data[NAP]),
    .host_we    (1'b0),
    .host_re    (1'b0),
    .host_addr  ('0),
    .host_wdata ('0),
    .host_rdata (unused_rdata));

  // Uplink (tile -> bank) and downlink (bank -> tile) registers.
  link_reg #(.DW(ROWS)) u_up (
    .clk, .rst_n,
    .in_valid (b_out_valid[NAP+1]), .in_ready(b_out_ready[NAP+1]),
    .in_hdr   (b_out_hdr),          .in_data (b_out_data),
    .out_valid(up_valid), .out_ready(up_ready), .out_hdr(up_hdr), .out_data(up_data));

  link_reg #(.DW(ROWS)) u_dn (
    .clk, .rst_n,
    .in_valid (dn_valid), .in_ready(dn_ready), .in_hdr(dn_hdr), .in_data(dn_data),
    .out_valid(b_in_valid[NAP+1]), .out_ready(b_in_ready[NAP+1]),
    .out_hdr  (b_in_hdr[NAP+1]),   .out_data (b_in_data[NAP+1]));

  always_comb begin
    for (int i = 0; i < NPORT; i++) begin
      if (b_in_hdr[i].dst.tile != my_tile)
        b_in_dport[i] = PIW'(NAP + 1);
      else if (int'(b_in_hdr[i].dst.ep) < NAP)
        b_in_dport[i] = PIW'(b_in_hdr[i].dst.ep);
      else
        b_in_dport[i] = PIW'(NAP);
    end
  end

  bus_switch #(.NPORT(NPORT), .DW(ROWS)) u_bus (
    .clk, .rst_n,
    .in_valid(b_in_valid), .in_ready(b_in_ready), .in_hdr(b_in_hdr),
    .in_data(b_in_data), .in_dport(b_in_dport),
    .out_valid(b_out_valid), .out_ready(b_out_ready),
    .out_hdr(b_out_hdr), .out_data(b_out_data), .busy(b_busy));

endmodule
