// ap: one associative processor.
//
// A CAM array of ROWS x COLS racetrack cells (DOMAINS bits per cell), its tag
// register, the key and mask registers, an instruction cache, the control
// unit and a network interface register. Rows hold independent SIMD lanes
// (for a convolution: output pixels), columns hold operands, and each
// operand's bits follow each other along the nanowires. All arithmetic is
// done in place in the array by masked search and parallel write; only
// SEND/RECV/LOADB move data, one ROWS-bit slice per network packet.
//
// Interface: the host writes the instruction cache (im_we/im_addr/im_wdata)
// and pulses start; done rises when the program reaches HALT. net_out is
// registered (one packet per two cycles at most); net_in is accepted while a
// RECV or LOADB instruction waits for data.
// Lint notes: the incoming packet header is not read (RECV and LOADB take
// slices in arrival order, and the bus only delivers packets addressed to
// this AP), and the tag register's any_tag flag is not needed by this
// controller; both stay visible for debugging. rst_n is also read by
// assertions' disable iff, which lint reports as a synchronous use.
module ap
  import rtm_ap_pkg::*;
#(
  parameter int unsigned ROWS     = 256,
  parameter int unsigned COLS     = 256,
  parameter int unsigned DOMAINS  = 64,
  parameter int unsigned IC_DEPTH = 256,
  localparam int unsigned PW      = $clog2(DOMAINS),
  localparam int unsigned CW      = $clog2(COLS),
  localparam int unsigned IAW     = $clog2(IC_DEPTH),
  localparam int unsigned NF      = 4 + NCOPY
) (
  input  logic             clk,
  input  logic             rst_n,
  input  net_addr_t        my_addr,
  input  logic             start,
  output logic             done,
  input  logic             im_we,
  input  logic [IAW-1:0]   im_addr,
  input  instr_t           im_wdata,
  output logic             out_valid,
  input  logic             out_ready,
  output pkt_hdr_t         out_hdr,
  output logic [ROWS-1:0]  out_data,
  input  logic             in_valid,
  output logic             in_ready,
  input  pkt_hdr_t         in_hdr,
  input  logic [ROWS-1:0]  in_data
);

  instr_t ic_rdata;
  logic ic_rd_en;
  logic [IAW-1:0] ic_raddr;

  instr_cache #(.DEPTH(IC_DEPTH)) u_ic (
    .clk, .we(im_we), .waddr(im_addr), .wdata(im_wdata),
    .rd_en(ic_rd_en), .raddr(ic_raddr), .rd_data(ic_rdata));

  logic km_load;
  logic [NF-1:0] f_en, f_bit;
  logic [NF-1:0][COL_W-1:0] f_col;
  logic [COLS-1:0] key, mask;

  key_mask_regs #(.COLS(COLS), .NF(NF)) u_km (
    .clk, .rst_n, .load(km_load), .f_en, .f_col, .f_bit, .key, .mask);

  logic tag_capture, tag_set_all, any_tag;
  logic [ROWS-1:0] match, tag;

  tag_register #(.ROWS(ROWS)) u_tag (
    .clk, .rst_n, .capture(tag_capture), .set_all(tag_set_all),
    .match, .tag, .any_tag);

  logic cam_wen, slice_we;
  logic [CW-1:0] slice_col, rd_col;
  logic [ROWS-1:0] rd_slice;
  logic [COLS-1:0] shift, shift_up;
  logic [COLS-1:0][PW-1:0] pos;

  cam_array #(.ROWS(ROWS), .COLS(COLS), .DOMAINS(DOMAINS)) u_cam (
    .clk, .rst_n, .key, .mask, .match,
    .wen(cam_wen), .wrows(tag),
    .slice_we, .slice_col, .slice_wdata(in_data),
    .rd_col, .rd_slice, .shift, .shift_up, .pos);

  logic c_out_valid, c_out_ready;
  pkt_hdr_t c_out_hdr;

  ap_controller #(.ROWS(ROWS), .COLS(COLS), .DOMAINS(DOMAINS), .IC_DEPTH(IC_DEPTH)) u_ctrl (
    .clk, .rst_n, .my_addr, .start, .done,
    .ic_rd_en, .ic_raddr, .ic_rdata,
    .km_load, .f_en, .f_col, .f_bit,
    .tag_capture, .tag_set_all,
    .cam_wen, .slice_we, .slice_col, .rd_col, .shift, .shift_up, .pos,
    .out_valid(c_out_valid), .out_ready(c_out_ready), .out_hdr(c_out_hdr),
    .in_valid, .in_ready);

  // AP interconnection: register between the AP and the tile network.
  link_reg #(.DW(ROWS)) u_netif (
    .clk, .rst_n,
    .in_valid(c_out_valid), .in_ready(c_out_ready),
    .in_hdr(c_out_hdr), .in_data(rd_slice),
    .out_valid, .out_ready, .out_hdr, .out_data);

endmodule
