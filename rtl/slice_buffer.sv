// slice_buffer: tile buffer or global buffer.
//
// DEPTH words of DW bits (one CAM bit slice each). It is a network endpoint:
// a PK_WR packet stores its slice at hdr.addr; a PK_RDREQ packet is answered
// with a PK_WR packet, addressed to the requester (hdr.src), carrying the
// slice at hdr.addr. One request is served at a time: the input is ready
// while no answer waits on the output, and the answer is offered the cycle
// after the request is taken. A host port (synchronous read, one cycle) lets
// the outside world fill the buffer with input feature maps and read back
// results; a host write wins over a network write to the same word.
// The source names the tile and global buffers but not their size or
// protocol; depth, packet protocol and host port are this design's choices.
// Lint note: the destination field of an incoming header is not read; the
// bus delivers only packets addressed to this buffer.
module slice_buffer
  import rtm_ap_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned DW    = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  net_addr_t      my_addr,
  // network in
  input  logic           in_valid,
  output logic           in_ready,
  input  pkt_hdr_t       in_hdr,
  input  logic [DW-1:0]  in_data,
  // network out (read answers)
  output logic           out_valid,
  input  logic           out_ready,
  output pkt_hdr_t       out_hdr,
  output logic [DW-1:0]  out_data,
  // host port
  input  logic           host_we,
  input  logic           host_re,
  input  logic [AW-1:0]  host_addr,
  input  logic [DW-1:0]  host_wdata,
  output logic [DW-1:0]  host_rdata
);

  logic [DW-1:0] mem [DEPTH];
  logic take;

  assign in_ready = !out_valid;
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (take && in_hdr.kind == PK_WR)
      mem[AW'(in_hdr.addr)] <= in_data;
    if (host_we)
      mem[host_addr] <= host_wdata;
    if (host_re)
      host_rdata <= mem[host_addr];
    if (take && in_hdr.kind == PK_RDREQ) begin
      out_data      <= mem[AW'(in_hdr.addr)];
      out_hdr.kind  <= PK_WR;
      out_hdr.dst   <= in_hdr.src;
      out_hdr.src   <= my_addr;
      out_hdr.addr  <= in_hdr.addr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      out_valid <= 1'b0;
    else if (take && in_hdr.kind == PK_RDREQ)
      out_valid <= 1'b1;
    else if (out_ready)
      out_valid <= 1'b0;
  end

endmodule
