// link_reg: one-entry valid/ready register stage carrying a network packet
// (header + ROWS-bit data slice).
//
// It is the AP's network interface ("Interconnection" next to the tag
// register) and also sits on every tile-to-bank and bank-to-tile link, where
// it breaks the combinational valid/ready path between the two levels of
// intercommunication. in_ready depends only on the register's own state
// (ready when empty), so the stage passes one packet every other cycle when
// traffic is continuous. A packet accepted at cycle t is offered at t+1.
// Lint note: rst_n is also read by the assertion's disable iff, which lint
// reports as a synchronous use of the asynchronous reset; intended.
module link_reg
  import rtm_ap_pkg::*;
#(
  parameter int unsigned DW = 256
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  pkt_hdr_t       in_hdr,
  input  logic [DW-1:0]  in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output pkt_hdr_t       out_hdr,
  output logic [DW-1:0]  out_data
);

  assign in_ready = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      out_valid <= 1'b0;
    else if (in_valid && in_ready)
      out_valid <= 1'b1;
    else if (out_ready)
      out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      out_hdr  <= in_hdr;
      out_data <= in_data;
    end
  end

  // A packet on offer must stay unchanged until taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_hdr);
  endproperty
  a_hold: assert property (p_hold);

endmodule
