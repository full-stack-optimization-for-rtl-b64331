// bus_switch: intercommunication of a tile or of a bank.
//
// NPORT endpoints share one slice bus: at most one packet (header + DW-bit
// slice) moves per cycle. Each input names its destination port in in_dport
// (the parent computes it from the packet address). An input is eligible when
// it is valid and its destination is ready; among eligible inputs a
// round-robin arbiter picks one, starting after the last winner, so a blocked
// destination never holds up traffic to other endpoints. The winner's
// in_ready and its destination's out_valid are asserted in the same cycle
// (combinational path from valid/ready to grant, no storage in the switch).
// The source only names this block; the shared bus and the round-robin
// policy are this design's choices.
// Lint notes: only the low bits of the integer loop index idx are used;
// rst_n is also read by the assertion's disable iff, which lint reports as a
// synchronous use of the asynchronous reset. Both are intended.
module bus_switch
  import rtm_ap_pkg::*;
#(
  parameter int unsigned NPORT = 8,
  parameter int unsigned DW    = 256,
  localparam int unsigned PIW  = $clog2(NPORT)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NPORT-1:0]      in_valid,
  output logic [NPORT-1:0]      in_ready,
  input  pkt_hdr_t [NPORT-1:0]  in_hdr,
  input  logic [NPORT-1:0][DW-1:0] in_data,
  input  logic [NPORT-1:0][PIW-1:0] in_dport,
  output logic [NPORT-1:0]      out_valid,
  input  logic [NPORT-1:0]      out_ready,
  output pkt_hdr_t              out_hdr,
  output logic [DW-1:0]         out_data,
  output logic                  busy       // a packet moved this cycle
);

  logic [NPORT-1:0] elig;
  logic [PIW-1:0]   last, win;
  logic             found;

  always_comb begin
    for (int i = 0; i < NPORT; i++)
      elig[i] = in_valid[i] && int'(in_dport[i]) < NPORT && out_ready[in_dport[i]];
    found = 1'b0;
    win   = '0;
    for (int k = 1; k <= NPORT; k++) begin
      int idx;
      idx = (int'(last) + k) % NPORT;
      if (!found && elig[idx]) begin
        found = 1'b1;
        win   = PIW'(idx);
      end
    end
    in_ready  = '0;
    out_valid = '0;
    if (found) begin
      in_ready[win]            = 1'b1;
      out_valid[in_dport[win]] = 1'b1;
    end
    out_hdr  = in_hdr[win];
    out_data = in_data[win];
  end

  assign busy = found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     last <= PIW'(NPORT - 1);
    else if (found) last <= win;
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(in_ready));

endmodule
