// tag_register: the AP's tag register, one bit per CAM row.
//
// In the search phase of a pass it captures the match lines of the CAM array
// (capture=1), so that the following write phase updates exactly the rows that
// matched. set_all tags every row, which the controller uses for writes that
// apply to the whole column (SET, network receive) and for clearing carries.
// capture has priority over set_all. Timing: the new tag is visible the cycle
// after capture/set_all. The register is cleared by reset (this design's
// choice; the source does not describe reset).
module tag_register #(
  parameter int unsigned ROWS = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            capture,
  input  logic            set_all,
  input  logic [ROWS-1:0] match,
  output logic [ROWS-1:0] tag,
  output logic            any_tag
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        tag <= '0;
    else if (capture)  tag <= match;
    else if (set_all)  tag <= '1;
  end

  assign any_tag = |tag;

endmodule
