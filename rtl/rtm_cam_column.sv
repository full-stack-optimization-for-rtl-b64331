// rtm_cam_column: one column of the CAM array, i.e. ROWS CAM cells whose
// storage element is a racetrack nanowire of DOMAINS magnetic domains.
//
// Every track of the column shares one access-port position (the tracks of a
// column are shifted together, like the tracks of one domain-wall block
// cluster). Only the domain aligned with the port can be searched or written.
// An operand of N bits is stored along the nanowire, least significant bit at
// the lowest domain, so bit-serial processing is one shift per bit.
//
// Per cycle the column can:
//   * compare the bit under the port of every row with key (if mask is set);
//     mismatch[r] models the NOR-type cell discharging the row's match line;
//   * write wkey into the port bit of every row with wrows[r] set (if wmask);
//   * write a per-row slice (slice_we) into the port bits (network receive);
//   * shift the port one domain up or down (shift, shift_up).
// Writes use the port position before the shift of the same cycle.
// Shifting past either end of the nanowire saturates (this design's choice).
// The cell circuit itself (NOR logic, precharge sense amplifier, magnetic
// domain walls) is analog; this module keeps only its logic function.
module rtm_cam_column #(
  parameter int unsigned ROWS    = 256,
  parameter int unsigned DOMAINS = 64,
  localparam int unsigned PW     = $clog2(DOMAINS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // search
  input  logic            key,
  input  logic            mask,
  output logic [ROWS-1:0] mismatch,
  // tagged write
  input  logic            wen,
  input  logic            wkey,
  input  logic [ROWS-1:0] wrows,
  // slice write / read at the port
  input  logic            slice_we,
  input  logic [ROWS-1:0] slice_wdata,
  output logic [ROWS-1:0] port_bits,
  // shift
  input  logic            shift,
  input  logic            shift_up,
  output logic [PW-1:0]   pos
);

  logic [DOMAINS-1:0] track [ROWS];

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      port_bits[r] = track[r][pos];
      mismatch[r]  = mask && (port_bits[r] != key);
    end
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      if (slice_we)
        track[r][pos] <= slice_wdata[r];
      else if (wen && wrows[r])
        track[r][pos] <= wkey;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      pos <= '0;
    else if (shift) begin
      if (shift_up && pos != PW'(DOMAINS - 1))
        pos <= pos + 1'b1;
      else if (!shift_up && pos != '0)
        pos <= pos - 1'b1;
    end
  end

endmodule
