// cam_array: ROWS x COLS associative array of racetrack CAM cells.
//
// The array is COLS rtm_cam_column instances side by side. A row matches when
// no masked column of that row mismatches: this is the precharged match line
// that any mismatching NOR-type cell discharges, read by the row's sense
// amplifier. The match vector is combinational from the stored bits and the
// key/mask registers and is captured by the tag register at the clock edge.
// Writes go to all rows selected by wrows, in all columns with wmask set,
// with the key bit of that column (the AP's parallel column write). One
// column at a time can also be read or written as a full ROWS-bit slice,
// which is how data enters and leaves the AP over the network. Every column
// has its own shift request so that operands in different columns can sit at
// different domains.
module cam_array #(
  parameter int unsigned ROWS    = 256,
  parameter int unsigned COLS    = 256,
  parameter int unsigned DOMAINS = 64,
  localparam int unsigned PW     = $clog2(DOMAINS),
  localparam int unsigned CW     = $clog2(COLS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [COLS-1:0]     key,
  input  logic [COLS-1:0]     mask,
  output logic [ROWS-1:0]     match,
  input  logic                wen,
  input  logic [ROWS-1:0]     wrows,
  input  logic                slice_we,
  input  logic [CW-1:0]       slice_col,
  input  logic [ROWS-1:0]     slice_wdata,
  input  logic [CW-1:0]       rd_col,
  output logic [ROWS-1:0]     rd_slice,
  input  logic [COLS-1:0]     shift,
  input  logic [COLS-1:0]     shift_up,
  output logic [COLS-1:0][PW-1:0] pos
);

  logic [COLS-1:0][ROWS-1:0] mism;
  logic [COLS-1:0][ROWS-1:0] pbits;

  for (genvar c = 0; c < COLS; c++) begin : g_col
    rtm_cam_column #(.ROWS(ROWS), .DOMAINS(DOMAINS)) u_col (
      .clk, .rst_n,
      .key        (key[c]),
      .mask       (mask[c]),
      .mismatch   (mism[c]),
      .wen        (wen && mask[c]),
      .wkey       (key[c]),
      .wrows,
      .slice_we   (slice_we && slice_col == CW'(c)),
      .slice_wdata,
      .port_bits  (pbits[c]),
      .shift      (shift[c]),
      .shift_up   (shift_up[c]),
      .pos        (pos[c])
    );
  end

  always_comb begin
    logic [ROWS-1:0] any;
    any = '0;
    for (int c = 0; c < COLS; c++) any |= mism[c];
    match = ~any;
  end

  assign rd_slice = pbits[rd_col];

endmodule
