// rtm_ap_pkg: types and constants shared by the racetrack-memory associative
// processor (RTM-AP) accelerator.
//
// The accelerator is a bank / tile / AP hierarchy. Every AP owns a CAM array
// whose cells are racetrack nanowires; operands are stored bit-serially along
// the nanowires and processed with masked search + parallel write passes.
// This package defines the AP instruction word, the network packet header
// used between APs and buffers, and the fixed field widths. Field widths are
// this design's choice (the source gives no instruction encoding); they are
// sized so that the default 256 columns and 64 domains fit with margin.
package rtm_ap_pkg;

  // Field widths (fixed; module parameters must fit inside them).
  localparam int unsigned COL_W  = 8;   // column index, up to 256 columns
  localparam int unsigned DOM_W  = 8;   // domain index along a nanowire
  localparam int unsigned NB_W   = 8;   // operand bit width field
  localparam int unsigned BADR_W = 12;  // buffer slice address
  localparam int unsigned TID_W  = 3;   // tile id in a network address
  localparam int unsigned EID_W  = 3;   // endpoint id (AP or buffer) in a tile
  localparam int unsigned NCOPY  = 3;   // extra result copies per instruction

  // AP operations.
  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_ADD_IP = 4'd1,   // B <- B + A        (in-place, 4 passes/bit)
    OP_ADD_OP = 4'd2,   // R <- B + A        (out-of-place, 5 passes/bit)
    OP_SUB_IP = 4'd3,   // B <- B - A
    OP_SUB_OP = 4'd4,   // R <- B - A
    OP_SET    = 4'd5,   // R <- imm in every bit, all rows
    OP_RELU   = 4'd6,   // A <- max(A, 0), rows with sign bit set are cleared
    OP_SEND   = 4'd7,   // send bit slices of A to a network endpoint
    OP_RECV   = 4'd8,   // write bit slices arriving from the network into R
    OP_LOADB  = 4'd9,   // read bit slices from a buffer into R
    OP_HALT   = 4'd15
  } op_e;

  // Network address of an endpoint: tile id and endpoint id inside the tile.
  // Inside a tile, endpoint ids 0..NAP-1 are the APs and NAP is the tile
  // buffer. Tile id NTILE (one past the last tile) is the bank's global buffer.
  typedef struct packed {
    logic [TID_W-1:0] tile;
    logic [EID_W-1:0] ep;
  } net_addr_t;

  typedef struct packed {
    op_e                  op;
    logic [COL_W-1:0]     a_col;   // operand A (or source of SEND/RELU)
    logic [DOM_W-1:0]     a_dom;   // first (least significant) domain of A
    logic [COL_W-1:0]     b_col;   // operand B (in-place result)
    logic [DOM_W-1:0]     b_dom;
    logic [COL_W-1:0]     r_col;   // out-of-place result / SET / RECV target
    logic [DOM_W-1:0]     r_dom;
    logic [COL_W-1:0]     c_col;   // carry / borrow column
    logic [DOM_W-1:0]     c_dom;
    logic [NCOPY-1:0]     cp_en;   // extra result copies (out-of-place only)
    logic [NCOPY-1:0][COL_W-1:0] cp_col;
    logic [NB_W-1:0]      nbits;   // operand width in bits (>= 1)
    logic                 imm;     // SET value
    net_addr_t            peer;    // SEND destination / LOADB buffer
    logic [BADR_W-1:0]    baddr;   // first buffer slice address
  } instr_t;

  typedef enum logic {
    PK_WR    = 1'b0,  // data slice for an AP or a buffer slot
    PK_RDREQ = 1'b1   // read request to a buffer, answered with PK_WR
  } pkt_kind_e;

  typedef struct packed {
    pkt_kind_e         kind;
    net_addr_t         dst;
    net_addr_t         src;
    logic [BADR_W-1:0] addr;
  } pkt_hdr_t;

endpackage
