// ap_controller: control unit of one associative processor (AP).
//
// It fetches instructions from the instruction cache and turns each into
// cycles of the CAM array:
//   * align   - every column the instruction uses is shifted, one domain per
//               cycle and all columns in parallel, until its access port sits
//               on the operand's first domain (RELU: the sign domain);
//   * add/sub - for every bit, for every LUT pass: a search cycle (key and
//               mask on {C,B,A}, match lines captured in the tag register)
//               then a write cycle (pattern on {C,D} plus result copies, in
//               the tagged rows). The key/mask registers are reloaded in each
//               cycle for the next one. On the last write of a bit the data
//               columns shift one domain; the carry column stays put. So a
//               bit costs 8 cycles in-place and 10 out-of-place, as in the
//               source, plus 1 cycle to load the first key of the instruction;
//   * SET     - tag every row, write imm, one bit per cycle;
//   * RELU    - search the sign bit once, then clear the tagged rows' bits
//               from the MSB down, one bit per cycle;
//   * SEND    - offer the bit slice under A's port as a network packet, one
//               per accepted handshake;
//   * RECV    - accept WR packets and write their slices into R;
//   * LOADB   - per bit, send a read request to a buffer, then receive the
//               answer into R.
// Each instruction costs 2 cycles of fetch/decode. start (pulse) runs the
// program from address 0; done stays high from HALT until the next start.
// The source gives the search/write phases, the LUTs and their cycle counts;
// the instruction set, alignment, network operations and RELU are this
// design's own.
// Lint notes: ROWS is not used (the controller does not depend on the row
// count) and is kept so every AP-level module takes the same parameter list;
// rst_n is also read by assertions' disable iff, reported by lint as a
// synchronous use of the asynchronous reset. Both are intended.
module ap_controller
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
  input  logic                  clk,
  input  logic                  rst_n,
  input  net_addr_t             my_addr,
  input  logic                  start,
  output logic                  done,
  // instruction cache
  output logic                  ic_rd_en,
  output logic [IAW-1:0]        ic_raddr,
  input  instr_t                ic_rdata,
  // key / mask registers
  output logic                  km_load,
  output logic [NF-1:0]         f_en,
  output logic [NF-1:0][COL_W-1:0] f_col,
  output logic [NF-1:0]         f_bit,
  // tag register
  output logic                  tag_capture,
  output logic                  tag_set_all,
  // CAM array
  output logic                  cam_wen,
  output logic                  slice_we,
  output logic [CW-1:0]         slice_col,
  output logic [CW-1:0]         rd_col,
  output logic [COLS-1:0]       shift,
  output logic [COLS-1:0]       shift_up,
  input  logic [COLS-1:0][PW-1:0] pos,
  // network (through the AP interconnection register)
  output logic                  out_valid,
  input  logic                  out_ready,
  output pkt_hdr_t              out_hdr,
  input  logic                  in_valid,
  output logic                  in_ready
);

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_ALIGN, S_SRCH, S_WR, S_SETW,
    S_RSRCH, S_RWR, S_SEND, S_RECV, S_LREQ, S_LWAIT, S_HALT
  } state_e;

  state_e          st;
  instr_t          ir;
  logic [IAW-1:0]  pc;
  logic [2:0]      pass;
  logic [NB_W-1:0] bitk;

  logic [2:0] skey, npass;
  logic [1:0] wpat;
  logic       lut_ok;

  // In a write cycle the key register is loaded with the search key of the
  // next pass, so the LUT is looked up with that pass index then.
  logic [2:0] lut_pass, npass_op;
  assign npass_op = (ir.op inside {OP_ADD_OP, OP_SUB_OP}) ? 3'd5 : 3'd4;
  assign lut_pass = (st != S_WR) ? pass :
                    (pass == npass_op - 1'b1) ? 3'd0 : pass + 1'b1;

  ap_lut u_lut (.op(ir.op), .pass(lut_pass), .skey, .wpat, .npass, .valid_op(lut_ok));

  // Operand fields used for alignment and stepping: A, B, C, R, copies.
  logic [NF-1:0]             u_en, u_step;
  logic [NF-1:0][COL_W-1:0]  u_col;
  logic [NF-1:0][DOM_W-1:0]  u_dom;
  logic                      is_arith, is_oop;

  always_comb begin
    is_arith = ir.op inside {OP_ADD_IP, OP_ADD_OP, OP_SUB_IP, OP_SUB_OP};
    is_oop   = ir.op inside {OP_ADD_OP, OP_SUB_OP};
    u_en   = '0;
    u_step = '0;
    u_col  = '0;
    u_dom  = '0;
    u_col[0] = ir.a_col; u_dom[0] = ir.a_dom;
    u_col[1] = ir.b_col; u_dom[1] = ir.b_dom;
    u_col[2] = ir.c_col; u_dom[2] = ir.c_dom;
    u_col[3] = ir.r_col; u_dom[3] = ir.r_dom;
    for (int k = 0; k < NCOPY; k++) begin
      u_col[4+k] = ir.cp_col[k];
      u_dom[4+k] = ir.r_dom;
    end
    unique case (ir.op)
      OP_ADD_IP, OP_SUB_IP: begin
        u_en = NF'(3'b111); u_step = NF'(3'b011);
      end
      OP_ADD_OP, OP_SUB_OP: begin
        u_en   = {ir.cp_en, 4'b1111};
        u_step = {ir.cp_en, 4'b1011};
      end
      OP_SET, OP_RECV, OP_LOADB: begin
        u_en = NF'(4'b1000); u_step = NF'(4'b1000);
      end
      OP_RELU: begin
        u_en = NF'(1); u_step = NF'(1);
        u_dom[0] = ir.a_dom + DOM_W'(ir.nbits) - 1'b1;
      end
      OP_SEND: begin
        u_en = NF'(1); u_step = NF'(1);
      end
      default: ;
    endcase
  end

  // Per-column alignment need and stepping mask.
  logic [COLS-1:0] col_mis, col_down, col_step;
  logic            aligned;

  always_comb begin
    col_mis  = '0;
    col_down = '0;
    col_step = '0;
    for (int c = 0; c < COLS; c++) begin
      for (int f = 0; f < NF; f++) begin
        if (u_en[f] && int'(u_col[f]) == c) begin
          if (int'(pos[c]) != int'(u_dom[f])) col_mis[c] = 1'b1;
          if (int'(pos[c]) >  int'(u_dom[f])) col_down[c] = 1'b1;
          col_step[c] = u_step[f];
        end
      end
    end
    aligned = (col_mis == '0);
  end

  logic last_bit;
  assign last_bit = (bitk == ir.nbits - 1'b1);

  // Key / mask field selection for the next cycle's phase.
  typedef enum logic [2:0] { K_SRCH, K_WR, K_SET, K_RSRCH, K_RWR } kload_e;
  kload_e ksel;

  always_comb begin
    f_en  = '0;
    f_col = u_col;
    f_bit = '0;
    unique case (ksel)
      K_SRCH: begin
        f_en[2:0] = 3'b111;
        f_bit[2]  = skey[2];
        f_bit[1]  = skey[1];
        f_bit[0]  = skey[0];
      end
      K_WR: begin
        f_en[2]   = 1'b1;
        f_bit[2]  = wpat[1];
        if (is_oop) begin
          f_en[3] = 1'b1;
          f_bit[3] = wpat[0];
          for (int k = 0; k < NCOPY; k++) begin
            f_en[4+k]  = ir.cp_en[k];
            f_bit[4+k] = wpat[0];
          end
        end else begin
          f_en[1]  = 1'b1;
          f_bit[1] = wpat[0];
        end
      end
      K_SET: begin
        f_en[3]  = 1'b1;
        f_bit[3] = ir.imm;
      end
      K_RSRCH: begin
        f_en[0]  = 1'b1;
        f_bit[0] = 1'b1;
      end
      default: begin  // K_RWR
        f_en[0]  = 1'b1;
        f_bit[0] = 1'b0;
      end
    endcase
  end

  // Main sequencer.
  always_comb begin
    ic_rd_en    = (st == S_FETCH);
    ic_raddr    = pc;
    km_load     = 1'b0;
    ksel        = K_SRCH;
    tag_capture = 1'b0;
    tag_set_all = 1'b0;
    cam_wen     = 1'b0;
    slice_we    = 1'b0;
    slice_col   = CW'(ir.r_col);
    rd_col      = CW'(ir.a_col);
    shift       = '0;
    shift_up    = '1;
    out_valid   = 1'b0;
    out_hdr     = '{kind: PK_WR, dst: ir.peer, src: my_addr,
                    addr: ir.baddr + BADR_W'(bitk)};
    in_ready    = 1'b0;
    done        = (st == S_HALT);
    unique case (st)
      S_ALIGN: begin
        shift    = col_mis;
        shift_up = ~col_down;
        if (aligned) begin
          km_load = 1'b1;
          unique case (ir.op)
            OP_SET:  begin ksel = K_SET; tag_set_all = 1'b1; end
            OP_RELU: ksel = K_RSRCH;
            default: ksel = K_SRCH;
          endcase
        end
      end
      S_SRCH: begin
        tag_capture = 1'b1;
        km_load     = 1'b1;
        ksel        = K_WR;
      end
      S_WR: begin
        cam_wen = 1'b1;
        km_load = 1'b1;
        ksel    = K_SRCH;   // pass advance is registered below
        if (pass == npass_op - 1'b1) shift = col_step;
      end
      S_SETW: begin
        cam_wen = 1'b1;
        shift   = col_step;
      end
      S_RSRCH: begin
        tag_capture = 1'b1;
        km_load     = 1'b1;
        ksel        = K_RWR;
      end
      S_RWR: begin
        cam_wen  = 1'b1;
        shift    = last_bit ? '0 : col_step;
        shift_up = '0;
      end
      S_SEND: begin
        out_valid = 1'b1;
        if (out_ready) shift = col_step;
      end
      S_RECV, S_LWAIT: begin
        in_ready = 1'b1;
        if (in_valid) begin
          slice_we = 1'b1;
          shift    = col_step;
        end
      end
      S_LREQ: begin
        out_valid    = 1'b1;
        out_hdr.kind = PK_RDREQ;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      pc   <= '0;
      pass <= '0;
      bitk <= '0;
      ir   <= '0;
    end else begin
      unique case (st)
        S_IDLE, S_HALT: if (start) begin
          pc <= '0;
          st <= S_FETCH;
        end
        S_FETCH: st <= S_DECODE;
        S_DECODE: begin
          ir   <= ic_rdata;
          pc   <= pc + 1'b1;
          pass <= '0;
          bitk <= '0;
          unique case (ic_rdata.op)
            OP_HALT: st <= S_HALT;
            OP_ADD_IP, OP_ADD_OP, OP_SUB_IP, OP_SUB_OP, OP_SET, OP_RELU,
            OP_SEND, OP_RECV, OP_LOADB:
              st <= (ic_rdata.nbits == '0) ? S_FETCH : S_ALIGN;
            default: st <= S_FETCH;
          endcase
        end
        S_ALIGN: if (aligned) begin
          unique case (ir.op)
            OP_SET:   st <= S_SETW;
            OP_RELU:  st <= S_RSRCH;
            OP_SEND:  st <= S_SEND;
            OP_RECV:  st <= S_RECV;
            OP_LOADB: st <= S_LREQ;
            default:  st <= S_SRCH;
          endcase
        end
        S_SRCH: st <= S_WR;
        S_WR: begin
          st <= S_SRCH;
          if (pass == npass_op - 1'b1) begin
            pass <= '0;
            bitk <= bitk + 1'b1;
            if (last_bit) st <= S_FETCH;
          end else begin
            pass <= pass + 1'b1;
          end
        end
        S_SETW, S_RWR: begin
          bitk <= bitk + 1'b1;
          if (last_bit) st <= S_FETCH;
        end
        S_RSRCH: st <= S_RWR;
        S_SEND: if (out_ready) begin
          bitk <= bitk + 1'b1;
          if (last_bit) st <= S_FETCH;
        end
        S_RECV: if (in_valid) begin
          bitk <= bitk + 1'b1;
          if (last_bit) st <= S_FETCH;
        end
        S_LREQ: if (out_ready) st <= S_LWAIT;
        S_LWAIT: if (in_valid) begin
          bitk <= bitk + 1'b1;
          st   <= last_bit ? S_FETCH : S_LREQ;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // The LUT and the pass counter agree on the number of passes.
  a_npass: assert property (@(posedge clk) disable iff (!rst_n)
    is_arith && st == S_SRCH |-> lut_ok && npass == npass_op);

  // Arithmetic operands must sit in distinct columns.
  a_distinct: assert property (@(posedge clk) disable iff (!rst_n)
    st == S_SRCH |-> ir.a_col != ir.b_col && ir.a_col != ir.c_col && ir.b_col != ir.c_col);

endmodule
