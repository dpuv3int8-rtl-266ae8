// dpu_pkg: constants, types and helper functions shared by the whole
// inference engine.
//
// The engine is a SIMD machine of NPE process engines (PEs). Every PE owns a
// feature-map memory (FM) made of NMEM circular memories; each memory has
// NBANK banks that are read and written in parallel, one vector word per bank
// per cycle. A vector word holds CP signed 8-bit channels. Four, three and
// eight are the numbers of the architecture; CP, the memory depths and the
// whole instruction encoding are this design's own choices.
//
// Tensors are stored channel-innermost, then width, then height. Row y of a
// tensor whose descriptor is (bank, addr, rowlen, cgs) lives in bank
// (bank + y) mod NBANK at word
//     addr + ((bank + y) div NBANK) * rowlen + x * cgs + g
// for column x and channel group g, all taken modulo the bank depth: this is
// what makes each memory a circular buffer. Because consecutive rows sit in
// consecutive banks, eight output rows can be produced in parallel, one per
// bank, which is why the convolution works on 8-row tiles.
package dpu_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int NPE      = 4;     // process engines (SIMD width in tensors)
  localparam int NMEM     = 3;     // circular memories per FM
  localparam int NBANK    = 8;     // banks per memory = parallel rows (H_C)
  localparam int CP       = 8;     // channels per vector word
  localparam int VEC_W    = CP * 8;
  localparam int FM_DEPTH = 2048;  // words per bank
  localparam int FM_AW    = $clog2(FM_DEPTH);
  localparam int PM_DEPTH = 2048;  // parameter words
  localparam int PM_AW    = $clog2(PM_DEPTH);
  localparam int PM_W     = CP * CP * 8; // one CP x CP weight block
  localparam int DDR_W    = 64;    // DDR word = one vector word
  localparam int DDR_AW   = 32;
  localparam int NREGION  = 5;     // inputs, outputs, parameters, instructions, swap
  localparam int INSTR_W  = 512;
  localparam int INSTR_WORDS = INSTR_W / DDR_W;
  localparam int ACC_W    = 32;

  typedef logic [CP-1:0][7:0] vec_t;
  typedef logic [NBANK-1:0][VEC_W-1:0] bankvec_t;  // one word from each bank

  // ---------------------------------------------------------------- units
  // Unit type index; DPON / DPBY masks are indexed by it.
  typedef enum logic [1:0] { U_LOAD = 2'd0, U_SAVE = 2'd1, U_CONV = 2'd2, U_MISC = 2'd3 } unit_e;
  localparam int NUNIT = 4;

  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_LOAD = 4'd1,
    OP_SAVE = 4'd2,
    OP_CONV = 4'd3,
    OP_MISC = 4'd4,
    OP_END  = 4'd15
  } opcode_e;

  typedef enum logic [1:0] { MISC_MAXPOOL = 2'd0, MISC_ELTADD = 2'd1, MISC_COPY = 2'd2 } misc_mode_e;

  // Per-lane operation of the MISC datapath.
  typedef enum logic [1:0] { MO_INIT = 2'd0, MO_MAX = 2'd1, MO_LDA = 2'd2, MO_ADDB = 2'd3 } misc_op_e;

  typedef enum logic [2:0] {
    R_INPUT = 3'd0, R_OUTPUT = 3'd1, R_PARAM = 3'd2, R_INSTR = 3'd3, R_SWAP = 3'd4
  } region_e;

  // Tensor placement in an FM memory.
  typedef struct packed {
    logic [1:0]  mem;     // which of the NMEM memories
    logic [2:0]  bank;    // bank of row 0
    logic [15:0] addr;    // word of row 0 in that bank
    logic [15:0] rowlen;  // words between row y and row y+NBANK in a bank
    logic [7:0]  cgs;     // words per pixel (channel groups)
  } tdesc_t;

  // One instruction, INSTR_W bits, fetched as INSTR_WORDS DDR words, word 0
  // holding the least significant bits.
  typedef struct packed {
    logic [INSTR_W-337-1:0] spare;  // reserved, zero
    // DDR side (LOAD / SAVE)
    logic [2:0]  region;
    logic [31:0] ddr_off;      // word offset inside the region
    logic [15:0] ddr_rstride;  // DDR words between tensor rows
    logic [3:0]  fmt_ch;       // LOAD with format: channels per pixel (1..8)
    // parameters (CONV, LOAD to PM)
    logic [15:0] w_addr;
    logic [15:0] b_addr;
    // loop bounds
    logic [7:0]  icg;          // input channel groups
    logic [7:0]  ocg;          // output channel groups
    logic [7:0]  in_h, in_w;
    logic [7:0]  out_h, out_w;
    logic [3:0]  kh, kw;
    logic [3:0]  str_h, str_w; // stride (CONV, MAXPOOL) or sample step (COPY)
    logic [3:0]  pad_t, pad_l;
    logic [3:0]  up;           // COPY: up-sample factor (1, 2 or 4)
    logic [3:0]  ocs, oco;     // COPY: output column step and offset
    // tensors
    tdesc_t      src;
    tdesc_t      src2;
    tdesc_t      dst;
    // arithmetic
    logic [4:0]  shift;        // output right shift
    logic [3:0]  shift_a, shift_b; // element-wise operand left shifts
    logic        relu;
    // control
    logic [3:0]  mode;         // MISC: misc_mode_e; LOAD: bit0 to PM, bit1 format
    logic        nop;          // take part in synchronisation only
    logic [3:0]  dpby;         // unit types that wait for this one
    logic [3:0]  dpon;         // unit types this one waits for
    opcode_e     op;
  } instr_t;

  // ---------------------------------------------------------------- FM ports
  typedef struct packed {
    logic                         req;
    logic [1:0]                   mem;
    logic [NBANK-1:0]             en;
    logic [NBANK-1:0][FM_AW-1:0]  addr;
  } fm_req_t;

  // FM read requesters and write requesters, in arbiter index order.
  localparam int RQ_CONV = 0, RQ_MISC = 1, RQ_SAVE = 2, NRQ = 3;
  localparam int WQ_LOAD = 0, WQ_CONV = 1, WQ_MISC = 2, NWQ = 3;

  // ---------------------------------------------------------------- DDR port
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [1:0]        id;
    logic [DDR_AW-1:0] addr;
    logic [DDR_W-1:0]  wdata;
  } ddr_req_t;

  typedef struct packed {
    logic             rvalid;
    logic [1:0]       rid;
    logic [DDR_W-1:0] rdata;
  } ddr_rsp_t;

  localparam logic [1:0] ID_FETCH = 2'd0, ID_LOAD = 2'd1, ID_SAVE = 2'd2;

  // ---------------------------------------------------------------- helpers
  // Bank and word of (row y, column x, group g) of a tensor (see above).
  function automatic logic [2:0] row_bank(tdesc_t d, int y);
    return 3'((int'(d.bank) + y) % NBANK);
  endfunction

  function automatic logic [FM_AW-1:0] elem_addr(tdesc_t d, int y, int x, int g);
    int a;
    a = int'(d.addr) + ((int'(d.bank) + y) / NBANK) * int'(d.rowlen) + x * int'(d.cgs) + g;
    return FM_AW'(a);   // modulo the depth: circular buffer
  endfunction

  // Lanes (output rows) that may read together without two of them hitting
  // one bank at different words: for vertical step s, NBANK/s lanes.
  function automatic int lanes_per_phase(logic [3:0] s);
    case (s)
      4'd2:    return NBANK / 2;
      4'd4:    return NBANK / 4;
      4'd8:    return 1;
      default: return NBANK;
    endcase
  endfunction

  function automatic logic signed [7:0] sat8(logic signed [ACC_W-1:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return -8'sd128;
    else               return v[7:0];
  endfunction

  // Round-half-up arithmetic right shift, optional ReLU, saturation to int8.
  function automatic logic signed [7:0] requant(logic signed [ACC_W-1:0] v, logic [4:0] sh, logic relu);
    logic signed [ACC_W-1:0] r;
    if (sh == 0) r = v;
    else         r = (v + (ACC_W'(1) <<< (sh - 5'd1))) >>> sh;
    if (relu && r < 0) r = '0;
    return sat8(r);
  endfunction

endpackage
