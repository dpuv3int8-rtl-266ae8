// misc_ctrl: controller of the MISC unit.
//
// Runs one MISC instruction over an output tile of out_h <= NBANK rows,
// out_w columns and icg channel groups; output row r is lane r of misc_alu in
// every PE. Three modes, the three kinds of MISC operation:
//   MISC_MAXPOOL  kh x kw window, strides str_h/str_w, top/left padding; padded
//                 positions do not take part in the maximum.
//   MISC_ELTADD   out = requant((a <<< shift_a) + (b <<< shift_b)), a from
//                 src and b from src2 at the same position; used for the
//                 residual additions.
//   MISC_COPY     data movement: output (r, c) takes input
//                 ((r / up) * str_h, (c / up) * str_w) and is written at column
//                 c * ocs + oco. up = 2 up-samples, str_h = str_w = 2
//                 (down-samples), ocs / oco interleave columns (the shuffle
//                 that rebuilds a transposed convolution from its
//                 sub-convolutions), all ones is the identity.
// For every output column and channel group the controller starts the lanes
// (INIT token for max pool), issues the reads one FM access per step, waits a
// cycle and writes the lane results in one FM access. Vertical steps larger
// than one are split into phases as in conv_ctrl so that no two lanes need one
// bank at different words.
//
// Interface and timing as conv_ctrl: start while idle, done pulse at the end,
// FM requests held until granted. Cycles per output column and group:
// (maxpool) 1 + kh*kw*phases + 2, (eltadd) 4, (copy) phases + 2.
// The mode set follows the architecture; the encodings and field meanings are
// this design's own.
module misc_ctrl
  import dpu_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  instr_t                 instr,
  output logic                   busy,
  output logic                   done,
  output fm_req_t                rd_req,
  input  logic                   rd_gnt,
  output fm_req_t                wr_req,
  input  logic                   wr_gnt,
  // to the PEs (aligned with the read data)
  output logic                   tok_valid,
  output misc_op_e               tok_op,
  output logic [NBANK-1:0]       tok_lane_en,
  output logic [NBANK-1:0][2:0]  tok_lane_bank,
  output logic [3:0]             out_shift_a,
  output logic [3:0]             out_shift_b,
  output logic [4:0]             out_shift,
  output logic                   out_relu,
  output logic [2:0]             out_wrot
);
  typedef enum logic [2:0] { S_IDLE, S_INIT, S_READ, S_DRAIN, S_WRITE } state_e;
  state_e state;
  instr_t ins;
  misc_mode_e mode;
  logic [7:0] wo, g;
  logic [3:0] l, m, ph;
  logic       step;    // element-wise: 0 reads a, 1 reads b

  int lpp, nph, ulog, kh_e, kw_e;
  logic [NBANK-1:0]      lane_ok;
  logic [NBANK-1:0][2:0] lane_bank;
  misc_op_e              op;
  tdesc_t                rd_desc;
  logic                  last_step;
  int                    xo;

  assign mode = misc_mode_e'(ins.mode[1:0]);

  always_comb begin
    ulog = (ins.up == 4'd4) ? 2 : (ins.up == 4'd2) ? 1 : 0;
    lpp  = (mode == MISC_ELTADD) ? NBANK : lanes_per_phase(ins.str_h);
    nph  = NBANK / lpp;
    kh_e = (mode == MISC_MAXPOOL) ? int'(ins.kh) : 1;
    kw_e = (mode == MISC_MAXPOOL) ? int'(ins.kw) : 1;
    rd_desc = (mode == MISC_ELTADD && step) ? ins.src2 : ins.src;
    case (mode)
      MISC_MAXPOOL: op = MO_MAX;
      MISC_ELTADD:  op = step ? MO_ADDB : MO_LDA;
      default:      op = MO_LDA;
    endcase
    rd_req = '0;
    lane_ok = '0;
    lane_bank = '0;
    for (int r = 0; r < NBANK; r++) begin
      int y, x;
      case (mode)
        MISC_MAXPOOL: begin
          y = r * int'(ins.str_h) + int'(l) - int'(ins.pad_t);
          x = int'(wo) * int'(ins.str_w) + int'(m) - int'(ins.pad_l);
        end
        MISC_ELTADD: begin
          y = r;
          x = int'(wo);
        end
        default: begin
          y = (r >> ulog) * int'(ins.str_h);
          x = (int'(wo) >> ulog) * int'(ins.str_w);
        end
      endcase
      lane_bank[r] = row_bank(rd_desc, y < 0 ? 0 : y);
      if (r < int'(ins.out_h) && (r / lpp) == int'(ph) &&
          y >= 0 && y < int'(ins.in_h) && x >= 0 && x < int'(ins.in_w)) begin
        lane_ok[r] = 1'b1;
        rd_req.en[lane_bank[r]]   = 1'b1;
        rd_req.addr[lane_bank[r]] = elem_addr(rd_desc, y, x, int'(g));
      end
    end
    rd_req.mem = rd_desc.mem;
    rd_req.req = (state == S_READ) && (lane_ok != '0);
    last_step = (int'(ph) == nph - 1) && (int'(m) == kw_e - 1) && (int'(l) == kh_e - 1) &&
                (mode != MISC_ELTADD || step);

    xo = (mode == MISC_COPY) ? int'(wo) * (ins.ocs == 0 ? 1 : int'(ins.ocs)) + int'(ins.oco) : int'(wo);
    wr_req = '0;
    wr_req.mem = ins.dst.mem;
    wr_req.req = (state == S_WRITE);
    for (int r = 0; r < NBANK; r++) begin
      if (r < int'(ins.out_h)) begin
        wr_req.en[row_bank(ins.dst, r)]   = 1'b1;
        wr_req.addr[row_bank(ins.dst, r)] = elem_addr(ins.dst, r, xo, int'(g));
      end
    end
  end

  assign busy        = (state != S_IDLE);
  assign out_shift_a = ins.shift_a;
  assign out_shift_b = ins.shift_b;
  assign out_shift   = ins.shift;
  assign out_relu    = ins.relu;
  assign out_wrot    = ins.dst.bank;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ins   <= '0;
      {wo, g, l, m, ph, step} <= '0;
      done  <= 1'b0;
      tok_valid <= 1'b0;
      tok_op <= MO_INIT;
      tok_lane_en <= '0;
      tok_lane_bank <= '0;
    end else begin
      done      <= 1'b0;
      tok_valid <= (state == S_INIT) || ((state == S_READ) && rd_req.req && rd_gnt);
      tok_op    <= (state == S_INIT) ? MO_INIT : op;
      tok_lane_en   <= lane_ok;
      tok_lane_bank <= lane_bank;
      case (state)
        S_IDLE: if (start) begin
          ins <= instr;
          {wo, g, l, m, ph, step} <= '0;
          state <= S_INIT;
        end
        S_INIT: state <= S_READ;
        S_READ: if (!rd_req.req || rd_gnt) begin
          if (last_step) state <= S_DRAIN;
          if (int'(ph) != nph - 1) ph <= ph + 4'd1;
          else begin
            ph <= '0;
            if (int'(m) != kw_e - 1) m <= m + 4'd1;
            else begin
              m <= '0;
              if (int'(l) != kh_e - 1) l <= l + 4'd1;
              else begin
                l <= '0;
                step <= ~step & (mode == MISC_ELTADD);
              end
            end
          end
        end
        S_DRAIN: state <= S_WRITE;
        S_WRITE: if (wr_gnt) begin
          if (g != ins.icg - 8'd1) begin
            g <= g + 8'd1;
            state <= S_INIT;
          end else begin
            g <= '0;
            if (wo != ins.out_w - 8'd1) begin
              wo <= wo + 8'd1;
              state <= S_INIT;
            end else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
