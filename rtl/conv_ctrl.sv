// conv_ctrl: controller of the CONV unit.
//
// Runs one CONV instruction: an output tile of out_h <= NBANK rows, out_w
// columns and ocg groups of CP output channels, computed from a kh x kw
// window with strides str_h, str_w and top/left padding pad_t, pad_l over an input
// tile of in_h x in_w pixels and icg channel groups. Output row r of the tile
// is lane r of conv_array in every PE, so up to eight rows are produced in
// parallel; the instruction is one leaf of the compiler's width / height /
// weight splitting.
//
// For every output column and channel group the controller
//   1. reads the bias word from the PM (clr token),
//   2. walks the window (kernel row l, kernel column m, input group g) and,
//      per step, reads one input word per lane in one FM access together with
//      the matching CP x CP weight block (acc token); lanes whose input pixel
//      falls in the padding are disabled, so they add zero,
//   3. waits one cycle for the last sum and writes the eight lane results.
// With vertical stride s, lanes r and r + NBANK/s would need the same bank at
// different words, so each window step is split into s phases of NBANK/s
// lanes (strides 1, 2, 4 and 8 are supported). Weight block for (group o,
// kernel row l, column m, input group g) sits at PM word
// w_addr + ((o*kh + l)*kw + m)*icg + g; bias of group o at b_addr + o.
//
// Interface: start with the instruction for one cycle while idle; done pulses
// when the last result is written. FM accesses are held until granted.
// Timing per output column and group: 1 + kh*kw*icg*phases + 2 cycles when
// no other unit competes for the memory ports. The loop order and the cycle
// schedule are this design's own; the 8-row tile follows the architecture.
module conv_ctrl
  import dpu_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  instr_t                 instr,
  output logic                   busy,
  output logic                   done,
  // FM
  output fm_req_t                rd_req,
  input  logic                   rd_gnt,
  output fm_req_t                wr_req,
  input  logic                   wr_gnt,
  // PM
  output logic                   pm_rd_en,
  output logic [PM_AW-1:0]       pm_rd_addr,
  // to the PEs (aligned with the read data)
  output logic                   tok_clr,
  output logic                   tok_acc,
  output logic [NBANK-1:0]       tok_lane_en,
  output logic [NBANK-1:0][2:0]  tok_lane_bank,
  output logic [4:0]             out_shift,
  output logic                   out_relu,
  output logic [2:0]             out_wrot
);
  typedef enum logic [2:0] { S_IDLE, S_BIAS, S_READ, S_DRAIN, S_WRITE } state_e;
  state_e state;
  instr_t ins;
  logic [7:0] oc, wo, g;
  logic [3:0] l, m, ph;

  int lpp, nph;
  logic [NBANK-1:0]      lane_ok;
  logic [NBANK-1:0][2:0] lane_bank;
  logic                  last_step;

  always_comb begin
    lpp = lanes_per_phase(ins.str_h);
    nph = NBANK / lpp;
    rd_req = '0;
    lane_ok = '0;
    lane_bank = '0;
    for (int r = 0; r < NBANK; r++) begin
      int y, x;
      y = r * int'(ins.str_h) + int'(l) - int'(ins.pad_t);
      x = int'(wo) * int'(ins.str_w) + int'(m) - int'(ins.pad_l);
      lane_bank[r] = row_bank(ins.src, y < 0 ? 0 : y);
      if (r < int'(ins.out_h) && (r / lpp) == int'(ph) &&
          y >= 0 && y < int'(ins.in_h) && x >= 0 && x < int'(ins.in_w)) begin
        lane_ok[r] = 1'b1;
        rd_req.en[lane_bank[r]]   = 1'b1;
        rd_req.addr[lane_bank[r]] = elem_addr(ins.src, y, x, int'(g));
      end
    end
    rd_req.mem = ins.src.mem;
    rd_req.req = (state == S_READ) && (lane_ok != '0);
    last_step = (int'(ph) == nph - 1) && (g == ins.icg - 8'd1) &&
                (m == ins.kw - 4'd1) && (l == ins.kh - 4'd1);

    wr_req = '0;
    wr_req.mem = ins.dst.mem;
    wr_req.req = (state == S_WRITE);
    for (int r = 0; r < NBANK; r++) begin
      if (r < int'(ins.out_h)) begin
        wr_req.en[row_bank(ins.dst, r)]   = 1'b1;
        wr_req.addr[row_bank(ins.dst, r)] = elem_addr(ins.dst, r, int'(wo), int'(oc));
      end
    end

    pm_rd_en   = 1'b0;
    pm_rd_addr = '0;
    if (state == S_BIAS) begin
      pm_rd_en   = 1'b1;
      pm_rd_addr = PM_AW'(int'(ins.b_addr) + int'(oc));
    end else if (state == S_READ && rd_gnt) begin
      pm_rd_en   = 1'b1;
      pm_rd_addr = PM_AW'(int'(ins.w_addr) +
                   ((int'(oc) * int'(ins.kh) + int'(l)) * int'(ins.kw) + int'(m)) * int'(ins.icg) + int'(g));
    end
  end

  assign busy      = (state != S_IDLE);
  assign out_shift = ins.shift;
  assign out_relu  = ins.relu;
  assign out_wrot  = ins.dst.bank;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ins   <= '0;
      {oc, wo, g, l, m, ph} <= '0;
      done  <= 1'b0;
      tok_clr <= 1'b0;
      tok_acc <= 1'b0;
      tok_lane_en <= '0;
      tok_lane_bank <= '0;
    end else begin
      done    <= 1'b0;
      tok_clr <= (state == S_BIAS);
      tok_acc <= (state == S_READ) && rd_req.req && rd_gnt;
      tok_lane_en   <= lane_ok;
      tok_lane_bank <= lane_bank;
      case (state)
        S_IDLE: if (start) begin
          ins <= instr;
          {oc, wo, g, l, m, ph} <= '0;
          state <= S_BIAS;
        end
        S_BIAS: state <= S_READ;
        S_READ: if (!rd_req.req || rd_gnt) begin
          if (last_step) state <= S_DRAIN;
          if (int'(ph) != nph - 1) ph <= ph + 4'd1;
          else begin
            ph <= '0;
            if (g != ins.icg - 8'd1) g <= g + 8'd1;
            else begin
              g <= '0;
              if (m != ins.kw - 4'd1) m <= m + 4'd1;
              else begin
                m <= '0;
                if (l != ins.kh - 4'd1) l <= l + 4'd1;
                else l <= '0;
              end
            end
          end
        end
        S_DRAIN: state <= S_WRITE;
        S_WRITE: if (wr_gnt) begin
          if (wo != ins.out_w - 8'd1) begin
            wo <= wo + 8'd1;
            state <= S_BIAS;
          end else begin
            wo <= '0;
            if (oc != ins.ocg - 8'd1) begin
              oc <= oc + 8'd1;
              state <= S_BIAS;
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

  a_stride: assert property (@(posedge clk) disable iff (!rst_n)
    start && !busy |-> instr.str_h inside {4'd1, 4'd2, 4'd4, 4'd8});
endmodule
