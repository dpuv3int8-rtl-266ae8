// load_unit: the LOAD functional unit, DDR to FM or DDR to PM.
//
// One LOAD instruction moves a tensor tile of out_h rows into the FM of all
// NPE PEs at once (one tensor per PE), or a block of parameters into the PM.
// DDR addresses are word offsets inside one of the five DDR regions (inputs,
// outputs, parameters, instructions, swap) whose base pointers come from
// registers; the tensor of PE p is batch_stride words after that of PE 0.
//   FM, plain:   row i, word k comes from base + ddr_off + i*ddr_rstride + k
//                and goes to row i, word k of the dst descriptor; out_w words
//                per row.
//   FM, format:  mode bit 1 set and 1 <= fmt_ch <= 8. Row i is a dense byte
//                string of out_w pixels of fmt_ch bytes; the format units cut
//                it into one vector word per pixel. With more than 8 channels
//                the format path is never used.
//   PM:          mode bit 0 set. out_h*out_w PM words, each from 8
//                consecutive DDR words, to PM words w_addr, w_addr+1, ...
// Reads to DDR are tagged ID_LOAD; at most one word group (NPE words, or 8
// for the PM) is in flight, and it is written to the FM (held until granted)
// or the PM before the next group is requested.
//
// The unit only reads DDR: the write enable and write data of ddr_req are
// constant zero and its id is ID_LOAD.
//
// Interface: start while idle, done pulse at the end. Timing: per FM word
// group NPE request cycles, the DDR latency and one write cycle.
// Which memory-level moves LOAD does follows the architecture; the grouping,
// the region scheme's encoding and the pacing are this design's own.
module load_unit
  import dpu_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  instr_t                       instr,
  output logic                         busy,
  output logic                         done,
  input  logic [NREGION-1:0][DDR_AW-1:0] region_base,
  input  logic [DDR_AW-1:0]            batch_stride,
  // DDR
  output ddr_req_t                     ddr_req,
  input  logic                         ddr_ready,
  input  logic                         rsp_valid,
  input  logic [DDR_W-1:0]             rsp_data,
  // FM
  output fm_req_t                      wr_req,
  input  logic                         wr_gnt,
  output bankvec_t [NPE-1:0]           wdata,
  // PM
  output logic                         pm_wr_en,
  output logic [PM_AW-1:0]             pm_wr_addr,
  output logic [PM_W-1:0]              pm_wr_data
);
  typedef enum logic [1:0] { S_IDLE, S_FETCH, S_PUSH, S_WRITE } state_e;
  state_e state;
  instr_t ins;
  logic   to_pm, fmt;
  logic [7:0]  row;
  logic [15:0] k;        // FM word / pixel in the row, or PM word
  logic [15:0] kw;       // DDR word in the row (format path)
  logic [3:0]  n_iss, n_got;
  logic [7:0][DDR_W-1:0] buf_q;
  int          ngrp;

  // format units, one per PE
  logic              f_clear, f_push, f_pop;
  logic [NPE-1:0][4:0] f_count;
  vec_t [NPE-1:0]    f_pixel;

  for (genvar p = 0; p < NPE; p++) begin : g_fmt
    format_unit u_fmt (
      .clk       (clk),
      .rst_n     (rst_n),
      .clear     (f_clear),
      .ch        (ins.fmt_ch),
      .push      (f_push),
      .push_data (buf_q[p]),
      .pop       (f_pop),
      .count     (f_count[p]),
      .pixel     (f_pixel[p])
    );
  end

  logic need_bytes, advance, last_k, last_row;
  assign need_bytes = int'(f_count[0]) < int'(ins.fmt_ch);
  assign ngrp = to_pm ? 8 : NPE;
  assign busy = (state != S_IDLE);

  // DDR read address of the next word of the group
  logic [DDR_AW-1:0] rd_addr;
  always_comb begin
    int a;
    a = int'(region_base[ins.region]) + int'(ins.ddr_off);
    if (to_pm) a = a + (int'(k) * 8) + int'(n_iss);
    else       a = a + int'(n_iss) * int'(batch_stride) + int'(row) * int'(ins.ddr_rstride) +
                   (fmt ? int'(kw) : int'(k));
    rd_addr = DDR_AW'(a);
  end

  // LOAD only reads: write enable and write data stay zero
  assign ddr_req = '{valid: (state == S_FETCH) && (int'(n_iss) < ngrp), we: 1'b0, id: ID_LOAD,
                     addr: rd_addr, wdata: '0};

  always_comb begin

    wr_req      = '0;
    wr_req.req  = (state == S_WRITE) && !to_pm && !(fmt && need_bytes);
    wr_req.mem  = ins.dst.mem;
    wr_req.en[row_bank(ins.dst, int'(row))]   = 1'b1;
    wr_req.addr[row_bank(ins.dst, int'(row))] = elem_addr(ins.dst, int'(row), 0, int'(k));
    for (int p = 0; p < NPE; p++)
      for (int b = 0; b < NBANK; b++) wdata[p][b] = fmt ? f_pixel[p] : buf_q[p];

    pm_wr_en   = (state == S_WRITE) && to_pm;
    pm_wr_addr = PM_AW'(int'(ins.w_addr) + int'(k));
    pm_wr_data = buf_q;

    last_k   = to_pm ? (int'(k) == int'(ins.out_h) * int'(ins.out_w) - 1)
                     : (int'(k) == int'(ins.out_w) - 1);
    last_row = to_pm || (row == ins.out_h - 8'd1);

  end

  // Grant-dependent strobes kept apart from the request logic above.
  assign advance = (state == S_WRITE) && !(fmt && need_bytes) && (to_pm || wr_gnt);
  assign f_clear = (state == S_IDLE) || (advance && last_k && !last_row);
  assign f_push  = (state == S_PUSH);
  assign f_pop   = (state == S_WRITE) && !to_pm && fmt && !need_bytes && wr_gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ins   <= '0;
      {to_pm, fmt} <= '0;
      {row, k, kw, n_iss, n_got} <= '0;
      buf_q <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (ddr_req.valid && ddr_ready) n_iss <= n_iss + 4'd1;
      if (rsp_valid) begin
        buf_q[n_got] <= rsp_data;
        n_got <= n_got + 4'd1;
      end
      case (state)
        S_IDLE: if (start) begin
          ins   <= instr;
          to_pm <= instr.mode[0];
          fmt   <= !instr.mode[0] && instr.mode[1] && instr.fmt_ch != 0 && instr.fmt_ch <= 4'd8;
          {row, k, kw, n_iss, n_got} <= '0;
          state <= S_FETCH;
        end
        S_FETCH: if (int'(n_got) == ngrp || (rsp_valid && int'(n_got) == ngrp - 1)) begin
          state <= fmt ? S_PUSH : S_WRITE;
        end
        S_PUSH: begin
          kw    <= kw + 16'd1;
          state <= S_WRITE;
        end
        S_WRITE: begin
          if (fmt && need_bytes) begin
            n_iss <= '0;
            n_got <= '0;
            state <= S_FETCH;
          end else if (advance) begin
            n_iss <= '0;
            n_got <= '0;
            if (!last_k) begin
              k     <= k + 16'd1;
              state <= fmt ? S_WRITE : S_FETCH;
            end else if (!last_row) begin
              k     <= '0;
              kw    <= '0;
              row   <= row + 8'd1;
              state <= S_FETCH;
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
