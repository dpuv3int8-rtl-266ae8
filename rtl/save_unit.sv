// save_unit: the SAVE functional unit, FM to DDR.
//
// One SAVE instruction moves a tile of out_h rows of out_w words from the FM
// of all NPE PEs to DDR, the tensor of PE p batch_stride words after that of
// PE 0. Row i, word k of the src descriptor goes to
// region_base[region] + ddr_off + p*batch_stride + i*ddr_rstride + k.
// Per word the unit reads the FM (one bank of one memory, the same in every
// PE, held until granted), takes the NPE words one cycle later and writes
// them to DDR one after the other (posted writes tagged ID_SAVE).
//
// The unit only writes DDR: the write enable and the id ID_SAVE of ddr_req
// are constants.
//
// Interface: start while idle, done pulse once the last DDR write has been
// accepted. Timing: per word one read cycle (plus waiting for the grant), one
// data cycle and NPE write cycles when DDR is ready. SAVE's function follows
// the architecture; the pacing is this design's own.
module save_unit
  import dpu_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  instr_t                         instr,
  output logic                           busy,
  output logic                           done,
  input  logic [NREGION-1:0][DDR_AW-1:0] region_base,
  input  logic [DDR_AW-1:0]              batch_stride,
  // FM
  output fm_req_t                        rd_req,
  input  logic                           rd_gnt,
  input  logic                           rd_valid,
  input  bankvec_t [NPE-1:0]             rdata,
  // DDR
  output ddr_req_t                       ddr_req,
  input  logic                           ddr_ready
);
  typedef enum logic [1:0] { S_IDLE, S_READ, S_WAIT, S_WRITE } state_e;
  state_e state;
  instr_t ins;
  logic [7:0]  row;
  logic [15:0] k;
  logic [2:0]  p;
  logic [2:0]  bank_q;
  logic [NPE-1:0][VEC_W-1:0] data_q;

  assign busy = (state != S_IDLE);

  always_comb begin
    int a;
    rd_req     = '0;
    rd_req.req = (state == S_READ);
    rd_req.mem = ins.src.mem;
    rd_req.en[row_bank(ins.src, int'(row))]   = 1'b1;
    rd_req.addr[row_bank(ins.src, int'(row))] = elem_addr(ins.src, int'(row), 0, int'(k));

    a = int'(region_base[ins.region]) + int'(ins.ddr_off) + int'(p) * int'(batch_stride) +
        int'(row) * int'(ins.ddr_rstride) + int'(k);
    ddr_req       = '0;
    ddr_req.valid = (state == S_WRITE);
    ddr_req.we    = 1'b1;
    ddr_req.id    = ID_SAVE;
    ddr_req.addr  = DDR_AW'(a);
    ddr_req.wdata = data_q[p[1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      ins    <= '0;
      {row, k, p, bank_q} <= '0;
      data_q <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          ins <= instr;
          {row, k, p} <= '0;
          state <= S_READ;
        end
        S_READ: if (rd_gnt) begin
          bank_q <= row_bank(ins.src, int'(row));
          state  <= S_WAIT;
        end
        S_WAIT: if (rd_valid) begin
          for (int q = 0; q < NPE; q++) data_q[q] <= rdata[q][bank_q];
          p     <= '0;
          state <= S_WRITE;
        end
        S_WRITE: if (ddr_ready) begin
          if (int'(p) != NPE - 1) p <= p + 3'd1;
          else begin
            p <= '0;
            if (k != 16'(ins.out_w) - 16'd1) begin
              k <= k + 16'd1;
              state <= S_READ;
            end else if (row != ins.out_h - 8'd1) begin
              k <= '0;
              row <= row + 8'd1;
              state <= S_READ;
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
