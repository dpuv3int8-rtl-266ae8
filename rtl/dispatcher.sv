// dispatcher: instruction fetch, the four unit queues and issue.
//
// After start, the dispatcher reads instructions from DDR, INSTR_WORDS words
// each, from instr_base on, and appends each one to the queue of its unit
// (LOAD, SAVE, CONV, MISC) until it meets OP_END; opcodes it does not know
// are skipped. Every queue issues its head to its unit, in order, as soon as
// the unit is idle and dep_sync says the head's DPON tokens are there; a head
// marked nop is retired at once. So the units run in parallel and meet only
// where the compiler put DPON / DPBY pairs. done pulses once OP_END has been
// read, all queues are empty and all units idle.
//
// Interface: DDR reads tagged ID_FETCH through the ddr_arbiter; per unit a
// start pulse with the queue head on unit_instr, and the unit's busy and done.
// Timing: one instruction per INSTR_WORDS request cycles plus the DDR
// latency; issue is combinational from the queue heads.
// The dispatcher only reads DDR: the write enable and write data of ddr_req
// are constant zero and its id is the constant ID_FETCH.
// Four queues and type-based synchronisation follow the architecture; the
// fetch scheme, queue depth and encoding are this design's own.
module dispatcher
  import dpu_pkg::*;
#(
  parameter int QDEPTH = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [DDR_AW-1:0]       instr_base,
  output logic                    busy,
  output logic                    done,
  // DDR
  output ddr_req_t                ddr_req,
  input  logic                    ddr_ready,
  input  logic                    rsp_valid,
  input  logic [DDR_W-1:0]        rsp_data,
  // units, indexed by unit_e
  output logic   [NUNIT-1:0]      unit_start,
  output instr_t [NUNIT-1:0]      unit_instr,
  input  logic   [NUNIT-1:0]      unit_busy,
  input  logic   [NUNIT-1:0]      unit_done,
  // activity, for observation
  output logic   [NUNIT-1:0]      waiting      // head held back by DPON
);
  typedef enum logic [1:0] { F_IDLE, F_FETCH, F_PUSH, F_DRAIN } fstate_e;
  fstate_e fstate;
  logic [DDR_AW-1:0] pc;
  logic [3:0] n_iss, n_got;
  logic [INSTR_WORDS-1:0][DDR_W-1:0] ibuf;
  instr_t ins;
  logic [1:0] qsel;
  logic       qvalid;

  logic [NUNIT-1:0] q_push, q_pop, q_empty, q_full, ok, issue;
  logic [NUNIT-1:0][3:0] h_dpon, h_dpby;
  logic [NUNIT-1:0]      h_nop;

  assign ins = instr_t'(ibuf);

  always_comb begin
    qvalid = 1'b1;
    case (ins.op)
      OP_LOAD: qsel = U_LOAD;
      OP_SAVE: qsel = U_SAVE;
      OP_CONV: qsel = U_CONV;
      OP_MISC: qsel = U_MISC;
      default: begin qsel = U_LOAD; qvalid = 1'b0; end
    endcase
    ddr_req       = '0;
    ddr_req.valid = (fstate == F_FETCH) && (int'(n_iss) < INSTR_WORDS);
    ddr_req.id    = ID_FETCH;
    ddr_req.addr  = pc + DDR_AW'(n_iss);
    q_push = '0;
    if (fstate == F_PUSH && qvalid && !q_full[qsel]) q_push[qsel] = 1'b1;
  end

  for (genvar u = 0; u < NUNIT; u++) begin : g_q
    sync_fifo #(.T(instr_t), .DEPTH(QDEPTH)) u_q (
      .clk   (clk),
      .rst_n (rst_n),
      .push  (q_push[u]),
      .din   (ins),
      .pop   (q_pop[u]),
      .dout  (unit_instr[u]),
      .empty (q_empty[u]),
      .full  (q_full[u])
    );
    assign h_dpon[u] = unit_instr[u].dpon;
    assign h_dpby[u] = unit_instr[u].dpby;
    assign h_nop[u]  = unit_instr[u].nop;
    assign issue[u]  = !q_empty[u] && ok[u] && !unit_busy[u];
    assign q_pop[u]  = issue[u];
    assign unit_start[u] = issue[u] && !h_nop[u];
    assign waiting[u] = !q_empty[u] && !ok[u] && !unit_busy[u];
  end

  dep_sync u_dep (
    .clk       (clk),
    .rst_n     (rst_n),
    .head_dpon (h_dpon),
    .head_dpby (h_dpby),
    .ok        (ok),
    .issue     (issue),
    .issue_nop (h_nop),
    .unit_done (unit_done)
  );

  assign busy = (fstate != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fstate <= F_IDLE;
      pc     <= '0;
      n_iss  <= '0;
      n_got  <= '0;
      ibuf   <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (ddr_req.valid && ddr_ready) n_iss <= n_iss + 4'd1;
      if (rsp_valid) begin
        ibuf[n_got[$clog2(INSTR_WORDS)-1:0]] <= rsp_data;
        n_got <= n_got + 4'd1;
      end
      case (fstate)
        F_IDLE: if (start) begin
          pc     <= instr_base;
          n_iss  <= '0;
          n_got  <= '0;
          fstate <= F_FETCH;
        end
        F_FETCH: if (int'(n_got) == INSTR_WORDS) fstate <= F_PUSH;
        F_PUSH: begin
          if (ins.op == OP_END) fstate <= F_DRAIN;
          else if (!qvalid || !q_full[qsel]) begin
            pc     <= pc + DDR_AW'(INSTR_WORDS);
            n_iss  <= '0;
            n_got  <= '0;
            fstate <= F_FETCH;
          end
        end
        F_DRAIN: if (q_empty == '1 && unit_busy == '0 && issue == '0) begin
          fstate <= F_IDLE;
          done   <= 1'b1;
        end
        default: fstate <= F_IDLE;
      endcase
    end
  end
endmodule
