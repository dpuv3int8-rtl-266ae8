// fm_arbiter: shares the read port and the write port of each FM memory.
//
// Three units read the FM (CONV, MISC, SAVE) and three write it (LOAD, CONV,
// MISC). Each names the memory it wants in its request and holds the request
// until it is granted. Per memory and per port, a rotating priority picks one
// requester each cycle, so no unit waits for ever behind a long operation of
// another. The winner's enables and addresses are forwarded to the memory.
// The same decision holds for all PEs, which run in lock step, so a single
// arbiter serves the whole engine.
//
// Timing: grants are combinational in the cycle of the request. rd_valid[r]
// rises one cycle after a read grant, together with the memory's data, and
// rd_mem[r] tells which memory that data comes from. The architecture fixes
// one read and one write port per memory; how they are shared is this
// design's choice.
module fm_arbiter
  import dpu_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  fm_req_t [NRQ-1:0]      rd_req,
  output logic    [NRQ-1:0]      rd_gnt,
  input  fm_req_t [NWQ-1:0]      wr_req,
  output logic    [NWQ-1:0]      wr_gnt,
  // to the memories
  output fm_req_t [NMEM-1:0]     mem_rd,
  output fm_req_t [NMEM-1:0]     mem_wr,
  output logic [NMEM-1:0][1:0]   mem_wr_sel,   // which writer owns memory m
  // read return
  output logic    [NRQ-1:0]      rd_valid,
  output logic [NRQ-1:0][1:0]    rd_mem
);
  logic [NMEM-1:0][1:0] rd_ptr, wr_ptr;   // requester with top priority

  // Pick, among requesters asking for memory m, the first at or after ptr.
  function automatic logic [2:0] pick(fm_req_t [2:0] rq, logic [1:0] m, logic [1:0] ptr);
    for (int k = 0; k < 3; k++) begin
      int i;
      i = (int'(ptr) + k) % 3;
      if (rq[i].req && rq[i].mem == m) return {1'b1, 2'(i)};
    end
    return 3'b000;
  endfunction

  logic [NMEM-1:0][1:0] rd_win;   // reader that owns memory m this cycle

  always_comb begin
    rd_win = '0;
    rd_gnt = '0;
    wr_gnt = '0;
    mem_rd = '0;
    mem_wr = '0;
    mem_wr_sel = '0;
    for (int m = 0; m < NMEM; m++) begin
      logic [2:0] pr, pw;
      pr = pick(rd_req, 2'(m), rd_ptr[m]);
      pw = pick(wr_req, 2'(m), wr_ptr[m]);
      if (pr[2]) begin
        rd_gnt[pr[1:0]] = 1'b1;
        rd_win[m] = pr[1:0];
        mem_rd[m] = rd_req[pr[1:0]];
      end
      if (pw[2]) begin
        wr_gnt[pw[1:0]] = 1'b1;
        mem_wr[m] = wr_req[pw[1:0]];
        mem_wr_sel[m] = pw[1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr   <= '0;
      wr_ptr   <= '0;
      rd_valid <= '0;
      rd_mem   <= '0;
    end else begin
      rd_valid <= rd_gnt;
      for (int r = 0; r < NRQ; r++) if (rd_gnt[r]) rd_mem[r] <= rd_req[r].mem;
      // The pointer moves past the winner, so it becomes lowest priority.
      for (int m = 0; m < NMEM; m++) begin
        if (mem_rd[m].req) rd_ptr[m] <= 2'((int'(rd_win[m]) + 1) % 3);
        if (mem_wr[m].req) wr_ptr[m] <= 2'((int'(mem_wr_sel[m]) + 1) % 3);
      end
    end
  end

  // A granted request never asks for a memory that does not exist.
  for (genvar r = 0; r < NRQ; r++) begin : g_chk
    a_rd_mem: assert property (@(posedge clk) disable iff (!rst_n) rd_req[r].req |-> int'(rd_req[r].mem) < NMEM);
    a_wr_mem: assert property (@(posedge clk) disable iff (!rst_n) wr_req[r].req |-> int'(wr_req[r].mem) < NMEM);
  end
endmodule
