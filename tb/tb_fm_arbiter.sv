// tb_fm_arbiter: random readers and writers hold requests for random FM
// memories until granted. Checks every cycle that each memory port is given
// to exactly one requester when anyone asks for it, that the forwarded
// enables and addresses are the winner's, that the write selector names the
// winner, that rd_valid / rd_mem follow a read grant one cycle later, and
// that with rotating priority no requester waits more than two cycles.
module tb_fm_arbiter;
  import dpu_pkg::*;
  logic clk = 0, rst_n = 0;
  fm_req_t [NRQ-1:0] rd_req;
  logic [NRQ-1:0] rd_gnt, rd_valid;
  fm_req_t [NWQ-1:0] wr_req;
  logic [NWQ-1:0] wr_gnt;
  fm_req_t [NMEM-1:0] mem_rd, mem_wr;
  logic [NMEM-1:0][1:0] mem_wr_sel;
  logic [NRQ-1:0][1:0] rd_mem;
  int checks = 0, failures = 0;
  int rwait [NRQ], wwait [NWQ];
  logic [NRQ-1:0] gnt_q = '0, wgnt_q = '0;
  logic [NRQ-1:0][1:0] mem_q;
  always #5 clk = ~clk;
  fm_arbiter dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%0t %s", $time, what);
    end
  endtask

  function automatic fm_req_t rreq(bit on);
    fm_req_t r;
    r.req = on;
    r.mem = 2'($urandom_range(0, NMEM - 1));
    r.en  = 8'($urandom);
    for (int b = 0; b < NBANK; b++) r.addr[b] = FM_AW'($urandom);
    return r;
  endfunction

  initial begin
    rd_req = '0; wr_req = '0; gnt_q = '0; mem_q = '0;
    for (int i = 0; i < NRQ; i++) begin rwait[i] = 0; wwait[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < NRQ; i++) begin
        if (gnt_q[i]) rd_req[i].req = 1'b0;
        if (wgnt_q[i]) wr_req[i].req = 1'b0;
      end
      for (int i = 0; i < NRQ; i++) if (!rd_req[i].req) rd_req[i] = rreq($urandom_range(0, 2) != 0);
      for (int i = 0; i < NWQ; i++) if (!wr_req[i].req) wr_req[i] = rreq($urandom_range(0, 2) != 0);
      #1;
      // read-back of the previous cycle's grants
      for (int i = 0; i < NRQ; i++) begin
        chk(rd_valid[i] == gnt_q[i], "rd_valid");
        if (gnt_q[i]) chk(rd_mem[i] == mem_q[i], "rd_mem");
      end
      for (int m = 0; m < NMEM; m++) begin
        int nr, nw, askr, askw;
        nr = 0; nw = 0; askr = 0; askw = 0;
        for (int i = 0; i < NRQ; i++) begin
          if (rd_req[i].req && rd_req[i].mem == 2'(m)) askr++;
          if (rd_gnt[i] && rd_req[i].mem == 2'(m)) begin
            nr++;
            chk(mem_rd[m] == rd_req[i], "mem_rd forwards winner");
          end
          if (wr_req[i].req && wr_req[i].mem == 2'(m)) askw++;
          if (wr_gnt[i] && wr_req[i].mem == 2'(m)) begin
            nw++;
            chk(mem_wr[m] == wr_req[i], "mem_wr forwards winner");
            chk(mem_wr_sel[m] == 2'(i), "mem_wr_sel");
          end
        end
        chk(nr == (askr > 0 ? 1 : 0), "one read grant per memory");
        chk(nw == (askw > 0 ? 1 : 0), "one write grant per memory");
        if (askr == 0) chk(!mem_rd[m].req, "idle read port");
      end
      for (int i = 0; i < NRQ; i++) begin
        if (rd_gnt[i]) chk(rd_req[i].req, "grant without request");
        rwait[i] = (rd_req[i].req && !rd_gnt[i]) ? rwait[i] + 1 : 0;
        wwait[i] = (wr_req[i].req && !wr_gnt[i]) ? wwait[i] + 1 : 0;
        chk(rwait[i] <= 2 && wwait[i] <= 2, "starvation");
      end
      gnt_q = rd_gnt;
      wgnt_q = wr_gnt;
      for (int i = 0; i < NRQ; i++) mem_q[i] = rd_req[i].mem;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
