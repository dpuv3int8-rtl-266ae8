// tb_dispatcher: runs an instruction stream through the dispatcher against a
// DDR model and four mock units that stay busy for a random number of cycles.
// The stream is a software pipeline of tiles, LOAD -> CONV -> MISC -> SAVE,
// where each stage waits (DPON) for the previous one and a LOAD of tile t
// also waits for the SAVE of tile t-2 to free its buffer; one MISC is a
// no-operation that only passes tokens on, and one word with an unknown
// opcode must be skipped. The testbench checks, independently of the
// dispatcher's counters, that every real instruction starts exactly once, in
// its queue's order, never while its unit is busy, and only after the
// producer whose token it takes has finished (pairing the k-th consumer with
// the k-th producer of each type pair). It also checks that done comes after
// all units have finished and that units did run in parallel.
module tb_dispatcher;
  import dpu_pkg::*;

  localparam int NT = 7;          // tiles

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start, busy, done;
  ddr_req_t ddr_req;
  logic ddr_ready;
  ddr_rsp_t ddr_rsp;
  logic [NUNIT-1:0] unit_start, unit_busy, unit_done, waiting;
  instr_t [NUNIT-1:0] unit_instr;
  logic [DDR_AW-1:0] instr_base;

  dispatcher dut (
    .clk(clk), .rst_n(rst_n), .start(start), .instr_base(instr_base), .busy(busy), .done(done),
    .ddr_req(ddr_req), .ddr_ready(ddr_ready),
    .rsp_valid(ddr_rsp.rvalid && ddr_rsp.rid == ID_FETCH), .rsp_data(ddr_rsp.rdata),
    .unit_start(unit_start), .unit_instr(unit_instr), .unit_busy(unit_busy), .unit_done(unit_done),
    .waiting(waiting));

  ddr_model #(.AW(14), .LAT(3), .STALL(1'b1)) u_ddr (
    .clk(clk), .rst_n(rst_n), .req(ddr_req), .ready(ddr_ready), .rsp(ddr_rsp));

  // program, indexed by tag (program position)
  instr_t prog [$];
  longint t_start [int];
  longint t_done  [int];
  int     run_tag [NUNIT];
  int     cnt     [NUNIT];
  int     started_order [NUNIT][$];
  int     parallel = 0, waits = 0;

  // mock units
  always @(posedge clk) begin
    if (rst_n) begin
      for (int u = 0; u < NUNIT; u++) begin
        unit_done[u] <= 1'b0;
        if (unit_busy[u]) begin
          if (cnt[u] == 0) begin
            unit_busy[u] <= 1'b0;
            unit_done[u] <= 1'b1;
            t_done[run_tag[u]] = cyc;
          end else cnt[u]--;
        end
        if (unit_start[u]) begin
          checks++;
          if (unit_busy[u]) begin
            failures++;
            $display("unit %0d started while busy", u);
          end
          run_tag[u] = int'(unit_instr[u].ddr_off);
          t_start[run_tag[u]] = cyc;
          started_order[u].push_back(run_tag[u]);
          cnt[u] = $urandom_range(10, 60);
          unit_busy[u] <= 1'b1;
        end
      end
      if ($countones(unit_busy) >= 2) parallel++;
      if (waiting != '0) waits++;
    end else begin
      unit_busy <= '0;
      unit_done <= '0;
    end
  end

  function automatic instr_t mk(opcode_e op, int tag, logic [3:0] dpon, logic [3:0] dpby, bit nop);
    instr_t i;
    i = '0; i.op = op; i.ddr_off = 32'(tag); i.dpon = dpon; i.dpby = dpby; i.nop = nop;
    return i;
  endfunction

  localparam logic [3:0] B_LOAD = 4'b0001 << U_LOAD, B_SAVE = 4'b0001 << U_SAVE,
                         B_CONV = 4'b0001 << U_CONV, B_MISC = 4'b0001 << U_MISC;

  function automatic int unit_of(instr_t i);
    case (i.op)
      OP_LOAD: return U_LOAD;
      OP_SAVE: return U_SAVE;
      OP_CONV: return U_CONV;
      default: return U_MISC;
    endcase
  endfunction

  initial begin
    int n;
    start = 0; instr_base = DDR_AW'(200);
    for (int t = 0; t < NT; t++) begin
      prog.push_back(mk(OP_LOAD, prog.size(), (t >= 2) ? B_SAVE : 4'b0, B_CONV, 1'b0));
      prog.push_back(mk(OP_CONV, prog.size(), B_LOAD, B_MISC, 1'b0));
      if (t == 3) prog.push_back(mk(OP_NOP, prog.size(), 4'b0, 4'b0, 1'b0));   // unknown: skipped
      prog.push_back(mk(OP_MISC, prog.size(), B_CONV, B_SAVE, t == 1));
      prog.push_back(mk(OP_SAVE, prog.size(), B_MISC, (t < NT - 2) ? B_LOAD : 4'b0, 1'b0));
    end
    prog.push_back(mk(OP_END, prog.size(), 4'b0, 4'b0, 1'b0));
    for (int k = 0; k < 2**14; k++) u_ddr.mem[k] = '0;
    for (int k = 0; k < prog.size(); k++)
      for (int j = 0; j < INSTR_WORDS; j++) u_ddr.mem[200 + k * INSTR_WORDS + j] = prog[k][j*64 +: 64];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (unit_busy != '0) begin failures++; $display("done while a unit is busy"); end

    // every real instruction started once, in queue order
    for (int u = 0; u < NUNIT; u++) begin
      int exp [$];
      exp.delete();
      foreach (prog[k]) if (prog[k].op inside {OP_LOAD, OP_SAVE, OP_CONV, OP_MISC} && !prog[k].nop &&
                            unit_of(prog[k]) == u) exp.push_back(k);
      checks++;
      if (exp != started_order[u]) begin
        failures++;
        $display("unit %0d: %0d instructions started, %0d expected, or out of order", u,
                 started_order[u].size(), exp.size());
      end
    end
    // token pairing: the k-th consumer of (p, c) starts after the k-th producer finished
    begin
      longint ready [int];
      int prod [NUNIT][NUNIT][$];
      foreach (prog[k]) begin
        int c;
        longint r;
        if (!(prog[k].op inside {OP_LOAD, OP_SAVE, OP_CONV, OP_MISC})) continue;
        c = unit_of(prog[k]);
        r = 0;
        for (int p = 0; p < NUNIT; p++) if (prog[k].dpon[p]) begin
          int pk;
          checks++;
          if (prod[p][c].size() == 0) begin failures++; $display("no producer for %0d", k); continue; end
          pk = prod[p][c].pop_front();
          if (ready[pk] > r) r = ready[pk];
          if (!prog[k].nop && !(t_start.exists(k) && t_start[k] > ready[pk])) begin
            failures++;
            $display("instr %0d started at %0d, its producer %0d was ready at %0d", k,
                     t_start.exists(k) ? t_start[k] : -1, pk, ready[pk]);
          end
        end
        ready[k] = prog[k].nop ? r : (t_done.exists(k) ? t_done[k] : 64'h7fffffff);
        for (int q = 0; q < NUNIT; q++) if (prog[k].dpby[q]) prod[c][q].push_back(k);
      end
    end
    checks++;
    if (parallel == 0 || waits == 0) begin
      failures++;
      $display("parallel cycles %0d, dependency waits %0d", parallel, waits);
    end
    $display("parallel cycles %0d, dependency waits %0d", parallel, waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
