// tb_dep_sync: random DPON / DPBY masks, issues, completions and
// no-operations on the four unit types, compared every cycle with a model of
// the token counters: ok must be high exactly when every producer named in
// the head's DPON has a token for that consumer, and a completion must give a
// token to every consumer named in the DPBY of the instruction that started.
module tb_dep_sync;
  import dpu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [NUNIT-1:0][3:0] head_dpon, head_dpby;
  logic [NUNIT-1:0] ok, issue, issue_nop, unit_done;
  int cnt [NUNIT][NUNIT];
  logic [3:0] run_by [NUNIT];
  bit running [NUNIT];
  int checks = 0, failures = 0, n_issue = 0, n_block = 0;
  always #5 clk = ~clk;
  dep_sync dut (.*);

  initial begin
    head_dpon = '0; head_dpby = '0; issue = '0; issue_nop = '0; unit_done = '0;
    for (int p = 0; p < NUNIT; p++) begin
      running[p] = 0;
      for (int c = 0; c < NUNIT; c++) cnt[p][c] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      bit e_ok [NUNIT];
      @(negedge clk);
      issue = '0; issue_nop = '0; unit_done = '0;
      for (int u = 0; u < NUNIT; u++) begin
        head_dpon[u] = 4'($urandom) & 4'($urandom);
        head_dpby[u] = 4'($urandom) & 4'($urandom);
        issue_nop[u] = $urandom_range(0, 5) == 0;
      end
      #1;
      for (int c = 0; c < NUNIT; c++) begin
        bit e;
        e = 1;
        for (int p = 0; p < NUNIT; p++) if (head_dpon[c][p] && cnt[p][c] == 0) e = 0;
        checks++;
        if (ok[c] != e) failures++;
        e_ok[c] = e;
        if (!e) n_block++;
      end
      // decide what happens this cycle
      for (int u = 0; u < NUNIT; u++) begin
        if (running[u] && $urandom_range(0, 2) == 0) unit_done[u] = 1;
        else if (!running[u] && ok[u] && e_ok[u] && $urandom_range(0, 1)) issue[u] = 1;
      end
      #1;
      // model update, counters bounded by the test: stop giving when high
      for (int u = 0; u < NUNIT; u++) begin
        if (issue[u]) begin
          n_issue++;
          for (int p = 0; p < NUNIT; p++) if (head_dpon[u][p]) cnt[p][u]--;
        end
      end
      for (int p = 0; p < NUNIT; p++) begin
        logic [3:0] by;
        bit fin;
        fin = unit_done[p] || (issue[p] && issue_nop[p]);
        by  = (issue[p] && issue_nop[p]) ? head_dpby[p] : run_by[p];
        if (fin) for (int c = 0; c < NUNIT; c++) if (by[c]) cnt[p][c]++;
        if (unit_done[p]) running[p] = 0;
        if (issue[p] && !issue_nop[p]) begin
          running[p] = 1;
          run_by[p] = head_dpby[p];
        end
      end
      // keep counters well inside 4 bits: drain by forcing consumers' DPON
      @(posedge clk);
      for (int p = 0; p < NUNIT; p++) for (int c = 0; c < NUNIT; c++) if (cnt[p][c] > 10) begin
        // a burst of consumers without producers brings it down
        @(negedge clk);
        issue = '0; issue_nop = '0; unit_done = '0; head_dpby = '0; head_dpon = '0;
        head_dpon[c][p] = 1'b1;
        issue[c] = 1'b1; issue_nop[c] = 1'b1;
        cnt[p][c]--;
        @(posedge clk);
      end
    end
    checks++;
    if (n_issue < 100 || n_block < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
