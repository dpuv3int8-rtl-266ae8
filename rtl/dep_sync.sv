// dep_sync: the DPON / DPBY synchronisation between the four unit queues.
//
// Every instruction names, by unit type only, the types it waits for (DPON)
// and the types that wait for it (DPBY). The engine keeps one token counter
// per ordered pair of types (producer, consumer). When an instruction of
// type p finishes, each counter (p, c) with c in its DPBY mask goes up by
// one. An instruction of type c at the head of its queue may start only when
// every counter (p, c) with p in its DPON mask is non-zero; starting takes one
// token from each of them. Instructions of one type run in queue order, so
// this is all the ordering the compiler needs to express software pipelines
// whose stages have different lengths (e.g. a SAVE of tile i-3 that waits for
// the MISC of tile i-2 and frees room for the LOAD of tile i).
// A no-operation (nop set) takes its tokens and gives its own in the same
// cycle without using the unit. Counting tokens per pair is this design's
// reading of "the dependency is by type only"; the counter width is its
// choice.
//
// Timing: ok is combinational from the counters; counters update at the edge
// after issue / done.
module dep_sync
  import dpu_pkg::*;
#(
  parameter int CW = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NUNIT-1:0][3:0] head_dpon,
  input  logic [NUNIT-1:0][3:0] head_dpby,
  output logic [NUNIT-1:0]      ok,
  input  logic [NUNIT-1:0]      issue,
  input  logic [NUNIT-1:0]      issue_nop,
  input  logic [NUNIT-1:0]      unit_done
);
  logic [NUNIT-1:0][NUNIT-1:0][CW-1:0] cnt;    // [producer][consumer]
  logic [NUNIT-1:0][3:0]               dpby_q; // DPBY of the running instruction
  logic [NUNIT-1:0]                    fin;
  logic [NUNIT-1:0][3:0]               fin_by;

  always_comb begin
    for (int c = 0; c < NUNIT; c++) begin
      ok[c] = 1'b1;
      for (int p = 0; p < NUNIT; p++) if (head_dpon[c][p] && cnt[p][c] == '0) ok[c] = 1'b0;
    end
    for (int p = 0; p < NUNIT; p++) begin
      fin[p]    = unit_done[p] || (issue[p] && issue_nop[p]);
      fin_by[p] = (issue[p] && issue_nop[p]) ? head_dpby[p] : dpby_q[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      dpby_q <= '0;
    end else begin
      for (int p = 0; p < NUNIT; p++) begin
        if (issue[p] && !issue_nop[p]) dpby_q[p] <= head_dpby[p];
        for (int c = 0; c < NUNIT; c++)
          cnt[p][c] <= cnt[p][c] + CW'(fin[p] && fin_by[p][c]) - CW'(issue[c] && head_dpon[c][p]);
      end
    end
  end

  for (genvar c = 0; c < NUNIT; c++) begin : g_chk
    a_ok: assert property (@(posedge clk) disable iff (!rst_n) issue[c] |-> ok[c]);
    for (genvar p = 0; p < NUNIT; p++) begin : g_p
      a_ovf: assert property (@(posedge clk) disable iff (!rst_n)
        fin[p] && fin_by[p][c] |-> cnt[p][c] != {CW{1'b1}});
    end
  end
endmodule
