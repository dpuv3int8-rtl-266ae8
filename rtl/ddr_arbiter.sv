// ddr_arbiter: shares the engine's single DDR port among its three clients,
// the instruction fetch of the dispatcher, the LOAD unit and the SAVE unit.
//
// Requests are valid/ready; a rotating priority grants one client per cycle
// and the winner's request goes out with the client's id. DDR returns read
// data in any order tagged with the id, and the arbiter routes each response
// to the client whose id it carries (each client keeps its own reads in
// order). Writes are posted and get no response. The architecture only says
// that LOAD, SAVE and the instruction stream all use DDR; the port protocol
// and the arbitration are this design's own.
//
// Timing: combinational grant and response routing, no added latency.
// The read data bus reaches every client unchanged; only the valid strobe is
// routed, so cli_rdata is a copy of the DDR response data.
module ddr_arbiter
  import dpu_pkg::*;
#(
  parameter int NCLI = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ddr_req_t [NCLI-1:0]   cli_req,
  output logic     [NCLI-1:0]   cli_ready,
  output logic     [NCLI-1:0]   cli_rvalid,
  output logic [DDR_W-1:0]      cli_rdata,
  output ddr_req_t              ddr_req,
  input  logic                  ddr_ready,
  input  ddr_rsp_t              ddr_rsp
);
  localparam int PW = $clog2(NCLI);
  logic [PW-1:0] ptr, win;
  logic          any;

  always_comb begin
    any = 1'b0;
    win = '0;
    for (int k = 0; k < NCLI; k++) begin
      int i;
      i = (int'(ptr) + k) % NCLI;
      if (!any && cli_req[i].valid) begin
        any = 1'b1;
        win = PW'(i);
      end
    end
    ddr_req   = any ? cli_req[win] : '0;
    ddr_req.id = 2'(win);
    cli_ready = '0;
    if (any) cli_ready[win] = ddr_ready;
    for (int c = 0; c < NCLI; c++) cli_rvalid[c] = ddr_rsp.rvalid && (int'(ddr_rsp.rid) == c);
    cli_rdata = ddr_rsp.rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (any && ddr_ready) ptr <= PW'((int'(win) + 1) % NCLI);
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ddr_req.valid && !ddr_ready |=> ddr_req.valid);
endmodule
