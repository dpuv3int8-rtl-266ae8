// ddr_model: behavioural model of the off-chip DDR memory (testbench only).
//
// A word-addressed array of 2**AW words of 64 bits behind the engine's DDR
// port. Requests are accepted when ready is high; with STALL set, ready is
// dropped at random about one cycle in four to exercise back-pressure. A read
// returns its word LAT cycles after acceptance, with the request's id, in
// acceptance order. Writes are posted. Testbenches fill and inspect the array
// directly through mem[].
module ddr_model
  import dpu_pkg::*;
#(
  parameter int AW    = 18,
  parameter int LAT   = 3,
  parameter bit STALL = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  ddr_req_t req,
  output logic     ready,
  output ddr_rsp_t rsp
);
  logic [DDR_W-1:0] mem [2**AW];

  typedef struct packed {
    longint           due;
    logic [1:0]       id;
    logic [DDR_W-1:0] data;
  } pend_t;
  pend_t pend[$];
  longint cyc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cyc   <= 0;
      ready <= 1'b0;
      rsp   <= '0;
      pend.delete();
    end else begin
      cyc   <= cyc + 1;
      ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
      if (req.valid && ready) begin
        if (req.we) mem[req.addr[AW-1:0]] <= req.wdata;
        else pend.push_back('{due: cyc + LAT, id: req.id, data: mem[req.addr[AW-1:0]]});
      end
      rsp <= '0;
      if (pend.size() > 0 && pend[0].due <= cyc) begin
        rsp.rvalid <= 1'b1;
        rsp.rid    <= pend[0].id;
        rsp.rdata  <= pend[0].data;
        void'(pend.pop_front());
      end
    end
  end
endmodule
