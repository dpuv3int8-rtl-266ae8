// fm_mem: one circular feature-map memory of a PE.
//
// NBANK independent banks of DEPTH vector words. The memory has one read port
// and one write port, and each port carries a word address and an enable per
// bank, so all banks are read (and written) in the same cycle at different
// words. Addresses are taken modulo DEPTH (a power of two), so a tensor may
// run past the last word and continue at word 0: the memory is a circular
// buffer. The three memories, the eight banks and the single read and write
// port follow the architecture; the depth is this design's choice.
//
// Timing: a read issued in cycle t returns its words in cycle t+1 (registered
// output). A write lands at the end of the cycle. Reading and writing one word
// in the same cycle returns the old value.
module fm_mem
  import dpu_pkg::*;
#(
  parameter int DEPTH = FM_DEPTH
) (
  input  logic                                   clk,
  input  logic [NBANK-1:0]                       rd_en,
  input  logic [NBANK-1:0][$clog2(DEPTH)-1:0]    rd_addr,
  output bankvec_t                               rd_data,
  input  logic [NBANK-1:0]                       wr_en,
  input  logic [NBANK-1:0][$clog2(DEPTH)-1:0]    wr_addr,
  input  bankvec_t                               wr_data
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [VEC_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en[b]) mem[wr_addr[b]] <= wr_data[b];
      if (rd_en[b]) rd_data[b] <= mem[rd_addr[b]];
    end
  end
endmodule
