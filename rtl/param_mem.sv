// param_mem: the parameter memory (PM) common to all PEs.
//
// Holds weights and biases. One word is a CP x CP block of signed 8-bit
// weights (output channel major, input channel minor), or, for biases, CP
// signed 32-bit values in the low half of a word. The LOAD unit writes it from
// DDR; the CONV unit reads it and broadcasts the word to the four PEs, which
// is why the weights of one instruction are shared by the four tensors. Like
// the FM it is addressed modulo its depth (circular). The depth and the word
// format are this design's choices.
//
// Timing: one write and one read per cycle; read data one cycle after rd_en.
module param_mem
  import dpu_pkg::*;
#(
  parameter int DEPTH = PM_DEPTH
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [PM_W-1:0]          wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [PM_W-1:0]          rd_data
);
  logic [PM_W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
