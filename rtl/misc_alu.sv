// misc_alu: the MISC datapath of one PE (max pool, element-wise, copy).
//
// NBANK lanes, one per output row, each with CP 20-bit accumulators, one per
// channel. Per cycle every enabled lane applies one operation to the vector
// its bank returned:
//   MO_INIT  accumulator := most negative value (start of a max pool window)
//   MO_MAX   accumulator := max(accumulator, x)
//   MO_LDA   accumulator := x <<< shift_a  (first element-wise operand, copy)
//   MO_ADDB  accumulator := accumulator + (x <<< shift_b)
// MO_INIT applies to every lane whatever lane_en says. The output is the
// accumulator shifted right with rounding, optional ReLU, saturated to 8 bits.
// Max pool, element-wise addition and data movement are the three MISC
// operations of the architecture; the operand shifts that align two
// quantised operands are this design's choice.
//
// Timing: as conv_array: op, lane map and data in one cycle, update at its end.
module misc_alu
  import dpu_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  valid,
  input  misc_op_e              op,
  input  logic [NBANK-1:0]      lane_en,
  input  logic [NBANK-1:0][2:0] lane_bank,
  input  bankvec_t              rdata,
  input  logic [3:0]            shift_a,
  input  logic [3:0]            shift_b,
  input  logic [4:0]            shift,
  input  logic                  relu,
  output vec_t [NBANK-1:0]      out
);
  localparam int AW = 20;
  logic signed [AW-1:0] accum [NBANK][CP];
  logic signed [AW-1:0] x     [NBANK][CP];

  always_comb begin
    for (int l = 0; l < NBANK; l++)
      for (int c = 0; c < CP; c++) x[l][c] = AW'($signed(rdata[lane_bank[l]][c*8 +: 8]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NBANK; l++)
        for (int c = 0; c < CP; c++) accum[l][c] <= '0;
    end else if (valid) begin
      for (int l = 0; l < NBANK; l++) begin
        for (int c = 0; c < CP; c++) begin
          if (op == MO_INIT) accum[l][c] <= {1'b1, {(AW-1){1'b0}}};
          else if (lane_en[l]) begin
            case (op)
              MO_MAX:  if (x[l][c] > accum[l][c]) accum[l][c] <= x[l][c];
              MO_LDA:  accum[l][c] <= x[l][c] <<< shift_a;
              MO_ADDB: accum[l][c] <= accum[l][c] + (x[l][c] <<< shift_b);
              default: ;
            endcase
          end
        end
      end
    end
  end

  always_comb begin
    for (int l = 0; l < NBANK; l++)
      for (int c = 0; c < CP; c++) out[l][c] = requant(ACC_W'(accum[l][c]), shift, relu);
  end
endmodule
