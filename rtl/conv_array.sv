// conv_array: the convolution datapath of one PE.
//
// NBANK lanes, one per output row of an 8-row tile, each holding CP 32-bit
// accumulators, one per output channel of the current channel group. In a
// cycle with acc set, every enabled lane takes the CP-channel input vector
// that its bank returned and adds W x, where W is the CP x CP weight block
// broadcast from the parameter memory: NBANK*CP*CP multiply-accumulates per
// cycle. clr loads the accumulators with the bias held in the PM word
// instead. A disabled lane keeps its value, which is how zero padding and
// rows beyond the tile are handled. The outputs are the accumulators shifted
// right with rounding, optionally passed through ReLU and saturated to 8 bits.
//
// The architecture calls the CONV engine a systolic array and fixes the 8-row
// preferred height; this datapath computes the same sums with the weights
// broadcast to all lanes in one cycle instead of skewed through a grid, and
// the widths are this design's choices.
//
// Timing: clr/acc, lane map and data are presented in the same cycle (the
// cycle after the read); the accumulators update at its end; out follows the
// accumulators combinationally.
module conv_array
  import dpu_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic                        acc,
  input  logic [NBANK-1:0]            lane_en,
  input  logic [NBANK-1:0][2:0]       lane_bank,
  input  bankvec_t                    rdata,
  input  logic [PM_W-1:0]             pm_data,
  input  logic [4:0]                  shift,
  input  logic                        relu,
  output vec_t [NBANK-1:0]            out
);
  logic signed [ACC_W-1:0] accum [NBANK][CP];
  logic signed [ACC_W-1:0] sum   [NBANK][CP];

  // one 8-term dot product per lane and output channel, added to the accumulator
  always_comb begin
    for (int l = 0; l < NBANK; l++)
      for (int o = 0; o < CP; o++) begin
        sum[l][o] = accum[l][o];
        for (int i = 0; i < CP; i++)
          sum[l][o] += ACC_W'($signed(pm_data[(o*CP + i)*8 +: 8]) *
                              $signed(rdata[lane_bank[l]][i*8 +: 8]));
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NBANK; l++)
        for (int o = 0; o < CP; o++) accum[l][o] <= '0;
    end else if (clr) begin
      for (int l = 0; l < NBANK; l++)
        for (int o = 0; o < CP; o++) accum[l][o] <= $signed(pm_data[o*ACC_W +: ACC_W]);
    end else if (acc) begin
      for (int l = 0; l < NBANK; l++) begin
        if (lane_en[l])
          for (int o = 0; o < CP; o++) accum[l][o] <= sum[l][o];
      end
    end
  end

  always_comb begin
    for (int l = 0; l < NBANK; l++)
      for (int o = 0; o < CP; o++) out[l][o] = requant(accum[l][o], shift, relu);
  end
endmodule
