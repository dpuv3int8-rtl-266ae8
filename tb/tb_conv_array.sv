// tb_conv_array: loads random biases, accumulates random input vectors
// against random weight blocks with random lane enables and lane-to-bank
// maps, and compares all NBANK x CP outputs, after rounding shift, ReLU and
// saturation, with a model computed here.
module tb_conv_array;
  import dpu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clr, acc, relu;
  logic [NBANK-1:0] lane_en;
  logic [NBANK-1:0][2:0] lane_bank;
  bankvec_t rdata;
  logic [PM_W-1:0] pm_data;
  logic [4:0] shift;
  vec_t [NBANK-1:0] out;
  longint model [NBANK][CP];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  conv_array dut (.*);

  function automatic int rq(longint v, int sh, bit rl);
    longint r;
    r = (sh == 0) ? v : ((v + (longint'(1) << (sh - 1))) >>> sh);
    if (rl && r < 0) r = 0;
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction

  initial begin
    clr = 0; acc = 0; relu = 0; lane_en = '0; lane_bank = '0; rdata = '0; pm_data = '0; shift = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      clr = 1;
      for (int o = 0; o < CP; o++) begin
        int b;
        b = int'($urandom_range(0, 4000)) - 2000;
        pm_data[o*32 +: 32] = 32'(b);
        for (int l = 0; l < NBANK; l++) model[l][o] = b;
      end
      @(negedge clk);
      clr = 0;
      for (int s = 0; s < 1 + t % 9; s++) begin
        acc = 1;
        for (int i = 0; i < PM_W / 32; i++) pm_data[i*32 +: 32] = $urandom;
        for (int b = 0; b < NBANK; b++) rdata[b] = {$urandom, $urandom};
        for (int l = 0; l < NBANK; l++) begin
          lane_en[l] = $urandom_range(0, 4) != 0;
          lane_bank[l] = 3'($urandom);
        end
        for (int l = 0; l < NBANK; l++) if (lane_en[l])
          for (int o = 0; o < CP; o++)
            for (int i = 0; i < CP; i++)
              model[l][o] += $signed(pm_data[(o*CP + i)*8 +: 8]) * $signed(rdata[lane_bank[l]][i*8 +: 8]);
        @(negedge clk);
        acc = 0;
      end
      shift = 5'(t % 10);
      relu  = t[0];
      #1;
      for (int l = 0; l < NBANK; l++)
        for (int o = 0; o < CP; o++) begin
          checks++;
          if ($signed(out[l][o]) != rq(model[l][o], int'(shift), relu)) begin
            failures++;
            if (failures < 5) $display("lane %0d oc %0d: got %0d exp %0d", l, o, $signed(out[l][o]),
                                       rq(model[l][o], int'(shift), relu));
          end
        end
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
