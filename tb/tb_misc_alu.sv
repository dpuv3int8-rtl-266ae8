// tb_misc_alu: drives random sequences of the four lane operations (start of
// a max window, max, load with shift, add with shift) with random lane
// enables and bank maps, and compares the requantised outputs with a model.
module tb_misc_alu;
  import dpu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid, relu;
  misc_op_e op;
  logic [NBANK-1:0] lane_en;
  logic [NBANK-1:0][2:0] lane_bank;
  bankvec_t rdata;
  logic [3:0] shift_a, shift_b;
  logic [4:0] shift;
  vec_t [NBANK-1:0] out;
  longint model [NBANK][CP];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  misc_alu dut (.*);

  function automatic int rq(longint v, int sh, bit rl);
    longint r;
    r = (sh == 0) ? v : ((v + (longint'(1) << (sh - 1))) >>> sh);
    if (rl && r < 0) r = 0;
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction

  initial begin
    valid = 0; relu = 0; op = MO_INIT; lane_en = '0; lane_bank = '0; rdata = '0;
    shift_a = 0; shift_b = 0; shift = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int mode;
      mode = t % 3;    // 0 max pool, 1 element-wise, 2 copy
      shift_a = 4'($urandom_range(0, 3));
      shift_b = 4'($urandom_range(0, 3));
      for (int s = 0; s < 6; s++) begin
        @(negedge clk);
        valid = 1;
        if (mode == 0) op = (s == 0) ? MO_INIT : MO_MAX;
        else if (mode == 1) op = (s == 0) ? MO_LDA : MO_ADDB;
        else op = MO_LDA;
        for (int b = 0; b < NBANK; b++) rdata[b] = {$urandom, $urandom};
        for (int l = 0; l < NBANK; l++) begin
          lane_en[l] = (s == 0 && mode != 0) ? 1'b1 : ($urandom_range(0, 3) != 0);
          lane_bank[l] = 3'($urandom);
        end
        for (int l = 0; l < NBANK; l++)
          for (int c = 0; c < CP; c++) begin
            longint x;
            x = $signed(rdata[lane_bank[l]][c*8 +: 8]);
            if (op == MO_INIT) model[l][c] = -(longint'(1) << 19);
            else if (lane_en[l]) begin
              if (op == MO_MAX && x > model[l][c]) model[l][c] = x;
              if (op == MO_LDA) model[l][c] = x << shift_a;
              if (op == MO_ADDB) model[l][c] = model[l][c] + (x << shift_b);
            end
          end
      end
      @(negedge clk);
      valid = 0;
      shift = 5'(mode == 1 ? t % 4 : 0);
      relu = (mode == 1) && t[1];
      #1;
      for (int l = 0; l < NBANK; l++)
        for (int c = 0; c < CP; c++) begin
          checks++;
          if ($signed(out[l][c]) != rq(model[l][c], int'(shift), relu)) begin
            failures++;
            if (failures < 5) $display("t%0d lane %0d c %0d: got %0d exp %0d", t, l, c,
                                       $signed(out[l][c]), rq(model[l][c], int'(shift), relu));
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
