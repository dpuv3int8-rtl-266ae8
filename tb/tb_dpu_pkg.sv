// tb_dpu_pkg: checks the package's layout and arithmetic helpers against
// values worked out by hand: tensor row/bank/word placement with wrap-around,
// lanes per stride phase, saturation and rounding requantisation, and the
// instruction width. Random descriptors and accumulator values are then
// compared with the same formulas written out in plain integer arithmetic.
module tb_dpu_pkg;
  import dpu_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask
  initial begin
    tdesc_t d;
    d = '0; d.bank = 3'd6; d.addr = 16'd100; d.rowlen = 16'd20; d.cgs = 8'd2;
    chk("bank row0", row_bank(d, 0), 6);
    chk("bank row1", row_bank(d, 1), 7);
    chk("bank row2", row_bank(d, 2), 0);
    chk("addr row0", elem_addr(d, 0, 0, 0), 100);
    chk("addr row2 x3 g1", elem_addr(d, 2, 3, 1), 100 + 20 + 6 + 1);
    chk("addr row10", elem_addr(d, 10, 0, 0), 100 + 40);
    d.addr = 16'(FM_DEPTH - 2);
    chk("wrap", elem_addr(d, 0, 2, 0), 2);
    chk("lpp1", lanes_per_phase(4'd1), 8);
    chk("lpp2", lanes_per_phase(4'd2), 4);
    chk("lpp4", lanes_per_phase(4'd4), 2);
    chk("lpp8", lanes_per_phase(4'd8), 1);
    chk("sat hi", sat8(32'sd300), 127);
    chk("sat lo", sat8(-32'sd300), -128);
    chk("rq 13>>2", requant(32'sd13, 5'd2, 1'b0), 3);   // 13/4 = 3.25 -> 3
    chk("rq 14>>2", requant(32'sd14, 5'd2, 1'b0), 4);   // 3.5 rounds up
    chk("rq -14>>2", requant(-32'sd14, 5'd2, 1'b0), -3); // -3.5 rounds up
    chk("rq relu", requant(-32'sd50, 5'd0, 1'b1), 0);
    chk("rq sat", requant(32'sd100000, 5'd4, 1'b0), 127);
    chk("instr bits", $bits(instr_t), INSTR_W);
    for (int n = 0; n < 500; n++) begin
      int y, x, g, sh;
      longint v, r;
      bit rl;
      d.bank = 3'($urandom); d.addr = 16'($urandom_range(0, FM_DEPTH - 1));
      d.rowlen = 16'($urandom_range(1, 300)); d.cgs = 8'($urandom_range(1, 8));
      y = $urandom_range(0, 40); x = $urandom_range(0, 30); g = $urandom_range(0, int'(d.cgs) - 1);
      chk("random bank", row_bank(d, y), (int'(d.bank) + y) % 8);
      chk("random addr", elem_addr(d, y, x, g),
          (int'(d.addr) + ((int'(d.bank) + y) / 8) * int'(d.rowlen) + x * int'(d.cgs) + g) % FM_DEPTH);
      v = longint'($urandom_range(0, 200000)) - 100000;
      sh = $urandom_range(0, 12); rl = 1'($urandom);
      r = (sh == 0) ? v : $floor((real'(v) / real'(longint'(1) << sh)) + 0.5);
      if (rl && r < 0) r = 0;
      r = (r > 127) ? 127 : (r < -128) ? -128 : r;
      chk("random requant", requant(32'(v), 5'(sh), rl), r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
