// tb_fm_mem: self-checking test of one circular FM memory.
// Writes random words to random (bank, word) pairs, then reads all eight
// banks in one cycle at different words and compares with a model array,
// including a read and a write of the same word in one cycle (old value).
module tb_fm_mem;
  import dpu_pkg::*;
  localparam int D = 64;
  logic clk = 0;
  logic [NBANK-1:0] rd_en, wr_en;
  logic [NBANK-1:0][$clog2(D)-1:0] rd_addr, wr_addr;
  bankvec_t rd_data, wr_data;
  logic [VEC_W-1:0] model [NBANK][D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fm_mem #(.DEPTH(D)) dut (.*);

  initial begin
    rd_en = '0; wr_en = '0; rd_addr = '0; wr_addr = '0; wr_data = '0;
    // fill every word
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = '1;
      for (int b = 0; b < NBANK; b++) begin
        wr_addr[b] = 6'(a);
        wr_data[b] = {$urandom, $urandom};
        model[b][a] = wr_data[b];
      end
    end
    @(negedge clk) wr_en = '0;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      for (int b = 0; b < NBANK; b++) begin
        rd_en[b]   = $urandom_range(0, 3) != 0;
        rd_addr[b] = 6'($urandom_range(0, D-1));
        wr_en[b]   = $urandom_range(0, 1);
        wr_addr[b] = (it % 7 == 0) ? rd_addr[b] : 6'($urandom_range(0, D-1));
        wr_data[b] = {$urandom, $urandom};
      end
      begin
        logic [NBANK-1:0] en_q;
        logic [NBANK-1:0][VEC_W-1:0] exp_q;
        for (int b = 0; b < NBANK; b++) exp_q[b] = model[b][rd_addr[b]];
        en_q = rd_en;
        for (int b = 0; b < NBANK; b++) if (wr_en[b]) model[b][wr_addr[b]] = wr_data[b];
        @(negedge clk);
        rd_en = '0; wr_en = '0;
        for (int b = 0; b < NBANK; b++) if (en_q[b]) begin
          checks++;
          if (rd_data[b] != exp_q[b]) begin
            failures++;
            if (failures < 5) $display("bank %0d: got %h exp %h", b, rd_data[b], exp_q[b]);
          end
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
