// tb_param_mem: self-checking test of the parameter memory: random writes,
// then reads checked one cycle later against a model, with wrap-around of
// the address at the memory's end.
module tb_param_mem;
  import dpu_pkg::*;
  localparam int D = 32;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [$clog2(D)-1:0] wr_addr, rd_addr;
  logic [PM_W-1:0] wr_data, rd_data;
  logic [PM_W-1:0] model [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  param_mem #(.DEPTH(D)) dut (.*);

  function automatic logic [PM_W-1:0] rword();
    logic [PM_W-1:0] w;
    for (int i = 0; i < PM_W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'(a); wr_data = rword(); model[a] = wr_data;
    end
    for (int it = 0; it < 200; it++) begin
      logic [PM_W-1:0] e;
      @(negedge clk);
      rd_en = 1; rd_addr = 5'($urandom_range(0, D-1));
      wr_en = $urandom_range(0, 1); wr_addr = 5'(int'(rd_addr) + 1); wr_data = rword();
      e = model[rd_addr];
      if (wr_en) model[wr_addr] = wr_data;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data != e) failures++;
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
