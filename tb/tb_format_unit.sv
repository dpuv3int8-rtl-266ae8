// tb_format_unit: pushes dense rows of pixels with 1..8 channels (and the
// 3-channel RGB case many times) through the format unit and checks that
// every popped vector holds the next pixel's channels in its low bytes and
// zeros above them.
module tb_format_unit;
  import dpu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear, push, pop;
  logic [3:0] ch;
  logic [DDR_W-1:0] push_data;
  logic [4:0] count;
  vec_t pixel;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  format_unit dut (.*);

  initial begin
    clear = 0; push = 0; pop = 0; ch = 3; push_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 24; trial++) begin
      int c, npx, nb, wi, px;
      logic [7:0] bytes [256];
      c = (trial < 8) ? trial + 1 : 3;
      npx = 13 + trial;
      nb = npx * c;
      for (int i = 0; i < 256; i++) bytes[i] = 8'($urandom);
      @(negedge clk);
      ch = 4'(c); clear = 1;
      @(negedge clk);
      clear = 0;
      wi = 0; px = 0;
      while (px < npx) begin
        if (int'(count) < c) begin
          push = 1;
          for (int k = 0; k < 8; k++) push_data[k*8 +: 8] = bytes[wi*8 + k];
          wi++;
          @(negedge clk);
          push = 0;
        end else begin
          for (int k = 0; k < CP; k++) begin
            checks++;
            if (pixel[k] != ((k < c) ? bytes[px*c + k] : 8'h00)) failures++;
          end
          pop = 1;
          @(negedge clk);
          pop = 0;
          px++;
        end
      end
      if (wi != (nb + 7) / 8) begin
        failures++;
        $display("words pushed %0d exp %0d", wi, (nb + 7) / 8);
      end
      checks++;
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
