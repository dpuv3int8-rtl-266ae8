// format_unit: changes the layout of a few-channel input image on the fly.
//
// An input image in DDR holds its pixels densely: C bytes per pixel (C = 3
// for RGB), pixel after pixel, so a 64-bit DDR word holds parts of several
// pixels. The FM wants one pixel per vector word, channels in the low bytes.
// This unit is a small byte queue: DDR words are pushed in, and each pop
// takes the next C bytes and presents them as a vector word padded with
// zeros. The LOAD unit uses one per PE and bypasses them when a tensor has
// more than 8 channels (then the DDR data are already vector words), which is
// the rule the architecture gives; the byte-queue structure is this design's
// own.
//
// Interface: clear empties the queue (start of a tensor row). push adds the 8
// bytes of push_data, lowest byte first, and is only allowed while count <= 8.
// pixel shows the next C bytes whenever count >= ch; pop removes them. Push
// and pop may happen in one cycle. All updates at the clock edge.
module format_unit
  import dpu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [3:0]        ch,
  input  logic              push,
  input  logic [DDR_W-1:0]  push_data,
  input  logic              pop,
  output logic [4:0]        count,
  output vec_t              pixel
);
  logic [15:0][7:0] q;

  always_comb begin
    for (int c = 0; c < CP; c++) pixel[c] = (c < int'(ch)) ? q[c] : 8'h00;
  end

  logic [15:0][7:0] n;
  int cnt;

  // next queue contents: pop shifts the queue down by one pixel, push appends
  // one word behind what remains
  always_comb begin
    n   = q;
    cnt = int'(count);
      if (pop) begin
        for (int i = 0; i < 16; i++) n[i] = (i + int'(ch) < 16) ? q[i + int'(ch)] : 8'h00;
        cnt = cnt - int'(ch);
      end
      if (push) begin
        for (int i = 0; i < 8; i++) n[cnt + i] = push_data[i*8 +: 8];
        cnt = cnt + 8;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q     <= '0;
      count <= '0;
    end else if (clear) begin
      count <= '0;
    end else begin
      q     <= n;
      count <= 5'(cnt);
    end
  end

  a_push: assert property (@(posedge clk) disable iff (!rst_n) push && !clear |-> count <= 5'd8);
  a_pop:  assert property (@(posedge clk) disable iff (!rst_n) pop && !clear |-> count >= 5'(ch));
endmodule
