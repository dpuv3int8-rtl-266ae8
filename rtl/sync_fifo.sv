// sync_fifo: small synchronous first-in first-out queue (helper).
//
// DEPTH entries of type T. The head is visible on dout while !empty; pop
// removes it, push appends din (ignored when full, which the writer must
// check). Push and pop may share a cycle. Used for the per-unit instruction
// queues of the dispatcher.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic empty,
  output logic full
);
  localparam int AW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic [AW:0]   cnt;

  assign empty = (cnt == 0);
  assign full  = (int'(cnt) == DEPTH);
  assign dout  = mem[rd];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd  <= '0;
      wr  <= '0;
      cnt <= '0;
    end else begin
      if (do_push) wr <= AW'((int'(wr) + 1) % DEPTH);
      if (do_pop)  rd <= AW'((int'(rd) + 1) % DEPTH);
      cnt <= cnt + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wr] <= din;
endmodule
