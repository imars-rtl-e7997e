// item_buffer: holds the indices of the candidate items that the
// nearest-neighbour search in the item table returns (filtering stage) and
// hands them, in arrival order, to the ranking stage. It is a FIFO of DEPTH
// 16-bit item indices. `push` while full drops the index and sets the sticky
// `overflow` flag (cleared by `clr`); `pop` while empty is ignored. `head`
// is the oldest index, valid while `count` > 0; a pushed index is visible
// one clock after the push.
// The paper gives the buffer's role; the FIFO form, the depth (128, for the
// O(100) candidates the paper mentions) and the overflow flag are this
// design's choices.
module item_buffer #(
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          push,
  input  logic [15:0]   push_idx,
  input  logic          pop,
  output logic [15:0]   head,
  output logic [AW:0]   count,
  output logic          full,
  output logic          overflow
);

  logic [15:0]   mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full = (int'(count) == DEPTH);
  assign head = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= push_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; overflow <= 1'b0;
    end else if (clr) begin
      wp <= '0; rp <= '0; count <= '0; overflow <= 1'b0;
    end else begin
      logic do_push, do_pop;
      do_push = push && !full;
      do_pop  = pop && (count != '0);
      if (push && full) overflow <= 1'b1;
      if (do_push) wp <= AW'((int'(wp) + 1) % DEPTH);
      if (do_pop)  rp <= AW'((int'(rp) + 1) % DEPTH);
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

endmodule
