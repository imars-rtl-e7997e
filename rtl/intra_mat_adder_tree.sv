// intra_mat_adder_tree: near-memory adder tree of one mat. It adds the N
// 256-bit accumulator words of the mat's CMAs (N = C, 32 by default) into one
// 256-bit word, lane by lane (32 lanes of int8, see imars_pkg::vadd).
// The tree is a balanced binary reduction of depth log2(N) built from
// combinational 256-bit adders; the sum is registered, so `sum` follows the
// inputs with one clock of latency and a new set of inputs can be taken every
// clock. The paper gives the function (C 256-bit inputs, one output per mat);
// the binary tree shape and the output register are this design's choice.
module intra_mat_adder_tree
  import imars_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  vec_t in [N],
  output vec_t sum
);

  localparam int unsigned P = 1 << $clog2(N);  // N rounded up to a power of two

  vec_t tree_sum;

  always_comb begin
    vec_t lvl [P];
    for (int i = 0; i < P; i++) lvl[i] = (i < N) ? in[i] : '0;
    for (int w = P / 2; w >= 1; w = w / 2) begin
      for (int i = 0; i < w; i++) lvl[i] = vadd(lvl[2*i], lvl[2*i+1]);
    end
    tree_sum = lvl[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum <= '0;
    else        sum <= tree_sum;
  end

endmodule
