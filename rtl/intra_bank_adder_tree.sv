// intra_bank_adder_tree: the bank-level adder with a fan-in of four 256-bit
// inputs (IN1..IN4). Two first-level adders form IN1+IN2 and IN3+IN4; a
// second-level adder sums those two and the registered output OUT, which
// is fed back, so a bank with more than four mats is reduced in several
// rounds, one round per clock. `first` marks the first round of a new
// reduction (the feedback is then taken as zero). Every 256-bit add works on
// 32 lanes of int8 (imars_pkg::vadd).
// Structure (IN1..IN4, the two first-level adders, the final adder with OUT
// feedback) follows the bank figure of the paper; the `first` flag and the
// one-clock round are this design's choices.
module intra_bank_adder_tree
  import imars_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic first,
  input  vec_t in [4],
  output vec_t out
);

  vec_t s12, s34, fb;

  assign s12 = vadd(in[0], in[1]);
  assign s34 = vadd(in[2], in[3]);
  assign fb  = first ? '0 : out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out <= '0;
    else if (in_valid) out <= vadd(vadd(s12, s34), fb);
  end

endmodule
