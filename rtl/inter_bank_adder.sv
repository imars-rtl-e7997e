// inter_bank_adder: the inter-bank adder tree together with the feature
// buffer it writes. The feature buffer holds the input vector of a predictor
// DNN stack: NSLOT words of 256 bits (8 x 32 int8 = 256 inputs, one crossbar
// height). Every word arriving from the RSC bus is added, lane by lane, into
// the slot named by its destination tag. Banks sent to different slots are
// thereby concatenated; banks sent to the same slot are pooled by ADD -- the
// two pooling choices the paper allows. `clr` zeroes all slots. One word is
// taken per clock; a word is in `feat` on the clock after it arrives.
// The paper names the inter-bank adder tree and the two pooling modes; the
// slot buffer, the accumulate-into-slot form and the serial one-word-per-clock
// operation are this design's choices.
module inter_bank_adder
  import imars_pkg::*;
#(
  parameter int unsigned NSLOT = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     in_valid,
  input  logic [$clog2(NSLOT)-1:0] in_slot,
  input  vec_t                     in_data,
  output vec_t                     feat [NSLOT]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSLOT; s++) feat[s] <= '0;
    end else if (clr) begin
      for (int s = 0; s < NSLOT; s++) feat[s] <= '0;
    end else if (in_valid) begin
      feat[in_slot] <= vadd(feat[in_slot], in_data);
    end
  end

endmodule
