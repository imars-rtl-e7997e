// ibc_net: intra-bank communication (IBC) network. It carries the results
// of the M mats of a bank to the intra-bank adder tree, 128 bytes (four
// 256-bit words) per transfer. When a bank has more than four mats the
// transfer is serialised: the controller's mat counter `grp` picks mats
// 4*grp .. 4*grp+3, in the fixed order Mat-1, Mat-2, ... of the paper, so no
// routing or arbitration is needed. Slots past the last mat carry zero.
// The word leaves through a register: `out`/`out_valid` follow
// `grp`/`in_valid` by one clock.
// The paper gives the capacity (4 x 256 bits), the serialisation and the
// fixed order; the one-register timing is this design's choice.
module ibc_net
  import imars_pkg::*;
#(
  parameter int unsigned M    = 4,
  parameter int unsigned FANIN = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  vec_t                               mat_sum [M],
  input  logic                               in_valid,
  input  logic [$clog2((M+FANIN-1)/FANIN+1)-1:0] grp,
  output vec_t                               out [FANIN],
  output logic                               out_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < FANIN; i++) out[i] <= '0;
    end else begin
      out_valid <= in_valid;
      for (int i = 0; i < FANIN; i++) begin
        out[i] <= (int'(grp) * FANIN + i < M) ? mat_sum[int'(grp) * FANIN + i] : '0;
      end
    end
  end

endmodule
