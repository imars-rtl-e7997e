// lsh_unit: turns the 32-dimension int8 user embedding produced by the
// filtering DNN into the 256-bit locality-sensitive-hash (LSH) signature
// that is searched against the item table. Random-hyperplane LSH: signature
// bit p is 1 when the dot product of the embedding with hyperplane p is >= 0.
// The NP hyperplanes (32 signed 8-bit coefficients each, one word) are loaded
// with wr_en/wr_plane/wr_data and must be the ones used to hash the stored
// item signatures. `start` computes all bits at once; `sig` is valid with
// `done` one clock later.
// The paper uses LSH signatures of 256 bits for the items but does not say
// where the query's signature is formed; this unit is this design's choice.
module lsh_unit
  import imars_pkg::*;
#(
  parameter int unsigned NP = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  logic [$clog2(NP)-1:0] wr_plane,
  input  vec_t                  wr_data,
  input  logic                  start,
  input  vec_t                  u,
  output logic [NP-1:0]         sig,
  output logic                  done
);

  vec_t planes [NP];

  always_ff @(posedge clk) begin
    if (wr_en) planes[wr_plane] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sig  <= '0;
      done <= 1'b0;
    end else begin
      done <= start;
      if (start) begin
        for (int p = 0; p < NP; p++) begin
          logic signed [31:0] s;
          s = '0;
          for (int d = 0; d < EDIM; d++)
            s += 32'(signed'(planes[p][d*8 +: 8])) * 32'(signed'(u[d*8 +: 8]));
          sig[p] <= (s >= 0);
        end
      end
    end
  end

endmodule
