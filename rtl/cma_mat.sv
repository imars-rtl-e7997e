// cma_mat: one mat of a CMA bank: C CMAs that work independently, plus the
// intra-mat adder tree that sums their accumulators.
// Command routing inside the mat:
//   * OP_WRITE, OP_READ, OP_LOOKUP go to the CMA numbered `cma_idx` only.
//   * OP_ACC_CLR goes to every CMA.
//   * OP_SEARCH / OP_SEARCH_C go to every CMA that holds search data: all of
//     them, or, when `pair_mode` is set (item embedding table), only the
//     odd-numbered ones, which hold the LSH signatures of the items whose
//     embeddings sit in the even-numbered CMA just below.
//   * OP_POP goes to the lowest-numbered CMA with a pending match.
// Outputs: `sum` is the intra-mat adder tree result over all C accumulators
// (one clock after the accumulators settle); `rdata` is the read word of the
// CMA read last (one clock after OP_READ); hit/hit_cma/hit_row is the
// mat-level priority encoder (lowest CMA, then lowest row).
// The mat structure follows the paper; the routing rules, the even/odd
// pairing and the hierarchical priority encoding are this design's choices.
module cma_mat
  import imars_pkg::*;
#(
  parameter int unsigned C    = 32,
  parameter int unsigned ROWS = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sel,
  input  logic                    pair_mode,
  input  cma_op_e                 op,
  input  logic [$clog2(C)-1:0]    cma_idx,
  input  logic [$clog2(ROWS)-1:0] row,
  input  vec_t                    wdata,
  input  vec_t                    mask,
  input  logic [8:0]              thr,
  output vec_t                    sum,
  output vec_t                    rdata,
  output logic                    hit,
  output logic [$clog2(C)-1:0]    hit_cma,
  output logic [$clog2(ROWS)-1:0] hit_row
);

  logic [C-1:0]              csel;
  vec_t                      c_rdata [C];
  vec_t                      c_acc   [C];
  logic [C-1:0]              c_hit;
  logic [$clog2(ROWS)-1:0]   c_hit_row [C];
  logic [$clog2(C)-1:0]      rd_cma;

  // Mat-level priority encoder.
  always_comb begin
    hit     = 1'b0;
    hit_cma = '0;
    hit_row = '0;
    for (int c = C - 1; c >= 0; c--) begin
      if (c_hit[c]) begin
        hit     = 1'b1;
        hit_cma = c[$clog2(C)-1:0];
        hit_row = c_hit_row[c];
      end
    end
  end

  always_comb begin
    for (int c = 0; c < C; c++) begin
      unique case (op)
        OP_ACC_CLR, OP_INVAL:  csel[c] = sel;
        OP_SEARCH, OP_SEARCH_C: csel[c] = sel && (!pair_mode || (c % 2 == 1));
        OP_POP:                csel[c] = sel && hit && (c == int'(hit_cma));
        OP_NOP:                csel[c] = 1'b0;
        default:               csel[c] = sel && (c == int'(cma_idx));
      endcase
    end
  end

  for (genvar c = 0; c < C; c++) begin : g_cma
    cma #(.ROWS(ROWS)) u_cma (
      .clk, .rst_n,
      .sel    (csel[c]),
      .op, .row, .wdata, .mask, .thr,
      .rdata  (c_rdata[c]),
      .acc    (c_acc[c]),
      .hit    (c_hit[c]),
      .hit_row(c_hit_row[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   rd_cma <= '0;
    else if (sel && op == OP_READ) rd_cma <= cma_idx;
  end
  assign rdata = c_rdata[rd_cma];

  intra_mat_adder_tree #(.N(C)) u_tree (
    .clk, .rst_n,
    .in  (c_acc),
    .sum (sum)
  );

endmodule
