// cma_bank: one CMA bank, holding one embedding table: M mats of C CMAs,
// the IBC network and the intra-bank adder tree.
//
// Addressing. A command carries a row index `idx` into the table. With
// pair_mode low (user-item table, UIET) entries fill the bank densely:
//   row = idx % ROWS, cma = (idx / ROWS) % C, mat = idx / (ROWS*C).
// With pair_mode high (item table, ItET) every entry takes two CMAs: the
// 256-bit int8 embedding in an even CMA and the 256-bit LSH signature in the
// odd CMA next to it:
//   row = idx % ROWS, cma = 2*((idx / ROWS) % (C/2)) + sig, mat = idx / (ROWS*C/2).
// Operations: OP_WRITE/OP_READ/OP_LOOKUP go to one CMA; OP_ACC_CLR and the
// searches to all (searches only to signature CMAs in pair mode); OP_POP to
// the lowest mat with a pending match. Searches are CAM threshold searches
// (nearest-neighbour search on the LSH signatures); hit/hit_idx give the
// lowest pending match as a table index, in the same numbering as `idx`.
//
// Reduction. After lookups have pooled rows into the CMA accumulators, the
// controller drives red_valid for ceil(M/4) clocks with red_grp = 0,1,..
// (red_first with group 0, red_last with the final group). Each clock the
// IBC moves four mat sums to the intra-bank adder tree, which accumulates.
// `result` is valid when `res_valid` pulses, two clocks after red_last.
// `rdata` returns the row of the last OP_READ one clock after it.
// The hierarchy follows the paper; the address map, the ItET pairing order
// and the cycle timing are this design's choices.
module cma_bank
  import imars_pkg::*;
#(
  parameter int unsigned M    = 4,
  parameter int unsigned C    = 32,
  parameter int unsigned ROWS = 256,
  localparam int unsigned NG  = (M + 3) / 4,
  localparam int unsigned GW  = $clog2(NG + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pair_mode,
  input  logic          cmd_valid,
  input  bank_cmd_t     cmd,
  input  logic          red_valid,
  input  logic          red_first,
  input  logic          red_last,
  input  logic [GW-1:0] red_grp,
  output vec_t          result,
  output logic          res_valid,
  output vec_t          rdata,
  output logic          hit,
  output logic [15:0]   hit_idx
);

  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(C);
  localparam int unsigned MW = (M > 1) ? $clog2(M) : 1;

  logic [RW-1:0] a_row;
  logic [CW-1:0] a_cma;
  logic [MW-1:0] a_mat;

  always_comb begin
    int unsigned i;
    i     = int'(cmd.idx);
    a_row = RW'(i % ROWS);
    if (pair_mode) begin
      a_cma = CW'(2 * ((i / ROWS) % (C / 2)) + int'(cmd.sig));
      a_mat = MW'(i / (ROWS * C / 2));
    end else begin
      a_cma = CW'((i / ROWS) % C);
      a_mat = MW'(i / (ROWS * C));
    end
  end

  vec_t          m_sum   [M];
  vec_t          m_rdata [M];
  logic [M-1:0]  m_hit;
  logic [CW-1:0] m_hit_cma [M];
  logic [RW-1:0] m_hit_row [M];
  logic [M-1:0]  msel;
  logic [MW-1:0] hit_mat;
  logic [MW-1:0] rd_mat;

  // Bank-level priority encoder (lowest mat first).
  always_comb begin
    hit     = 1'b0;
    hit_mat = '0;
    for (int m = M - 1; m >= 0; m--) begin
      if (m_hit[m]) begin
        hit     = 1'b1;
        hit_mat = MW'(m);
      end
    end
    if (pair_mode)
      hit_idx = 16'(int'(hit_mat) * ROWS * C / 2 + (int'(m_hit_cma[hit_mat]) / 2) * ROWS + int'(m_hit_row[hit_mat]));
    else
      hit_idx = 16'(int'(hit_mat) * ROWS * C + int'(m_hit_cma[hit_mat]) * ROWS + int'(m_hit_row[hit_mat]));
  end

  always_comb begin
    for (int m = 0; m < M; m++) begin
      unique case (cmd.op)
        OP_ACC_CLR, OP_INVAL, OP_SEARCH, OP_SEARCH_C: msel[m] = cmd_valid;
        OP_POP:  msel[m] = cmd_valid && hit && (m == int'(hit_mat));
        OP_NOP:  msel[m] = 1'b0;
        default: msel[m] = cmd_valid && (m == int'(a_mat));
      endcase
    end
  end

  for (genvar m = 0; m < M; m++) begin : g_mat
    cma_mat #(.C(C), .ROWS(ROWS)) u_mat (
      .clk, .rst_n,
      .sel      (msel[m]),
      .pair_mode,
      .op       (cmd.op),
      .cma_idx  (a_cma),
      .row      (a_row),
      .wdata    (cmd.data),
      .mask     (cmd.mask),
      .thr      (cmd.thr),
      .sum      (m_sum[m]),
      .rdata    (m_rdata[m]),
      .hit      (m_hit[m]),
      .hit_cma  (m_hit_cma[m]),
      .hit_row  (m_hit_row[m])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              rd_mat <= '0;
    else if (cmd_valid && cmd.op == OP_READ) rd_mat <= a_mat;
  end
  assign rdata = m_rdata[rd_mat];

  // IBC network and intra-bank adder tree.
  vec_t ibc_out [4];
  logic ibc_valid;
  logic first_q, last_q;

  ibc_net #(.M(M), .FANIN(4)) u_ibc (
    .clk, .rst_n,
    .mat_sum  (m_sum),
    .in_valid (red_valid),
    .grp      (red_grp),
    .out      (ibc_out),
    .out_valid(ibc_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_q   <= 1'b0;
      last_q    <= 1'b0;
      res_valid <= 1'b0;
    end else begin
      first_q   <= red_valid && red_first;
      last_q    <= red_valid && red_last;
      res_valid <= ibc_valid && last_q;
    end
  end

  intra_bank_adder_tree u_ibt (
    .clk, .rst_n,
    .in_valid (ibc_valid),
    .first    (first_q),
    .in       (ibc_out),
    .out      (result)
  );

endmodule
