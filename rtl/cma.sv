// cma: one configurable memory array (CMA), ROWS x 256 bits, that works as a
// RAM, as an in-memory adder or as a threshold-match ternary CAM.
//
// The physical array is a FeFET cell matrix with analog sense amplifiers;
// this module reproduces its digital behaviour cycle by cycle:
//   * RAM mode (WL driver + BL driver + RAM SA): OP_WRITE stores wdata in row
//     `row`; OP_READ returns the row on rdata one cycle later.
//   * In-memory addition (RAM SA + Acc): OP_LOOKUP reads row `row` and adds it,
//     lane by lane, to the 256-bit accumulator `acc`; OP_ACC_CLR zeroes it.
//     This is how several lookups into one table are pooled.
//   * CAM mode (SL driver + CAM SAs): OP_SEARCH compares the key with every
//     valid row at once. Each row's Hamming distance over the columns whose
//     mask bit is 1 is compared with the threshold `thr` (the reference the
//     paper derives from a dummy cell); rows at or under it raise their
//     matchline. The result sits in a match register.
//   * Priority encoder: hit/hit_row always show the lowest-numbered pending
//     match. OP_POP retires it (marks it reported). OP_SEARCH_C searches again
//     but keeps already-reported rows out, so a caller can widen the threshold
//     step by step and collect rows in order of distance.
//   * OP_INVAL marks every row invalid (used to empty the CTR buffer).
// All operations act when `sel` is high and take one clock. A row becomes
// valid when written; reset clears the valid, match and accumulator state but
// not the stored data (the cells are non-volatile).
// Following the paper: the modes, the threshold match, the accumulator next to
// the RAM SA, the priority encoder, 256x256 size. This design's own choices:
// the operation encoding, single-cycle timing, search-side column masking (the
// stored cells are binary), valid bits and the pop/reported mechanism.
module cma
  import imars_pkg::*;
#(
  parameter int unsigned ROWS = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     sel,
  input  cma_op_e                  op,
  input  logic [$clog2(ROWS)-1:0]  row,
  input  vec_t                     wdata,   // write data, or search key
  input  vec_t                     mask,
  input  logic [8:0]               thr,
  output vec_t                     rdata,
  output vec_t                     acc,
  output logic                     hit,
  output logic [$clog2(ROWS)-1:0]  hit_row
);

  vec_t            mem [ROWS];
  logic [ROWS-1:0] valid;
  logic [ROWS-1:0] match;
  logic [ROWS-1:0] reported;

  // Priority encoder over the match register (lowest row wins).
  always_comb begin
    hit     = 1'b0;
    hit_row = '0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (match[r]) begin
        hit     = 1'b1;
        hit_row = r[$clog2(ROWS)-1:0];
      end
    end
  end

  // Cell array (no reset: non-volatile storage).
  always_ff @(posedge clk) begin
    if (sel && op == OP_WRITE) mem[row] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= '0;
      match    <= '0;
      reported <= '0;
      acc      <= '0;
      rdata    <= '0;
    end else if (sel) begin
      unique case (op)
        OP_WRITE:   valid[row] <= 1'b1;
        OP_READ:    rdata <= mem[row];
        OP_ACC_CLR: acc <= '0;
        OP_LOOKUP:  acc <= vadd(acc, mem[row]);
        OP_SEARCH, OP_SEARCH_C: begin
          for (int r = 0; r < ROWS; r++) begin
            match[r] <= valid[r] && !(op == OP_SEARCH_C && reported[r]) &&
                        ($countones((mem[r] ^ wdata) & mask) <= int'(thr));
          end
          if (op == OP_SEARCH) reported <= '0;
        end
        OP_INVAL: begin
          valid <= '0;
          match <= '0;
        end
        OP_POP: if (hit) begin
          match[hit_row]    <= 1'b0;
          reported[hit_row] <= 1'b1;
        end
        default: ;
      endcase
    end
  end

endmodule
