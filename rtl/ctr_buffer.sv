// ctr_buffer: the CTR buffer, a CMA that keeps the click-through rate (CTR)
// of every ranked candidate next to its item index and selects the top-k by
// CAM threshold matching against an all-ones key.
//
// Row format (one row per candidate, written with `wr`):
//   bits [126:0]   CTR in thermometer code: bit i = 1 when ctr > i, where the
//                  signed 8-bit CTR is first clamped to 0..127;
//   bits [255:240] item index; other bits 0.
// The Hamming distance from an all-ones key over bits [126:0] is then
// exactly 127 - ctr, so the threshold match of the CMA turns into a
// "CTR >= level" comparator for every row at once.
// Top-k (`start`, with k in `k`): the threshold starts at 0 and rises by one
// after every search that leaves no unreported match (OP_SEARCH_C keeps rows
// already reported out). Each match found is read (OP_READ) to get its index
// and retired (OP_POP). Results leave on out_valid/out_idx/out_ctr in order of
// falling CTR (ties: lower row first); `done` pulses after k results or when
// the threshold has passed 127. A search costs one clock, a result two.
// `clr` empties the buffer (OP_INVAL). Writes are ignored while busy.
// The paper gives: a CMA storing CTR and index, top-k through its threshold
// match mode with an all-ones search vector. The thermometer code (which makes
// the Hamming distance equal to the CTR difference) and the rising-threshold
// sweep are this design's choices.
module ctr_buffer
  import imars_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              wr,
  input  logic [RW-1:0]     wr_row,
  input  logic signed [7:0] wr_ctr,
  input  logic [15:0]       wr_idx,
  input  logic              start,
  input  logic [7:0]        k,
  output logic              out_valid,
  output logic [15:0]       out_idx,
  output logic [7:0]        out_ctr,
  output logic              busy,
  output logic              done
);

  localparam int unsigned TB = 127;  // thermometer bits

  typedef enum logic [1:0] {T_IDLE, T_CHK, T_EMIT, T_DONE} tstate_e;
  tstate_e     st;
  logic [8:0]  thr;
  logic [7:0]  emitted;
  logic [7:0]  k_q;

  cma_op_e       c_op;
  logic [RW-1:0] c_row;
  vec_t          c_wdata, c_mask, c_rdata, c_acc;
  logic          c_hit;
  logic [RW-1:0] c_hit_row;

  function automatic vec_t ctr_row(input logic signed [7:0] ctr, input logic [15:0] idx);
    vec_t r;
    r = '0;
    for (int i = 0; i < int'(TB); i++) r[i] = (int'(ctr) > i);
    r[255:240] = idx;
    return r;
  endfunction

  assign c_mask = vec_t'({TB{1'b1}});
  assign busy   = (st != T_IDLE);

  always_comb begin
    c_op    = OP_NOP;
    c_row   = c_hit_row;
    c_wdata = c_mask;   // the all-ones search key
    unique case (st)
      T_IDLE: begin
        if (clr) c_op = OP_INVAL;
        else if (start) c_op = OP_SEARCH;
        else if (wr) begin
          c_op    = OP_WRITE;
          c_row   = wr_row;
          c_wdata = ctr_row(wr_ctr, wr_idx);
        end
      end
      T_CHK: begin
        if (emitted == k_q)   c_op = OP_NOP;
        else if (c_hit)       c_op = OP_READ;
        else if (thr < 9'(TB)) c_op = OP_SEARCH_C;
      end
      T_EMIT: c_op = OP_POP;
      default: ;
    endcase
  end

  cma #(.ROWS(ROWS)) u_cma (
    .clk, .rst_n,
    .sel    (c_op != OP_NOP),
    .op     (c_op),
    .row    (c_row),
    .wdata  (c_wdata),
    .mask   (c_mask),
    .thr    ((st == T_CHK) ? thr + 9'd1 : 9'd0),
    .rdata  (c_rdata),
    .acc    (c_acc),
    .hit    (c_hit),
    .hit_row(c_hit_row)
  );

  assign out_valid = (st == T_EMIT);
  assign out_idx   = c_rdata[255:240];
  assign out_ctr   = 8'($countones(c_rdata[TB-1:0]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= T_IDLE;
      thr     <= '0;
      emitted <= '0;
      k_q     <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        T_IDLE: if (!clr && start) begin
          thr     <= '0;
          emitted <= '0;
          k_q     <= k;
          st      <= T_CHK;
        end
        T_CHK: begin
          if (emitted == k_q)    st <= T_DONE;
          else if (c_hit)        st <= T_EMIT;
          else if (thr < 9'(TB)) thr <= thr + 9'd1;
          else                   st <= T_DONE;
        end
        T_EMIT: begin
          emitted <= emitted + 8'd1;
          st      <= T_CHK;
        end
        T_DONE: begin
          done <= 1'b1;
          st   <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

endmodule
