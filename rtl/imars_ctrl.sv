// imars_ctrl: the CTRL block. It orchestrates the traffic that reduces the
// pooled embeddings of several banks and moves them over the RSC bus. It has
// the two counters the paper names: a bank counter (which bank is active)
// and a mat-group counter (which four mats send their sums over the IBC to
// the intra-bank adder tree).
// Operation: `start` with a bank mask. For every bank whose mask bit is set,
// in ascending order, CTRL
//   1. drives red_valid for NG = ceil(M/4) clocks with red_grp = 0..NG-1
//      (red_first on group 0, red_last on group NG-1) to that bank,
//   2. waits for the bank's res_valid (bank_res_valid, from the active bank),
//   3. drives xfer_valid for one clock so the bank's result goes onto the RSC
//      bus (source = red_bank).
// `done` pulses one clock after the last transfer; with an empty mask it
// pulses one clock after start. A bank thus costs NG + 3 clocks.
// The two counters and the fixed Mat-1..Mat-M, four-at-a-time order follow
// the paper; the handshake with the banks and the state machine are this
// design's own. The clock generator the paper places in CTRL is not modelled:
// the clock comes from a port.
module imars_ctrl #(
  parameter int unsigned B  = 32,
  parameter int unsigned M  = 4,
  localparam int unsigned NG = (M + 3) / 4,
  localparam int unsigned GW = $clog2(NG + 1),
  localparam int unsigned BW = $clog2(B)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [B-1:0]  bank_mask,
  input  logic          bank_res_valid,
  output logic [BW-1:0] red_bank,
  output logic          red_valid,
  output logic          red_first,
  output logic          red_last,
  output logic [GW-1:0] red_grp,
  output logic          xfer_valid,
  output logic          busy,
  output logic          done
);

  typedef enum logic [2:0] {C_IDLE, C_FIND, C_GRP, C_WAIT, C_XFER, C_DONE} cstate_e;
  cstate_e       st;
  logic [B-1:0]  mask_q;
  logic [BW:0]   bank_cnt;   // bank counter
  logic [GW-1:0] grp_cnt;    // mat-group counter

  assign red_bank   = bank_cnt[BW-1:0];
  assign red_valid  = (st == C_GRP);
  assign red_grp    = grp_cnt;
  assign red_first  = (st == C_GRP) && (grp_cnt == '0);
  assign red_last   = (st == C_GRP) && (int'(grp_cnt) == NG - 1);
  assign xfer_valid = (st == C_XFER);
  assign busy       = (st != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= C_IDLE;
      mask_q   <= '0;
      bank_cnt <= '0;
      grp_cnt  <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          mask_q   <= bank_mask;
          bank_cnt <= '0;
          st       <= C_FIND;
        end
        C_FIND: begin
          // Advance the bank counter to the next activated bank.
          if (int'(bank_cnt) >= B)        st <= C_DONE;
          else if (mask_q[bank_cnt[BW-1:0]]) begin
            grp_cnt <= '0;
            st      <= C_GRP;
          end else bank_cnt <= bank_cnt + 1'b1;
        end
        C_GRP: begin
          if (int'(grp_cnt) == NG - 1) st <= C_WAIT;
          else                         grp_cnt <= grp_cnt + 1'b1;
        end
        C_WAIT: if (bank_res_valid) st <= C_XFER;
        C_XFER: begin
          bank_cnt <= bank_cnt + 1'b1;
          st       <= C_FIND;
        end
        C_DONE: begin
          done <= 1'b1;
          st   <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

endmodule
