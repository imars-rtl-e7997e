// imars_top: the complete in-memory recommendation accelerator.
//
// Blocks: B CMA banks (one embedding table each; one of them, cfg.itet_bank,
// holds the item table with its LSH signatures), the CTRL block, the RSC
// bus, the inter-bank adder with its feature buffer, the LSH unit, the item
// buffer, the CTR buffer and two crossbar banks (filtering, ranking), each
// made of a dense-feature stack and a predictor stack.
//
// One query (`start` .. `done`) runs the filtering and ranking flow:
//   (1a) every sparse-list entry whose bank is in cfg.filt_mask is looked up
//        in its bank and pooled in the CMA accumulators; CTRL then reduces
//        each such bank (intra-mat trees, IBC, intra-bank tree) and sends the
//        result over the RSC bus into feature slot cfg.filt_slot[bank];
//   (1b) the filtering dense-feature stack processes dense_f; its first
//        cfg.dense_f_nw output words go over the RSC bus to slots
//        cfg.dense_f_slot, +1, ...;
//   (1c) the filtering predictor stack turns the feature buffer into the user
//        embedding (`user_emb`, its first output word);
//   (1d) the LSH unit hashes it; the item bank searches its signatures with
//        Hamming radius cfg.nns_thr and the matches, lowest index first, go
//        into the item buffer (at most cfg.nns_max; more than the buffer
//        holds sets `cand_overflow`);
//   (2c) the ranking dense-feature stack processes dense_r once;
//   (2a,2b) for every candidate: the ranking banks (cfg.rank_mask) and the
//        candidate's row in the item bank are looked up and pooled; CTRL
//        reduces them into the feature buffer (slot cfg.rank_slot[bank]); the
//        dense words are added (slots cfg.dense_r_slot..);
//   (2d) the ranking predictor stack gives the CTR (lane 0 of its first
//        output word), written with the item index into the CTR buffer;
//   (2e) the CTR buffer streams the cfg.topk best items on topk_valid /
//        topk_idx / topk_ctr, best first.
// With cfg.skip_filter set (a ranking-only model) steps (1a)-(1d) are
// skipped and one sample is ranked with no item lookup; its CTR comes out as
// the single top-k result.
//
// Loading (while idle): hw_valid with hw_tgt = HW_ET writes row hw_addr of the
// table in bank hw_bank (hw_sig selects the signature half in the item bank);
// HW_XBAR writes crossbar weights (hw_sel[3:2] = stack: 0 filtering dense,
// 1 filtering predictor, 2 ranking dense, 3 ranking predictor; hw_sel[1:0] =
// layer; hw_addr[7:0] = row; hw_addr[9:8] = column group); HW_LSH writes
// hyperplane hw_addr[7:0]; HW_SPARSE writes sparse-list entry hw_addr[6:0] =
// {bank hw_bank, index hw_data[15:0]}.
//
// From the paper: the blocks, their connections and the order (1a)-(2e).
// This design's own: the host load port, the sparse list, the feature-slot
// scheme, the sequencing state machine and all cycle timing.
module imars_top
  import imars_pkg::*;
#(
  parameter int unsigned B      = 32,
  parameter int unsigned M      = 4,
  parameter int unsigned C      = 32,
  parameter int unsigned ROWS   = 256,
  parameter int unsigned NADC   = 8,
  parameter int unsigned IB_DEPTH = 128,
  parameter int unsigned SP_DEPTH = 128,
  localparam int unsigned BW    = $clog2(B),
  localparam int unsigned NG    = (M + 3) / 4,
  localparam int unsigned GW    = $clog2(NG + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  imars_cfg_t  cfg,
  // host load port
  input  logic        hw_valid,
  input  hw_tgt_e     hw_tgt,
  input  logic [4:0]  hw_bank,
  input  logic [3:0]  hw_sel,
  input  logic [15:0] hw_addr,
  input  logic        hw_sig,
  input  vec_t        hw_data,
  // dense features of the query
  input  vec_t        dense_f [8],
  input  vec_t        dense_r [8],
  // query control and results
  input  logic        start,
  output logic        busy,
  output logic        done,
  output vec_t        user_emb,
  output logic [7:0]  n_cand,
  output logic        cand_overflow,
  output logic        topk_valid,
  output logic [15:0] topk_idx,
  output logic [7:0]  topk_ctr
);

  // ---------------------------------------------------------------- state
  typedef enum logic [4:0] {
    S_IDLE, S_F_CLR, S_F_LOOK, S_F_RED, S_F_DNS, S_F_DX, S_F_SET, S_F_PRED,
    S_F_LSH, S_F_SRCH, S_F_POP, S_R_DNS, S_R_CAND, S_R_LOOK, S_R_RED,
    S_R_DX, S_R_SET, S_R_PRED, S_R_WR, S_TOPK, S_DONE
  } sstate_e;

  sstate_e      st;
  logic         sub_started;      // a sub-unit of the current state has been started
  logic [6:0]   sp_i;             // sparse-list position
  logic [2:0]   dx_w;             // dense word being transferred
  logic [1:0]   settle;
  logic [7:0]   n_rank;
  logic [15:0]  cand;

  // ---------------------------------------------------------------- sparse list
  logic [20:0]  sp_mem [SP_DEPTH];
  logic [4:0]   sp_bank;
  logic [15:0]  sp_idx;
  assign {sp_bank, sp_idx} = sp_mem[sp_i[$clog2(SP_DEPTH)-1:0]];

  always_ff @(posedge clk) begin
    if (hw_valid && !busy && hw_tgt == HW_SPARSE)
      sp_mem[hw_addr[$clog2(SP_DEPTH)-1:0]] <= {hw_bank, hw_data[15:0]};
  end

  // ---------------------------------------------------------------- banks
  bank_cmd_t    bcmd;
  logic [B-1:0] bcmd_valid;
  vec_t         b_result [B];
  logic [B-1:0] b_res_valid;
  vec_t         b_rdata [B];
  logic [B-1:0] b_hit;
  logic [15:0]  b_hit_idx [B];

  logic [BW-1:0] red_bank;
  logic          red_valid, red_first, red_last, xfer_valid, ctrl_busy, ctrl_done;
  logic [GW-1:0] red_grp;
  logic          ctrl_start;
  logic [B-1:0]  ctrl_mask;

  for (genvar b = 0; b < B; b++) begin : g_bank
    cma_bank #(.M(M), .C(C), .ROWS(ROWS)) u_bank (
      .clk, .rst_n,
      .pair_mode (int'(cfg.itet_bank) == b),
      .cmd_valid (bcmd_valid[b]),
      .cmd       (bcmd),
      .red_valid (red_valid && int'(red_bank) == b),
      .red_first, .red_last, .red_grp,
      .result    (b_result[b]),
      .res_valid (b_res_valid[b]),
      .rdata     (b_rdata[b]),
      .hit       (b_hit[b]),
      .hit_idx   (b_hit_idx[b])
    );
  end

  imars_ctrl #(.B(B), .M(M)) u_ctrl (
    .clk, .rst_n,
    .start          (ctrl_start),
    .bank_mask      (ctrl_mask),
    .bank_res_valid (b_res_valid[red_bank]),
    .red_bank, .red_valid, .red_first, .red_last, .red_grp,
    .xfer_valid,
    .busy           (ctrl_busy),
    .done           (ctrl_done)
  );

  // ---------------------------------------------------------------- crossbar banks
  // stack 0: filtering dense, 1: filtering predictor, 2: ranking dense, 3: ranking predictor
  layer_cfg_t s_cfg [4][NLAYER];
  logic [3:0] s_start, s_busy, s_done;
  vec_t       s_x   [4][8];
  vec_t       s_out [4][4];
  vec_t       feat  [8];

  always_comb begin
    for (int l = 0; l < NLAYER; l++) begin
      s_cfg[0][l] = cfg.df_layer[l];
      s_cfg[1][l] = cfg.fp_layer[l];
      s_cfg[2][l] = cfg.dr_layer[l];
      s_cfg[3][l] = cfg.rp_layer[l];
    end
    s_x[0] = dense_f;
    s_x[1] = feat;
    s_x[2] = dense_r;
    s_x[3] = feat;
  end

  for (genvar s = 0; s < 4; s++) begin : g_stack
    dnn_stack #(.NL(NLAYER), .NADC(NADC)) u_stack (
      .clk, .rst_n,
      .cfg      (s_cfg[s]),
      .wr_en    (hw_valid && !busy && hw_tgt == HW_XBAR && int'(hw_sel[3:2]) == s),
      .wr_layer (hw_sel[1:0]),
      .wr_row   (hw_addr[7:0]),
      .wr_grp   (hw_addr[9:8]),
      .wr_data  (hw_data),
      .start    (s_start[s]),
      .x        (s_x[s]),
      .out      (s_out[s]),
      .busy     (s_busy[s]),
      .done     (s_done[s])
    );
  end

  // ---------------------------------------------------------------- RSC bus + inter-bank adder
  localparam int unsigned NS = B + 2;
  vec_t                  rsc_src [NS];
  logic                  rsc_req;
  logic [$clog2(NS)-1:0] rsc_sel;
  logic [2:0]            rsc_dst_in;
  vec_t                  rsc_data;
  logic                  rsc_valid;
  logic [2:0]            rsc_dst;
  logic                  in_filter;   // current phase is filtering
  logic                  feat_clr;

  always_comb begin
    for (int b = 0; b < B; b++) rsc_src[b] = b_result[b];
    rsc_src[B]     = s_out[0][dx_w[1:0]];
    rsc_src[B + 1] = s_out[2][dx_w[1:0]];
    if (xfer_valid) begin
      rsc_req    = 1'b1;
      rsc_sel    = ($clog2(NS))'(red_bank);
      rsc_dst_in = in_filter ? cfg.filt_slot[red_bank] : cfg.rank_slot[red_bank];
    end else begin
      rsc_req    = (st == S_F_DX || st == S_R_DX) &&
                   (dx_w < (in_filter ? cfg.dense_f_nw : cfg.dense_r_nw));
      rsc_sel    = ($clog2(NS))'(in_filter ? B : B + 1);
      rsc_dst_in = (in_filter ? cfg.dense_f_slot : cfg.dense_r_slot) + dx_w;
    end
  end

  rsc_bus #(.NS(NS), .DTW(3)) u_rsc (
    .clk, .rst_n,
    .src_data (rsc_src),
    .req      (rsc_req),
    .src      (rsc_sel),
    .dst_in   (rsc_dst_in),
    .data     (rsc_data),
    .valid    (rsc_valid),
    .dst      (rsc_dst)
  );

  inter_bank_adder #(.NSLOT(8)) u_iba (
    .clk, .rst_n,
    .clr      (feat_clr),
    .in_valid (rsc_valid),
    .in_slot  (rsc_dst),
    .in_data  (rsc_data),
    .feat     (feat)
  );

  // ---------------------------------------------------------------- LSH, item buffer, CTR buffer
  logic [255:0] lsh_sig;
  logic         lsh_start, lsh_done;

  lsh_unit #(.NP(256)) u_lsh (
    .clk, .rst_n,
    .wr_en    (hw_valid && !busy && hw_tgt == HW_LSH),
    .wr_plane (hw_addr[7:0]),
    .wr_data  (hw_data),
    .start    (lsh_start),
    .u        (s_out[1][0]),
    .sig      (lsh_sig),
    .done     (lsh_done)
  );

  logic        ib_clr, ib_push, ib_pop, ib_full;
  logic [15:0] ib_head, ib_push_idx;
  logic [$clog2(IB_DEPTH):0] ib_count;

  item_buffer #(.DEPTH(IB_DEPTH)) u_ib (
    .clk, .rst_n,
    .clr      (ib_clr),
    .push     (ib_push),
    .push_idx (ib_push_idx),
    .pop      (ib_pop),
    .head     (ib_head),
    .count    (ib_count),
    .full     (ib_full),
    .overflow (cand_overflow)
  );

  logic cb_clr, cb_wr, cb_start, cb_busy, cb_done;

  ctr_buffer #(.ROWS(256)) u_ctrbuf (
    .clk, .rst_n,
    .clr      (cb_clr),
    .wr       (cb_wr),
    .wr_row   (n_rank),
    .wr_ctr   (s_out[3][0][7:0]),
    .wr_idx   (cand),
    .start    (cb_start),
    .k        (cfg.topk),
    .out_valid(topk_valid),
    .out_idx  (topk_idx),
    .out_ctr  (topk_ctr),
    .busy     (cb_busy),
    .done     (cb_done)
  );

  // ---------------------------------------------------------------- sequencer
  logic [B-1:0] itet_bit;
  always_comb begin
    itet_bit = '0;
    itet_bit[cfg.itet_bank[BW-1:0]] = 1'b1;
  end

  assign busy      = (st != S_IDLE);
  assign in_filter = (st inside {S_F_CLR, S_F_LOOK, S_F_RED, S_F_DNS, S_F_DX, S_F_SET,
                                 S_F_PRED, S_F_LSH, S_F_SRCH, S_F_POP});
  assign user_emb  = s_out[1][0];

  always_comb begin
    bcmd       = '0;
    bcmd_valid = '0;
    ctrl_start = 1'b0;
    ctrl_mask  = '0;
    s_start    = '0;
    lsh_start  = 1'b0;
    feat_clr   = 1'b0;
    ib_clr     = 1'b0;
    ib_push    = 1'b0;
    ib_push_idx = b_hit_idx[cfg.itet_bank[BW-1:0]];
    ib_pop     = 1'b0;
    cb_clr     = 1'b0;
    cb_wr      = 1'b0;
    cb_start   = 1'b0;
    unique case (st)
      S_IDLE: begin
        if (hw_valid && hw_tgt == HW_ET) begin
          bcmd.op   = OP_WRITE;
          bcmd.idx  = hw_addr;
          bcmd.data = hw_data;
          bcmd.sig  = hw_sig;
          bcmd_valid[hw_bank[BW-1:0]] = 1'b1;
        end
      end
      S_F_CLR: begin
        bcmd.op    = OP_ACC_CLR;
        bcmd_valid = '1;
        feat_clr   = 1'b1;
        ib_clr     = 1'b1;
        cb_clr     = 1'b1;
      end
      S_F_LOOK, S_R_LOOK: begin
        if (sp_i < cfg.n_sparse) begin
          bcmd.op  = OP_LOOKUP;
          bcmd.idx = sp_idx;
          bcmd_valid[sp_bank[BW-1:0]] = (st == S_F_LOOK) ? cfg.filt_mask[sp_bank] : cfg.rank_mask[sp_bank];
        end else if (st == S_R_LOOK && !cfg.skip_filter) begin
          bcmd.op  = OP_LOOKUP;       // (2b) the candidate's item embedding
          bcmd.idx = cand;
          bcmd_valid[cfg.itet_bank[BW-1:0]] = 1'b1;
        end
      end
      S_F_RED, S_R_RED: begin
        ctrl_start = !sub_started;
        ctrl_mask  = (st == S_F_RED) ? cfg.filt_mask[B-1:0]
                   : (cfg.rank_mask[B-1:0] | (cfg.skip_filter ? '0 : itet_bit));
      end
      S_F_DNS:  s_start[0] = !sub_started;
      S_R_DNS:  s_start[2] = !sub_started;
      S_F_PRED: s_start[1] = !sub_started;
      S_R_PRED: s_start[3] = !sub_started;
      S_F_LSH:  lsh_start  = !sub_started;
      S_F_SRCH: begin
        bcmd.op   = OP_SEARCH;
        bcmd.data = lsh_sig;
        bcmd.mask = '1;
        bcmd.thr  = cfg.nns_thr;
        bcmd_valid[cfg.itet_bank[BW-1:0]] = 1'b1;
      end
      S_F_POP: begin
        if (b_hit[cfg.itet_bank[BW-1:0]] && {1'b0, n_cand} < {1'b0, cfg.nns_max}) begin
          ib_push = 1'b1;
          if (!ib_full) begin
            bcmd.op = OP_POP;
            bcmd_valid[cfg.itet_bank[BW-1:0]] = 1'b1;
          end
        end
      end
      S_R_CAND: begin
        if (!sub_started && (cfg.skip_filter ? n_rank == '0 : ib_count != '0)) begin
          bcmd.op    = OP_ACC_CLR;
          bcmd_valid = '1;
          feat_clr   = 1'b1;
        end
      end
      S_R_WR: begin
        cb_wr  = 1'b1;
        ib_pop = 1'b1;
      end
      S_TOPK: cb_start = !sub_started;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      sub_started <= 1'b0;
      sp_i        <= '0;
      dx_w        <= '0;
      settle      <= '0;
      n_rank      <= '0;
      n_cand      <= '0;
      cand        <= '0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          n_cand <= '0;
          n_rank <= '0;
          sp_i   <= '0;
          st     <= S_F_CLR;
        end
        S_F_CLR: st <= cfg.skip_filter ? S_R_DNS : S_F_LOOK;
        S_F_LOOK, S_R_LOOK: begin
          if (sp_i < cfg.n_sparse) sp_i <= sp_i + 7'd1;
          else begin
            sub_started <= 1'b0;
            st <= (st == S_F_LOOK) ? S_F_RED : S_R_RED;
          end
        end
        S_F_RED, S_R_RED: begin
          sub_started <= 1'b1;
          if (sub_started && ctrl_done) begin
            sub_started <= 1'b0;
            dx_w        <= '0;
            st <= (st == S_F_RED) ? S_F_DNS : S_R_DX;
          end
        end
        S_F_DNS, S_R_DNS: begin
          sub_started <= 1'b1;
          if (sub_started && (st == S_F_DNS ? s_done[0] : s_done[2])) begin
            sub_started <= 1'b0;
            dx_w        <= '0;
            st          <= (st == S_F_DNS) ? S_F_DX : S_R_CAND;
          end
        end
        S_F_DX, S_R_DX: begin
          if (dx_w < (st == S_F_DX ? cfg.dense_f_nw : cfg.dense_r_nw)) dx_w <= dx_w + 3'd1;
          else begin
            settle <= 2'd2;
            st     <= (st == S_F_DX) ? S_F_SET : S_R_SET;
          end
        end
        S_F_SET, S_R_SET: begin
          // let the last RSC word reach the feature buffer
          if (settle != '0) settle <= settle - 2'd1;
          else st <= (st == S_F_SET) ? S_F_PRED : S_R_PRED;
        end
        S_F_PRED, S_R_PRED: begin
          sub_started <= 1'b1;
          if (sub_started && (st == S_F_PRED ? s_done[1] : s_done[3])) begin
            sub_started <= 1'b0;
            st          <= (st == S_F_PRED) ? S_F_LSH : S_R_WR;
          end
        end
        S_F_LSH: begin
          sub_started <= 1'b1;
          if (sub_started && lsh_done) begin
            sub_started <= 1'b0;
            st          <= S_F_SRCH;
          end
        end
        S_F_SRCH: st <= S_F_POP;
        S_F_POP: begin
          if (b_hit[cfg.itet_bank[BW-1:0]] && {1'b0, n_cand} < {1'b0, cfg.nns_max} && !ib_full)
            n_cand <= n_cand + 8'd1;
          else st <= S_R_DNS;
        end
        S_R_CAND: begin
          if (cfg.skip_filter && n_rank == '0 && !sub_started) begin
            // ranking-only model: one sample, no candidate list
            cand        <= '0;
            sub_started <= 1'b1;
            sp_i        <= '0;
          end else if (sub_started) begin
            sub_started <= 1'b0;
            st          <= S_R_LOOK;
          end else if (ib_count != '0 && !cfg.skip_filter) begin
            cand        <= ib_head;
            sub_started <= 1'b1;
            sp_i        <= '0;
          end else begin
            st <= S_TOPK;
          end
        end
        S_R_WR: begin
          n_rank <= n_rank + 8'd1;
          st     <= S_R_CAND;
        end
        S_TOPK: begin
          sub_started <= 1'b1;
          if (sub_started && cb_done) begin
            sub_started <= 1'b0;
            st          <= S_DONE;
          end
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
