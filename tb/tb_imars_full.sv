// tb_imars_full: the end-to-end test of tb_imars_top run on the accelerator
// at its default size (32 banks of 4 mats x 32 CMAs x 256 rows, a 128-entry
// item buffer). To keep loading short only the table rows the queries touch
// are written: the looked-up user-item rows and the first 512 items of the
// item table (rows never written stay invalid and cannot match). It loads
// crossbar weights and LSH hyperplanes,
// then runs three queries and compares every visible result with a
// reference computed here from the same data:
//   Q1  filtering + ranking: pooled lookups (two banks added into one slot),
//       dense features, user embedding, LSH, near-neighbour search capped at
//       nns_max, ranking of every candidate, top-k in order;
//   Q2  as Q1 but with more near neighbours than the item buffer holds: the
//       overflow flag must rise and only the first 128 candidates are ranked;
//   Q3  ranking-only mode (no filtering): one sample, one CTR.
// The reference model plants item signatures near the expected user
// signature so the search has a known answer. Each mechanism (lookups,
// add- and concat-pooling, dense transfers, NNS hits, overflow,
// threshold sweep of the top-k, ranking-only mode) is counted, and one that
// never happens counts as a failure.
// The flow follows the published filtering and ranking steps; the
// workload data (random tables and weights) are this test's own.
module tb_imars_full;
  import imars_pkg::*;
  localparam int B = 32, M = 4, C = 32, ROWS = 256, IBD = 128;
  localparam int NU = M * C * ROWS;      // UIET entries per bank
  localparam int NI = 512;               // items written into the item table
  localparam int ITB = 5;                // item bank

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  imars_cfg_t cfg;
  logic hw_valid; hw_tgt_e hw_tgt; logic [4:0] hw_bank; logic [3:0] hw_sel;
  logic [15:0] hw_addr; logic hw_sig; vec_t hw_data;
  vec_t dense_f [8], dense_r [8];
  logic start, busy, done; vec_t user_emb; logic [7:0] n_cand; logic cand_overflow;
  logic topk_valid; logic [15:0] topk_idx; logic [7:0] topk_ctr;
  int checks = 0, failures = 0;

  imars_top dut (.*);

  // ------------------------------------------------------------ reference data
  vec_t uiet [3][NU];
  vec_t item_emb [NI];
  vec_t item_sig [NI];
  int   Wt [4][2][256][128];   // [stack][layer][row][col]
  int   H  [256][32];
  int   sp_bank [5], sp_idx [5];

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic vec_t rnd();
    vec_t v; for (int k = 0; k < 8; k++) v[k*32 +: 32] = $urandom; return v;
  endfunction
  function automatic vec_t add_ref(vec_t a, vec_t b);
    vec_t r;
    for (int d = 0; d < 32; d++) r[d*8 +: 8] = 8'((int'(a[d*8 +: 8]) + int'(b[d*8 +: 8])) % 256);
    return r;
  endfunction
  function automatic int lane(vec_t v, int d);
    return int'(signed'(v[d*8 +: 8]));
  endfunction

  // One crossbar stack: x (256 values) -> 128 values, using cfg layers.
  function automatic void stack_ref(input int s, input layer_cfg_t lc [3], input int xin [256], output int y [128]);
    int a [256];
    a = xin;
    for (int l = 0; l < 2; l++) begin
      int o [128];
      if (!lc[l].en) continue;
      for (int c = 0; c < 128; c++) begin
        automatic int acc = 0;
        automatic int q;
        for (int r = 0; r < 256; r++) acc += a[r] * Wt[s][l][r][c];
        q = acc >>> lc[l].shift;
        if (q > 127) q = 127;
        if (q < -128) q = -128;
        if (lc[l].relu && q < 0) q = 0;
        if (c >= int'(lc[l].out_n)) q = 0;
        o[c] = q;
      end
      for (int r = 0; r < 256; r++) a[r] = (r < 128) ? o[r] : 0;
    end
    for (int c = 0; c < 128; c++) y[c] = a[c];
  endfunction

  function automatic void words_to_int(input vec_t w [8], output int v [256]);
    for (int i = 0; i < 256; i++) v[i] = lane(w[i/32], i%32);
  endfunction

  function automatic logic [255:0] lsh_ref(vec_t u);
    logic [255:0] s;
    for (int p = 0; p < 256; p++) begin
      automatic int acc = 0;
      for (int d = 0; d < 32; d++) acc += H[p][d] * lane(u, d);
      s[p] = (acc >= 0);
    end
    return s;
  endfunction

  function automatic layer_cfg_t [2:0] mk3(layer_cfg_t l0, layer_cfg_t l1);
    layer_cfg_t [2:0] r;
    r[0] = l0; r[1] = l1; r[2] = '{en: 0, relu: 0, shift: 0, out_n: 0};
    return r;
  endfunction
  function automatic void unpack3(input layer_cfg_t [2:0] p, output layer_cfg_t u [3]);
    for (int i = 0; i < 3; i++) u[i] = p[i];
  endfunction

  // ------------------------------------------------------------ host port
  task automatic hw(hw_tgt_e t, int bank, int sel, int addr, bit sg, vec_t d);
    hw_valid <= 1; hw_tgt <= t; hw_bank <= 5'(bank); hw_sel <= 4'(sel);
    hw_addr <= 16'(addr); hw_sig <= sg; hw_data <= d;
    @(posedge clk);
    hw_valid <= 0;
    #1;
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_lookup = 0, n_ibc_round2 = 0, n_add_pool = 0, n_concat = 0, n_dense_xfer = 0;
  int n_nns_hit = 0, n_overflow = 0, n_sweep = 0, n_rank_only = 0;
  bit slot_used [8];
  always @(posedge clk) if (rst_n) begin
    if (dut.bcmd.op == OP_LOOKUP && dut.bcmd_valid != '0) n_lookup++;
    if (dut.red_valid && dut.red_grp != '0) n_ibc_round2++;
    if (dut.feat_clr) for (int s = 0; s < 8; s++) slot_used[s] = 0;
    else if (dut.rsc_valid) begin
      if (slot_used[dut.rsc_dst]) n_add_pool++; else n_concat++;
      slot_used[dut.rsc_dst] = 1;
    end
    if (dut.rsc_req && !dut.xfer_valid) n_dense_xfer++;
    if (dut.ib_push && !dut.ib_full) n_nns_hit++;
    if (dut.ib_push && dut.ib_full) n_overflow++;
    if (dut.u_ctrbuf.st == dut.u_ctrbuf.T_CHK && !dut.u_ctrbuf.c_hit &&
        dut.u_ctrbuf.emitted != dut.u_ctrbuf.k_q && dut.u_ctrbuf.thr < 127) n_sweep++;
  end

  initial begin
    #20ms; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ------------------------------------------------------------ query runner
  task automatic run_query(string name, int n_near, bit rank_only);
    layer_cfg_t lc [3];
    int xi [256], y [128], fp [256];
    vec_t fw [8];
    vec_t uexp;
    logic [255:0] sexp;
    int cands[$];
    int ctrs[$];
    int order[$];
    int got, cyc;
    bit used [256];

    // ---- expected filtering result
    if (!rank_only) begin
      words_to_int(dense_f, xi);
      unpack3(cfg.df_layer, lc);
      stack_ref(0, lc, xi, y);
      for (int w = 0; w < 8; w++) fw[w] = '0;
      for (int e = 0; e < 5; e++)
        if (cfg.filt_mask[sp_bank[e]])
          fw[cfg.filt_slot[sp_bank[e]]] = add_ref(fw[cfg.filt_slot[sp_bank[e]]], uiet[sp_bank[e]][sp_idx[e]]);
      for (int w = 0; w < int'(cfg.dense_f_nw); w++) begin
        vec_t dw;
        for (int d = 0; d < 32; d++) dw[d*8 +: 8] = 8'(y[w*32 + d]);
        fw[int'(cfg.dense_f_slot) + w] = add_ref(fw[int'(cfg.dense_f_slot) + w], dw);
      end
      words_to_int(fw, fp);
      unpack3(cfg.fp_layer, lc);
      stack_ref(1, lc, fp, y);
      for (int d = 0; d < 32; d++) uexp[d*8 +: 8] = 8'(y[d]);
      sexp = lsh_ref(uexp);
      // plant n_near item signatures within distance 3 of the expected
      // signature; make every other item far away
      for (int i = 0; i < NI; i++) begin
        item_sig[i] = ~sexp;
        for (int k = 0; k < 8; k++) item_sig[i][$urandom_range(0, 255)] ^= 1'b1;
      end
      for (int j = 0; j < n_near; j++) begin
        automatic int it = (j * 37 + 11) % NI;
        item_sig[it] = sexp;
        for (int k = 0; k < j % 4; k++) item_sig[it][(j * 29 + k * 61) % 256] ^= 1'b1;
      end
      for (int i = 0; i < NI; i++) hw(HW_ET, ITB, 0, i, 1, item_sig[i]);
      for (int i = 0; i < NI; i++)
        if ($countones(item_sig[i] ^ sexp) <= int'(cfg.nns_thr) && cands.size() < int'(cfg.nns_max) && cands.size() < IBD)
          cands.push_back(i);
    end else cands.push_back(0);

    // ---- expected ranking
    words_to_int(dense_r, xi);
    unpack3(cfg.dr_layer, lc);
    stack_ref(2, lc, xi, y);
    foreach (cands[c]) begin
      int yr [128];
      for (int w = 0; w < 8; w++) fw[w] = '0;
      for (int e = 0; e < 5; e++)
        if (cfg.rank_mask[sp_bank[e]])
          fw[cfg.rank_slot[sp_bank[e]]] = add_ref(fw[cfg.rank_slot[sp_bank[e]]], uiet[sp_bank[e]][sp_idx[e]]);
      if (!rank_only) fw[cfg.rank_slot[ITB]] = add_ref(fw[cfg.rank_slot[ITB]], item_emb[cands[c]]);
      for (int w = 0; w < int'(cfg.dense_r_nw); w++) begin
        vec_t dw;
        for (int d = 0; d < 32; d++) dw[d*8 +: 8] = 8'(y[w*32 + d]);
        fw[int'(cfg.dense_r_slot) + w] = add_ref(fw[int'(cfg.dense_r_slot) + w], dw);
      end
      words_to_int(fw, fp);
      unpack3(cfg.rp_layer, lc);
      stack_ref(3, lc, fp, yr);
      ctrs.push_back(yr[0] < 0 ? 0 : yr[0]);
    end
    for (int i = 0; i < 256; i++) used[i] = 0;
    for (int j = 0; j < int'(cfg.topk) && j < cands.size(); j++) begin
      automatic int best = -1;
      foreach (cands[i]) if (!used[i] && (best < 0 || ctrs[i] > ctrs[best])) best = i;
      used[best] = 1; order.push_back(best);
    end

    // ---- run
    start <= 1; @(posedge clk); start <= 0;
    got = 0; cyc = 0;
    while (!done && cyc < 200000) begin
      #1;
      if (topk_valid) begin
        if (got < order.size())
          check(int'(topk_idx) == (rank_only ? 0 : cands[order[got]]) && int'(topk_ctr) == ctrs[order[got]],
                $sformatf("%s: top-%0d item %0d ctr %0d, expected %0d ctr %0d", name, got + 1, topk_idx, topk_ctr,
                          cands[order[got]], ctrs[order[got]]));
        got++;
      end
      @(posedge clk); cyc++;
    end
    check(done, $sformatf("%s: finished", name));
    check(got == order.size(), $sformatf("%s: %0d results, expected %0d", name, got, order.size()));
    if (!rank_only) begin
      check(user_emb == uexp, $sformatf("%s: user embedding", name));
      check(int'(n_cand) == cands.size(), $sformatf("%s: %0d candidates, expected %0d", name, n_cand, cands.size()));
    end
    $display("%s: %0d candidates, %0d results, %0d clocks", name, cands.size(), got, cyc);
  endtask

  // ------------------------------------------------------------ main
  initial begin
    hw_valid = 0; hw_tgt = HW_ET; hw_bank = 0; hw_sel = 0; hw_addr = 0; hw_sig = 0; hw_data = '0;
    start = 0;
    cfg = '0;
    cfg.itet_bank = 5'(ITB);
    cfg.filt_mask = 32'b0011;               // banks 0 and 1 ...
    cfg.filt_slot[0] = 3'd0; cfg.filt_slot[1] = 3'd0;   // ... added into slot 0
    cfg.dense_f_slot = 3'd1; cfg.dense_f_nw = 3'd1;
    cfg.rank_mask = 32'b0110;               // banks 1 (shared) and 2
    cfg.rank_slot[1] = 3'd0; cfg.rank_slot[2] = 3'd1; cfg.rank_slot[ITB] = 3'd2;
    cfg.dense_r_slot = 3'd3; cfg.dense_r_nw = 3'd2;
    cfg.nns_thr = 9'd3; cfg.nns_max = 8'd5; cfg.topk = 8'd3; cfg.n_sparse = 7'd5;
    cfg.df_layer = mk3('{en: 1, relu: 1, shift: 5'd6, out_n: 8'd32}, '{en: 0, relu: 0, shift: 0, out_n: 0});
    cfg.fp_layer = mk3('{en: 1, relu: 1, shift: 5'd6, out_n: 8'd64}, '{en: 1, relu: 0, shift: 5'd5, out_n: 8'd32});
    cfg.dr_layer = mk3('{en: 1, relu: 1, shift: 5'd6, out_n: 8'd64}, '{en: 0, relu: 0, shift: 0, out_n: 0});
    cfg.rp_layer = mk3('{en: 1, relu: 1, shift: 5'd6, out_n: 8'd64}, '{en: 1, relu: 0, shift: 5'd4, out_n: 8'd1});
    for (int w = 0; w < 8; w++) begin dense_f[w] = rnd(); dense_r[w] = rnd(); end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);

    // tables
    for (int b = 0; b < 3; b++) for (int i = 0; i < NU; i++) uiet[b][i] = rnd();
    for (int i = 0; i < NI; i++) begin item_emb[i] = rnd(); hw(HW_ET, ITB, 0, i, 0, item_emb[i]); end
    // sparse list: two entries in bank 0, one in bank 1, two in bank 2
    sp_bank = '{0, 0, 1, 2, 2};
    sp_idx  = '{3, NU - 1, 200, 17, 300};
    for (int e = 0; e < 5; e++) begin
      hw(HW_SPARSE, sp_bank[e], 0, e, 0, vec_t'(sp_idx[e]));
      hw(HW_ET, sp_bank[e], 0, sp_idx[e], 0, uiet[sp_bank[e]][sp_idx[e]]);
    end
    // crossbar weights (two layers of each stack), small integers
    for (int s = 0; s < 4; s++) for (int l = 0; l < 2; l++) for (int r = 0; r < 256; r++)
      for (int g = 0; g < 4; g++) begin
        vec_t d;
        for (int j = 0; j < 32; j++) begin
          Wt[s][l][r][g*32+j] = $urandom_range(0, 6) - 3;
          d[j*8 +: 8] = 8'(Wt[s][l][r][g*32+j]);
        end
        hw(HW_XBAR, 0, s * 4 + l, g * 256 + r, 0, d);
      end
    // LSH hyperplanes
    for (int p = 0; p < 256; p++) begin
      vec_t d;
      for (int j = 0; j < 32; j++) begin H[p][j] = $urandom_range(0, 255) - 128; d[j*8 +: 8] = 8'(H[p][j]); end
      hw(HW_LSH, 0, 0, p, 0, d);
    end
    @(posedge clk);

    run_query("Q1", 6, 0);
    check(!cand_overflow, "Q1: no overflow");
    cfg.nns_max = 8'd200; cfg.topk = 8'd8;
    run_query("Q2", 140, 0);
    check(cand_overflow, "Q2: item buffer overflow flagged");
    cfg.skip_filter = 1'b1; cfg.topk = 8'd1;
    run_query("Q3", 0, 1);
    n_rank_only++;

    $display("mechanisms: lookups=%0d add_pool=%0d concat=%0d dense_xfer=%0d nns_hits=%0d overflow=%0d topk_sweeps=%0d rank_only=%0d",
             n_lookup, n_add_pool, n_concat, n_dense_xfer, n_nns_hit, n_overflow, n_sweep, n_rank_only);
    check(n_lookup > 0, "mechanism: lookups");
    check(n_add_pool > 0, "mechanism: ADD pooling");
    check(n_concat > 0, "mechanism: concatenation");
    check(n_dense_xfer > 0, "mechanism: dense features over RSC");
    check(n_nns_hit > 0, "mechanism: NNS hits");
    check(n_overflow > 0, "mechanism: item buffer overflow");
    check(n_sweep > 0, "mechanism: top-k threshold sweep");
    check(n_rank_only > 0, "mechanism: ranking-only mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
