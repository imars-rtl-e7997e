// tb_cma_bank: a bank of 8 mats x 4 CMAs x 16 rows, so that the reduction
// needs two IBC transfers of four mats. Checks the table address map in
// both modes, pooling of lookups through the CMA accumulators, intra-mat
// trees, IBC and intra-bank tree (result valid exactly two clocks after the
// last reduction group), and the nearest-neighbour search of the item table
// (pair mode), which must return table indices in ascending order.
// The bank structure follows the published design; the reduced sizes, the
// address map and the two-clock result latency are this design's.
module tb_cma_bank;
  import imars_pkg::*;
  localparam int M = 8, C = 4, ROWS = 16, N = M * C * ROWS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pair_mode, cmd_valid; bank_cmd_t cmd;
  logic red_valid, red_first, red_last; logic [1:0] red_grp;
  vec_t result, rdata; logic res_valid, hit; logic [15:0] hit_idx;
  int checks = 0, failures = 0;

  cma_bank #(.M(M), .C(C), .ROWS(ROWS)) dut (.*);

  vec_t emb [N];
  vec_t sg  [N/2];

  function automatic vec_t add_ref(vec_t a, vec_t b);
    vec_t r;
    for (int d = 0; d < 32; d++) r[d*8 +: 8] = 8'((int'(a[d*8 +: 8]) + int'(b[d*8 +: 8])) % 256);
    return r;
  endfunction
  function automatic vec_t rnd();
    vec_t v; for (int k = 0; k < 8; k++) v[k*32 +: 32] = $urandom; return v;
  endfunction
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic issue(cma_op_e o, int idx = 0, vec_t d = '0, int t = 0, bit s = 0);
    cmd_valid <= 1; cmd.op <= o; cmd.idx <= 16'(idx); cmd.data <= d; cmd.mask <= '1;
    cmd.thr <= 9'(t); cmd.sig <= s;
    @(posedge clk); cmd_valid <= 0; cmd.op <= OP_NOP; #1;
  endtask
  task automatic reduce_and_check(vec_t exp, string what);
    int lat;
    @(posedge clk);   // let the intra-mat trees register the accumulators
    for (int g = 0; g < 2; g++) begin
      red_valid <= 1; red_grp <= 2'(g); red_first <= (g == 0); red_last <= (g == 1);
      @(posedge clk);
    end
    red_valid <= 0; red_first <= 0; red_last <= 0;
    lat = 0;
    #1;
    while (!res_valid && lat < 10) begin @(posedge clk); #1; lat++; end
    check(lat == 1, $sformatf("%s: res_valid %0d clocks after the last group's clock", what, lat));
    check(result == exp, what);
  endtask

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    vec_t exp, key;
    int found;
    pair_mode = 0; cmd_valid = 0; cmd = '0; red_valid = 0; red_first = 0; red_last = 0; red_grp = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    // ---- user-item table: dense map
    for (int i = 0; i < N; i++) begin emb[i] = rnd(); issue(OP_WRITE, i, emb[i]); end
    for (int i = 0; i < 8; i++) begin
      automatic int a = $urandom_range(0, N-1);
      issue(OP_READ, a);
      check(rdata == emb[a], $sformatf("read %0d", a));
    end
    for (int trial = 0; trial < 4; trial++) begin
      issue(OP_ACC_CLR);
      exp = '0;
      for (int i = 0; i < 3 + trial * 4; i++) begin
        automatic int a = (i == 0) ? N - 1 : $urandom_range(0, N-1);  // include the last mat
        issue(OP_LOOKUP, a);
        exp = add_ref(exp, emb[a]);
      end
      reduce_and_check(exp, $sformatf("pooled trial %0d", trial));
    end
    // ---- item table: pair mode, N/2 items
    pair_mode = 1;
    for (int i = 0; i < N/2; i++) begin
      emb[i] = rnd(); sg[i] = rnd();
      issue(OP_WRITE, i, emb[i], 0, 0);
      issue(OP_WRITE, i, sg[i], 0, 1);
    end
    issue(OP_ACC_CLR);
    issue(OP_LOOKUP, 5); issue(OP_LOOKUP, N/2 - 1);
    reduce_and_check(add_ref(emb[5], emb[N/2 - 1]), "item table lookups read embeddings");
    // plant near neighbours of a key
    key = rnd();
    for (int j = 0; j < 5; j++) begin
      automatic int it = (j * 53 + 7) % (N/2);
      sg[it] = key; sg[it][j*11] = ~sg[it][j*11];
      issue(OP_WRITE, it, sg[it], 0, 1);
    end
    issue(OP_SEARCH, 0, key, 3);
    found = 0;
    for (int it = 0; it < N/2; it++) begin
      if ($countones(sg[it] ^ key) <= 3) begin
        check(hit && hit_idx == 16'(it), $sformatf("NNS returns item %0d (got %0d)", it, hit_idx));
        issue(OP_POP);
        found++;
      end
    end
    check(found == 5 && !hit, $sformatf("NNS finds exactly the planted items (%0d, hit %0d idx %0d)", found, hit, hit_idx));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
