// tb_cma: self-checking test of one CMA (256 x 256). It fills random rows,
// reads them back (one-clock read latency), pools several lookups in the
// accumulator and compares with a lane-wise int8 sum computed here, and runs
// threshold searches whose matches are drained through the priority encoder
// and compared, row by row, with a reference Hamming-distance scan.
// The modes and the threshold match follow the published CMA; the reduced
// test sizes, the one-clock timing and the pop order are this design's.
module tb_cma;
  import imars_pkg::*;
  localparam int ROWS = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sel; cma_op_e op; logic [7:0] row; vec_t wdata, mask; logic [8:0] thr;
  vec_t rdata, acc; logic hit; logic [7:0] hit_row;
  int checks = 0, failures = 0;

  cma #(.ROWS(ROWS)) dut (.*);

  vec_t ref_mem [ROWS];
  bit   ref_valid [ROWS];

  function automatic vec_t lane_sum(vec_t a, vec_t b);
    vec_t r;
    for (int d = 0; d < 32; d++) begin
      byte unsigned x, y;
      x = a[d*8 +: 8]; y = b[d*8 +: 8];
      r[d*8 +: 8] = 8'((int'(x) + int'(y)) & 255);
    end
    return r;
  endfunction

  function automatic vec_t rnd_vec();
    vec_t v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cmd(cma_op_e o, int r = 0, vec_t d = '0, vec_t m = '0, int t = 0);
    sel <= 1; op <= o; row <= 8'(r); wdata <= d; mask <= m; thr <= 9'(t);
    @(posedge clk);
    sel <= 0; op <= OP_NOP;
    #1;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t exp_acc, key, m;
    int   nmatch, t;
    sel = 0; op = OP_NOP; row = 0; wdata = '0; mask = '0; thr = '0;
    for (int r = 0; r < ROWS; r++) ref_valid[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // write 200 rows
    for (int r = 0; r < 200; r++) begin
      ref_mem[r] = rnd_vec(); ref_valid[r] = 1;
      cmd(OP_WRITE, r, ref_mem[r]);
    end
    // read back: data is present one clock after the read
    for (int i = 0; i < 20; i++) begin
      automatic int r = $urandom_range(0, 199);
      cmd(OP_READ, r);
      check(rdata == ref_mem[r], $sformatf("read row %0d", r));
    end
    // pooling through the accumulator
    cmd(OP_ACC_CLR);
    check(acc == '0, "acc cleared");
    exp_acc = '0;
    for (int i = 0; i < 7; i++) begin
      automatic int r = $urandom_range(0, 199);
      cmd(OP_LOOKUP, r);
      exp_acc = lane_sum(exp_acc, ref_mem[r]);
    end
    check(acc == exp_acc, "pooled sum of 7 lookups");
    // searches: key near row 17 and row 150
    key = ref_mem[17];
    key[3] = ~key[3]; key[100] = ~key[100];
    ref_mem[150] = key; ref_mem[150][7] = ~ref_mem[150][7];
    cmd(OP_WRITE, 150, ref_mem[150]);
    m = '1;
    for (int pass = 0; pass < 2; pass++) begin
      t = (pass == 0) ? 2 : 110;
      cmd(pass == 0 ? OP_SEARCH : OP_SEARCH_C, 0, key, m, t);
      nmatch = 0;
      for (int r = 0; r < ROWS; r++) begin
        if (ref_valid[r] && $countones(ref_mem[r] ^ key) <= t &&
            !(pass == 1 && $countones(ref_mem[r] ^ key) <= 2)) begin
          check(hit && hit_row == 8'(r), $sformatf("pass %0d: match row %0d (got %0d hit %0d)", pass, r, hit_row, hit));
          cmd(OP_POP);
          nmatch++;
        end
      end
      check(!hit, $sformatf("pass %0d: no extra matches", pass));
      if (pass == 0) check(nmatch == 2, "rows 17 and 150 within distance 2");
      if (pass == 1) check(nmatch > 0, "wider radius finds more rows");
    end
    // masked search: only column 0..7 compared
    m = '0; m[7:0] = '1;
    cmd(OP_SEARCH, 0, ref_mem[5], m, 0);
    nmatch = 0;
    for (int r = 0; r < ROWS; r++)
      if (ref_valid[r] && ref_mem[r][7:0] == ref_mem[5][7:0]) nmatch++;
    check(hit, "masked search hits its own row");
    for (int i = 0; i < nmatch; i++) cmd(OP_POP);
    check(!hit, "masked search: match count");
    // invalidate
    cmd(OP_INVAL);
    cmd(OP_SEARCH, 0, ref_mem[5], '1, 300);
    check(!hit, "no match after invalidate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
