// tb_cma_mat: a mat of 8 CMAs of 16 rows. Checks routing of writes and reads
// to one CMA, pooling of lookups spread over several CMAs into the
// intra-mat adder tree sum, and the mat-level priority encoder: in normal
// mode every CMA is searched, in pair mode only the odd CMAs are, and
// matches come out lowest CMA first, then lowest row.
// Searching only the signature CMAs in pair mode follows the published
// two-CMAs-per-item layout; the lowest-CMA-first order is this design's.
module tb_cma_mat;
  import imars_pkg::*;
  localparam int C = 8, ROWS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sel, pair_mode; cma_op_e op; logic [2:0] cma_idx; logic [3:0] row;
  vec_t wdata, mask; logic [8:0] thr;
  vec_t sum, rdata; logic hit; logic [2:0] hit_cma; logic [3:0] hit_row;
  int checks = 0, failures = 0;

  cma_mat #(.C(C), .ROWS(ROWS)) dut (.*);

  vec_t ref_mem [C][ROWS];

  function automatic vec_t add_ref(vec_t a, vec_t b);
    vec_t r;
    for (int d = 0; d < 32; d++) r[d*8 +: 8] = 8'((int'(a[d*8 +: 8]) + int'(b[d*8 +: 8])) % 256);
    return r;
  endfunction

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cmd(cma_op_e o, int c = 0, int r = 0, vec_t d = '0, int t = 0);
    sel <= 1; op <= o; cma_idx <= 3'(c); row <= 4'(r); wdata <= d; mask <= '1; thr <= 9'(t);
    @(posedge clk); sel <= 0; op <= OP_NOP; #1;
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    vec_t exp, key;
    sel = 0; pair_mode = 0; op = OP_NOP; cma_idx = 0; row = 0; wdata = '0; mask = '0; thr = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int c = 0; c < C; c++) for (int r = 0; r < ROWS; r++) begin
      for (int k = 0; k < 8; k++) ref_mem[c][r][k*32 +: 32] = $urandom;
      cmd(OP_WRITE, c, r, ref_mem[c][r]);
    end
    for (int i = 0; i < 10; i++) begin
      automatic int c = $urandom_range(0, C-1), r = $urandom_range(0, ROWS-1);
      cmd(OP_READ, c, r);
      check(rdata == ref_mem[c][r], $sformatf("read cma %0d row %0d", c, r));
    end
    cmd(OP_ACC_CLR);
    exp = '0;
    for (int i = 0; i < 12; i++) begin
      automatic int c = $urandom_range(0, C-1), r = $urandom_range(0, ROWS-1);
      cmd(OP_LOOKUP, c, r);
      exp = add_ref(exp, ref_mem[c][r]);
    end
    @(posedge clk); #1;   // tree register
    check(sum == exp, "intra-mat sum of 12 lookups over several CMAs");
    // search: exact copies of one row placed in CMAs 2, 3 and 6
    key = ref_mem[1][4];
    cmd(OP_WRITE, 2, 9, key); cmd(OP_WRITE, 3, 0, key); cmd(OP_WRITE, 6, 5, key);
    for (int pm = 0; pm < 2; pm++) begin
      pair_mode = pm[0];
      cmd(OP_SEARCH, 0, 0, key, 0);
      if (pm == 0) begin
        check(hit && hit_cma == 1 && hit_row == 4, "normal: CMA 1 row 4 first");
        cmd(OP_POP);
        check(hit && hit_cma == 2 && hit_row == 9, "normal: CMA 2 row 9 next");
        cmd(OP_POP);
      end else begin
        check(hit && hit_cma == 1 && hit_row == 4, "pair: CMA 1 row 4 first");
        cmd(OP_POP);
      end
      check(hit && hit_cma == 3 && hit_row == 0, "CMA 3 row 0");
      cmd(OP_POP);
      if (pm == 0) begin
        check(hit && hit_cma == 6 && hit_row == 5, "normal: CMA 6 row 5");
        cmd(OP_POP);
      end
      check(!hit, $sformatf("pair_mode %0d: no further match", pm));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
