// tb_ctr_buffer: writes 40 candidates with random CTRs (negative ones
// included, which count as 0) and asks for the top 10, then for more
// results than there are rows. Results must come out in order of falling
// CTR, ties by row, with the right item indices, exactly as a sort done here
// predicts; after clr nothing is found.
// Top-k by threshold search against an all-ones key follows the published
// CTR buffer; the thermometer code and the rising-threshold sweep are this design's.
module tb_ctr_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, wr; logic [7:0] wr_row; logic signed [7:0] wr_ctr; logic [15:0] wr_idx;
  logic start; logic [7:0] k;
  logic out_valid; logic [15:0] out_idx; logic [7:0] out_ctr; logic busy, done;
  int checks = 0, failures = 0;

  ctr_buffer #(.ROWS(256)) dut (.*);

  int ctr_of [40];
  int idx_of [40];

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_topk(int kk, int n);
    int order[$];
    int got, cycles;
    bit used [40];
    // reference: selection sort by (ctr desc, row asc)
    for (int i = 0; i < n; i++) used[i] = 0;
    for (int j = 0; j < kk && j < n; j++) begin
      automatic int best = -1;
      for (int i = 0; i < n; i++)
        if (!used[i] && (best < 0 || ctr_of[i] > ctr_of[best])) best = i;
      used[best] = 1; order.push_back(best);
    end
    start <= 1; k <= 8'(kk); @(posedge clk); start <= 0;
    got = 0; cycles = 0;
    while (!done && cycles < 2000) begin
      #1;
      if (out_valid) begin
        if (got < order.size()) begin
          check(int'(out_idx) == idx_of[order[got]] && int'(out_ctr) == ctr_of[order[got]],
                $sformatf("result %0d: idx %0d ctr %0d, expected idx %0d ctr %0d", got, out_idx, out_ctr,
                          idx_of[order[got]], ctr_of[order[got]]));
        end
        got++;
      end
      @(posedge clk); cycles++;
    end
    check(got == order.size(), $sformatf("k=%0d: %0d results", kk, got));
  endtask

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clr = 0; wr = 0; wr_row = 0; wr_ctr = 0; wr_idx = 0; start = 0; k = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    clr <= 1; @(posedge clk); clr <= 0;
    for (int i = 0; i < 40; i++) begin
      automatic int c = $urandom_range(0, 255) - 128;
      idx_of[i] = $urandom_range(0, 65535);
      ctr_of[i] = (c < 0) ? 0 : c;
      wr <= 1; wr_row <= 8'(i); wr_ctr <= 8'(c); wr_idx <= 16'(idx_of[i]);
      @(posedge clk);
    end
    wr <= 0;
    run_topk(10, 40);
    run_topk(60, 40);
    clr <= 1; @(posedge clk); clr <= 0;
    run_topk(5, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
