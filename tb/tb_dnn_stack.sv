// tb_dnn_stack: a three-crossbar stack with layer 0 (ReLU, 64 outputs),
// layer 1 disabled and layer 2 (signed, 5 outputs). Weights and inputs are
// random; the expected outputs are computed here with the same
// shift-saturate-ReLU rule. Also checks the clock count of a run.
// Fully connected layers on crossbars follow the published design; the
// requantisation rule and the clock count are this design's.
module tb_dnn_stack;
  import imars_pkg::*;
  localparam int NL = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg [NL];
  logic wr_en; logic [1:0] wr_layer; logic [7:0] wr_row; logic [1:0] wr_grp; vec_t wr_data;
  logic start; vec_t x [8]; vec_t out [4]; logic busy, done;
  int checks = 0, failures = 0;
  int W [NL][256][128];
  int a [256], b [128];

  dnn_stack #(.NL(NL), .NADC(8)) dut (.*);

  function automatic int rq(int s, int sh, bit relu, int j, int n);
    int q = s >>> sh;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    if (relu && q < 0) q = 0;
    if (j >= n) q = 0;
    return q;
  endfunction

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; wr_layer = 0; wr_row = 0; wr_grp = 0; wr_data = '0; start = 0;
    cfg[0] = '{en: 1, relu: 1, shift: 5'd6, out_n: 8'd64};
    cfg[1] = '{en: 0, relu: 0, shift: 5'd0, out_n: 8'd128};
    cfg[2] = '{en: 1, relu: 0, shift: 5'd5, out_n: 8'd5};
    for (int w = 0; w < 8; w++) x[w] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l < NL; l++) for (int r = 0; r < 256; r++) for (int g = 0; g < 4; g++) begin
      vec_t d;
      for (int j = 0; j < 32; j++) begin
        W[l][r][g*32+j] = $urandom_range(0, 16) - 8;
        d[j*8 +: 8] = 8'(W[l][r][g*32+j]);
      end
      wr_en <= 1; wr_layer <= 2'(l); wr_row <= 8'(r); wr_grp <= 2'(g); wr_data <= d;
      @(posedge clk);
    end
    wr_en <= 0;
    for (int trial = 0; trial < 2; trial++) begin
      int cyc;
      for (int r = 0; r < 256; r++) begin
        a[r] = $urandom_range(0, 255) - 128;
        x[r/32][(r%32)*8 +: 8] = 8'(a[r]);
      end
      // reference: layer 0 then layer 2
      for (int c = 0; c < 128; c++) begin
        automatic int s = 0;
        for (int r = 0; r < 256; r++) s += a[r] * W[0][r][c];
        b[c] = rq(s, 6, 1, c, 64);
      end
      start <= 1; @(posedge clk); start <= 0;
      cyc = 0; #1;
      while (!done && cyc < 2000) begin @(posedge clk); #1; cyc++; end
      checks++;
      // per enabled layer: 1 start + 16 read-out + 1 done + 1 requantise clocks;
      // 1 clock per disabled layer; 1 clock to finish
      if (cyc != 2 * 19 + 1 + 1) begin failures++; $display("FAIL: %0d clocks", cyc); end
      for (int c = 0; c < 128; c++) begin
        automatic int s = 0;
        automatic int e;
        for (int r = 0; r < 128; r++) s += b[r] * W[2][r][c];
        e = rq(s, 5, 0, c, 5);
        checks++;
        if (int'(signed'(out[c/32][(c%32)*8 +: 8])) != e) begin
          failures++; $display("FAIL: trial %0d out %0d = %0d, expected %0d", trial, c, signed'(out[c/32][(c%32)*8 +: 8]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
