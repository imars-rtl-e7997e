// tb_xbar: loads a random 256 x 128 int8 weight matrix, applies random int8
// inputs and compares all 128 outputs with dot products computed here;
// `done` must come exactly 128/NADC clocks after start.
// A 256 x 128 crossbar follows the published size; the 8 shared ADCs and
// the ideal conversion are this design's.
module tb_xbar;
  import imars_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [7:0] wr_row; logic [1:0] wr_grp; vec_t wr_data;
  logic start; vec_t x [8]; logic signed [31:0] y [128]; logic busy, done;
  int checks = 0, failures = 0;
  byte W [256][128];
  byte X [256];

  xbar #(.ROWS(256), .COLS(128), .NADC(8)) dut (.*);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; wr_row = 0; wr_grp = 0; wr_data = '0; start = 0;
    for (int w = 0; w < 8; w++) x[w] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 256; r++) for (int g = 0; g < 4; g++) begin
      vec_t d;
      for (int j = 0; j < 32; j++) begin W[r][g*32+j] = byte'($urandom); d[j*8 +: 8] = W[r][g*32+j]; end
      wr_en <= 1; wr_row <= 8'(r); wr_grp <= 2'(g); wr_data <= d;
      @(posedge clk);
    end
    wr_en <= 0;
    for (int trial = 0; trial < 3; trial++) begin
      int cyc;
      for (int r = 0; r < 256; r++) begin X[r] = byte'($urandom); x[r/32][(r%32)*8 +: 8] = X[r]; end
      start <= 1; @(posedge clk); start <= 0;
      cyc = 0;
      #1;
      while (!done && cyc < 1000) begin @(posedge clk); #1; cyc++; end
      checks++;
      if (cyc != 16) begin failures++; $display("FAIL: latency %0d", cyc); end
      for (int c = 0; c < 128; c++) begin
        automatic int s = 0;
        for (int r = 0; r < 256; r++) s += int'(X[r]) * int'(W[r][c]);
        checks++;
        if (y[c] != s) begin failures++; $display("FAIL: trial %0d col %0d", trial, c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
