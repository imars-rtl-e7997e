// tb_ibc_net: an IBC network for 10 mats (three transfers of four). Each
// group number must deliver mats 4g..4g+3 in order, zero in the slots past
// the last mat, one clock after the request, with out_valid following
// in_valid.
// Fixed-order transfers of four mat outputs follow the published IBC; the
// one-clock timing is this design's.
module tb_ibc_net;
  import imars_pkg::*;
  localparam int M = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  vec_t mat_sum [M];
  logic in_valid;
  logic [$clog2((M+3)/4+1)-1:0] grp;
  vec_t out [4];
  logic out_valid;
  int checks = 0, failures = 0;

  ibc_net #(.M(M), .FANIN(4)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; grp = 0;
    for (int m = 0; m < M; m++) for (int k = 0; k < 8; k++) mat_sum[m][k*32 +: 32] = $urandom;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int g = 0; g < 3; g++) begin
        in_valid <= 1; grp <= 2'(g);
        @(posedge clk); #1;
        checks++; if (!out_valid) begin failures++; $display("FAIL: valid g%0d", g); end
        for (int i = 0; i < 4; i++) begin
          checks++;
          if (out[i] != ((4*g + i < M) ? mat_sum[4*g + i] : '0)) begin
            failures++; $display("FAIL: group %0d slot %0d", g, i);
          end
        end
      end
      in_valid <= 0;
      @(posedge clk); #1;
      checks++; if (out_valid) begin failures++; $display("FAIL: valid stays"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
