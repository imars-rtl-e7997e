// tb_rsc_bus: five sources on the RSC bus. Every request must put the named
// source's word, with its destination tag, on the bus exactly one clock
// later; no request means no valid word.
// The 256-bit word-serial bus follows the published design; the
// destination tag and the one-clock latency are this design's.
module tb_rsc_bus;
  import imars_pkg::*;
  localparam int NS = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  vec_t src_data [NS]; logic req; logic [2:0] src; logic [2:0] dst_in;
  vec_t data; logic valid; logic [2:0] dst;
  int checks = 0, failures = 0;

  rsc_bus #(.NS(NS), .DTW(3)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    req = 0; src = 0; dst_in = 0;
    for (int s = 0; s < NS; s++) for (int k = 0; k < 8; k++) src_data[s][k*32 +: 32] = $urandom;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int s = $urandom_range(0, NS-1);
      automatic bit r = (t % 4 != 3);
      automatic int d = $urandom_range(0, 7);
      req <= r; src <= 3'(s); dst_in <= 3'(d);
      @(posedge clk); #1;
      checks++;
      if (valid != r || (r && (data != src_data[s] || int'(dst) != d))) begin
        failures++; $display("FAIL: t=%0d src %0d", t, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
