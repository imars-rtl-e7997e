// tb_intra_mat_adder_tree: feeds random sets of 32 words into the intra-mat
// adder tree and compares the registered sum, one clock later, with a
// lane-wise int8 sum computed here. Also checks that a new input set is
// accepted every clock (pipelined throughput of one per clock).
// Summing the C accumulators of a mat follows the published design; the
// modulo-256 lanes and the one-clock latency are this design's.
module tb_intra_mat_adder_tree;
  import imars_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  vec_t in [N];
  vec_t sum;
  int checks = 0, failures = 0;

  intra_mat_adder_tree #(.N(N)) dut (.*);

  function automatic vec_t ref_sum(input vec_t v [N]);
    vec_t r;
    for (int d = 0; d < 32; d++) begin
      automatic int s = 0;
      for (int i = 0; i < N; i++) s += int'(v[i][d*8 +: 8]);
      r[d*8 +: 8] = 8'(s & 255);
    end
    return r;
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    vec_t prev;
    for (int i = 0; i < N; i++) in[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(posedge clk); #1;
    check_zero: begin checks++; if (sum != '0) failures++; end
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < N; i++)
        for (int k = 0; k < 8; k++) in[i][k*32 +: 32] = (t % 5 == 0) ? 32'hFFFF_FFFF : $urandom;
      prev = ref_sum(in);
      @(posedge clk); #1;       // back-to-back: a new set every clock
      checks++;
      if (sum != prev) begin failures++; $display("FAIL: set %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
