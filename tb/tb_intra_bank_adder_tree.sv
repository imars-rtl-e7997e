// tb_intra_bank_adder_tree: drives rounds of four 256-bit inputs into the
// fan-in-4 intra-bank adder tree. A one-round reduction must equal
// IN1+IN2+IN3+IN4; a multi-round reduction (first round marked with `first`)
// must equal the sum of every input of every round, one round per clock.
// The fan-in of four with the output fed back follows the published tree;
// the `first` flag and one round per clock are this design's.
module tb_intra_bank_adder_tree;
  import imars_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, first;
  vec_t in [4];
  vec_t out;
  int checks = 0, failures = 0;

  intra_bank_adder_tree dut (.*);

  function automatic vec_t add_ref(vec_t a, vec_t b);
    vec_t r;
    for (int d = 0; d < 32; d++) r[d*8 +: 8] = 8'((int'(a[d*8 +: 8]) + int'(b[d*8 +: 8])) % 256);
    return r;
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    vec_t exp;
    in_valid = 0; first = 0;
    for (int i = 0; i < 4; i++) in[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      automatic int rounds = 1 + trial % 4;
      exp = '0;
      for (int r = 0; r < rounds; r++) begin
        in_valid <= 1; first <= (r == 0);
        for (int i = 0; i < 4; i++) begin
          vec_t v;
          for (int k = 0; k < 8; k++) v[k*32 +: 32] = $urandom;
          in[i] <= v;
          exp = add_ref(exp, v);
        end
        @(posedge clk);
      end
      in_valid <= 0; first <= 0;
      #1;
      checks++;
      if (out != exp) begin failures++; $display("FAIL: trial %0d, %0d rounds", trial, rounds); end
      @(posedge clk);
      checks++;   // output holds while idle
      if (out != exp) begin failures++; $display("FAIL: hold trial %0d", trial); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
