// tb_inter_bank_adder: words sent to distinct slots must be concatenated,
// words sent to one slot must be added lane by lane; clr empties the buffer.
// ADD or concatenation pooling follows the published design; the slot
// scheme is this design's.
module tb_inter_bank_adder;
  import imars_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, in_valid; logic [2:0] in_slot; vec_t in_data; vec_t feat [8];
  int checks = 0, failures = 0;
  vec_t expv [8];

  inter_bank_adder #(.NSLOT(8)) dut (.*);

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
    clr = 0; in_valid = 0; in_slot = 0; in_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      clr <= 1; @(posedge clk); clr <= 0;
      for (int s = 0; s < 8; s++) expv[s] = '0;
      for (int t = 0; t < 20; t++) begin
        automatic int s = (round == 0) ? t % 8 : $urandom_range(0, 2);
        vec_t v;
        for (int k = 0; k < 8; k++) v[k*32 +: 32] = $urandom;
        in_valid <= 1; in_slot <= 3'(s); in_data <= v;
        expv[s] = add_ref(expv[s], v);
        @(posedge clk);
      end
      in_valid <= 0;
      @(posedge clk); #1;
      for (int s = 0; s < 8; s++) begin
        checks++;
        if (feat[s] != expv[s]) begin failures++; $display("FAIL: round %0d slot %0d", round, s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
