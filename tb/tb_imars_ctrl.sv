// tb_imars_ctrl: CTRL with 8 banks of 10 mats (three mat groups). A small
// model of the banks answers res_valid two clocks after red_last. The test
// checks that exactly the masked banks are visited, in ascending order, that
// each gets groups 0,1,2 with first/last flags, that each transfer follows
// its bank's result, and that a bank costs NG + 3 clocks.
// The bank and mat counters follow the published CTRL; the handshake and
// the exact clock count B + 3 + k*(ceil(M/4) + 3) are this design's.
module tb_imars_ctrl;
  localparam int B = 8, M = 10, NG = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start; logic [B-1:0] bank_mask; logic bank_res_valid;
  logic [2:0] red_bank; logic red_valid, red_first, red_last; logic [1:0] red_grp;
  logic xfer_valid, busy, done;
  int checks = 0, failures = 0;

  imars_ctrl #(.B(B), .M(M)) dut (.*);

  // bank model: result two clocks after the last group
  logic [1:0] pipe;
  always_ff @(posedge clk) pipe <= {pipe[0], red_valid && red_last};
  assign bank_res_valid = pipe[1];

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [B-1:0] masks [4] = '{8'b1010_0101, 8'b0000_0001, 8'b1000_0000, 8'b0000_0000};
    start = 0; bank_mask = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    foreach (masks[t]) begin
      automatic int exp_grp, cycles; automatic int visited[$], xfers[$];
      bank_mask <= masks[t]; start <= 1;
      @(posedge clk); start <= 0;
      exp_grp = 0; cycles = 0;
      while (!done && cycles < 500) begin
        #1;
        if (red_valid) begin
          check(int'(red_grp) == exp_grp, $sformatf("group order %0d", exp_grp));
          check(red_first == (exp_grp == 0) && red_last == (exp_grp == NG-1), "first/last flags");
          if (exp_grp == 0) visited.push_back(int'(red_bank));
          exp_grp = (exp_grp + 1) % NG;
        end
        if (xfer_valid) xfers.push_back(int'(red_bank));
        @(posedge clk); cycles++;
      end
      begin
        automatic int k = 0;
        for (int b = 0; b < B; b++) if (masks[t][b]) begin
          check(k < visited.size() && visited[k] == b, $sformatf("mask %b: bank %0d visited in order", masks[t], b));
          check(k < xfers.size() && xfers[k] == b, $sformatf("mask %b: bank %0d transferred", masks[t], b));
          k++;
        end
        check(visited.size() == k && xfers.size() == k, "no extra banks");
        // timing: one clock per bank position scanned, NG group clocks + 2
        // wait + 1 transfer per activated bank, 3 clocks to start and end
        check(cycles == k * (NG + 3) + B + 3, $sformatf("mask %b: %0d clocks", masks[t], cycles));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
