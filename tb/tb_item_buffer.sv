// tb_item_buffer: an 8-entry item buffer. Indices come out in the order they
// went in; a push while full is dropped and raises the sticky overflow
// flag; clr empties the buffer and drops the flag.
// Storing candidate indices follows the published design; the FIFO order
// and the overflow flag are this design's.
module tb_item_buffer;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, push, pop; logic [15:0] push_idx, head; logic [3:0] count; logic full, overflow;
  int checks = 0, failures = 0;
  int q[$];

  item_buffer #(.DEPTH(D)) dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clr = 0; push = 0; pop = 0; push_idx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic bit pu = ($urandom_range(0, 9) < 6);
      automatic bit po = ($urandom_range(0, 9) < 4);
      automatic logic [15:0] v = 16'($urandom);
      push <= pu; pop <= po; push_idx <= v;
      if (po && q.size() > 0) begin
        check(head == 16'(q[0]), $sformatf("head order t=%0d", t));
      end
      @(posedge clk); #1;
      begin
        // a push is taken only when the buffer was not full before the clock
        automatic bit take = pu && q.size() < D;
        if (po && q.size() > 0) void'(q.pop_front());
        if (take) q.push_back(int'(v));
      end
      check(int'(count) == q.size(), $sformatf("count t=%0d", t));
    end
    push <= 0; pop <= 0;
    // fill and overflow
    clr <= 1; @(posedge clk); clr <= 0; q.delete();
    for (int i = 0; i < D; i++) begin push <= 1; push_idx <= 16'(i + 100); @(posedge clk); end
    #1 check(full && !overflow, "full, no overflow yet");
    push_idx <= 16'(999); @(posedge clk); push <= 0; #1;
    check(overflow && int'(count) == D, "overflow on push while full");
    for (int i = 0; i < D; i++) begin
      check(head == 16'(i + 100), "dropped index not stored");
      pop <= 1; @(posedge clk); pop <= 0; #1;
    end
    check(count == 0 && overflow, "empty, overflow sticky");
    clr <= 1; @(posedge clk); clr <= 0; #1;
    check(!overflow, "clr drops overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
