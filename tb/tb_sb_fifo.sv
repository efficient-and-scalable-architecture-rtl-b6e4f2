// tb_sb_fifo: self-checking testbench of the show-ahead FIFO sb_fifo.
// A small FIFO (W=16, DEPTH=8) is driven with random push/pop (never a push
// when full nor a pop when empty). A queue in the testbench is the expected
// contents; every cycle dout (when not empty), empty, full and count are
// compared with it. It also checks that a pushed word is visible at dout one
// cycle after the push into an empty FIFO, and that the FIFO reaches full.
module tb_sb_fifo;
  localparam int unsigned W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] din = '0, dout;
  logic empty, full;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, saw_full = 0;
  logic [W-1:0] q[$];

  sb_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    chk(empty && !full && count == 0, "empty after reset");
    // latency: push one word into the empty FIFO, visible next cycle
    push = 1; din = 16'hBEEF; @(negedge clk); push = 0;
    chk(!empty && dout == 16'hBEEF && count == 1, "one-cycle visibility");
    pop = 1; @(negedge clk); pop = 0;
    chk(empty, "empty after pop");
    for (int i = 0; i < 3000; i++) begin
      bit p = ($urandom % 100) < (i < 1500 ? 60 : 40);
      bit r = ($urandom % 100) < 50;
      push = p && !full; pop = r && !empty; din = W'($urandom);
      if (pop) begin chk(dout == q[0], "dout order"); end
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      @(negedge clk);
      chk(count == q.size(), "count");
      chk(empty == (q.size() == 0), "empty flag");
      chk(full == (q.size() == DEPTH), "full flag");
      if (full) saw_full++;
      if (!empty) chk(dout == q[0], "head");
    end
    push = 0; pop = 0;
    chk(saw_full > 0, "FIFO reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
