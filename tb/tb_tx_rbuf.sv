// tb_tx_rbuf: self-checking testbench of R_buf (tx_rbuf), the buffer that
// replays a subvector in reverse order on the other ring. With PC=2, MCE=8 it
// writes MCE random groups (full must rise exactly after MCE writes, with
// idle cycles inserted), reads them back and expects the groups in reverse
// order, one per read cycle, then checks the buffer is empty again. Four
// rounds are run to check the reset of the counters after the last read.
module tb_tx_rbuf;
  import sb_pkg::*;
  localparam int unsigned PC = 2, MCE = 8;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  xval_t [PC-1:0] wr_data, rd_data;
  logic full, empty;
  int checks = 0, failures = 0;
  xval_t [PC-1:0] grp [MCE];

  tx_rbuf #(.PC(PC), .MCE(MCE)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    wr_data = '0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int round = 0; round < 4; round++) begin
      chk(empty && !full, "empty before writing");
      for (int i = 0; i < int'(MCE); i++) begin
        for (int c = 0; c < int'(PC); c++) grp[i][c] = xval_t'($urandom);
        wr_data = grp[i]; wr_en = 1; @(negedge clk); wr_en = 0;
        chk(full == (i == int'(MCE) - 1), "full after MCE writes");
        if ($urandom % 2) @(negedge clk);
      end
      for (int i = 0; i < int'(MCE); i++) begin
        chk(rd_data == grp[MCE-1-i], "reverse order");
        rd_en = 1; @(negedge clk); rd_en = 0;
      end
      chk(empty && !full, "empty after replay");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
