// tb_sb_state_mem: self-checking testbench of the X_B/P_B word memory
// (sb_state_mem, PC=4, WORDS=16). Random reads and lane-masked writes are
// issued every cycle against a model array; read data must appear one cycle
// after rd_en (registered read) and hold its value while rd_en is low.
module tb_sb_state_mem;
  localparam int unsigned PC = 4, WORDS = 16, XW = sb_pkg::XW;
  logic clk = 0, rd_en = 0;
  logic [$clog2(WORDS)-1:0] rd_addr = '0, wr_addr = '0;
  logic [PC-1:0][XW-1:0] rd_data, wr_data = '0, model [WORDS], exp_q;
  logic [PC-1:0] wr_lane = '0;
  int checks = 0, failures = 0;
  bit have = 0;   // a read has been issued, exp_q is defined

  sb_state_mem #(.PC(PC), .WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    // fill every word first
    for (int a = 0; a < int'(WORDS); a++) begin
      @(negedge clk);
      wr_addr = $clog2(WORDS)'(a); wr_lane = '1;
      for (int c = 0; c < int'(PC); c++) wr_data[c] = XW'($urandom);
      model[a] = wr_data;
    end
    @(negedge clk); wr_lane = '0;
    exp_q = 'x;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      rd_en = 1'($urandom % 2); rd_addr = $clog2(WORDS)'($urandom % WORDS);
      wr_addr = $clog2(WORDS)'($urandom % WORDS); wr_lane = PC'($urandom);
      for (int c = 0; c < int'(PC); c++) wr_data[c] = XW'($urandom);
      @(posedge clk);
      if (rd_en) begin exp_q = model[rd_addr]; have = 1; end     // read sees the old contents
      for (int c = 0; c < int'(PC); c++) if (wr_lane[c]) model[wr_addr][c] = wr_data[c];
      #1;
      if (have) begin
        checks++;
        if (rd_data !== exp_q) begin failures++; $display("FAIL read data at %0t", $time); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
