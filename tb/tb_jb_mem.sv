// tb_jb_mem: self-checking testbench of the J_B memory (jb_mem, PR=16,
// PC=2, NMAX=64: 32 column groups of 32 bits). All groups are written with
// random bits, then both read ports read random addresses every cycle, each
// enabled at random; data must appear one cycle after the enable and hold
// while the enable is low. Writes during reading update the model.
module tb_jb_mem;
  localparam int unsigned PR = 16, PC = 2, NMAX = 64, G = NMAX / PC, AW = $clog2(G);
  logic clk = 0, wr_en = 0, rd_en_l = 0, rd_en_r = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr_l = '0, rd_addr_r = '0;
  logic [PC*PR-1:0] wr_data = '0, rd_data_l, rd_data_r, model [G], el, er;
  int checks = 0, failures = 0;

  jb_mem #(.PR(PR), .PC(PC), .NMAX(NMAX)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < int'(G); a++) begin
      @(negedge clk); wr_en = 1; wr_addr = a; wr_data = $urandom; model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      rd_en_l = $urandom % 2; rd_en_r = $urandom % 2;
      rd_addr_l = $urandom % G; rd_addr_r = $urandom % G;
      wr_en = ($urandom % 8) == 0; wr_addr = $urandom % G; wr_data = $urandom;
      @(posedge clk);
      if (rd_en_l) el = model[rd_addr_l];
      if (rd_en_r) er = model[rd_addr_r];
      if (wr_en) model[wr_addr] = wr_data;
      #1;
      if (i > 2) begin
        checks += 2;
        if (rd_data_l !== el) begin failures++; $display("FAIL port L at %0t", $time); end
        if (rd_data_r !== er) begin failures++; $display("FAIL port R at %0t", $time); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
