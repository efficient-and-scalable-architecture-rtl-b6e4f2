// sb_state_mem: one bank of the X_B (positions) or P_B (momenta) memory.
//
// The chip keeps its PR oscillators in two halves, the RingL half and the
// RingR half, each of PR/2 elements; every half of X_B and of P_B is one
// instance of this bank. A word holds PC 16-bit elements, the elements the
// TE module updates in one cycle on one ring. The write port has a lane
// enable, so the host can write single elements and the TE module whole
// words. Timing: read data appears the cycle after rd_en (registered read).
// The paper gives the memories' contents and sizes (N/Pchip elements of 16
// bits each); the banking and word width are this design's choice.
module sb_state_mem #(
  parameter int unsigned PC    = 8,
  parameter int unsigned WORDS = 128
) (
  input  logic                                   clk,
  input  logic                                   rd_en,
  input  logic [$clog2(WORDS)-1:0]               rd_addr,
  output logic [PC-1:0][sb_pkg::XW-1:0]          rd_data,
  input  logic [PC-1:0]                          wr_lane,
  input  logic [$clog2(WORDS)-1:0]               wr_addr,
  input  logic [PC-1:0][sb_pkg::XW-1:0]          wr_data
);
  logic [PC-1:0][sb_pkg::XW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    for (int c = 0; c < PC; c++)
      if (wr_lane[c]) mem[wr_addr][c] <= wr_data[c];
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
