// jb_mem: the J_B coupling-coefficient memory of one chip.
//
// It holds the chip's slice of the coupling matrix: PR rows (the oscillators
// the chip updates) by NMAX columns (every oscillator of the largest cluster),
// one bit per coefficient (1 = +1, 0 = -1). A word is one column group: PC
// consecutive columns times all PR rows, bit [c*PR + r] being J(row r,
// column g*PC + c) for word g. There are two read ports, one per ring, so
// that the MAC array can take PC columns from RingL and PC from RingR in the
// same cycle, and one host write port that writes a whole word.
// Timing: read data appears the cycle after rd_en (registered read).
// The capacity (PR x NMAX = 2,048 x 32,768 bits in the default S2K
// configuration) and the one-bit coding follow the paper; the word layout
// and the port set are this design's choice.
module jb_mem #(
  parameter int unsigned PR   = 2048,
  parameter int unsigned PC   = 8,
  parameter int unsigned NMAX = 32768
) (
  input  logic                              clk,
  // host write port
  input  logic                              wr_en,
  input  logic [$clog2(NMAX/PC)-1:0]        wr_addr,
  input  logic [PC*PR-1:0]                  wr_data,
  // RingL read port
  input  logic                              rd_en_l,
  input  logic [$clog2(NMAX/PC)-1:0]        rd_addr_l,
  output logic [PC*PR-1:0]                  rd_data_l,
  // RingR read port
  input  logic                              rd_en_r,
  input  logic [$clog2(NMAX/PC)-1:0]        rd_addr_r,
  output logic [PC*PR-1:0]                  rd_data_r
);
  localparam int unsigned WORDS = NMAX / PC;

  logic [PC*PR-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en)   mem[wr_addr] <= wr_data;
    if (rd_en_l) rd_data_l    <= mem[rd_addr_l];
    if (rd_en_r) rd_data_r    <= mem[rd_addr_r];
  end

endmodule
