// tx_rbuf: R_buf, the reversal buffer of the TX module.
//
// While the chip sends one of its own subvectors on one ring, the TX module
// also writes it, group by group, into this buffer. Once all MCE groups are
// in (full), the buffer replays them in the reverse group order for the
// opposite ring (RingL sends in ascending order, RingR in descending order).
// After the last group has been read the buffer is empty again and can take
// the next SB step's subvector. Writing is allowed only while the buffer is
// not full and reading only while it is full (checked by assertions).
// Interface: wr_en/wr_data append a group; rd_data shows the next group to
// replay (combinational read) and rd_en consumes it.
// That the buffer holds one subvector and replays it reversed follows the
// paper; the full/empty protocol is this design's choice.
//
// Lint note: verilator's SYNCASYNCNET warning on rst_n comes from the
// assertions, which use rst_n in 'disable iff'; every flop uses rst_n only
// as an asynchronous reset, so the warning is expected.
module tx_rbuf
  import sb_pkg::*;
#(
  parameter int unsigned PC  = 8,
  parameter int unsigned MCE = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  xval_t [PC-1:0]       wr_data,
  input  logic                 rd_en,
  output xval_t [PC-1:0]       rd_data,
  output logic                 full,
  output logic                 empty
);
  localparam int unsigned CNW = $clog2(MCE + 1);

  xval_t [PC-1:0]  mem [MCE];
  logic [CNW-1:0]  wcnt;     // groups written
  logic [CNW-1:0]  rcnt;     // groups replayed

  assign full    = (wcnt == CNW'(MCE));
  assign empty   = (wcnt == '0);
  assign rd_data = mem[MCE - 1 - int'(rcnt)];

  always_ff @(posedge clk) begin
    if (wr_en) mem[32'(wcnt) % MCE] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt <= '0;
      rcnt <= '0;
    end else if (rd_en) begin
      if (rcnt == CNW'(MCE - 1)) begin
        rcnt <= '0;
        wcnt <= '0;
      end else begin
        rcnt <= rcnt + 1'b1;
      end
    end else if (wr_en) begin
      wcnt <= wcnt + 1'b1;
    end
  end

  a_wr_not_full: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
  a_rd_full:     assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> full);

endmodule
