// sbm_chip: one chip of the multi-chip simulated bifurcation machine (SBM).
//
// A cluster of Pchip such chips solves an N-spin Ising problem with full
// connectivity, N = Pchip * PR. Each chip owns PR oscillators (positions x,
// momenta p) and the PR x N slice of the coupling matrix J. The chips form
// two rings: on RingL chip k sends to chip k-1, on RingR to chip k+1. In
// every SB step each chip first updates its own oscillators (phase A) and
// streams the new positions into its own MAC array and to both neighbours,
// then (phase B) streams the positions it receives into the MAC array while
// forwarding them, so that computation and communication overlap and every
// position is used once, in the order it arrives.
//
// Inside: TE module (X_B, P_B, update, receive), MM module (J_B, MAC array
// with Delta-p register), TX module (send order, R_buf), joined by queues:
// an RX queue per ring, TE->MM and TE->TX queues per ring, an MM->TE queue
// for Delta-p and a TX queue per ring. The TE->TX queue holds one
// subvector plus margin: while the TX module replays R_buf on a ring, the
// positions received on that ring keep flowing into the MAC array and wait
// there until they can be forwarded.
//
// Ring ports (index 0 = RingL, 1 = RingR) carry one column group (PC 16-bit
// positions) per cycle. They use credit flow control: a chip may send a
// group only while it holds a credit; it starts with RXQ_DEPTH credits (the
// size of the receiver's RX queue) and gets one back on tx_credit for each
// group the receiver takes out of its RX queue (rx_credit). The physical
// link (PHY and cable) sits between tx_* of one chip and rx_* of the next
// and is not part of this module.
//
// Host side: J_B is written one column group (PC*PR bits) per cycle; X_B and
// P_B one element per cycle; chip_id, n_chips (Pchip), n_steps and the SB
// coefficients must be stable from start until busy falls. start begins a
// run of n_steps SB steps on every chip; busy stays high until the chip has
// finished its last step and emptied its queues. Positions are read back
// through h_rd_* (one cycle latency) when busy is low.
//
// Timing: with MCE = PR/(2*PC) cycles per subvector, one SB step takes
// Pchip*MCE + 8 cycles while a hop (link latency plus 8 cycles through TE
// and TX) is at most MCE, (Pchip-1)*MCE + hop + 8 up to 2*MCE, and
// ceil((Pchip-1)/2)*hop + (1 or 2)*MCE + 8 beyond - the three modes of the
// paper's performance model. RXQ_DEPTH must cover the credit round trip
// (twice the link latency) or the links throttle.
//
// Defaults are the S2K design point of the paper (PR = N/Pchip = 2,048,
// PC = 8, a 2,048 x 32,768 J slice, 32,768 MAC units). Queue depths, the
// credit scheme and the host ports are this design's choice.
//
// Lint note: verilator's SYNCASYNCNET warning on rst_n comes from the
// assertions, which use rst_n in 'disable iff'; every flop uses rst_n only
// as an asynchronous reset, so the warning is expected.
module sbm_chip
  import sb_pkg::*;
#(
  parameter int unsigned PR        = 2048,
  parameter int unsigned PC        = 8,
  parameter int unsigned NMAX      = 32768,
  parameter int unsigned M         = 2,
  parameter int unsigned RXQ_DEPTH = 512,   // >= credit round trip (2 link latencies)
  parameter int unsigned IQ_DEPTH  = 16,
  parameter int unsigned TXI_DEPTH = PR / (2 * PC) + 16,
  parameter int unsigned TXQ_DEPTH = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // run control and configuration
  input  logic                         start,
  input  logic [CHW-1:0]               chip_id,
  input  logic [CHW-1:0]               n_chips,
  input  logic [STW-1:0]               n_steps,
  input  sb_coef_t                     coef,
  output logic                         busy,
  // host access
  input  logic                         j_wr_en,
  input  logic [$clog2(NMAX/PC)-1:0]   j_wr_addr,
  input  logic [PC*PR-1:0]             j_wr_data,
  input  logic                         h_wr_en,
  input  logic                         h_wr_sel,
  input  logic [$clog2(PR)-1:0]        h_wr_addr,
  input  xval_t                        h_wr_data,
  input  logic                         h_rd_sel,
  input  logic [$clog2(PR)-1:0]        h_rd_addr,
  output xval_t                        h_rd_data,
  // ring links (0 = RingL, 1 = RingR)
  output logic [1:0]                   tx_valid,
  output xval_t [1:0][PC-1:0]          tx_data,
  input  logic [1:0]                   tx_credit,
  input  logic [1:0]                   rx_valid,
  input  xval_t [1:0][PC-1:0]          rx_data,
  output logic [1:0]                   rx_credit,
  // status
  output logic                         step_start,
  output logic [STW-1:0]               step,
  output logic [1:0]                   mm_stall
);
  localparam int unsigned MCE    = PR / (2 * PC);
  localparam int unsigned XGW    = PC * XW;
  localparam int unsigned DPW    = 2 * PC * ACCW;
  localparam int unsigned TE_LAT = M + 2;
  localparam int unsigned IQCW   = $clog2(IQ_DEPTH + 1);
  localparam int unsigned TICW   = $clog2(TXI_DEPTH + 1);
  localparam int unsigned TQCW   = $clog2(TXQ_DEPTH + 1);
  localparam int unsigned CRW    = $clog2(RXQ_DEPTH + 1);

  // ---------------- RX queues ----------------
  logic [1:0]                rxq_empty, te_rx_pop;
  logic [1:0][XGW-1:0]       rxq_dout;
  for (genvar g = 0; g < 2; g++) begin : g_rxq
    logic                          full_unused;
    logic [$clog2(RXQ_DEPTH+1)-1:0] cnt_unused;
    sb_fifo #(.W(XGW), .DEPTH(RXQ_DEPTH)) u_rxq (
      .clk, .rst_n, .push(rx_valid[g]), .din(rx_data[g]), .pop(te_rx_pop[g]),
      .dout(rxq_dout[g]), .empty(rxq_empty[g]), .full(full_unused), .count(cnt_unused));
  end
  assign rx_credit = te_rx_pop;

  // ---------------- TE module ----------------
  logic                 dpq_empty, dp_pop;
  logic [DPW-1:0]       dpq_dout;
  logic [1:0]           room, te_out_valid, te_out_tx;
  xval_t [1:0][PC-1:0]  te_out_x;
  logic                 te_busy;
  acc_t [PC-1:0]        dpq_l, dpq_r;
  assign {dpq_r, dpq_l} = dpq_dout;

  te_module #(.PR(PR), .PC(PC), .M(M)) u_te (
    .clk, .rst_n, .start, .n_chips, .n_steps, .coef,
    .h_wr_en, .h_wr_sel, .h_wr_addr, .h_wr_data, .h_rd_sel, .h_rd_addr, .h_rd_data,
    .dp_valid(!dpq_empty), .dp_l(dpq_l), .dp_r(dpq_r), .dp_pop,
    .rx_valid_l(!rxq_empty[0]), .rx_x_l(rxq_dout[0]), .rx_pop_l(te_rx_pop[0]),
    .rx_valid_r(!rxq_empty[1]), .rx_x_r(rxq_dout[1]), .rx_pop_r(te_rx_pop[1]),
    .room_l(room[0]), .room_r(room[1]),
    .out_valid_l(te_out_valid[0]), .out_x_l(te_out_x[0]),
    .out_valid_r(te_out_valid[1]), .out_x_r(te_out_x[1]),
    .out_tx_l(te_out_tx[0]), .out_tx_r(te_out_tx[1]),
    .busy(te_busy), .step_start, .step);

  // ---------------- TE->MM and TE->TX queues ----------------
  logic [1:0]            mmq_empty, mm_pop, txiq_empty, txi_pop;
  logic [1:0][XGW-1:0]   mmq_dout, txiq_dout;
  logic [1:0][IQCW-1:0]  mmq_cnt;
  logic [1:0][TICW-1:0]  txiq_cnt;
  for (genvar g = 0; g < 2; g++) begin : g_iq
    logic full_mm_unused, full_tx_unused;
    sb_fifo #(.W(XGW), .DEPTH(IQ_DEPTH)) u_mmq (
      .clk, .rst_n, .push(te_out_valid[g]), .din(te_out_x[g]), .pop(mm_pop[g]),
      .dout(mmq_dout[g]), .empty(mmq_empty[g]), .full(full_mm_unused), .count(mmq_cnt[g]));
    sb_fifo #(.W(XGW), .DEPTH(TXI_DEPTH)) u_txiq (
      .clk, .rst_n, .push(te_out_tx[g]), .din(te_out_x[g]), .pop(txi_pop[g]),
      .dout(txiq_dout[g]), .empty(txiq_empty[g]), .full(full_tx_unused), .count(txiq_cnt[g]));
    // room for everything the TE pipeline may still deliver
    assign room[g] = (mmq_cnt[g]  + IQCW'(TE_LAT + 1) <= IQCW'(IQ_DEPTH)) &&
                     (txiq_cnt[g] + TICW'(TE_LAT + 1) <= TICW'(TXI_DEPTH));
  end

  // ---------------- MM module ----------------
  logic                 mm_out_valid, dpq_full, mm_busy;
  acc_t [PC-1:0]        mm_dp_l, mm_dp_r;
  logic [$clog2(4+1)-1:0] dpq_cnt_unused;

  mm_module #(.PR(PR), .PC(PC), .NMAX(NMAX)) u_mm (
    .clk, .rst_n, .start, .chip_id, .n_chips, .n_steps,
    .j_wr_en, .j_wr_addr, .j_wr_data,
    .in_valid_l(!mmq_empty[0]), .in_x_l(mmq_dout[0]), .in_pop_l(mm_pop[0]),
    .in_valid_r(!mmq_empty[1]), .in_x_r(mmq_dout[1]), .in_pop_r(mm_pop[1]),
    .out_valid(mm_out_valid), .out_ready(!dpq_full), .out_dp_l(mm_dp_l), .out_dp_r(mm_dp_r),
    .busy(mm_busy), .stall_l(mm_stall[0]), .stall_r(mm_stall[1]));

  sb_fifo #(.W(DPW), .DEPTH(4)) u_dpq (
    .clk, .rst_n, .push(mm_out_valid && !dpq_full), .din({mm_dp_r, mm_dp_l}), .pop(dp_pop),
    .dout(dpq_dout), .empty(dpq_empty), .full(dpq_full), .count(dpq_cnt_unused));

  // ---------------- TX module and TX queues ----------------
  logic [1:0]            tx_push, txq_full_hint, tx_idle, txq_empty, txq_pop;
  xval_t [1:0][PC-1:0]   tx_push_x, txiq_x;
  logic [1:0][XGW-1:0]   txq_dout;
  logic [1:0][TQCW-1:0]  txq_cnt;
  logic [1:0][CRW-1:0]   credits;

  for (genvar g = 0; g < 2; g++) begin : g_txq
    logic full_unused;
    assign txiq_x[g] = txiq_dout[g];
    // a push decided now lands next cycle, after the one already in flight
    assign txq_full_hint[g] = (TQCW+1)'(txq_cnt[g]) + (TQCW+1)'(tx_push[g]) >= (TQCW+1)'(TXQ_DEPTH);
    sb_fifo #(.W(XGW), .DEPTH(TXQ_DEPTH)) u_txq (
      .clk, .rst_n, .push(tx_push[g]), .din(tx_push_x[g]), .pop(txq_pop[g]),
      .dout(txq_dout[g]), .empty(txq_empty[g]), .full(full_unused), .count(txq_cnt[g]));

    assign txq_pop[g]  = !txq_empty[g] && (credits[g] != '0);
    assign tx_valid[g] = txq_pop[g];
    assign tx_data[g]  = txq_dout[g];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) credits[g] <= CRW'(RXQ_DEPTH);
      else        credits[g] <= credits[g] - CRW'(txq_pop[g]) + CRW'(tx_credit[g]);
    end
  end

  tx_module #(.PC(PC), .MCE(MCE)) u_tx (
    .clk, .rst_n, .start, .n_chips,
    .in_valid(~txiq_empty), .in_x(txiq_x), .in_pop(txi_pop),
    .out_full(txq_full_hint), .out_push(tx_push), .out_x(tx_push_x), .idle(tx_idle));

  assign busy = te_busy || mm_busy || !(&mmq_empty) || !(&txiq_empty) || !(&txq_empty)
             || !(&tx_idle) || !(&rxq_empty) || !dpq_empty || (|tx_push);

endmodule
