// tx_module: the TX module of one chip, the send operations of both rings.
//
// Each ring takes every position group the TE module puts on that ring's
// stream and, per SB step, runs three phases (k = own chip, P = Pchip):
//   OWN  the first MCE groups are the chip's own subvector for this ring:
//        they are sent on this ring and also written into this ring's R_buf;
//   REV  the chip's own subvector of the opposite ring is replayed from the
//        opposite ring's R_buf in reverse group order and sent on this ring;
//   FWD  the (P-3)*MCE received groups that follow are forwarded to the
//        next chip (the TE module hands over only these; the last two
//        received subvectors reach the next chip by the other ring).
// So every ring sends P-1 subvectors per step: P=2 sends only OWN, P=3
// sends OWN and REV, larger P adds forwarding; P=1 sends nothing. The rings
// run independently, except that REV of one ring waits until the other
// ring's R_buf is full. Sent groups go to the TX queue of the ring; a phase
// waits while that queue is full, without holding up the other ring, so a
// stall in sending does not stop receiving (separate control flows).
// Timing: a group leaves one cycle after it is popped (out_push is
// registered), lambda_TX = 1 cycle plus the TX queue.
// The send order and the R_buf reversal follow Fig. 2(c) and Section 3 of
// the paper; the phase machine is this design's choice.
//
// Lint note: verilator's SYNCASYNCNET warning on rst_n comes from the
// assertions, which use rst_n in 'disable iff'; every flop uses rst_n only
// as an asynchronous reset, so the warning is expected.
module tx_module
  import sb_pkg::*;
#(
  parameter int unsigned PC  = 8,
  parameter int unsigned MCE = 128
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [CHW-1:0]        n_chips,
  // ring index 0 = RingL, 1 = RingR
  input  logic [1:0]            in_valid,
  input  xval_t [1:0][PC-1:0]   in_x,
  output logic [1:0]            in_pop,
  input  logic [1:0]            out_full,
  output logic [1:0]            out_push,
  output xval_t [1:0][PC-1:0]   out_x,
  output logic [1:0]            idle
);
  typedef enum logic [1:0] {OWN, REV, FWD} tx_phase_e;

  localparam int unsigned GW = $clog2(MCE * 256 + 1);

  tx_phase_e        phase [2];
  logic [GW-1:0]    cnt   [2];
  logic [1:0]       rb_wr, rb_rd, rb_full, rb_empty;
  xval_t [PC-1:0]   rb_q  [2];

  logic [GW-1:0] fwd_n;
  assign fwd_n = (n_chips > 3) ? GW'(n_chips - 2'd3) * GW'(MCE) : '0;

  for (genvar g = 0; g < 2; g++) begin : g_rbuf
    tx_rbuf #(.PC(PC), .MCE(MCE)) u_rbuf (
      .clk, .rst_n, .wr_en(rb_wr[g]), .wr_data(in_x[g]),
      .rd_en(rb_rd[g]), .rd_data(rb_q[g]), .full(rb_full[g]), .empty(rb_empty[g]));
  end

  logic [1:0]          send;
  xval_t [1:0][PC-1:0] send_x;

  always_comb begin
    in_pop = '0; rb_wr = '0; rb_rd = '0; send = '0;
    for (int g = 0; g < 2; g++) begin
      send_x[g] = in_x[g];
      unique case (phase[g])
        OWN: begin
          // write R_buf only when the opposite ring will replay it (P >= 3)
          if (in_valid[g] && !out_full[g] && (n_chips < 3 || !rb_full[g])) begin
            in_pop[g] = 1'b1;
            send[g]   = (n_chips >= 2);
            rb_wr[g]  = (n_chips >= 3);
          end
        end
        REV: begin
          if (rb_full[1-g] && !out_full[g]) begin
            rb_rd[1-g] = 1'b1;
            send[g]    = 1'b1;
            send_x[g]  = rb_q[1-g];
          end
        end
        FWD: begin
          if (in_valid[g] && !out_full[g]) begin
            in_pop[g] = 1'b1;
            send[g]   = 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  for (genvar g = 0; g < 2; g++) begin : g_fsm
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        phase[g] <= OWN;
        cnt[g]   <= '0;
      end else if (start) begin
        phase[g] <= OWN;
        cnt[g]   <= '0;
      end else begin
        unique case (phase[g])
          OWN: if (in_pop[g]) begin
            if (cnt[g] == GW'(MCE - 1)) begin
              cnt[g]   <= '0;
              phase[g] <= (n_chips >= 3) ? REV : OWN;
            end else cnt[g] <= cnt[g] + 1'b1;
          end
          REV: if (rb_rd[1-g]) begin
            if (cnt[g] == GW'(MCE - 1)) begin
              cnt[g]   <= '0;
              phase[g] <= (n_chips > 3) ? FWD : OWN;
            end else cnt[g] <= cnt[g] + 1'b1;
          end
          FWD: if (in_pop[g]) begin
            if (cnt[g] == fwd_n - 1'b1) begin
              cnt[g]   <= '0;
              phase[g] <= OWN;
            end else cnt[g] <= cnt[g] + 1'b1;
          end
          default: phase[g] <= OWN;
        endcase
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) out_push[g] <= 1'b0;
      else        out_push[g] <= send[g];
    end
    always_ff @(posedge clk) out_x[g] <= send_x[g];

    assign idle[g] = (phase[g] == OWN) && (cnt[g] == '0);
  end

  // a new subvector is always written into an emptied R_buf
  for (genvar g = 0; g < 2; g++) begin : g_chk
    a_rb_fresh: assert property (@(posedge clk) disable iff (!rst_n)
                                 (rb_wr[g] && phase[g] == OWN && cnt[g] == '0) |-> rb_empty[g]);
  end

endmodule
