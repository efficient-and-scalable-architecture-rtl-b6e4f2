// mm_module: the matrix-vector multiplication (MM) module of one chip,
// J_B memory plus MAC component plus the control that walks the columns of J.
//
// Positions arrive as column groups (PC values) from the TE module, one
// stream per ring. Each SB step the module consumes Pchip*MCE groups per
// ring (MCE = PR/(2*PC) groups per subvector) and, for each, reads the
// matching column group of J_B and feeds both into the MAC array. The column
// order is the one of the stream: RingL walks the columns upwards starting
// at the chip's own RingL subvector (2k), then jumps over its own RingR
// subvector to subvector 2k+2 and continues upwards with wrap-around; RingR
// walks downwards starting at the top of its own RingR subvector (2k+1),
// jumps over the own RingL subvector to 2k-1 and continues downwards. k is
// chip_id and there are 2*Pchip subvectors. When a ring has no data the MAC
// array simply idles on that ring (a stall) while the other ring goes on.
//
// When both rings have delivered all groups of the step and the pipeline is
// empty, the accumulated Delta-p is handed to the output shift register
// (dump) and streamed to the TE module for the next step; after the last of
// n_steps steps no result is sent, the accumulators are cleared and busy falls. start also issues a
// dump of the cleared accumulators, which gives the zero Delta-p' the first
// step starts from.
// Timing: J_B read 1 cycle, accumulate 1 cycle, so lambda_MM = 2 cycles from
// a pop to the accumulator update.
// The column order follows Fig. 2(b) of the paper; the two-cycle pipeline
// and the control are this design's choice.
//
// Lint note: verilator's SYNCASYNCNET warning on rst_n comes from the
// assertions, which use rst_n in 'disable iff'; every flop uses rst_n only
// as an asynchronous reset, so the warning is expected.
module mm_module
  import sb_pkg::*;
#(
  parameter int unsigned PR   = 2048,
  parameter int unsigned PC   = 8,
  parameter int unsigned NMAX = 32768
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [CHW-1:0]               chip_id,
  input  logic [CHW-1:0]               n_chips,
  input  logic [STW-1:0]               n_steps,
  // host write port of J_B
  input  logic                         j_wr_en,
  input  logic [$clog2(NMAX/PC)-1:0]   j_wr_addr,
  input  logic [PC*PR-1:0]             j_wr_data,
  // position streams from the TE module (FIFO heads)
  input  logic                         in_valid_l,
  input  xval_t [PC-1:0]               in_x_l,
  output logic                         in_pop_l,
  input  logic                         in_valid_r,
  input  xval_t [PC-1:0]               in_x_r,
  output logic                         in_pop_r,
  // Delta-p stream to the TE module
  output logic                         out_valid,
  input  logic                         out_ready,
  output acc_t  [PC-1:0]               out_dp_l,
  output acc_t  [PC-1:0]               out_dp_r,
  // status
  output logic                         busy,
  output logic                         stall_l,   // phase B waiting for RingL data
  output logic                         stall_r    // waiting for RingR data
);
  localparam int unsigned MCE = PR / (2 * PC);
  localparam int unsigned AW  = $clog2(NMAX / PC);
  localparam int unsigned GW  = AW + 1;          // group counter width

  logic            running;
  logic [STW-1:0]  step;
  logic [GW-1:0]   cnt_l, cnt_r;                 // groups consumed this step
  logic [AW-1:0]   addr_l, addr_r;               // current J_B column group
  logic            v_l, v_r;                     // J_B read in flight
  xval_t [PC-1:0]  x_l_q, x_r_q;
  logic [PC*PR-1:0] j_l, j_r;
  logic            dump, mac_empty;

  // Derived sizes of the running configuration.
  logic [GW-1:0] grp_step;   // groups per ring per step = Pchip*MCE
  logic [AW:0]   ngroups;    // column groups of the whole problem = 2*Pchip*MCE
  logic [AW:0]   own_l0;     // first group of the own RingL subvector
  always_comb begin
    grp_step = GW'(n_chips) * GW'(MCE);
    ngroups  = (AW+1)'(n_chips) * (AW+1)'(2 * MCE);
    own_l0   = (AW+1)'(chip_id) * (AW+1)'(2 * MCE);
  end

  function automatic logic [AW-1:0] wrap_inc(input logic [AW-1:0] a, input logic [AW:0] n);
    return ((AW+1)'(a) + 1'b1 == n) ? '0 : a + 1'b1;
  endfunction
  function automatic logic [AW-1:0] wrap_dec(input logic [AW-1:0] a, input logic [AW:0] n);
    return (a == '0) ? AW'(n - 1'b1) : a - 1'b1;
  endfunction

  assign in_pop_l = running && in_valid_l && (cnt_l < grp_step);
  assign in_pop_r = running && in_valid_r && (cnt_r < grp_step);
  // stall: phase B of a ring is waiting for received positions
  assign stall_l  = running && !in_valid_l && (cnt_l >= GW'(MCE)) && (cnt_l < grp_step);
  assign stall_r  = running && !in_valid_r && (cnt_r >= GW'(MCE)) && (cnt_r < grp_step);

  logic step_end;
  assign step_end = running && (cnt_l == grp_step) && (cnt_r == grp_step) && !v_l && !v_r;
  assign dump     = start || (step_end && (step + 1'b1 < n_steps));
  assign busy     = running;

  jb_mem #(.PR(PR), .PC(PC), .NMAX(NMAX)) u_jb (
    .clk      (clk),
    .wr_en    (j_wr_en),
    .wr_addr  (j_wr_addr),
    .wr_data  (j_wr_data),
    .rd_en_l  (in_pop_l),
    .rd_addr_l(addr_l),
    .rd_data_l(j_l),
    .rd_en_r  (in_pop_r),
    .rd_addr_r(addr_r),
    .rd_data_r(j_r)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      step    <= '0;
      cnt_l   <= '0;
      cnt_r   <= '0;
      addr_l  <= '0;
      addr_r  <= '0;
      v_l     <= 1'b0;
      v_r     <= 1'b0;
    end else begin
      v_l <= in_pop_l;
      v_r <= in_pop_r;
      if (start || step_end) begin
        cnt_l  <= '0;
        cnt_r  <= '0;
        addr_l <= AW'(own_l0);
        addr_r <= AW'(own_l0 + (AW+1)'(2 * MCE) - 1'b1);
      end
      if (start) begin
        running <= 1'b1;
        step    <= '0;
      end else if (step_end) begin
        step <= step + 1'b1;
        if (step + 1'b1 >= n_steps) running <= 1'b0;
      end else begin
        if (in_pop_l) begin
          cnt_l <= cnt_l + 1'b1;
          // after the own subvector, skip the own RingR subvector
          if (cnt_l == GW'(MCE - 1))
            addr_l <= AW'((own_l0 + (AW+1)'(2 * MCE) >= ngroups) ? own_l0 + (AW+1)'(2 * MCE) - ngroups
                                                                : own_l0 + (AW+1)'(2 * MCE));
          else
            addr_l <= wrap_inc(addr_l, ngroups);
        end
        if (in_pop_r) begin
          cnt_r <= cnt_r + 1'b1;
          // after the own subvector, skip the own RingL subvector
          if (cnt_r == GW'(MCE - 1))
            addr_r <= wrap_dec(AW'(own_l0), ngroups);
          else
            addr_r <= wrap_dec(addr_r, ngroups);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    x_l_q <= in_x_l;
    x_r_q <= in_x_r;
  end

  mac_component #(.PR(PR), .PC(PC)) u_mac (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid_l(v_l),
    .in_x_l    (x_l_q),
    .in_j_l    (j_l),
    .in_valid_r(v_r),
    .in_x_r    (x_r_q),
    .in_j_r    (j_r),
    .dump      (dump),
    .clear     (step_end && !dump),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_dp_l  (out_dp_l),
    .out_dp_r  (out_dp_r),
    .out_empty (mac_empty)
  );

  a_dump_needs_empty: assert property (@(posedge clk) disable iff (!rst_n) dump |-> mac_empty);

endmodule
