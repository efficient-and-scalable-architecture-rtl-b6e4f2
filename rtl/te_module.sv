// te_module: the time-evolution (TE) module of one chip. It holds X_B and
// P_B, performs the SB update of the chip's own oscillators, and handles the
// receive side of both rings.
//
// An SB step starts when the first Delta-p' group of the step arrives from
// the MM module. Phase A: for MCE = PR/(2*PC) cycles the module reads one
// word of the RingL half (ascending, rows 0,1,..) and one of the RingR half
// (descending, rows PR-1,PR-2,..) of X_B and P_B, takes the matching
// Delta-p' groups, runs both through the Update component, writes the new x
// and p back and sends the new positions out on the RingL and RingR output
// streams. Phase B: each ring then passes (Pchip-1)*MCE received position
// groups from its RX queue to its output stream, independently of the other
// ring. Received groups go through a delay line as long as the update
// pipeline, so both sources leave with the same latency lambda_TE and in
// issue order. The output streams feed the MM module; the TX module gets the
// own positions and, of the received ones, only the first (Pchip-3)*MCE
// groups of each ring, the ones it forwards (out_tx_*).
// After the step alpha grows by dalpha; after n_steps steps the module stops.
//
// Flow control: the module issues a group only while room_l/room_r say that
// the downstream queues can absorb everything in flight (no back-pressure
// inside the pipeline). A ring whose RX queue is empty in phase B waits.
// Host port: x/p elements can be written and read while the module is idle;
// reads return data one cycle after the address.
// Timing: lambda_TE = M+2 cycles from issue to output (1 memory read, 1
// momentum kick, M sub-steps).
// The phases and orders follow Fig. 2(b)-(c) and Algorithm 2 of the paper;
// the pipeline depth and the room-based flow control are this design's
// choice.
//
// Lint note: verilator's SYNCASYNCNET warning on rst_n comes from the
// assertions, which use rst_n in 'disable iff'; every flop uses rst_n only
// as an asynchronous reset, so the warning is expected.
module te_module
  import sb_pkg::*;
#(
  parameter int unsigned PR = 2048,
  parameter int unsigned PC = 8,
  parameter int unsigned M  = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [CHW-1:0]            n_chips,
  input  logic [STW-1:0]            n_steps,
  input  sb_coef_t                  coef,
  // host access to X_B / P_B (sel: 0 = x, 1 = p)
  input  logic                      h_wr_en,
  input  logic                      h_wr_sel,
  input  logic [$clog2(PR)-1:0]     h_wr_addr,
  input  xval_t                     h_wr_data,
  input  logic                      h_rd_sel,
  input  logic [$clog2(PR)-1:0]     h_rd_addr,
  output xval_t                     h_rd_data,
  // Delta-p' from the MM module (FIFO head)
  input  logic                      dp_valid,
  input  acc_t  [PC-1:0]            dp_l,
  input  acc_t  [PC-1:0]            dp_r,
  output logic                      dp_pop,
  // RX queues
  input  logic                      rx_valid_l,
  input  xval_t [PC-1:0]            rx_x_l,
  output logic                      rx_pop_l,
  input  logic                      rx_valid_r,
  input  xval_t [PC-1:0]            rx_x_r,
  output logic                      rx_pop_r,
  // output streams (to the TE->MM and TE->TX queues)
  input  logic                      room_l,
  input  logic                      room_r,
  output logic                      out_valid_l,
  output xval_t [PC-1:0]            out_x_l,
  output logic                      out_valid_r,
  output xval_t [PC-1:0]            out_x_r,
  output logic                      out_tx_l,   // group is also for the TX module
  output logic                      out_tx_r,
  // status
  output logic                      busy,
  output logic                      step_start,
  output logic [STW-1:0]            step
);
  localparam int unsigned HALF = PR / 2;
  localparam int unsigned MCE  = HALF / PC;
  localparam int unsigned WAW  = $clog2(MCE);
  localparam int unsigned GW   = $clog2(MCE * 256 + 1);
  localparam int unsigned ULAT = M + 1;        // sb_update latency
  localparam int unsigned PLAT = ULAT + 1;     // pass-through latency

  logic            running;
  logic [WAW:0]    a_cnt;                      // phase-A words issued
  logic [GW-1:0]   b_cnt_l, b_cnt_r;           // phase-B groups passed
  logic [GW-1:0]   b_total;
  logic signed [CW+1:0] alpha;

  logic [GW-1:0]   b_fwd;                      // received groups to forward
  assign b_total = GW'(n_chips - 1'b1) * GW'(MCE);
  assign b_fwd   = (n_chips > 3) ? GW'(n_chips - 2'd3) * GW'(MCE) : '0;

  // ---------------- X_B / P_B banks (L and R halves) ----------------
  logic                    mem_rd_en;
  logic [WAW-1:0]          rd_addr_l, rd_addr_r;
  xval_t [PC-1:0]          xl_rd, pl_rd, xr_rd, pr_rd;
  logic [PC-1:0]           xl_we, pl_we, xr_we, pr_we;
  logic [WAW-1:0]          wa_l, wa_r;
  xval_t [PC-1:0]          wd_xl, wd_pl, wd_xr, wd_pr;

  sb_state_mem #(.PC(PC), .WORDS(MCE)) u_xl (.clk, .rd_en(mem_rd_en), .rd_addr(rd_addr_l), .rd_data(xl_rd),
                                             .wr_lane(xl_we), .wr_addr(wa_l), .wr_data(wd_xl));
  sb_state_mem #(.PC(PC), .WORDS(MCE)) u_pl (.clk, .rd_en(mem_rd_en), .rd_addr(rd_addr_l), .rd_data(pl_rd),
                                             .wr_lane(pl_we), .wr_addr(wa_l), .wr_data(wd_pl));
  sb_state_mem #(.PC(PC), .WORDS(MCE)) u_xr (.clk, .rd_en(mem_rd_en), .rd_addr(rd_addr_r), .rd_data(xr_rd),
                                             .wr_lane(xr_we), .wr_addr(wa_r), .wr_data(wd_xr));
  sb_state_mem #(.PC(PC), .WORDS(MCE)) u_pr (.clk, .rd_en(mem_rd_en), .rd_addr(rd_addr_r), .rd_data(pr_rd),
                                             .wr_lane(pr_we), .wr_addr(wa_r), .wr_data(wd_pr));

  // ---------------- phase A issue ----------------
  logic issue_a;
  assign issue_a    = running && (a_cnt < (WAW+1)'(MCE)) && dp_valid && room_l && room_r;
  assign dp_pop     = issue_a;
  assign step_start = issue_a && (a_cnt == '0);

  // host row -> bank / word / lane
  logic            h_rd_half_q;
  logic [$clog2(PC > 1 ? PC : 2)-1:0] h_rd_lane_q;
  logic            h_rd_sel_q;

  always_comb begin
    mem_rd_en = issue_a || !running;
    if (running) begin
      rd_addr_l = a_cnt[WAW-1:0];
      rd_addr_r = WAW'(MCE - 1) - a_cnt[WAW-1:0];
    end else begin
      rd_addr_l = WAW'((32'(h_rd_addr) % HALF) / PC);
      rd_addr_r = WAW'((32'(h_rd_addr) % HALF) / PC);
    end
  end

  always_ff @(posedge clk) begin
    h_rd_half_q <= (32'(h_rd_addr) >= HALF);
    h_rd_lane_q <= ($bits(h_rd_lane_q))'(32'(h_rd_addr) % PC);
    h_rd_sel_q  <= h_rd_sel;
  end
  always_comb begin
    xval_t [PC-1:0] w;
    if (h_rd_half_q) w = h_rd_sel_q ? pr_rd : xr_rd;
    else             w = h_rd_sel_q ? pl_rd : xl_rd;
    h_rd_data = w[h_rd_lane_q];
  end

  // one-cycle register aligning Delta-p' and the tag with the memory read
  logic            iss_q;
  logic [WAW-1:0]  tag_l_q, tag_r_q;
  acc_t [PC-1:0]   dpl_q, dpr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) iss_q <= 1'b0;
    else        iss_q <= issue_a;
  end
  always_ff @(posedge clk) begin
    tag_l_q <= rd_addr_l;
    tag_r_q <= rd_addr_r;
    dpl_q   <= dp_l;
    dpr_q   <= dp_r;
  end

  logic signed [CW+1:0] a_coef;
  assign a_coef = (CW+2)'(coef.alpha0) - alpha;

  logic           uo_v_l, uo_v_r;
  logic [WAW-1:0] uo_tag_l, uo_tag_r;
  xval_t [PC-1:0] uo_x_l, uo_p_l, uo_x_r, uo_p_r;

  sb_update #(.PC(PC), .M(M), .TAGW(WAW)) u_upd_l (
    .clk, .rst_n, .c0(coef.c0), .a_coef, .beta0(coef.beta0), .dt(coef.dt),
    .in_valid(iss_q), .in_tag(tag_l_q), .in_x(xl_rd), .in_p(pl_rd), .in_dp(dpl_q),
    .out_valid(uo_v_l), .out_tag(uo_tag_l), .out_x(uo_x_l), .out_p(uo_p_l));
  sb_update #(.PC(PC), .M(M), .TAGW(WAW)) u_upd_r (
    .clk, .rst_n, .c0(coef.c0), .a_coef, .beta0(coef.beta0), .dt(coef.dt),
    .in_valid(iss_q), .in_tag(tag_r_q), .in_x(xr_rd), .in_p(pr_rd), .in_dp(dpr_q),
    .out_valid(uo_v_r), .out_tag(uo_tag_r), .out_x(uo_x_r), .out_p(uo_p_r));

  // write back (update results) or host writes while idle
  always_comb begin
    xl_we = '0; pl_we = '0; xr_we = '0; pr_we = '0;
    wa_l = uo_tag_l; wa_r = uo_tag_r;
    wd_xl = uo_x_l; wd_pl = uo_p_l; wd_xr = uo_x_r; wd_pr = uo_p_r;
    if (uo_v_l) begin xl_we = '1; pl_we = '1; end
    if (uo_v_r) begin xr_we = '1; pr_we = '1; end
    if (h_wr_en && !running) begin
      wa_l = WAW'((32'(h_wr_addr) % HALF) / PC);
      wa_r = wa_l;
      for (int c = 0; c < PC; c++) begin
        wd_xl[c] = h_wr_data; wd_pl[c] = h_wr_data;
        wd_xr[c] = h_wr_data; wd_pr[c] = h_wr_data;
      end
      if (32'(h_wr_addr) < HALF) begin
        if (h_wr_sel) pl_we[32'(h_wr_addr) % PC] = 1'b1;
        else          xl_we[32'(h_wr_addr) % PC] = 1'b1;
      end else begin
        if (h_wr_sel) pr_we[32'(h_wr_addr) % PC] = 1'b1;
        else          xr_we[32'(h_wr_addr) % PC] = 1'b1;
      end
    end
  end

  // ---------------- phase B: received positions ----------------
  logic a_done;
  assign a_done   = (a_cnt == (WAW+1)'(MCE));
  assign rx_pop_l = running && a_done && (b_cnt_l < b_total) && rx_valid_l && room_l;
  assign rx_pop_r = running && a_done && (b_cnt_r < b_total) && rx_valid_r && room_r;

  logic           pv_l [PLAT+1];
  logic           pv_r [PLAT+1];
  logic           pf_l [PLAT+1];   // forward flag
  logic           pf_r [PLAT+1];
  xval_t [PC-1:0] px_l [PLAT+1];
  xval_t [PC-1:0] px_r [PLAT+1];
  always_comb begin
    pv_l[0] = rx_pop_l; px_l[0] = rx_x_l; pf_l[0] = (b_cnt_l < b_fwd);
    pv_r[0] = rx_pop_r; px_r[0] = rx_x_r; pf_r[0] = (b_cnt_r < b_fwd);
  end
  for (genvar s = 0; s < PLAT; s++) begin : g_pass
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pv_l[s+1] <= 1'b0;
        pv_r[s+1] <= 1'b0;
      end else begin
        pv_l[s+1] <= pv_l[s];
        pv_r[s+1] <= pv_r[s];
      end
    end
    always_ff @(posedge clk) begin
      px_l[s+1] <= px_l[s];
      px_r[s+1] <= px_r[s];
      pf_l[s+1] <= pf_l[s];
      pf_r[s+1] <= pf_r[s];
    end
  end

  // output mux: own updated positions or received positions
  assign out_valid_l = uo_v_l || pv_l[PLAT];
  assign out_valid_r = uo_v_r || pv_r[PLAT];
  assign out_x_l     = uo_v_l ? uo_x_l : px_l[PLAT];
  assign out_x_r     = uo_v_r ? uo_x_r : px_r[PLAT];
  // own positions always go to the TX module; received ones only while they
  // are among the first (Pchip-3) subvectors, the ones to be forwarded
  assign out_tx_l    = uo_v_l || (pv_l[PLAT] && pf_l[PLAT]);
  assign out_tx_r    = uo_v_r || (pv_r[PLAT] && pf_r[PLAT]);

  // ---------------- step control ----------------
  logic step_end;
  assign step_end = running && a_done && (b_cnt_l == b_total) && (b_cnt_r == b_total);

  logic pipe_busy;
  always_comb begin
    pipe_busy = iss_q || uo_v_l || uo_v_r;
    for (int s = 1; s <= PLAT; s++) pipe_busy |= pv_l[s] | pv_r[s];
  end
  assign busy = running || pipe_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      step    <= '0;
      a_cnt   <= '0;
      b_cnt_l <= '0;
      b_cnt_r <= '0;
      alpha   <= '0;
    end else if (start) begin
      running <= (n_steps != '0);
      step    <= '0;
      a_cnt   <= '0;
      b_cnt_l <= '0;
      b_cnt_r <= '0;
      alpha   <= '0;
    end else if (step_end) begin
      a_cnt   <= '0;
      b_cnt_l <= '0;
      b_cnt_r <= '0;
      alpha   <= alpha + (CW+2)'(coef.dalpha);
      step    <= step + 1'b1;
      if (step + 1'b1 >= n_steps) running <= 1'b0;
    end else begin
      if (issue_a)  a_cnt   <= a_cnt + 1'b1;
      if (rx_pop_l) b_cnt_l <= b_cnt_l + 1'b1;
      if (rx_pop_r) b_cnt_r <= b_cnt_r + 1'b1;
    end
  end

  a_no_collision_l: assert property (@(posedge clk) disable iff (!rst_n) !(uo_v_l && pv_l[PLAT]));
  a_no_collision_r: assert property (@(posedge clk) disable iff (!rst_n) !(uo_v_r && pv_r[PLAT]));
  a_host_idle:      assert property (@(posedge clk) disable iff (!rst_n) h_wr_en |-> !running);

endmodule
