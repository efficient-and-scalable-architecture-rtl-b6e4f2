// tb_sbm_full: end-to-end test of a cluster of sbm_chip instances joined in the
// dual ring (RingL: chip k -> chip k-1, RingR: chip k -> chip k+1) through
// behavioural link models.
//
// It runs the chip at its default size (PR = 2,048, PC = 8, J slice of
// 2,048 x 32,768): one chip alone, then a four-chip cluster (N = 8,192)
// with a link latency that puts it in Mode B, as in the paper's S2K runs.
// For every configuration the test loads J (a fixed pseudo-random +-1
// matrix, J(i,j) = bit 0 of a 32-bit integer hash of i and j), sets x = 0
// and p to pseudo-random values in about [-0.1, 0.1], runs n_steps SB steps
// and compares every x and p of every chip with a reference model of the
// partitioned SB algorithm computed here (same fixed-point rules). It also
// measures the cycles per SB step (between step starts of chip 0, as the
// TE module sees them) and compares them with the cycle model
//   Mode A (lcomm <= MCE):          Pchip*MCE + lcomp
//   Mode B (MCE < lcomm <= 2*MCE):  (Pchip-1)*MCE + lcomm + lcomp
//   Mode C (lcomm > 2*MCE):         Nhop*lcomm + Nlast*MCE + lcomp
// with lcomp measured on a single chip and lcomm = link latency + HOP_OVH,
// HOP_OVH being the chip's own part of one hop. It counts how often each
// mechanism happened (phase A updates, phase B receptions, R_buf reverse
// sends, forwarding, MM stalls, send-side waits) and fails if one never did.
module tb_sbm_full;
  import sb_pkg::*;

  localparam int unsigned PR       = 2048;
  localparam int unsigned PC       = 8;
  localparam int unsigned PMAX     = 4;
  localparam int unsigned NMAX     = 32768;
  localparam int unsigned MSUB     = 2;
  localparam int unsigned NSTEPS   = 3;
  localparam int          COEF_C0  = 128;     // dt*gamma0 = 1/128
  localparam int unsigned WATCHDOG = 400000;
  localparam int unsigned MCE     = PR / (2 * PC);
  localparam int unsigned NMAXG   = NMAX / PC;
  localparam int unsigned HOP_OVH = 8;     // TE issue -> link in: 7, link out -> TE issue: 1
  localparam int unsigned MAXLAT  = 256;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // run configuration
  int unsigned cur_p   = 1;
  int unsigned cur_lat = 1;
  logic        start   = 1'b0;
  logic        start_k [PMAX];
  logic [STW-1:0] nsteps = STW'(NSTEPS);
  sb_coef_t    coef;

  // per-chip host signals
  logic                        j_wr_en  [PMAX];
  logic [$clog2(NMAXG)-1:0]    j_wr_addr[PMAX];
  logic [PC*PR-1:0]            j_wr_data[PMAX];
  logic                        h_wr_en  [PMAX];
  logic                        h_wr_sel [PMAX];
  logic [$clog2(PR)-1:0]       h_wr_addr[PMAX];
  xval_t                       h_wr_data[PMAX];
  logic                        h_rd_sel [PMAX];
  logic [$clog2(PR)-1:0]       h_rd_addr[PMAX];
  xval_t                       h_rd_data[PMAX];
  logic                        busy     [PMAX];
  logic                        stp_start[PMAX];
  logic [STW-1:0]              stp      [PMAX];
  logic [1:0]                  mm_stall [PMAX];
  logic [1:0]                  tx_valid [PMAX];
  xval_t [1:0][PC-1:0]         tx_data  [PMAX];
  logic [1:0]                  tx_credit[PMAX];
  logic [1:0]                  rx_valid [PMAX];
  xval_t [1:0][PC-1:0]         rx_data  [PMAX];
  logic [1:0]                  rx_credit[PMAX];
  // link outputs, indexed by the sending chip
  logic                        lk_v  [PMAX][2];
  xval_t [PC-1:0]              lk_d  [PMAX][2];
  logic                        lk_cr [PMAX][2];
  logic                        lk_crin[PMAX][2];

  for (genvar k = 0; k < PMAX; k++) begin : g_chip
    sbm_chip u_chip (
        .clk, .rst_n, .start(start_k[k]), .chip_id(CHW'(k)), .n_chips(CHW'(cur_p)), .n_steps(nsteps), .coef,
      .busy(busy[k]),
      .j_wr_en(j_wr_en[k]), .j_wr_addr(j_wr_addr[k]), .j_wr_data(j_wr_data[k]),
      .h_wr_en(h_wr_en[k]), .h_wr_sel(h_wr_sel[k]), .h_wr_addr(h_wr_addr[k]), .h_wr_data(h_wr_data[k]),
      .h_rd_sel(h_rd_sel[k]), .h_rd_addr(h_rd_addr[k]), .h_rd_data(h_rd_data[k]),
      .tx_valid(tx_valid[k]), .tx_data(tx_data[k]), .tx_credit(tx_credit[k]),
      .rx_valid(rx_valid[k]), .rx_data(rx_data[k]), .rx_credit(rx_credit[k]),
      .step_start(stp_start[k]), .step(stp[k]), .mm_stall(mm_stall[k]));
    for (genvar g = 0; g < 2; g++) begin : g_lk
      tb_link #(.PC(PC), .MAXLAT(MAXLAT)) u_link (
        .clk, .lat(cur_lat), .in_valid(tx_valid[k][g] && (k < cur_p)), .in_data(tx_data[k][g]),
        .out_valid(lk_v[k][g]), .out_data(lk_d[k][g]), .cr_in(lk_crin[k][g]), .cr_out(lk_cr[k][g]));
    end
  end

  // ring wiring for the running cluster size
  always_comb begin
    for (int k = 0; k < PMAX; k++) start_k[k] = start && (k < int'(cur_p));
    for (int k = 0; k < PMAX; k++) begin
      int unsigned srcl, srcr;
      srcl = (k + 1) % cur_p;            // RingL: chip k+1 -> chip k
      srcr = (k + cur_p - 1) % cur_p;    // RingR: chip k-1 -> chip k
      rx_valid[k]  = '0;
      rx_data[k]   = '0;
      tx_credit[k] = '0;
      lk_crin[k][0] = 1'b0;
      lk_crin[k][1] = 1'b0;
      if (k < cur_p) begin
        rx_valid[k][0] = lk_v[srcl][0];
        rx_data[k][0]  = lk_d[srcl][0];
        rx_valid[k][1] = lk_v[srcr][1];
        rx_data[k][1]  = lk_d[srcr][1];
      end
    end
    for (int k = 0; k < PMAX; k++) begin
      if (k < cur_p) begin
        // credits of chip k's tx link come from its destination's RX queue
        lk_crin[k][0]    = rx_credit[(k + cur_p - 1) % cur_p][0];
        lk_crin[k][1]    = rx_credit[(k + 1) % cur_p][1];
        tx_credit[k][0]  = lk_cr[k][0];
        tx_credit[k][1]  = lk_cr[k][1];
      end
    end
  end

  // ---------------- reference model ----------------
  function automatic bit jbit(input int unsigned i, input int unsigned j);
    logic [31:0] h;
    h = i * 32'h9E3779B1 ^ (j * 32'h85EBCA77) ^ 32'h27d4eb2f;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return h[0];
  endfunction

  function automatic longint sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  longint xr[PMAX*PR], pr_[PMAX*PR], dpr[PMAX*PR];

  task automatic ref_run(input int unsigned p, input int unsigned steps);
    int unsigned n;
    longint a, alpha;
    n = p * PR;
    for (int i = 0; i < int'(n); i++) dpr[i] = 0;
    alpha = 0;
    for (int unsigned l = 0; l < steps; l++) begin
      a = longint'(coef.alpha0) - alpha;
      for (int i = 0; i < int'(n); i++) begin
        longint x, pp, x2, x3, f;
        x = xr[i]; pp = pr_[i];
        pp = sat16(pp + ((longint'(coef.c0) * dpr[i]) >>> CF));
        for (int m = 0; m < int'(MSUB); m++) begin
          x2 = (x * x) >>> XF;
          x3 = (x2 * x) >>> XF;
          f  = -((a * x) >>> CF) - ((longint'(coef.beta0) * x3) >>> CF);
          pp = sat16(pp + ((longint'(coef.dt) * f) >>> CF));
          x  = sat16(x + ((longint'(coef.dt) * pp) >>> CF));
        end
        xr[i] = x; pr_[i] = pp;
      end
      for (int i = 0; i < int'(n); i++) begin
        longint s;
        s = 0;
        for (int j = 0; j < int'(n); j++) s += jbit(i, j) ? xr[j] : -xr[j];
        dpr[i] = s;
      end
      alpha += longint'(coef.dalpha);
    end
  endtask

  // ---------------- mechanism counters ----------------
  longint cnt_upd = 0, cnt_rx = 0, cnt_rev = 0, cnt_fwd = 0, cnt_mmstall = 0, cnt_txwait = 0;
  longint run_mmstall = 0;
  longint cyc = 0;
  longint st_t [64];
  int     st_n = 0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (stp_start[0] && st_n < 64) begin
      st_t[st_n] <= cyc;
      st_n <= st_n + 1;
    end
  end

  for (genvar k = 0; k < PMAX; k++) begin : g_mon
    always_ff @(posedge clk) begin
      if (g_chip[k].u_chip.u_te.issue_a) cnt_upd <= cnt_upd + 1;
      cnt_rx  <= cnt_rx + longint'(g_chip[k].u_chip.te_rx_pop[0]) + longint'(g_chip[k].u_chip.te_rx_pop[1]);
      cnt_rev <= cnt_rev + longint'(g_chip[k].u_chip.u_tx.rb_rd[0]) + longint'(g_chip[k].u_chip.u_tx.rb_rd[1]);
      for (int g = 0; g < 2; g++) begin
        if (g_chip[k].u_chip.u_tx.phase[g] == 2'd2 && g_chip[k].u_chip.u_tx.send[g]) cnt_fwd <= cnt_fwd + 1;
        if (g_chip[k].u_chip.u_tx.phase[g] == 2'd2 && !g_chip[k].u_chip.u_tx.in_valid[g]) cnt_txwait <= cnt_txwait + 1;
      end
      if (mm_stall[k] != 0 && k == 0) begin
        cnt_mmstall <= cnt_mmstall + 1;
        run_mmstall <= run_mmstall + 1;
      end
    end
  end

  // ---------------- host tasks ----------------
  task automatic load_j();
    for (int unsigned g = 0; g < PMAX * PR / PC; g++) begin
      @(negedge clk);
      for (int k = 0; k < PMAX; k++) begin
        logic [PC*PR-1:0] w;
        for (int c = 0; c < PC; c++)
          for (int r = 0; r < PR; r++)
            w[c*PR + r] = jbit(k*PR + r, g*PC + c);
        j_wr_en[k] = 1'b1; j_wr_addr[k] = ($clog2(NMAXG))'(g); j_wr_data[k] = w;
      end
    end
    @(negedge clk);
    for (int k = 0; k < PMAX; k++) j_wr_en[k] = 1'b0;
  endtask

  task automatic load_state(input int unsigned p, input int unsigned seed);
    for (int unsigned r = 0; r < PR; r++) begin
      for (int sel = 0; sel < 2; sel++) begin
        @(negedge clk);
        for (int k = 0; k < int'(p); k++) begin
          longint v;
          int unsigned h;
          h = (k*PR + r) * 32'h01000193 ^ seed * 32'h9E3779B9;
          h = h ^ (h >> 13); h = h * 32'h5bd1e995; h = h ^ (h >> 15);
          v = (sel == 0) ? 0 : longint'(h % 821) - 410;   // x = 0, p in [-0.1, 0.1]
          if (sel == 0) xr[k*PR + r] = v; else pr_[k*PR + r] = v;
          h_wr_en[k] = 1'b1; h_wr_sel[k] = sel[0];
          h_wr_addr[k] = ($clog2(PR))'(r); h_wr_data[k] = xval_t'(v);
        end
      end
    end
    @(negedge clk);
    for (int k = 0; k < PMAX; k++) h_wr_en[k] = 1'b0;
  endtask

  task automatic compare_state(input int unsigned p, input string tag);
    int bad;
    bad = 0;
    for (int unsigned r = 0; r < PR; r++) begin
      for (int sel = 0; sel < 2; sel++) begin
        @(negedge clk);
        for (int k = 0; k < int'(p); k++) begin h_rd_sel[k] = sel[0]; h_rd_addr[k] = ($clog2(PR))'(r); end
        @(negedge clk);
        for (int k = 0; k < int'(p); k++) begin
          longint exp_v;
          exp_v = (sel == 0) ? xr[k*PR + r] : pr_[k*PR + r];
          checks++;
          if (longint'(h_rd_data[k]) != exp_v) begin
            failures++;
            if (bad < 5) $display("  %s: chip %0d row %0d %s = %0d, expected %0d", tag, k, r,
                                  sel == 0 ? "x" : "p", h_rd_data[k], exp_v);
            bad++;
          end
        end
      end
    end
    if (bad != 0) $display("  %s: %0d mismatching values", tag, bad);
  endtask

  function automatic longint model_mstep(input int unsigned p, input longint lcomm, input longint lcomp);
    longint nhop, nlast;
    nhop  = (p - 1 + 1) / 2;      // ceil((p-1)/2)
    nlast = (p % 2 == 0) ? 1 : 2;
    if (p == 1)                 return MCE + lcomp;
    if (lcomm <= MCE)           return p * MCE + lcomp;
    if (lcomm <= 2 * MCE)       return (p - 1) * MCE + lcomm + lcomp;
    return nhop * lcomm + nlast * MCE + lcomp;
  endfunction

  longint lcomp_meas = -1;

  task automatic run_cfg(input int unsigned p, input int unsigned lat, input string name);
    longint mstep, lcomm, expm, stall0;
    int n0;
    cur_p = p; cur_lat = lat;
    load_state(p, p * 131 + lat);
    @(negedge clk);
    n0 = st_n;
    stall0 = cnt_mmstall;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    repeat (4) @(negedge clk);
    while (busy[0] || busy[p-1]) @(negedge clk);
    repeat (4) @(negedge clk);
    for (int k = 0; k < int'(p); k++) begin
      checks++;
      if (busy[k]) begin failures++; $display("  %s: chip %0d still busy", name, k); end
    end
    ref_run(p, NSTEPS);
    compare_state(p, name);
    // cycles per SB step, from the last two step starts
    checks++;
    if (st_n - n0 != NSTEPS) begin
      failures++;
      $display("  %s: %0d step starts seen, expected %0d", name, st_n - n0, NSTEPS);
    end else begin
      mstep = st_t[st_n-1] - st_t[st_n-2];
      lcomm = lat + HOP_OVH;
      if (p == 1) lcomp_meas = mstep - MCE;
      expm = model_mstep(p, lcomm, lcomp_meas);
      $display("  %s: Pchip=%0d lambda_comm=%0d M_compelem=%0d  M_step measured %0d, model %0d, MM stall cycles %0d",
               name, p, lcomm, MCE, mstep, expm, cnt_mmstall - stall0);
      checks++;
      if (mstep != expm) begin
        failures++;
        $display("  %s: M_step differs from the cycle model", name);
      end
      // a cluster in Mode A never stalls the MAC array after step 0
      if (p > 1 && lcomm <= MCE) begin
        checks++;
        if (st_t[st_n-1] - st_t[st_n-2] != st_t[st_n-2] - st_t[st_n-3]) failures++;
      end
    end
  endtask

  initial begin
    for (int k = 0; k < PMAX; k++) begin
      j_wr_en[k] = 0; j_wr_addr[k] = '0; j_wr_data[k] = '0;
      h_wr_en[k] = 0; h_wr_sel[k] = 0; h_wr_addr[k] = '0; h_wr_data[k] = '0;
      h_rd_sel[k] = 0; h_rd_addr[k] = '0;
    end
    coef.c0     = coef_t'(COEF_C0);
    coef.alpha0 = coef_t'(16384);              // 1.0
    coef.dalpha = coef_t'(16384 / NSTEPS);     // alpha: 0 -> 1 over the run
    coef.beta0  = coef_t'(16384);              // 1.0
    coef.dt     = coef_t'(8192);               // 0.5
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_j();
    run_cfg(1, 1,   "single chip");
    run_cfg(4, 165, "P=4 cluster");
    begin
      string nm [5] = '{"phase-A update", "phase-B reception", "R_buf reverse send", "forwarding", "MM stall"};
      longint v [5];
      v = '{cnt_upd, cnt_rx, cnt_rev, cnt_fwd, cnt_mmstall};
      for (int i = 0; i < 5; i++) begin
        checks++;
        if (v[i] == 0) begin failures++; $display("mechanism never happened: %s", nm[i]); end
      end
    end
    $display("mechanisms: phase-A updates %0d, phase-B receptions %0d, R_buf reverse sends %0d, forwards %0d, MM stall cycles %0d, TX waits %0d",
             cnt_upd, cnt_rx, cnt_rev, cnt_fwd, cnt_mmstall, cnt_txwait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
