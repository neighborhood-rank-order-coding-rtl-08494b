// tb_ploc_top -- end-to-end testbench of the PLOC sensor, reduced to an 8 x 8 matrix.
//
// Image: a copy of the paper's Fig. 2 example around cell (FR,FC) (centre
// grey 120, top 60, left 80, right 120, bottom 140, i.e. rates lambda0, 1/2,
// 2/3, 1 and 7/6 of lambda0), a uniform region (grey 200) in rows UR0.. and
// random grey values 64..255 elsewhere, with random start phases;
// theta_M = 0.2.
// An independent reference models every pixel, every cell's acquisition and
// interim storage, and the accumulators; it checks every pulse, every word of
// the feature stream, every significance vector and every
// correlation result of the sweeps. It also checks the scan period
// (ROWS*COLS clocks), that no feature is lost, that the Fig. 2 cell gives
// features 12/13/14/15 with frequencies near 1/6, 1/6, 2/6, 2/6 and the
// vector the paper's analysis predicts (theta 0.2: {14, 15}; 0.1: {12..15}), and that each mechanism happened at least once.
module tb_ploc_top;
  localparam int unsigned ROWS = 8, COLS = 8, NB = 4, GRAY_W = 8;
  localparam int unsigned ACC_W = 14, NORM_SHIFT = 6, THETA_W = 8;
  localparam int unsigned CELLS = ROWS * COLS, NFEAT = 1 << NB, P = 1 << ACC_W, NORM = 1 << NORM_SHIFT;
  localparam int unsigned AW = $clog2(CELLS);
  localparam int FR = 2, FC = 5, UR0 = 5;
  localparam int unsigned WATCHDOG = 400000;
  localparam bit PRINT_MAPS = 0;
  logic korr_map [CELLS];

  logic clk = 1'b0, rst_n = 1'b0;
  logic [GRAY_W-1:0]  gray       [ROWS][COLS];
  logic [ACC_W-1:0]   init_phase [ROWS][COLS];
  logic               pulse      [ROWS][COLS];
  logic [THETA_W-1:0] theta_m, theta_corr;
  logic [NFEAT-1:0]   k_mask, b_vec;
  logic [3:0]         n_corr;
  logic corr_start, scan_wrap, feat_valid, b_valid, corr_busy, k_valid, k_bit, corr_done;
  logic [AW-1:0] feat_addr, b_addr, k_addr;
  logic [NB-1:0] feat;
  int checks = 0, failures = 0;

  ploc_top #(.ROWS(ROWS), .COLS(COLS), .NB(NB), .GRAY_W(GRAY_W), .ACC_W(ACC_W), .NORM_SHIFT(NORM_SHIFT), .THETA_W(THETA_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int unsigned   acc   [ROWS][COLS];
  logic          exp_p [ROWS][COLS];
  logic [NB-1:0] latch [ROWS][COLS];
  logic [NB-1:0] slave [CELLS];
  logic          vld   [CELLS];
  logic          cap_pend [CELLS];
  logic [NB-1:0] cap_feat [CELLS];
  int            cnt   [CELLS][NFEAT];
  int            tot   [CELLS];
  int            nvec  [CELLS];
  logic [NFEAT-1:0] map [CELLS];
  logic [NFEAT-1:0] exp_q [$];
  int            exp_qa [$];
  logic          pb_v; int pb_a; logic [NFEAT-1:0] pb_vec;
  int            fig2_hist [NFEAT];
  int            fig2_vec_ok = 0, fig2_vec_bad = 0;

  // mechanism counters
  int n_coincide = 0, n_dup_skip = 0, n_words = 0, n_vectors = 0, n_set = 0, n_clear = 0;
  int n_border = 0, n_korr1 = 0, n_korr0 = 0, n_wr_in_sweep = 0, n_collide = 0, n_wraps = 0;
  int n_lost = 0, n_startup_drop = 0;

  function automatic logic nbp(int r, int c);
    if (r < 0 || r >= int'(ROWS) || c < 0 || c >= int'(COLS)) return 1'b0;
    return exp_p[r][c];
  endfunction

  // Neighbour of coefficient 2**i: N4 top, left, right, bottom; N8 row by row.
  localparam int DR4 [4] = '{-1, 0, 0, 1};
  localparam int DC4 [4] = '{0, -1, 1, 0};
  localparam int DR8 [8] = '{-1, -1, -1, 0, 0, 1, 1, 1};
  localparam int DC8 [8] = '{-1, 0, 1, -1, 1, -1, 0, 1};
  function automatic int nb_dr(int i); return (NB == 4) ? DR4[i] : DR8[i]; endfunction
  function automatic int nb_dc(int i); return (NB == 4) ? DC4[i] : DC8[i]; endfunction

  function automatic int pop(logic [NFEAT-1:0] v);
    int n = 0;
    for (int i = 0; i < NFEAT; i++) n += v[i];
    return n;
  endfunction

  function automatic logic ref_korr(int idx);
    int r = idx / COLS, c = idx % COLS, s = 0;
    for (int dr = -1; dr <= 1; dr++)
      for (int dc = -1; dc <= 1; dc++) begin
        int nr = r + dr, nc = c + dc;
        if ((dr != 0 || dc != 0) && nr >= 0 && nr < int'(ROWS) && nc >= 0 && nc < int'(COLS)) begin
          int i = pop(map[idx] & map[nr * COLS + nc] & k_mask);
          int u = pop((map[idx] | map[nr * COLS + nc]) & k_mask);
          if (u > 0 && real'(i) / real'(u) >= real'(theta_corr) / 256.0) s++;
        end
      end
    return s >= int'(n_corr);
  endfunction

  int last_wrap = -1, cyc = 0, sweeps_done = 0;
  int k_expect = 0;

  // One reference step per clock, at the falling edge.
  task automatic ref_step();
    // 0. pixels: integrate once per rising edge since reset release
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        acc[r][c] += gray[r][c];
        exp_p[r][c] = (acc[r][c] >= P);
        if (exp_p[r][c]) acc[r][c] -= P;
      end
    // 1. pulses of this clock
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (pulse[r][c] !== exp_p[r][c]) begin
          failures++;
          if (failures < 10) $display("FAIL cyc=%0d pulse[%0d][%0d]=%b", cyc, r, c, pulse[r][c]);
        end
      end
    // 2. correlation result (computed last clock from the map as it was then)
    if (k_valid) begin
      logic e = ref_korr(k_expect);
      checks++;
      if (k_addr !== AW'(k_expect) || k_bit !== e) begin
        failures++;
        if (failures < 10) $display("FAIL korr cell %0d got %0d/%b expected %b", k_expect, k_addr, k_bit, e);
      end
      if (e) n_korr1++; else n_korr0++;
      korr_map[k_expect] = k_bit;
      k_expect = (k_expect + 1) % CELLS;
      checks++;
      if (corr_done !== (k_expect == 0)) failures++;
      if (k_expect == 0) sweeps_done++;
    end
    if (pb_v) map[pb_a] = pb_vec;
    pb_v = b_valid; pb_a = int'(b_addr); pb_vec = b_vec;
    if (b_valid && corr_busy) n_wr_in_sweep++;
    // 3. significance vectors
    if (b_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected vector for cell %0d", b_addr);
      end else begin
        logic [NFEAT-1:0] ev = exp_q.pop_front();
        int ea = exp_qa.pop_front();
        if (b_addr !== AW'(ea) || b_vec !== ev) begin
          failures++;
          if (failures < 10) $display("FAIL vector cell %0d %h expected cell %0d %h", b_addr, b_vec, ea, ev);
        end
      end
    end
    // 4. feature stream word (read in the last clock)
    if (feat_valid) begin
      int a = int'(feat_addr);
      n_words++;
      checks++;
      if (!vld[a] || feat !== slave[a]) begin
        failures++;
        if (failures < 10) $display("FAIL cyc=%0d word cell %0d feat %0d, ref valid %b feat %0d", cyc, a, feat, vld[a], slave[a]);
      end
      vld[a] = 0;
      if (cap_pend[a]) n_collide++;
      if (a == FR * COLS + FC) fig2_hist[feat]++;
      cnt[a][feat]++; tot[a]++;
      if (tot[a] == NORM) begin
        logic [NFEAT-1:0] v;
        for (int k = 0; k < NFEAT; k++) begin
          v[k] = (real'(cnt[a][k]) / real'(NORM) >= real'(theta_m) / 256.0);
          if (v[k]) n_set++; else n_clear++;
          cnt[a][k] = 0;
        end
        tot[a] = 0; nvec[a]++; n_vectors++;
        exp_q.push_back(v); exp_qa.push_back(a);
        if (NB == 4 && a == FR * COLS + FC && nvec[a] > 1) begin
          if (v == NFEAT'(16'hC000)) fig2_vec_ok++; else begin fig2_vec_bad++; $display("Fig. 2 cell vector %h", v); end
        end
      end
    end
    // 5. captures at the end of the last clock
    for (int a = 0; a < CELLS; a++)
      if (cap_pend[a]) begin
        // Before the first scan has completed (scanning waits for the
        // accumulators to be cleared) an early feature may be replaced.
        if (vld[a] && n_wraps == 0) n_startup_drop++;
        else if (vld[a]) begin
          n_lost++; failures++;
          if (n_lost < 5) $display("FAIL cyc=%0d feature of cell %0d overwritten before readout", cyc, a);
        end
        slave[a] = cap_feat[a]; vld[a] = 1; cap_pend[a] = 0;
      end
    // 6. this clock's acquisition
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        logic [NB-1:0] np;
        for (int i = 0; i < NB; i++) np[i] = nbp(r + nb_dr(i), c + nb_dc(i));
        if (exp_p[r][c]) begin
          if (np != '0) n_coincide++;
          cap_pend[r * COLS + c] = 1; cap_feat[r * COLS + c] = latch[r][c] | np;
          if ((r == 0 || c == 0 || r == ROWS - 1 || c == COLS - 1) && (latch[r][c] | np) != 0) n_border++;
          latch[r][c] = '0;
        end else latch[r][c] |= np;
      end
    // 7. scan period
    if (scan_wrap) begin
      if (last_wrap >= 0) begin
        checks++;
        if (cyc - last_wrap != int'(CELLS)) begin
          failures++; $display("FAIL scan period %0d", cyc - last_wrap);
        end
      end
      last_wrap = cyc; n_wraps++;
    end
    cyc++;
  endtask

  task automatic clocks(int n);
    repeat (n) begin @(negedge clk); ref_step(); end
  endtask

  task automatic sweep(logic [NFEAT-1:0] mask, int th, int n);
    int target = sweeps_done + 1;
    k_mask = mask; theta_corr = THETA_W'(th); n_corr = 4'(n);
    corr_start = 1; clocks(1); corr_start = 0;
    while (sweeps_done < target) clocks(1);
    if (PRINT_MAPS) begin
      $display("b_korr map, k_mask=%h theta_corr=%0d/256 N_corr=%0d ('#' = 1):", mask, th, n);
      for (int r = 0; r < ROWS; r++) begin
        string line = "";
        for (int c = 0; c < COLS; c++) line = {line, korr_map[r * COLS + c] ? "#" : "."};
        $display("  %s", line);
      end
    end
  endtask

  function automatic bit all_have(int n);
    for (int a = 0; a < CELLS; a++) if (nvec[a] < n) return 0;
    return 1;
  endfunction

  initial begin
    int start_cyc;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        gray[r][c] = (r >= UR0) ? 8'd200 : GRAY_W'(64 + $urandom_range(191));
        init_phase[r][c] = ACC_W'($urandom_range(P - 1));
      end
    gray[FR][FC] = 8'd120;     init_phase[FR][FC] = '0;
    gray[FR-1][FC] = 8'd60;    init_phase[FR-1][FC] = ACC_W'(P / 5);
    gray[FR][FC-1] = 8'd80;    init_phase[FR][FC-1] = ACC_W'(3 * P / 7);
    gray[FR][FC+1] = 8'd120;   init_phase[FR][FC+1] = ACC_W'(P / 2);
    gray[FR+1][FC] = 8'd140;   init_phase[FR+1][FC] = ACC_W'(4 * P / 11);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        acc[r][c] = init_phase[r][c]; exp_p[r][c] = 0; latch[r][c] = '0;
      end
    for (int a = 0; a < CELLS; a++) begin
      slave[a] = '0; vld[a] = 0; cap_pend[a] = 0; cap_feat[a] = '0; tot[a] = 0; nvec[a] = 0; map[a] = '0;
      for (int k = 0; k < NFEAT; k++) cnt[a][k] = 0;
    end
    for (int k = 0; k < NFEAT; k++) fig2_hist[k] = 0;
    pb_v = 0; pb_a = 0; pb_vec = '0;
    theta_m = 8'd52;     // 0.203: the paper's theta_M = 0.2 for Fig. 2
    k_mask = '0; theta_corr = '0; n_corr = '0; corr_start = 0;
    // reset (synchronous for the pixels), released after a falling edge
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    // The reference starts at the first rising edge with reset released.
    start_cyc = cyc;
    while (!all_have(2)) clocks(1);
    $display("all cells delivered two vectors after %0d clocks", cyc - start_cyc);
    if (PRINT_MAPS) begin
      $display("significance map b'_7 (latest vector per cell, '#' = 1):");
      for (int r = 0; r < ROWS; r++) begin
        string line;
        line = "";
        for (int c = 0; c < COLS; c++) line = {line, map[r * COLS + c][7] ? "#" : "."};
        $display("  %s", line);
      end
    end
    sweep(16'h8000, 1, 5);    // feature 15, N_corr 5: uniform region
    sweep(16'h0080, 1, 5);    // feature 7, N_corr 5 (paper Fig. 4)
    sweep(16'h177E, 77, 1);   // salient-point subset, theta_corr 0.3
    clocks(4);
    n_dup_skip = n_wraps * CELLS - n_words;
    if (NB == 4) begin
      int tot2;
      real f12, f13, f14, f15;
      tot2 = fig2_hist[12] + fig2_hist[13] + fig2_hist[14] + fig2_hist[15];
      f12 = real'(fig2_hist[12]) / tot2; f13 = real'(fig2_hist[13]) / tot2;
      f14 = real'(fig2_hist[14]) / tot2; f15 = real'(fig2_hist[15]) / tot2;
      $display("Fig. 2 cell: %0d intervals, p12=%0.3f p13=%0.3f p14=%0.3f p15=%0.3f (paper 1/6 1/6 2/6 2/6)",
               tot2, f12, f13, f14, f15);
      checks++;
      if (f12 < 0.12 || f12 > 0.21 || f13 < 0.12 || f13 > 0.21 ||
          f14 < 0.29 || f14 > 0.38 || f15 < 0.29 || f15 > 0.38) begin
        failures++; $display("FAIL Fig. 2 feature frequencies");
      end
    end
    checks++;
    if (NB == 4 && (fig2_vec_ok == 0 || fig2_vec_bad != 0)) begin
      failures++; $display("FAIL Fig. 2 vectors: %0d as expected, %0d not", fig2_vec_ok, fig2_vec_bad);
    end
    $display("mechanisms: coincident pulses=%0d duplicate-suppressed visits=%0d read/capture collisions=%0d",
             n_coincide, n_dup_skip, n_collide);
    $display("            words=%0d vectors=%0d set bits=%0d clear bits=%0d border features=%0d",
             n_words, n_vectors, n_set, n_clear, n_border);
    $display("            b_korr=1: %0d b_korr=0: %0d map writes during sweep=%0d scans=%0d lost=%0d start-up drops=%0d",
             n_korr1, n_korr0, n_wr_in_sweep, n_wraps, n_lost, n_startup_drop);
    checks++; if (n_coincide == 0)    begin failures++; $display("FAIL no coincident pulse"); end
    checks++; if (n_dup_skip <= 0)    begin failures++; $display("FAIL no suppressed visit"); end
    checks++; if (n_set == 0 || n_clear == 0) begin failures++; $display("FAIL threshold never both ways"); end
    checks++; if (n_border == 0)      begin failures++; $display("FAIL no border feature"); end
    checks++; if (n_korr1 == 0 || n_korr0 == 0) begin failures++; $display("FAIL b_korr never both ways"); end
    checks++; if (n_wr_in_sweep == 0) begin failures++; $display("FAIL no map write during a sweep"); end
    checks++; if (exp_q.size() != 0)  begin failures++; $display("FAIL %0d vectors missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
