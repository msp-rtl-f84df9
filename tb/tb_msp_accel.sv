// tb_msp_accel -- end-to-end test of the MSP accelerator at its default size
// (BLK_IN = 16, PE rows 65 : 30 : 5, full buffer depths; no parameter is
// overridden).
//
// Each run builds a random layer here: a GEMM of R rows, K = 16*ksteps inputs
// and N columns, with every row assigned at random to SPoT, 4-bit or 8-bit
// (the counts given per run) and a random row order, so a core's rows are
// scattered over the layer as the per-row scheme/precision choice makes
// them.  The host side writes activations, weights and row maps through the
// top's ports, pulses start, collects every result word of the three cores
// and compares each (row, column) with Y = W * X worked out here; each must
// arrive exactly once, and each core must deliver one result word per
// column for every pass in which it has rows.  It also checks run_cycles against
// passes * ncols * ksteps and the per-core idle counts.
//
// Mechanisms counted (each must occur at least once): SPoT terms switched off
// by a zero code, negative SPoT weights, 8-bit weights outside the 4-bit
// range, a core left idle by an unbalanced split, a balanced (65:30:5-like)
// run with no idle core, a partly filled final pass (row-valid low), and
// a result routed to a layer row different from its local row.
module tb_msp_accel;
  import msp_pkg::*;

  localparam int BI = 16, BO_S = 65, BO_F = 30, BO_E = 5;
  localparam int MAXR = 256, MAXK = 64, MAXN = 4;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------- DUT ----------------
  logic a_wr_en = 0; logic [13:0] a_wr_addr = '0; logic [BI-1:0][3:0] a_wr_data = '0;
  logic ws_wr_en = 0, wf_wr_en = 0, w8_wr_en = 0;
  logic [10:0] w_wr_addr = '0;
  logic [BO_S-1:0][BI-1:0][3:0] ws_wr_data = '0;
  logic [BO_F-1:0][BI-1:0][3:0] wf_wr_data = '0;
  logic [BO_E-1:0][BI-1:0][7:0] w8_wr_data = '0;
  logic rms_wr_en = 0, rmf_wr_en = 0, rm8_wr_en = 0;
  logic [6:0] rm_wr_addr = '0;
  logic [BO_S-1:0][ROWS_W-1:0] rms_wr_data = '0;
  logic [BO_F-1:0][ROWS_W-1:0] rmf_wr_data = '0;
  logic [BO_E-1:0][ROWS_W-1:0] rm8_wr_data = '0;
  logic start = 0; layer_cfg_t cfg = '0;
  logic busy, done; logic [31:0] run_cycles; logic [2:0][31:0] idle_cycles;
  logic s_v, f_v, e_v;
  logic [NCOL_W-1:0] s_c, f_c, e_c;
  logic [BO_S-1:0] s_rv; logic [BO_F-1:0] f_rv; logic [BO_E-1:0] e_rv;
  logic [BO_S-1:0][ROWS_W-1:0] s_ri; logic [BO_F-1:0][ROWS_W-1:0] f_ri; logic [BO_E-1:0][ROWS_W-1:0] e_ri;
  logic [BO_S-1:0][31:0] s_d; logic [BO_F-1:0][31:0] f_d; logic [BO_E-1:0][31:0] e_d;

  msp_accel dut (
    .clk, .rst_n,
    .a_wr_en, .a_wr_addr, .a_wr_data,
    .ws_wr_en, .ws_wr_addr(w_wr_addr), .ws_wr_data,
    .wf_wr_en, .wf_wr_addr(w_wr_addr), .wf_wr_data,
    .w8_wr_en, .w8_wr_addr(w_wr_addr), .w8_wr_data,
    .rms_wr_en, .rms_wr_addr(rm_wr_addr), .rms_wr_data,
    .rmf_wr_en, .rmf_wr_addr(rm_wr_addr), .rmf_wr_data,
    .rm8_wr_en, .rm8_wr_addr(rm_wr_addr), .rm8_wr_data,
    .start, .cfg, .busy, .done, .run_cycles, .idle_cycles,
    .s_res_valid(s_v), .s_res_col(s_c), .s_res_row_valid(s_rv), .s_res_row_idx(s_ri), .s_res_data(s_d),
    .f_res_valid(f_v), .f_res_col(f_c), .f_res_row_valid(f_rv), .f_res_row_idx(f_ri), .f_res_data(f_d),
    .e_res_valid(e_v), .e_res_col(e_c), .e_res_row_valid(e_rv), .e_res_row_idx(e_ri), .e_res_data(e_d)
  );

  // ---------------- layer model ----------------
  int X [MAXK][MAXN];
  int W [MAXR][MAXK];       // raw code of each layer row
  int sch [MAXR];           // 0 SPoT, 1 4-bit, 2 8-bit
  int Y [MAXR][MAXN];
  int seen [MAXR][MAXN];
  int loc [3][MAXR];        // layer row of local row, per core
  int nrows [3];

  // mechanism counters
  int m_spot_zero = 0, m_spot_neg = 0, m_w8_wide = 0, m_idle = 0, m_balanced = 0;
  int m_partial = 0, m_remap = 0;

  function automatic int spot_val(int c);
    int t1 = (((c >> 1) & 3) == 0) ? 0 : (1 << (((c >> 1) & 3) - 1));
    int t2 = c & 1;
    return (((c >> 3) & 1) != 0) ? (t1 + t2) : -(t1 + t2);
  endfunction
  function automatic int sx(int v, int bits);
    return (v >= (1 << (bits - 1))) ? v - (1 << bits) : v;
  endfunction
  function automatic int wval(int r, int k);
    return (sch[r] == 0) ? spot_val(W[r][k]) : (sch[r] == 1) ? sx(W[r][k], 4) : sx(W[r][k], 8);
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ---------------- result monitor ----------------
  int cur_nc = 1;
  int words [3] = '{0, 0, 0};
  always @(posedge clk) begin
    #2;
    // a core only produces a result word for a pass in which it has rows
    if (s_v) begin words[0]++; check("SPoT word has a valid row", int'(s_rv != '0), 1); end
    if (f_v) begin words[1]++; check("4-bit word has a valid row", int'(f_rv != '0), 1); end
    if (e_v) begin words[2]++; check("8-bit word has a valid row", int'(e_rv != '0), 1); end
    if (s_v) for (int r = 0; r < BO_S; r++) if (s_rv[r]) take(int'(s_ri[r]), int'(s_c), int'($signed(s_d[r])), 0); else m_partial++;
    if (f_v) for (int r = 0; r < BO_F; r++) if (f_rv[r]) take(int'(f_ri[r]), int'(f_c), int'($signed(f_d[r])), 1); else m_partial++;
    if (e_v) for (int r = 0; r < BO_E; r++) if (e_rv[r]) take(int'(e_ri[r]), int'(e_c), int'($signed(e_d[r])), 2); else m_partial++;
  end

  task automatic take(int row, int c, int val, int s);
    if (row >= MAXR || c >= cur_nc) begin
      check("result address in range", 0, 1);
      return;
    end
    check($sformatf("row %0d scheme", row), sch[row], s);
    check($sformatf("Y[%0d][%0d]", row, c), val, Y[row][c]);
    seen[row][c]++;
  endtask

  // ---------------- one layer ----------------
  task automatic run_layer(int rs, int rf, int re, int ks, int nc);
    int R = rs + rf + re, K = ks * BI, npass = 0, steps, edges = 0;
    int bo [3] = '{BO_S, BO_F, BO_E};
    int perm [MAXR];
    int exp_idle [3];
    nrows = '{rs, rf, re};
    cur_nc = nc;
    words = '{0, 0, 0};
    // operands
    for (int k = 0; k < K; k++) for (int n = 0; n < nc; n++) X[k][n] = $urandom % 16;
    for (int i = 0; i < R; i++) perm[i] = i;
    for (int i = R - 1; i > 0; i--) begin
      automatic int j = $urandom % (i + 1);
      automatic int t = perm[i];
      perm[i] = perm[j]; perm[j] = t;
    end
    for (int i = 0; i < R; i++) begin
      automatic int s = (i < rs) ? 0 : (i < rs + rf) ? 1 : 2;
      automatic int l = (s == 0) ? i : (s == 1) ? i - rs : i - rs - rf;
      sch[perm[i]] = s;
      loc[s][l] = perm[i];
      if (perm[i] != i) m_remap++;
    end
    for (int r = 0; r < R; r++)
      for (int k = 0; k < K; k++) begin
        W[r][k] = (sch[r] == 2) ? $urandom % 256 : $urandom % 16;
        if (sch[r] == 0 && (((W[r][k] >> 1) & 3) == 0 || (W[r][k] & 1) == 0)) m_spot_zero++;
        if (sch[r] == 0 && ((W[r][k] >> 3) & 1) == 0 && (W[r][k] & 7) != 0) m_spot_neg++;
        if (sch[r] == 2 && (sx(W[r][k], 8) > 7 || sx(W[r][k], 8) < -8)) m_w8_wide++;
      end
    for (int r = 0; r < R; r++)
      for (int n = 0; n < nc; n++) begin
        Y[r][n] = 0;
        for (int k = 0; k < K; k++) Y[r][n] += wval(r, k) * X[k][n];
        seen[r][n] = 0;
      end
    for (int c = 0; c < 3; c++) if ((nrows[c] + bo[c] - 1) / bo[c] > npass) npass = (nrows[c] + bo[c] - 1) / bo[c];
    if (npass == 0) npass = 1;
    for (int c = 0; c < 3; c++) begin
      exp_idle[c] = 0;
      for (int p = 0; p < npass; p++) if (p * bo[c] >= nrows[c]) exp_idle[c] += nc * ks;
    end

    // host writes: activations
    for (int n = 0; n < nc; n++)
      for (int k = 0; k < ks; k++) begin
        a_wr_en = 1; a_wr_addr = 14'(n * ks + k);
        for (int i = 0; i < BI; i++) a_wr_data[i] = 4'(X[k * BI + i][n]);
        @(posedge clk); #1;
      end
    a_wr_en = 0;
    // weights and row maps, pass by pass
    for (int p = 0; p < npass; p++) begin
      for (int k = 0; k < ks; k++) begin
        for (int r = 0; r < BO_S; r++) for (int i = 0; i < BI; i++)
          ws_wr_data[r][i] = (p * BO_S + r < rs) ? 4'(W[loc[0][p * BO_S + r]][k * BI + i]) : 4'($urandom);
        for (int r = 0; r < BO_F; r++) for (int i = 0; i < BI; i++)
          wf_wr_data[r][i] = (p * BO_F + r < rf) ? 4'(W[loc[1][p * BO_F + r]][k * BI + i]) : 4'($urandom);
        for (int r = 0; r < BO_E; r++) for (int i = 0; i < BI; i++)
          w8_wr_data[r][i] = (p * BO_E + r < re) ? 8'(W[loc[2][p * BO_E + r]][k * BI + i]) : 8'($urandom);
        w_wr_addr = 11'(p * ks + k);
        ws_wr_en = 1; wf_wr_en = 1; w8_wr_en = 1;
        @(posedge clk); #1;
      end
      ws_wr_en = 0; wf_wr_en = 0; w8_wr_en = 0;
      for (int r = 0; r < BO_S; r++) rms_wr_data[r] = (p * BO_S + r < rs) ? ROWS_W'(loc[0][p * BO_S + r]) : ROWS_W'($urandom);
      for (int r = 0; r < BO_F; r++) rmf_wr_data[r] = (p * BO_F + r < rf) ? ROWS_W'(loc[1][p * BO_F + r]) : ROWS_W'($urandom);
      for (int r = 0; r < BO_E; r++) rm8_wr_data[r] = (p * BO_E + r < re) ? ROWS_W'(loc[2][p * BO_E + r]) : ROWS_W'($urandom);
      rm_wr_addr = 7'(p); rms_wr_en = 1; rmf_wr_en = 1; rm8_wr_en = 1;
      @(posedge clk); #1;
      rms_wr_en = 0; rmf_wr_en = 0; rm8_wr_en = 0;
    end

    // run
    cfg.ksteps = KSTEP_W'(ks); cfg.ncols = NCOL_W'(nc);
    cfg.rows_spot = ROWS_W'(rs); cfg.rows_fix4 = ROWS_W'(rf); cfg.rows_fix8 = ROWS_W'(re);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    edges = 1;
    while (!done && edges < 100000) begin @(posedge clk); #1; edges++; end
    steps = npass * nc * ks;
    check("done latency", edges, steps + 3);
    check("run_cycles", int'(run_cycles), steps);
    for (int c = 0; c < 3; c++) begin
      check($sformatf("idle[%0d]", c), int'(idle_cycles[c]), exp_idle[c]);
      if (exp_idle[c] > 0) m_idle++;
    end
    if (exp_idle[0] == 0 && exp_idle[1] == 0 && exp_idle[2] == 0 && int'(idle_cycles[0] + idle_cycles[1] + idle_cycles[2]) == 0) m_balanced++;
    repeat (2) @(posedge clk);
    #1;
    for (int c = 0; c < 3; c++)
      check($sformatf("result words of core %0d", c), words[c], nc * ((nrows[c] + bo[c] - 1) / bo[c]));
    for (int r = 0; r < R; r++) for (int n = 0; n < nc; n++) check($sformatf("row %0d col %0d seen", r, n), seen[r][n], 1);
    $display("layer rows %0d/%0d/%0d K=%0d N=%0d: %0d passes, %0d cycles, idle %0d/%0d/%0d",
             rs, rf, re, K, nc, npass, run_cycles, idle_cycles[0], idle_cycles[1], idle_cycles[2]);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    run_layer(150, 30, 10, 2, 3); // unbalanced: fixed and 8-bit cores idle
    run_layer(130, 60, 10, 3, 2); // 65:30:5 split: all cores finish together
    run_layer(65, 30, 5, 4, 4);   // one full pass per core, K = 64
    check("mechanism: SPoT zero term",      int'(m_spot_zero > 0), 1);
    check("mechanism: negative SPoT",       int'(m_spot_neg > 0), 1);
    check("mechanism: wide 8-bit weight",   int'(m_w8_wide > 0), 1);
    check("mechanism: idle core",           int'(m_idle > 0), 1);
    check("mechanism: balanced run",        int'(m_balanced > 0), 1);
    check("mechanism: partial final pass",  int'(m_partial > 0), 1);
    check("mechanism: row remap",           int'(m_remap > 0), 1);
    $display("mechanisms: spot_zero=%0d spot_neg=%0d w8_wide=%0d idle_core=%0d balanced=%0d partial_rows=%0d remapped_rows=%0d",
             m_spot_zero, m_spot_neg, m_w8_wide, m_idle, m_balanced, m_partial, m_remap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
