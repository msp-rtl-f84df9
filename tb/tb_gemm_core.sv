// tb_gemm_core -- self-checking test of gemm_core in all three schemes.
//
// Three small cores (BLK_IN = 4): SPoT with 3 row PEs, 4-bit fixed with 2,
// 8-bit fixed with 1.  A 12-row layer is split 7 / 3 / 2 between them with a
// random row permutation, written into the weight buffers and row maps.  The
// testbench then plays the controller: passes x columns x K steps, one step
// per clock, with a core's en low once its rows are used up, and it feeds the
// activation word one cycle after each step, as the activation buffer does.
// Every result is compared with Y = W * X computed here, its row index with
// the permutation, its row-valid flag with (local row < rows), its column, and
// its arrival time (the cycle after the column's last step is consumed).
module tb_gemm_core;
  import msp_pkg::*;

  localparam int BI = 4, KS = 3, NC = 3, K = BI * KS;
  localparam int BO_S = 3, BO_F = 2, BO_E = 1;
  localparam int R_S = 7, R_F = 3, R_E = 2, R_ALL = R_S + R_F + R_E;
  localparam int NPASS = 3;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // operands
  int X [K][NC];
  int WS [R_S][K];   // SPoT codes
  int WF [R_F][K];   // 4-bit two's complement
  int WE [R_E][K];   // 8-bit two's complement
  int perm [R_ALL];  // layer row of local row: SPoT rows first, then 4-bit, then 8-bit

  // controller side
  logic             issue = 0, first = 0, last = 0;
  logic [2:0]       en = '0;
  logic [5:0]       w_addr = '0;
  logic [2:0]       pass = '0;
  logic [NCOL_W-1:0] col = '0;
  logic [BI-1:0][3:0] act;
  logic [BI-1:0][3:0] amem [64];
  logic [5:0]       a_addr = '0;
  always_ff @(posedge clk) act <= amem[a_addr];

  // host writes
  logic ws_en = 0, wf_en = 0, we_en = 0, rs_en = 0, rf_en = 0, re_en = 0;
  logic [5:0] wr_addr = '0;
  logic [2:0] rm_addr = '0;
  logic [BO_S-1:0][BI-1:0][3:0] ws_data = '0;
  logic [BO_F-1:0][BI-1:0][3:0] wf_data = '0;
  logic [BO_E-1:0][BI-1:0][7:0] we_data = '0;
  logic [BO_S-1:0][ROWS_W-1:0]  rs_data = '0;
  logic [BO_F-1:0][ROWS_W-1:0]  rf_data = '0;
  logic [BO_E-1:0][ROWS_W-1:0]  re_data = '0;

  // results
  logic s_v, f_v, e_v;
  logic [NCOL_W-1:0] s_c, f_c, e_c;
  logic [BO_S-1:0] s_rv; logic [BO_F-1:0] f_rv; logic [BO_E-1:0] e_rv;
  logic [BO_S-1:0][ROWS_W-1:0] s_ri; logic [BO_F-1:0][ROWS_W-1:0] f_ri; logic [BO_E-1:0][ROWS_W-1:0] e_ri;
  logic [BO_S-1:0][31:0] s_d; logic [BO_F-1:0][31:0] f_d; logic [BO_E-1:0][31:0] e_d;

  gemm_core #(.SCHEME(SCH_SPOT), .BLK_OUT(BO_S), .BLK_IN(BI), .WBUF_DEPTH(64), .RMAP_DEPTH(8)) u_s (
    .clk, .rst_n, .w_wr_en(ws_en), .w_wr_addr(wr_addr), .w_wr_data(ws_data),
    .rm_wr_en(rs_en), .rm_wr_addr(rm_addr), .rm_wr_data(rs_data), .rows(ROWS_W'(R_S)),
    .issue, .en(en[0]), .w_addr, .pass, .col, .first, .last, .act,
    .res_valid(s_v), .res_col(s_c), .res_row_valid(s_rv), .res_row_idx(s_ri), .res_data(s_d));
  gemm_core #(.SCHEME(SCH_FIXED4), .BLK_OUT(BO_F), .BLK_IN(BI), .WBUF_DEPTH(64), .RMAP_DEPTH(8)) u_f (
    .clk, .rst_n, .w_wr_en(wf_en), .w_wr_addr(wr_addr), .w_wr_data(wf_data),
    .rm_wr_en(rf_en), .rm_wr_addr(rm_addr), .rm_wr_data(rf_data), .rows(ROWS_W'(R_F)),
    .issue, .en(en[1]), .w_addr, .pass, .col, .first, .last, .act,
    .res_valid(f_v), .res_col(f_c), .res_row_valid(f_rv), .res_row_idx(f_ri), .res_data(f_d));
  gemm_core #(.SCHEME(SCH_FIXED8), .BLK_OUT(BO_E), .BLK_IN(BI), .WBUF_DEPTH(64), .RMAP_DEPTH(8)) u_e (
    .clk, .rst_n, .w_wr_en(we_en), .w_wr_addr(wr_addr), .w_wr_data(we_data),
    .rm_wr_en(re_en), .rm_wr_addr(rm_addr), .rm_wr_data(re_data), .rows(ROWS_W'(R_E)),
    .issue, .en(en[2]), .w_addr, .pass, .col, .first, .last, .act,
    .res_valid(e_v), .res_col(e_c), .res_row_valid(e_rv), .res_row_idx(e_ri), .res_data(e_d));

  function automatic int spot_val(int c);
    int t1 = (((c >> 1) & 3) == 0) ? 0 : (1 << (((c >> 1) & 3) - 1));
    int t2 = c & 1;
    return (((c >> 3) & 1) != 0) ? (t1 + t2) : -(t1 + t2);
  endfunction
  function automatic int sx(int v, int bits);
    return (v >= (1 << (bits - 1))) ? v - (1 << bits) : v;
  endfunction
  // expected Y for scheme s (0 SPoT, 1 4-bit, 2 8-bit), local row r, column n
  function automatic int yref(int s, int r, int n);
    int acc = 0;
    for (int k = 0; k < K; k++)
      acc += X[k][n] * ((s == 0) ? spot_val(WS[r][k]) : (s == 1) ? sx(WF[r][k], 4) : sx(WE[r][k], 8));
    return acc;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // result monitors
  int got_s = 0, got_f = 0, got_e = 0;
  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    #2;
    if (s_v || f_v || e_v) begin
      check("result pending", int'(q_cyc.size() > 0), 1);
      if (q_cyc.size() > 0) begin
        pass_of_col_done = q_pass.pop_front();
        col_done = q_col.pop_front();
        check("result timing", cyc - q_cyc.pop_front(), 1);
      end
    end
    if (s_v) begin
      for (int r = 0; r < BO_S; r++) begin
        automatic int lr = pass_of_col_done * BO_S + r;
        check("spot row_valid", int'(s_rv[r]), (lr < R_S) ? 1 : 0);
        check("spot col", int'(s_c), col_done);
        if (lr < R_S) begin
          got_s++;
          check($sformatf("spot row %0d idx", lr), int'(s_ri[r]), perm[lr]);
          check($sformatf("spot row %0d col %0d", lr, col_done), int'($signed(s_d[r])), yref(0, lr, col_done));
        end
      end
    end
    if (f_v) begin
      for (int r = 0; r < BO_F; r++) begin
        automatic int lr = pass_of_col_done * BO_F + r;
        check("fix4 row_valid", int'(f_rv[r]), (lr < R_F) ? 1 : 0);
        if (lr < R_F) begin
          got_f++;
          check($sformatf("fix4 row %0d idx", lr), int'(f_ri[r]), perm[R_S + lr]);
          check($sformatf("fix4 row %0d col %0d", lr, col_done), int'($signed(f_d[r])), yref(1, lr, col_done));
        end
      end
    end
    if (e_v) begin
      for (int r = 0; r < BO_E; r++) begin
        automatic int lr = pass_of_col_done * BO_E + r;
        check("fix8 row_valid", int'(e_rv[r]), (lr < R_E) ? 1 : 0);
        if (lr < R_E) begin
          got_e++;
          check($sformatf("fix8 row %0d idx", lr), int'(e_ri[r]), perm[R_S + R_F + lr]);
          check($sformatf("fix8 row %0d col %0d", lr, col_done), int'($signed(e_d[r])), yref(2, lr, col_done));
        end
      end
    end
  end

  // pass, column and edge count of each column block whose last step has
  // been consumed, in issue order
  int q_pass[$], q_col[$], q_cyc[$];
  int pass_of_col_done = 0, col_done = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // random operands and permutation
    for (int k = 0; k < K; k++) for (int n = 0; n < NC; n++) X[k][n] = $urandom % 16;
    for (int r = 0; r < R_S; r++) for (int k = 0; k < K; k++) WS[r][k] = $urandom % 16;
    for (int r = 0; r < R_F; r++) for (int k = 0; k < K; k++) WF[r][k] = $urandom % 16;
    for (int r = 0; r < R_E; r++) for (int k = 0; k < K; k++) WE[r][k] = $urandom % 256;
    for (int i = 0; i < R_ALL; i++) perm[i] = i;
    for (int i = R_ALL - 1; i > 0; i--) begin
      automatic int j = $urandom % (i + 1);
      automatic int t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int n = 0; n < NC; n++)
      for (int ks = 0; ks < KS; ks++)
        for (int i = 0; i < BI; i++) amem[n * KS + ks][i] = 4'(X[ks * BI + i][n]);

    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // load weights and row maps: word p*KS + k
    for (int p = 0; p < NPASS; p++) begin
      for (int ks = 0; ks < KS; ks++) begin
        for (int r = 0; r < BO_S; r++) for (int i = 0; i < BI; i++)
          ws_data[r][i] = (p * BO_S + r < R_S) ? 4'(WS[p * BO_S + r][ks * BI + i]) : 4'($urandom);
        for (int r = 0; r < BO_F; r++) for (int i = 0; i < BI; i++)
          wf_data[r][i] = (p * BO_F + r < R_F) ? 4'(WF[p * BO_F + r][ks * BI + i]) : 4'($urandom);
        for (int r = 0; r < BO_E; r++) for (int i = 0; i < BI; i++)
          we_data[r][i] = (p * BO_E + r < R_E) ? 8'(WE[p * BO_E + r][ks * BI + i]) : 8'($urandom);
        wr_addr = 6'(p * KS + ks);
        ws_en = 1; wf_en = 1; we_en = 1;
        @(posedge clk); #1;
      end
      for (int r = 0; r < BO_S; r++) rs_data[r] = (p * BO_S + r < R_S) ? ROWS_W'(perm[p * BO_S + r]) : '0;
      for (int r = 0; r < BO_F; r++) rf_data[r] = (p * BO_F + r < R_F) ? ROWS_W'(perm[R_S + p * BO_F + r]) : '0;
      for (int r = 0; r < BO_E; r++) re_data[r] = (p * BO_E + r < R_E) ? ROWS_W'(perm[R_S + R_F + p * BO_E + r]) : '0;
      rm_addr = 3'(p); rs_en = 1; rf_en = 1; re_en = 1;
      ws_en = 0; wf_en = 0; we_en = 0;
      @(posedge clk); #1;
      rs_en = 0; rf_en = 0; re_en = 0;
    end
    // run: passes x columns x K steps
    for (int p = 0; p < NPASS; p++) begin
      for (int n = 0; n < NC; n++) begin
        for (int ks = 0; ks < KS; ks++) begin
          issue = 1; pass = 3'(p); col = NCOL_W'(n);
          en = {p * BO_E < R_E, p * BO_F < R_F, p * BO_S < R_S};
          w_addr = 6'(p * KS + ks); a_addr = 6'(n * KS + ks);
          first = (ks == 0); last = (ks == KS - 1);
          @(posedge clk);
          #1;
          if (ks == KS - 1) begin
            q_pass.push_back(p); q_col.push_back(n); q_cyc.push_back(cyc);
          end
        end
      end
    end
    issue = 0; en = '0;
    repeat (5) @(posedge clk);
    check("spot results", got_s, R_S * NC);
    check("fix4 results", got_f, R_F * NC);
    check("fix8 results", got_e, R_E * NC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
