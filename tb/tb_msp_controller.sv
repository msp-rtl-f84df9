// tb_msp_controller -- self-checking test of the lock-step scheduler.
//
// With the default 65:30:5 PE rows, three runs are started:
//   A  rows 150/30/4, ksteps 3, ncols 2: 3 passes; the 4-bit and 8-bit
//      cores idle in passes 1 and 2 (unbalanced split);
//   B  rows 130/60/10, ksteps 2, ncols 3: 2 passes, the 65:30:5-like split,
//      no core idles and all finish together;
//   C  rows 65/0/0, ksteps 1, ncols 1: a single step.
// For every issue cycle the expected w_addr, a_addr, pass, col, first, last
// and core_en are worked out here from the loop nest; afterwards run_cycles,
// idle_cycles and the start-to-done latency are checked (start edge, one
// edge per step, then done two edges after the final step).
// A start pulse during a run must be ignored.
module tb_msp_controller;
  import msp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  layer_cfg_t cfg = '0;
  logic busy, done, issue, first, last;
  logic [10:0] w_addr; logic [13:0] a_addr; logic [6:0] pass;
  logic [NCOL_W-1:0] col; logic [2:0] core_en;
  logic [2:0][ROWS_W-1:0] rows_run;
  logic [31:0] run_cycles; logic [2:0][31:0] idle_cycles;

  msp_controller dut (.clk, .rst_n, .start, .cfg, .busy, .done, .issue, .w_addr, .a_addr,
    .pass, .col, .first, .last, .core_en, .rows_run, .run_cycles, .idle_cycles);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(int rs, int rf, int re, int ks, int nc);
    int bo [3] = '{65, 30, 5};
    int rows [3] = '{rs, rf, re};
    int npass = 0, idle [3] = '{0, 0, 0}, steps = 0, edges = 0;
    for (int c = 0; c < 3; c++) if ((rows[c] + bo[c] - 1) / bo[c] > npass) npass = (rows[c] + bo[c] - 1) / bo[c];
    if (npass == 0) npass = 1;
    cfg.ksteps = KSTEP_W'(ks); cfg.ncols = NCOL_W'(nc);
    cfg.rows_spot = ROWS_W'(rs); cfg.rows_fix4 = ROWS_W'(rf); cfg.rows_fix8 = ROWS_W'(re);
    start = 1;
    @(posedge clk); #1; edges++;
    start = 0;
    for (int p = 0; p < npass; p++)
      for (int n = 0; n < nc; n++)
        for (int k = 0; k < ks; k++) begin
          check("issue", int'(issue), 1);
          check("w_addr", int'(w_addr), p * ks + k);
          check("a_addr", int'(a_addr), n * ks + k);
          check("pass", int'(pass), p);
          check("col", int'(col), n);
          check("first", int'(first), int'(k == 0));
          check("last", int'(last), int'(k == ks - 1));
          for (int c = 0; c < 3; c++) begin
            check($sformatf("core_en[%0d]", c), int'(core_en[c]), int'(p * bo[c] < rows[c]));
            if (!(p * bo[c] < rows[c])) idle[c]++;
          end
          steps++;
          // a second start during the run is ignored
          start = (steps == 2);
          @(posedge clk); #1; edges++;
          start = 0;
        end
    check("issue low after run", int'(issue), 0);
    while (!done && edges < 10000) begin @(posedge clk); #1; edges++; end
    check("start-to-done edges", edges, steps + 3);
    check("run_cycles", int'(run_cycles), steps);
    for (int c = 0; c < 3; c++) check($sformatf("idle[%0d]", c), int'(idle_cycles[c]), idle[c]);
    check("rows_run[0]", int'(rows_run[0]), rs);
    @(posedge clk); #1;
    check("busy low", int'(busy), 0);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check("idle after reset", int'(busy), 0);
    run(150, 30, 4, 3, 2);
    run(130, 60, 10, 2, 3);
    run(65, 0, 0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
