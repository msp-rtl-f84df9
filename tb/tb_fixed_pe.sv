// tb_fixed_pe -- self-checking test of the fixed-point row PE (fixed_pe) with 8-bit two's-complement
// weights, as used in the 8-bit core (the 4-bit core's PE is the same module
// with W_W = 4 and is exercised by tb_gemm_core).
//
// Random dot products of 1..6 steps along K are run back to back, with
// random gaps in which en is low.  The expected sum is accumulated here from
// the same random operands.  Checks: the accumulator at res_valid, and that
// res_valid rises exactly one cycle after the last step and never otherwise.
module tb_fixed_pe;
  localparam int BI = 4;
  localparam int WW = 8;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en = 0, first = 0, last = 0;
  logic [BI-1:0][3:0]    act = '0;
  logic [BI-1:0][WW-1:0] w = '0;
  logic signed [31:0]    acc;
  logic                  res_valid;

  fixed_pe #(.BLK_IN(BI), .ACT_W(4), .W_W(WW), .ACC_W(32)) dut (
    .clk, .rst_n, .en, .first, .last, .act, .w, .acc, .res_valid
  );

  always #5 clk = ~clk;

  function automatic int lane_ref(int a, int w);
    int ws = (w >= (1 << (WW - 1))) ? w - (1 << WW) : w;
    return a * ws;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expected, steps;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    for (int run = 0; run < 60; run++) begin
      steps = 1 + ($urandom % 6);
      expected = 0;
      for (int k = 0; k < steps; k++) begin
        for (int i = 0; i < BI; i++) begin
          act[i] = 4'($urandom);
          w[i]   = WW'($urandom);
          expected += lane_ref(int'(act[i]), int'(w[i]));
        end
        en = 1; first = (k == 0); last = (k == steps - 1);
        @(posedge clk);
        #1;
        check("res_valid timing", int'(res_valid), (k == steps - 1) ? 1 : 0);
      end
      en = 0; first = 0; last = 0;
      check($sformatf("run %0d steps %0d acc", run, steps), int'(acc), expected);
      repeat ($urandom % 3) begin
        @(posedge clk);
        #1;
        check("res_valid idle", int'(res_valid), 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
