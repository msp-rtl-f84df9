// tb_spot_mult -- exhaustive check of the SPoT shift-add multiplier.
//
// Two instances: the 4-bit default code (1 sign, 2-bit and 1-bit exponent
// codes) and a 6-bit code (1 sign, 3-bit and 2-bit codes).  Every activation
// and every weight code is applied; the expected product is computed here with
// integer arithmetic: term(e) = 0 for e = 0, else 2^(e-1); product =
// +/- act * (term(e1) + term(e2)), negative when the sign bit is 0.  The two
// worked encodings 1_100_10 -> +(2^3 + 2^1) and 0_11_1 -> -(2^2 + 2^0) are
// checked by name as well.
module tb_spot_mult;
  import msp_pkg::*;

  int checks = 0, failures = 0;

  logic [3:0]        act;
  logic [3:0]        w4;
  logic [5:0]        w6;
  logic signed [7:0]  p4;   // 4 + 2^2
  logic signed [11:0] p6;   // 4 + 2^3

  spot_mult #(.ACT_W(4), .M1_W(2), .M2_W(1)) u4 (.act, .w(w4), .prod(p4));
  spot_mult #(.ACT_W(4), .M1_W(3), .M2_W(2)) u6 (.act, .w(w6), .prod(p6));

  function automatic int term(int e);
    return (e == 0) ? 0 : (1 << (e - 1));
  endfunction

  function automatic int ref_prod(int a, int sgn, int e1, int e2);
    int mag = a * (term(e1) + term(e2));
    return (sgn == 0) ? -mag : mag;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act = '0; w4 = '0; w6 = '0;
    for (int a = 0; a < 16; a++) begin
      for (int c = 0; c < 16; c++) begin
        act = 4'(a); w4 = 4'(c);
        #1;
        check($sformatf("4b a=%0d w=%b", a, c), int'(p4),
              ref_prod(a, (c >> 3) & 1, (c >> 1) & 3, c & 1));
      end
      for (int c = 0; c < 64; c++) begin
        act = 4'(a); w6 = 6'(c);
        #1;
        check($sformatf("6b a=%0d w=%b", a, c), int'(p6),
              ref_prod(a, (c >> 5) & 1, (c >> 2) & 7, c & 3));
      end
    end
    // The two worked encodings.
    act = 4'd7; w6 = 6'b1_100_10; w4 = 4'b0_11_1;
    #1;
    check("6-bit 1_100_10 x 7", int'(p6), 7 * (8 + 2));
    check("4-bit 0_11_1 x 7",   int'(p4), -7 * (4 + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
