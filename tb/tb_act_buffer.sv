// tb_act_buffer -- self-checking test of the activation buffer.
//
// Writes random words to random addresses (kept in a model here), then reads
// addresses back one per clock, checking that each word appears exactly one
// clock after its address (synchronous read) and equals the last one written.
// A write and a read of the same address in one clock must return the old
// word (read-before-write, as a block RAM in that mode).
module tb_act_buffer;
  localparam int BI = 4, DEPTH = 32;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                wr_en = 0;
  logic [4:0]          wr_addr = '0, rd_addr = '0;
  logic [BI-1:0][3:0]  wr_data = '0, rd_data;
  logic [BI*4-1:0]     model [DEPTH];

  act_buffer #(.BLK_IN(BI), .ACT_W(4), .DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk); #1;
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = 5'(a); wr_data = 16'($urandom); model[a] = wr_data;
      @(posedge clk); #1;
    end
    for (int i = 0; i < 200; i++) begin
      automatic int ra = $urandom % DEPTH;
      automatic logic [15:0] exp_word = model[ra];
      wr_en = ($urandom % 2) == 1;
      wr_addr = ($urandom % 4 == 0) ? 5'(ra) : 5'($urandom);
      wr_data = 16'($urandom);
      rd_addr = 5'(ra);
      @(posedge clk); #1;
      if (wr_en) model[wr_addr] = wr_data;
      check($sformatf("read %0d", ra), int'(rd_data), int'(exp_word));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
