// fixed_pe -- one row processing element of a fixed-point GEMM core.
//
// Same dataflow as spot_pe, but each lane is a signed multiply of an unsigned
// ACT_W-bit activation by a two's-complement W_W-bit weight, which FPGA tools
// map onto DSP slices.  W_W = 4 gives a PE of the GEMM_fixed core, W_W = 8 a PE
// of the GEMM_8-bit core that holds the most quantization-sensitive rows.
//
// Interface and timing: en/first/last as in spot_pe; acc is updated at the
// clock edge that samples a step, res_valid is high the cycle after the last
// step.  The paper says only that fixed-point products use DSPs; lanes, adder
// tree and accumulator width are this design's choices.
module fixed_pe
#(
  parameter int BLK_IN = 16,
  parameter int ACT_W  = msp_pkg::MSP_ACT_W,
  parameter int W_W    = 4,
  parameter int ACC_W  = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic                          first,
  input  logic                          last,
  input  logic [BLK_IN-1:0][ACT_W-1:0]  act,
  input  logic [BLK_IN-1:0][W_W-1:0]    w,
  output logic signed [ACC_W-1:0]       acc,
  output logic                          res_valid
);

  localparam int P_W = ACT_W + W_W + 1;

  logic signed [P_W-1:0]   prod [BLK_IN];
  logic signed [ACC_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < BLK_IN; i++) begin
      prod[i] = $signed({1'b0, act[i]}) * $signed(w[i]);
      sum += ACC_W'(prod[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= en & last;
      if (en) acc <= (first ? '0 : acc) + sum;
    end
  end

endmodule
