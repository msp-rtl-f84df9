// spot_pe -- one row processing element of the GEMM_SPoT core.
//
// Each cycle with en=1 the PE takes BLK_IN activations and the BLK_IN SPoT
// weights of its row, forms the BLK_IN products with spot_mult (shift-add, LUT
// only), sums them and adds the sum to its accumulator.  first=1 restarts the
// accumulation (the step is the first along K); last=1 marks the final step,
// after which acc holds the finished dot product and res_valid is high for
// one cycle.
//
// Timing: inputs are sampled at the clock edge; acc and res_valid change at
// that same edge, so a result is visible one cycle after its last step.
// The paper states only that SPoT products are shift-adds mapped to LUTs; the
// lane count, the adder tree and the accumulator width are this design's.
module spot_pe
#(
  parameter int BLK_IN = 16,
  parameter int ACT_W  = msp_pkg::MSP_ACT_W,
  parameter int M1_W   = msp_pkg::MSP_SPOT_M1_W,
  parameter int M2_W   = msp_pkg::MSP_SPOT_M2_W,
  parameter int W_W    = 1 + M1_W + M2_W,
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

  localparam int P_W = ACT_W + (1 << M1_W);

  logic signed [P_W-1:0]   prod [BLK_IN];
  logic signed [ACC_W-1:0] sum;

  for (genvar i = 0; i < BLK_IN; i++) begin : g_lane
    spot_mult #(.ACT_W(ACT_W), .M1_W(M1_W), .M2_W(M2_W)) u_mult (
      .act (act[i]),
      .w   (w[i]),
      .prod(prod[i])
    );
  end

  always_comb begin
    sum = '0;
    for (int i = 0; i < BLK_IN; i++) sum += ACC_W'(prod[i]);
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
