// act_buffer -- on-chip activation buffer shared by the three GEMM cores.
//
// Holds the input matrix X of one GEMM tile as DEPTH words of BLK_IN unsigned
// ACT_W-bit activations.  Word n*ksteps + k holds X[k*BLK_IN .. k*BLK_IN+BLK_IN-1][n]
// (column n of X, step k along K).  One write port for the host and one
// synchronous read port whose word appears one clock after rd_addr; that word
// is broadcast to all cores, which is what lets SPoT, 4-bit and 8-bit rows of
// the same layer run side by side.  Not described by the paper (it only names
// the GEMM cores); organisation and depth are this design's.
module act_buffer
#(
  parameter int BLK_IN = 16,
  parameter int ACT_W  = msp_pkg::MSP_ACT_W,
  parameter int DEPTH  = 16384,
  parameter int AW     = $clog2(DEPTH)
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [AW-1:0]                 wr_addr,
  input  logic [BLK_IN-1:0][ACT_W-1:0]  wr_data,
  input  logic [AW-1:0]                 rd_addr,
  output logic [BLK_IN-1:0][ACT_W-1:0]  rd_data
);

  logic [BLK_IN*ACT_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
