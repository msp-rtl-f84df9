// gemm_core -- one heterogeneous GEMM core: BLK_OUT row PEs of one weight scheme.
//
// The MSP accelerator computes Y = W * X for a layer whose weight rows have
// been split (offline, by the training flow) into SPoT rows, 4-bit fixed-point
// rows and 8-bit rows.  Each group lives in its own core; all three cores see
// the same activation vector every cycle.  SCHEME selects the PE type:
//   SCH_SPOT   -> spot_pe  (shift-add in LUTs), GEMM_SPoT core
//   SCH_FIXED4 -> fixed_pe (W_W = 4, DSP),     GEMM_fixed core
//   SCH_FIXED8 -> fixed_pe (W_W = 8, DSP),     GEMM_8-bit core
//
// Storage (written by the host before a run):
//   * weight buffer, WBUF_DEPTH words of BLK_OUT x BLK_IN weights.  Word
//     p*ksteps + k holds, for local rows p*BLK_OUT .. p*BLK_OUT+BLK_OUT-1 (one
//     "pass"), the weights of inputs k*BLK_IN .. k*BLK_IN+BLK_IN-1.
//   * row map, RMAP_DEPTH words of BLK_OUT row indices: word p gives the layer
//     (output-channel) index of each local row of pass p.  This lets any rows
//     of a layer go to any core, as the paper's per-row scheme and precision
//     choice requires.
//
// Pipeline: cycle 0 the controller presents issue/w_addr/pass/col/first/last
// (en = this core has rows in this pass); the weight word and row-map word are
// read into registers.  Cycle 1 the activation vector arrives (act, from the
// activation buffer, also one cycle of read latency) and the PEs accumulate.
// Two cycles after a last step is presented (the cycle after its
// accumulation), res_valid is high for one cycle with the
// column, per-row valid flags (local row < rows), layer row indices and the
// BLK_OUT dot products.  A core accepts a new step every cycle.
// The paper names the three cores and their PE-array size Blk_out; buffers,
// row map, addressing and pipeline are this design's.
module gemm_core
  import msp_pkg::*;
#(
  parameter scheme_e SCHEME    = SCH_SPOT,
  parameter int BLK_OUT        = 65,
  parameter int BLK_IN         = 16,
  parameter int ACT_W          = msp_pkg::MSP_ACT_W,
  parameter int M1_W           = msp_pkg::MSP_SPOT_M1_W,
  parameter int M2_W           = msp_pkg::MSP_SPOT_M2_W,
  parameter int W_W            = (SCHEME == SCH_SPOT)   ? 1 + M1_W + M2_W :
                                 (SCHEME == SCH_FIXED8) ? 8 : 4,
  parameter int ACC_W          = 32,
  parameter int WBUF_DEPTH     = 2048,
  parameter int RMAP_DEPTH     = 128,
  parameter int ROW_IDX_W      = msp_pkg::ROWS_W,
  parameter int WA_W           = $clog2(WBUF_DEPTH),
  parameter int RA_W           = $clog2(RMAP_DEPTH)
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // host writes
  input  logic                                    w_wr_en,
  input  logic [WA_W-1:0]                         w_wr_addr,
  input  logic [BLK_OUT-1:0][BLK_IN-1:0][W_W-1:0] w_wr_data,
  input  logic                                    rm_wr_en,
  input  logic [RA_W-1:0]                         rm_wr_addr,
  input  logic [BLK_OUT-1:0][ROW_IDX_W-1:0]       rm_wr_data,
  // layer size for this core
  input  logic [ROWS_W-1:0]                       rows,
  // step from the controller (cycle 0)
  input  logic                                    issue,
  input  logic                                    en,
  input  logic [WA_W-1:0]                         w_addr,
  input  logic [RA_W-1:0]                         pass,
  input  logic [NCOL_W-1:0]                       col,
  input  logic                                    first,
  input  logic                                    last,
  // activation vector (cycle 1)
  input  logic [BLK_IN-1:0][ACT_W-1:0]            act,
  // results
  output logic                                    res_valid,
  output logic [NCOL_W-1:0]                       res_col,
  output logic [BLK_OUT-1:0]                      res_row_valid,
  output logic [BLK_OUT-1:0][ROW_IDX_W-1:0]       res_row_idx,
  output logic [BLK_OUT-1:0][ACC_W-1:0]           res_data
);

  localparam int WWORD = BLK_OUT * BLK_IN * W_W;
  localparam int RWORD = BLK_OUT * ROW_IDX_W;

  // ---------------- buffers (synchronous read, as block RAM) ----------------
  logic [WWORD-1:0] wbuf [WBUF_DEPTH];
  logic [RWORD-1:0] rmap [RMAP_DEPTH];
  logic [WWORD-1:0] w_q;
  logic [RWORD-1:0] rm_q;

  always_ff @(posedge clk) begin
    if (w_wr_en) wbuf[w_wr_addr] <= w_wr_data;
    w_q <= wbuf[w_addr];
  end

  always_ff @(posedge clk) begin
    if (rm_wr_en) rmap[rm_wr_addr] <= rm_wr_data;
    rm_q <= rmap[pass];
  end

  // ---------------- stage 1 control ----------------
  logic              v1, first1, last1;
  logic [RA_W-1:0]   pass1;
  logic [NCOL_W-1:0] col1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; pass1 <= '0; col1 <= '0;
    end else begin
      v1     <= issue & en;
      first1 <= first;
      last1  <= last;
      pass1  <= pass;
      col1   <= col;
    end
  end

  logic [BLK_OUT-1:0][BLK_IN-1:0][W_W-1:0] w_arr;
  assign w_arr = w_q;

  // ---------------- PE array ----------------
  logic [BLK_OUT-1:0] pe_valid;

  for (genvar r = 0; r < BLK_OUT; r++) begin : g_row
    logic signed [ACC_W-1:0] acc;
    if (SCHEME == SCH_SPOT) begin : g_spot
      spot_pe #(.BLK_IN(BLK_IN), .ACT_W(ACT_W), .M1_W(M1_W), .M2_W(M2_W),
                .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .en(v1), .first(first1), .last(last1),
        .act, .w(w_arr[r]), .acc, .res_valid(pe_valid[r])
      );
    end else begin : g_fixed
      fixed_pe #(.BLK_IN(BLK_IN), .ACT_W(ACT_W), .W_W(W_W),
                 .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .en(v1), .first(first1), .last(last1),
        .act, .w(w_arr[r]), .acc, .res_valid(pe_valid[r])
      );
    end
    assign res_data[r] = acc;
  end

  // ---------------- result tags (captured with the last step) ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_col       <= '0;
      res_row_valid <= '0;
      res_row_idx   <= '0;
    end else if (v1 && last1) begin
      res_col     <= col1;
      res_row_idx <= rm_q;
      for (int r = 0; r < BLK_OUT; r++)
        res_row_valid[r] <= (32'(pass1) * BLK_OUT + r) < 32'(rows);
    end
  end

  assign res_valid = pe_valid[0];

  // All row PEs are stepped together.
  a_pe_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    pe_valid == {BLK_OUT{pe_valid[0]}})
    else $error("gemm_core: row PEs out of step");

endmodule
