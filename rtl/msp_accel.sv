// msp_accel -- mixed-scheme, multi-precision (MSP) GEMM accelerator.
//
// A layer's GEMM Y = W * X is split by weight rows: rows quantized as SPoT
// (sum of two powers of two) run on the GEMM_SPoT core, built from shift-add
// logic (FPGA LUTs); rows quantized as 4-bit fixed point run on the GEMM_fixed
// core; the ~5 % of rows with the largest 4-bit quantization error are kept in
// 8 bits and run on the GEMM_8-bit core (both DSP multipliers).  The PE arrays
// default to 65 : 30 : 5 rows of BLK_IN = 16 lanes, the paper's 65:30:5
// SPoT : fixed : 8-bit ratio, so a layer split in that ratio keeps all three
// cores busy until the same cycle.  100 rows x 16 lanes = 1600 MACs per clock,
// 320 GOPS at the paper's 100 MHz, close to the 325 GOPS it reports for
// ResNet-18 on the XC7Z045.  Every layer uses the same split, so the
// hardware never has to be reconfigured between layers.
//
// Blocks: act_buffer (one BLK_IN-wide activation word per cycle, broadcast to
// all cores), msp_controller (lock-step pass/column/K loop), three gemm_core
// instances, each with its own weight buffer and row map.
//
// Host interface (plain ports; the host processor and DRAM are outside):
//   a_wr_*           activation words, address n*ksteps + k
//   ws_/wf_/w8_wr_*  weight words of the SPoT / 4-bit / 8-bit core,
//                    address p*ksteps + k (see gemm_core)
//   rms_/rmf_/rm8_wr_* row-map words (layer row index of each local row)
//   start + cfg      run one GEMM tile; busy, done (one-cycle pulse)
//   *_res_*          per core: res_valid for one cycle per finished column
//                    block, with column, per-row valid, layer row index and
//                    the raw integer dot product (the per-row scale alpha is
//                    not applied here)
//   run_cycles, idle_cycles: issue cycles of the last run, and per core the
//                    cycles it had no rows left.
// Latency: a run issues passes * ncols * ksteps steps, one per clock, where
// passes = max over cores of ceil(rows_c / BLK_OUT_c); done follows the
// final step by three cycles.  Reading the ratio as PE rows, BLK_IN, buffer depths and
// all interfaces are this design's choices; the paper gives the three core
// types, the ratio and the number formats.
module msp_accel
  import msp_pkg::*;
#(
  parameter int BLK_IN     = 16,
  parameter int BLK_OUT_S  = 65,
  parameter int BLK_OUT_F  = 30,
  parameter int BLK_OUT_8  = 5,
  parameter int ACC_W      = 32,
  parameter int WBUF_DEPTH = 2048,
  parameter int ABUF_DEPTH = 16384,
  parameter int RMAP_DEPTH = 128,
  parameter int WS_W       = 1 + MSP_SPOT_M1_W + MSP_SPOT_M2_W,
  parameter int WA_W       = $clog2(WBUF_DEPTH),
  parameter int AA_W       = $clog2(ABUF_DEPTH),
  parameter int RA_W       = $clog2(RMAP_DEPTH)
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  // activation buffer
  input  logic                                          a_wr_en,
  input  logic [AA_W-1:0]                               a_wr_addr,
  input  logic [BLK_IN-1:0][MSP_ACT_W-1:0]                  a_wr_data,
  // weight buffers
  input  logic                                          ws_wr_en,
  input  logic [WA_W-1:0]                               ws_wr_addr,
  input  logic [BLK_OUT_S-1:0][BLK_IN-1:0][WS_W-1:0]    ws_wr_data,
  input  logic                                          wf_wr_en,
  input  logic [WA_W-1:0]                               wf_wr_addr,
  input  logic [BLK_OUT_F-1:0][BLK_IN-1:0][3:0]         wf_wr_data,
  input  logic                                          w8_wr_en,
  input  logic [WA_W-1:0]                               w8_wr_addr,
  input  logic [BLK_OUT_8-1:0][BLK_IN-1:0][7:0]         w8_wr_data,
  // row maps
  input  logic                                          rms_wr_en,
  input  logic [RA_W-1:0]                               rms_wr_addr,
  input  logic [BLK_OUT_S-1:0][ROWS_W-1:0]              rms_wr_data,
  input  logic                                          rmf_wr_en,
  input  logic [RA_W-1:0]                               rmf_wr_addr,
  input  logic [BLK_OUT_F-1:0][ROWS_W-1:0]              rmf_wr_data,
  input  logic                                          rm8_wr_en,
  input  logic [RA_W-1:0]                               rm8_wr_addr,
  input  logic [BLK_OUT_8-1:0][ROWS_W-1:0]              rm8_wr_data,
  // control
  input  logic                                          start,
  input  layer_cfg_t                                    cfg,
  output logic                                          busy,
  output logic                                          done,
  output logic [31:0]                                   run_cycles,
  output logic [2:0][31:0]                              idle_cycles,
  // results: SPoT core
  output logic                                          s_res_valid,
  output logic [NCOL_W-1:0]                             s_res_col,
  output logic [BLK_OUT_S-1:0]                          s_res_row_valid,
  output logic [BLK_OUT_S-1:0][ROWS_W-1:0]              s_res_row_idx,
  output logic [BLK_OUT_S-1:0][ACC_W-1:0]               s_res_data,
  // results: 4-bit fixed-point core
  output logic                                          f_res_valid,
  output logic [NCOL_W-1:0]                             f_res_col,
  output logic [BLK_OUT_F-1:0]                          f_res_row_valid,
  output logic [BLK_OUT_F-1:0][ROWS_W-1:0]              f_res_row_idx,
  output logic [BLK_OUT_F-1:0][ACC_W-1:0]               f_res_data,
  // results: 8-bit core
  output logic                                          e_res_valid,
  output logic [NCOL_W-1:0]                             e_res_col,
  output logic [BLK_OUT_8-1:0]                          e_res_row_valid,
  output logic [BLK_OUT_8-1:0][ROWS_W-1:0]              e_res_row_idx,
  output logic [BLK_OUT_8-1:0][ACC_W-1:0]               e_res_data
);

  logic              issue, first, last;
  logic [WA_W-1:0]   w_addr;
  logic [AA_W-1:0]   a_addr;
  logic [RA_W-1:0]   pass;
  logic [NCOL_W-1:0] col;
  logic [2:0]        core_en;
  logic [BLK_IN-1:0][MSP_ACT_W-1:0] act;
  logic [2:0][ROWS_W-1:0] rows_run;

  msp_controller #(
    .BLK_OUT_S(BLK_OUT_S), .BLK_OUT_F(BLK_OUT_F), .BLK_OUT_8(BLK_OUT_8),
    .WA_W(WA_W), .AA_W(AA_W), .RA_W(RA_W)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .issue, .w_addr, .a_addr,
    .pass, .col, .first, .last, .core_en, .rows_run, .run_cycles, .idle_cycles
  );

  act_buffer #(.BLK_IN(BLK_IN), .ACT_W(MSP_ACT_W), .DEPTH(ABUF_DEPTH)) u_abuf (
    .clk, .wr_en(a_wr_en), .wr_addr(a_wr_addr), .wr_data(a_wr_data),
    .rd_addr(a_addr), .rd_data(act)
  );

  gemm_core #(
    .SCHEME(SCH_SPOT), .BLK_OUT(BLK_OUT_S), .BLK_IN(BLK_IN), .ACC_W(ACC_W),
    .WBUF_DEPTH(WBUF_DEPTH), .RMAP_DEPTH(RMAP_DEPTH)
  ) u_spot (
    .clk, .rst_n,
    .w_wr_en(ws_wr_en), .w_wr_addr(ws_wr_addr), .w_wr_data(ws_wr_data),
    .rm_wr_en(rms_wr_en), .rm_wr_addr(rms_wr_addr), .rm_wr_data(rms_wr_data),
    .rows(rows_run[0]), .issue, .en(core_en[0]), .w_addr, .pass, .col,
    .first, .last, .act,
    .res_valid(s_res_valid), .res_col(s_res_col), .res_row_valid(s_res_row_valid),
    .res_row_idx(s_res_row_idx), .res_data(s_res_data)
  );

  gemm_core #(
    .SCHEME(SCH_FIXED4), .BLK_OUT(BLK_OUT_F), .BLK_IN(BLK_IN), .ACC_W(ACC_W),
    .WBUF_DEPTH(WBUF_DEPTH), .RMAP_DEPTH(RMAP_DEPTH)
  ) u_fix4 (
    .clk, .rst_n,
    .w_wr_en(wf_wr_en), .w_wr_addr(wf_wr_addr), .w_wr_data(wf_wr_data),
    .rm_wr_en(rmf_wr_en), .rm_wr_addr(rmf_wr_addr), .rm_wr_data(rmf_wr_data),
    .rows(rows_run[1]), .issue, .en(core_en[1]), .w_addr, .pass, .col,
    .first, .last, .act,
    .res_valid(f_res_valid), .res_col(f_res_col), .res_row_valid(f_res_row_valid),
    .res_row_idx(f_res_row_idx), .res_data(f_res_data)
  );

  gemm_core #(
    .SCHEME(SCH_FIXED8), .BLK_OUT(BLK_OUT_8), .BLK_IN(BLK_IN), .ACC_W(ACC_W),
    .WBUF_DEPTH(WBUF_DEPTH), .RMAP_DEPTH(RMAP_DEPTH)
  ) u_fix8 (
    .clk, .rst_n,
    .w_wr_en(w8_wr_en), .w_wr_addr(w8_wr_addr), .w_wr_data(w8_wr_data),
    .rm_wr_en(rm8_wr_en), .rm_wr_addr(rm8_wr_addr), .rm_wr_data(rm8_wr_data),
    .rows(rows_run[2]), .issue, .en(core_en[2]), .w_addr, .pass, .col,
    .first, .last, .act,
    .res_valid(e_res_valid), .res_col(e_res_col), .res_row_valid(e_res_row_valid),
    .res_row_idx(e_res_row_idx), .res_data(e_res_data)
  );

endmodule
