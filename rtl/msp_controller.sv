// msp_controller -- lock-step scheduler for the three heterogeneous GEMM cores.
//
// One step per clock.  The loop nest, outermost first, is
//   pass p  (a block of BLK_OUT rows in every core at once)
//   column n of X (0 .. ncols-1)
//   step k along K (0 .. ksteps-1)
// so each core finishes a dot product every ksteps cycles.  All cores share
// the step; a core whose rows are used up (p*BLK_OUT_c >= rows_c) gets
// core_en = 0 for the rest of the run and its idle cycles are counted.  The
// run ends after the first pass in which every core has reached its last rows,
// so when the rows are split in the same ratio as the PE arrays (the paper's
// 65:30:5 with the default 65:30:5 PE rows) all three cores finish together and no core idles.
//
// Interface: start (one cycle, ignored while busy) samples cfg.  During the
// run issue=1 every cycle with w_addr = p*ksteps + k (weight word in every
// core), a_addr = n*ksteps + k (activation word), pass, col, first (k==0) and
// last (k==ksteps-1).  Two cycles after the final step (the cores' pipeline)
// done pulses for one cycle and busy falls.  run_cycles counts the issue
// cycles of the last run, idle_cycles[c] the issue cycles core c sat out
// (0 = SPoT, 1 = 4-bit fixed, 2 = 8-bit);
// rows_run[c] is the row count of core c held for the run.  The paper states the goal (all
// cores finishing simultaneously); the loop order and counters are this
// design's.
module msp_controller
  import msp_pkg::*;
#(
  parameter int BLK_OUT_S = 65,
  parameter int BLK_OUT_F = 30,
  parameter int BLK_OUT_8 = 5,
  parameter int WA_W      = 11,
  parameter int AA_W      = 14,
  parameter int RA_W      = 7
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  output logic              issue,
  output logic [WA_W-1:0]   w_addr,
  output logic [AA_W-1:0]   a_addr,
  output logic [RA_W-1:0]   pass,
  output logic [NCOL_W-1:0] col,
  output logic              first,
  output logic              last,
  output logic [2:0]        core_en,
  output logic [2:0][ROWS_W-1:0] rows_run,
  output logic [31:0]       run_cycles,
  output logic [2:0][31:0]  idle_cycles
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  layer_cfg_t         c;
  logic [KSTEP_W-1:0] k;
  logic [NCOL_W-1:0]  n;
  logic [RA_W-1:0]    p;
  logic [WA_W-1:0]    pass_base;
  logic [AA_W-1:0]    col_base;
  logic [1:0]         drain;
  logic               last_pass;

  localparam int BO [3] = '{BLK_OUT_S, BLK_OUT_F, BLK_OUT_8};

  always_comb begin
    logic [31:0] rows [3];
    rows[0] = 32'(c.rows_spot);
    rows[1] = 32'(c.rows_fix4);
    rows[2] = 32'(c.rows_fix8);
    last_pass = 1'b1;
    for (int i = 0; i < 3; i++) begin
      core_en[i] = (32'(p) * BO[i]) < rows[i];
      if ((32'(p) + 1) * BO[i] < rows[i]) last_pass = 1'b0;
    end
  end

  assign rows_run = {c.rows_fix8, c.rows_fix4, c.rows_spot};
  assign busy   = (state != S_IDLE);
  assign issue  = (state == S_RUN);
  assign w_addr = pass_base + WA_W'(k);
  assign a_addr = col_base + AA_W'(k);
  assign pass   = p;
  assign col    = n;
  assign first  = (k == '0);
  assign last   = (k == c.ksteps - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      c           <= '0;
      k           <= '0;
      n           <= '0;
      p           <= '0;
      pass_base   <= '0;
      col_base    <= '0;
      drain       <= '0;
      done        <= 1'b0;
      run_cycles  <= '0;
      idle_cycles <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c           <= cfg;
          k           <= '0;
          n           <= '0;
          p           <= '0;
          pass_base   <= '0;
          col_base    <= '0;
          run_cycles  <= '0;
          idle_cycles <= '0;
          state       <= S_RUN;
        end
        S_RUN: begin
          run_cycles <= run_cycles + 1;
          for (int i = 0; i < 3; i++)
            if (!core_en[i]) idle_cycles[i] <= idle_cycles[i] + 1;
          if (last) begin
            k <= '0;
            if (n == c.ncols - 1'b1) begin
              n        <= '0;
              col_base <= '0;
              if (last_pass) begin
                state <= S_DRAIN;
                drain <= 2'd1;
              end else begin
                p         <= p + 1'b1;
                pass_base <= pass_base + WA_W'(c.ksteps);
              end
            end else begin
              n        <= n + 1'b1;
              col_base <= col_base + AA_W'(c.ksteps);
            end
          end else begin
            k <= k + 1'b1;
          end
        end
        S_DRAIN: begin
          if (drain == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            drain <= drain - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A run needs at least one step along K and one column.
  a_cfg_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (cfg.ksteps != '0 && cfg.ncols != '0))
    else $error("msp_controller: empty layer configuration");

endmodule
