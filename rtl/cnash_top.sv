// cnash_top: the C-Nash mixed-strategy Nash equilibrium solver.
//
// Two 1FeFET1R crossbars hold the payoff matrices of a two-player game: one
// stores M (player 1's payoffs, row block i = action i of player 1), the
// other stores N^T (player 2's payoffs transposed, row block j = action j of
// player 2). On the M array the WL driver applies p and the DL driver q; on
// the N^T array the WL driver applies q and the DL driver p. Each array feeds
// a WTA tree (then an ADC) and a SUM/ADC periphery. The two-phase annealing
// controller (sa_logic) switches between Phase 1, where the WL-side strategy
// is forced to all ones and the WTA trees return max(Mq) and max(N^T p), and
// Phase 2, where the periphery returns p^T M q and p^T N q, and anneals the
// MAX-QUBO objective f = max(Mq) + max(N^T p) - p^T (M+N) q down to 0.
//
// Loading a game: present one payoff element per handshake on pay_*
// (pay_sel = 0 for M(i,j), 1 for N(i,j); i = player-1 action, j = player-2
// action; value 0..T_CELL). The element is mapped into I_INT x I_INT*T_CELL
// cells and written in I_INT clocks; pay_ready is low meanwhile and while an
// annealing run is busy. Every element of both matrices must be written once
// after power-up, since the cells have no reset.
//
// Solving: pulse start with t_max, t_min, alpha, seed and an initial pair
// (p_init, q_init: counts per action summing to I_INT) stable. done rises
// (2*SETTLE + 1) + n_iter*(2*SETTLE + 2) clocks later with the annealed pair
// in p_sol / q_sol and its objective in f_sol (in units of f * I^2; 0 = Nash
// equilibrium). The host-side load interface, the fixed-point formats and the
// ADC widths are this design's own choices.
module cnash_top
  import cnash_pkg::*;
#(
  parameter int unsigned N_ACT  = N_ACT_DEF,
  parameter int unsigned M_ACT  = M_ACT_DEF,
  parameter int unsigned I_INT  = I_INT_DEF,
  parameter int unsigned T_CELL = T_CELL_DEF,
  parameter int unsigned T_W    = 32,
  parameter int unsigned SETTLE = 1,
  localparam int unsigned SW     = $clog2(I_INT + 1),
  localparam int unsigned AW     = idx_w((N_ACT > M_ACT) ? N_ACT : M_ACT),
  localparam int unsigned VW     = $clog2(T_CELL + 1),
  // full-scale current of one array: every cell on
  localparam int unsigned CODE_W = $clog2(I_INT * N_ACT * I_INT * T_CELL * M_ACT + 1),
  localparam int unsigned F_W    = CODE_W + 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // payoff load
  input  logic                  pay_valid,
  output logic                  pay_ready,
  input  logic                  pay_sel,    // 0: M, 1: N
  input  logic [AW-1:0]         pay_i,      // player-1 action
  input  logic [AW-1:0]         pay_j,      // player-2 action
  input  logic [VW-1:0]         pay_value,
  // annealing run
  input  logic                  start,
  input  logic [T_W-1:0]        t_max,
  input  logic [T_W-1:0]        t_min,
  input  logic [ALPHA_W-1:0]    alpha,
  input  logic [31:0]           seed,
  input  logic [SW-1:0]         p_init [N_ACT],
  input  logic [SW-1:0]         q_init [M_ACT],
  output logic                  busy,
  output logic                  done,
  output logic [SW-1:0]         p_sol  [N_ACT],
  output logic [SW-1:0]         q_sol  [M_ACT],
  output logic signed [F_W-1:0] f_sol,
  output logic [31:0]           n_iter,
  output logic [31:0]           n_down,
  output logic [31:0]           n_up,
  output logic [31:0]           n_rej,
  output logic                  adc_overrange
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned ROWS_M = I_INT * N_ACT;
  localparam int unsigned COLS_M = I_INT * T_CELL * M_ACT;
  localparam int unsigned ROWS_N = I_INT * M_ACT;
  localparam int unsigned COLS_N = I_INT * T_CELL * N_ACT;
  localparam int unsigned GW     = I_INT * T_CELL;

  // ---------------------------------------------------------------- load path
  logic              m_ready, n_ready;
  logic              m_wr_en, n_wr_en;
  logic [idx_w(ROWS_M)-1:0] m_wr_row;
  logic [idx_w(ROWS_N)-1:0] n_wr_row;
  logic [idx_w(M_ACT)-1:0]  m_wr_blk;
  logic [idx_w(N_ACT)-1:0]  n_wr_blk;
  logic [GW-1:0]     m_wr_data, n_wr_data;

  assign pay_ready = !busy && (pay_sel ? n_ready : m_ready);

  payoff_mapper #(.ROW_ACT(N_ACT), .COL_ACT(M_ACT), .I_INT(I_INT), .T_CELL(T_CELL)) u_map_m (
    .clk, .rst_n,
    .in_valid(pay_valid && !pay_sel && !busy), .in_ready(m_ready),
    .in_row(idx_w(N_ACT)'(pay_i)), .in_col(idx_w(M_ACT)'(pay_j)), .in_value(pay_value),
    .wr_en(m_wr_en), .wr_row(m_wr_row), .wr_blk(m_wr_blk), .wr_data(m_wr_data)
  );

  // N(i,j) is stored as N^T(j,i)
  payoff_mapper #(.ROW_ACT(M_ACT), .COL_ACT(N_ACT), .I_INT(I_INT), .T_CELL(T_CELL)) u_map_n (
    .clk, .rst_n,
    .in_valid(pay_valid && pay_sel && !busy), .in_ready(n_ready),
    .in_row(idx_w(M_ACT)'(pay_j)), .in_col(idx_w(N_ACT)'(pay_i)), .in_value(pay_value),
    .wr_en(n_wr_en), .wr_row(n_wr_row), .wr_blk(n_wr_blk), .wr_data(n_wr_data)
  );

  // -------------------------------------------------------------- controller
  logic [SW-1:0]     p_drv [N_ACT], q_drv [M_ACT];
  logic              phase1, wta_en;
  logic [CODE_W-1:0] max_mq, max_ntp, vmv_m, vmv_n;

  sa_logic #(.N_ACT(N_ACT), .M_ACT(M_ACT), .I_INT(I_INT), .CODE_W(CODE_W),
             .T_W(T_W), .SETTLE(SETTLE)) u_sa (
    .clk, .rst_n, .start, .t_max, .t_min, .alpha, .seed, .p_init, .q_init,
    .p_drv, .q_drv, .phase1, .wta_en,
    .max_mq, .max_ntp, .vmv_m, .vmv_n,
    .busy, .done, .p_sol, .q_sol, .f_sol, .n_iter, .n_down, .n_up, .n_rej
  );

  // ------------------------------------------------------------- M array
  logic [ROWS_M-1:0] wl_m;
  logic [COLS_M-1:0] dl_m;
  logic [CODE_W-1:0] cur_m [N_ACT];
  logic [CODE_W-1:0] wta_m;
  logic              ovr_m_wta, ovr_m_vmv;

  strategy_driver #(.ACT(N_ACT), .I_INT(I_INT), .CELLS_PER_STEP(1)) u_wl_m (
    .strat(p_drv), .all_on(phase1), .lines(wl_m));
  strategy_driver #(.ACT(M_ACT), .I_INT(I_INT), .CELLS_PER_STEP(T_CELL)) u_dl_m (
    .strat(q_drv), .all_on(1'b0), .lines(dl_m));

  fefet_crossbar #(.ROW_ACT(N_ACT), .COL_ACT(M_ACT), .I_INT(I_INT), .T_CELL(T_CELL),
                   .CUR_W(CODE_W)) u_xbar_m (
    .clk, .wr_en(m_wr_en), .wr_row(m_wr_row), .wr_blk(m_wr_blk), .wr_data(m_wr_data),
    .wl(wl_m), .dl(dl_m), .blk_current(cur_m));

  wta_tree #(.D(N_ACT), .CUR_W(CODE_W)) u_wta_m (.en(wta_en), .i_in(cur_m), .i_max(wta_m));
  current_adc #(.CUR_W(CODE_W), .ADC_BITS(CODE_W), .LSB(1)) u_adc_wta_m (
    .i_in(wta_m), .code(max_mq), .overrange(ovr_m_wta));
  crossbar_periphery #(.ROW_ACT(N_ACT), .CUR_W(CODE_W), .ADC_BITS(CODE_W)) u_per_m (
    .blk_current(cur_m), .vmv_code(vmv_m), .overrange(ovr_m_vmv));

  // ----------------------------------------------------------- N^T array
  logic [ROWS_N-1:0] wl_n;
  logic [COLS_N-1:0] dl_n;
  logic [CODE_W-1:0] cur_n [M_ACT];
  logic [CODE_W-1:0] wta_n;
  logic              ovr_n_wta, ovr_n_vmv;

  strategy_driver #(.ACT(M_ACT), .I_INT(I_INT), .CELLS_PER_STEP(1)) u_wl_n (
    .strat(q_drv), .all_on(phase1), .lines(wl_n));
  strategy_driver #(.ACT(N_ACT), .I_INT(I_INT), .CELLS_PER_STEP(T_CELL)) u_dl_n (
    .strat(p_drv), .all_on(1'b0), .lines(dl_n));

  fefet_crossbar #(.ROW_ACT(M_ACT), .COL_ACT(N_ACT), .I_INT(I_INT), .T_CELL(T_CELL),
                   .CUR_W(CODE_W)) u_xbar_n (
    .clk, .wr_en(n_wr_en), .wr_row(n_wr_row), .wr_blk(n_wr_blk), .wr_data(n_wr_data),
    .wl(wl_n), .dl(dl_n), .blk_current(cur_n));

  wta_tree #(.D(M_ACT), .CUR_W(CODE_W)) u_wta_n (.en(wta_en), .i_in(cur_n), .i_max(wta_n));
  current_adc #(.CUR_W(CODE_W), .ADC_BITS(CODE_W), .LSB(1)) u_adc_wta_n (
    .i_in(wta_n), .code(max_ntp), .overrange(ovr_n_wta));
  crossbar_periphery #(.ROW_ACT(M_ACT), .CUR_W(CODE_W), .ADC_BITS(CODE_W)) u_per_n (
    .blk_current(cur_n), .vmv_code(vmv_n), .overrange(ovr_n_vmv));

  assign adc_overrange = ovr_m_wta | ovr_m_vmv | ovr_n_wta | ovr_n_vmv;

endmodule
