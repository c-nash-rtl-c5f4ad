// sa_logic: two-phase simulated-annealing controller of C-Nash.
//
// It runs the annealing loop on the MAX-QUBO objective
//   f(p, q) = max(Mq) + max(N^T p) - p^T M q - p^T N q,
// which is >= 0 and is 0 exactly at a Nash equilibrium. Every evaluation of f
// takes two phases on the analog arrays:
//   Phase 1 (SA_PH1): phase1 = 1 makes the WL drivers apply the all-ones
//     vector, so the M array outputs Mq and the N^T array outputs N^T p; the
//     WTA trees (wta_en = 1) reduce them to max(Mq) and max(N^T p), which are
//     latched from the ADCs at the end of the phase.
//   Phase 2 (SA_PH2): both arrays see the real strategies and their periphery
//     gives p^T M q and p^T N q; the WTA trees are off.
// In SA_EVAL the controller forms f_n by addition and subtraction and applies
// the Metropolis rule of the annealing algorithm: accept when dE = f_n - f_c
// <= 0, otherwise accept with probability exp(-dE/T). Then T <- D(T). In
// SA_GEN a new pair is drawn by moving one probability interval between two
// actions of one player, picked at random (strategy_perturb). Moving a single
// player per iteration is this design's reading of the move rule: moving both
// at once leaves local minima on the quantised grid (for example next to the
// non-representable mixed equilibrium of Battle of the Sexes at I = 4). The loop runs while
// T >= t_min (and T > 0); the first evaluation, of (p_init, q_init), only
// records f_c.
//
// Numbers: strategies are counts k in 0..I_INT (probability k/I_INT); the
// ADC codes, f and T are in units of one cell current, i.e. f scaled by I^2.
// T is fixed point with T_FRAC (16) fractional bits. The Metropolis test is
// dE * 2^24 <= T * L with L = -ln(u) from a 256-entry table (Q4.8), u from a
// 32-bit xorshift generator. D(T) = floor(T * alpha / 2^16), a geometric
// decay: the decay law, the random source and the number formats are this
// design's choices, not given by the algorithm. The recorded pair is the
// solution; no separate "best so far" copy is kept.
//
// Timing: SETTLE clocks per phase (default 1, the analog arrays and WTA
// settle well within a clock). From the start cycle, done rises after
// (2*SETTLE + 1) + n_iter * (2*SETTLE + 2) clocks; 4 clocks per iteration by
// default. start is taken only in SA_IDLE; p_init and q_init must each sum
// to I_INT (checked by an assertion).
module sa_logic
  import cnash_pkg::*;
#(
  parameter int unsigned N_ACT  = 8,
  parameter int unsigned M_ACT  = 8,
  parameter int unsigned I_INT  = 4,
  parameter int unsigned CODE_W = 13,
  parameter int unsigned T_W    = 32,
  parameter int unsigned SETTLE = 1,
  localparam int unsigned SW  = $clog2(I_INT + 1),
  localparam int unsigned F_W = CODE_W + 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // run control
  input  logic                  start,
  input  logic [T_W-1:0]        t_max,     // starting temperature
  input  logic [T_W-1:0]        t_min,     // final temperature
  input  logic [ALPHA_W-1:0]    alpha,     // decay factor / 2^16
  input  logic [31:0]           seed,
  input  logic [SW-1:0]         p_init [N_ACT],
  input  logic [SW-1:0]         q_init [M_ACT],
  // to the array drivers and WTA trees
  output logic [SW-1:0]         p_drv  [N_ACT],
  output logic [SW-1:0]         q_drv  [M_ACT],
  output logic                  phase1,
  output logic                  wta_en,
  // from the ADCs
  input  logic [CODE_W-1:0]     max_mq,    // Phase 1, WTA of the M array
  input  logic [CODE_W-1:0]     max_ntp,   // Phase 1, WTA of the N^T array
  input  logic [CODE_W-1:0]     vmv_m,     // Phase 2, p^T M q
  input  logic [CODE_W-1:0]     vmv_n,     // Phase 2, q^T N^T p = p^T N q
  // status and result
  output logic                  busy,
  output logic                  done,      // high from the end of a run to the next start
  output logic [SW-1:0]         p_sol  [N_ACT],
  output logic [SW-1:0]         q_sol  [M_ACT],
  output logic signed [F_W-1:0] f_sol,
  output logic [31:0]           n_iter,    // iterations of the annealing loop
  output logic [31:0]           n_down,    // accepted with dE <= 0
  output logic [31:0]           n_up,      // accepted uphill by the Metropolis rule
  output logic [31:0]           n_rej      // rejected
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam neg_ln_tab_t NEG_LN = neg_ln_table();
  localparam int unsigned CW_SET = idx_w(SETTLE);

  sa_state_e             state;
  logic [CW_SET-1:0]     cnt;
  logic                  first;
  logic [T_W-1:0]        temp;
  logic [SW-1:0]         p_c [N_ACT], q_c [M_ACT];
  logic [SW-1:0]         p_n [N_ACT], q_n [M_ACT];
  logic [SW-1:0]         p_g [N_ACT], q_g [M_ACT];
  logic signed [F_W-1:0] f_c;
  logic [CODE_W-1:0]     mx_mq_q, mx_ntp_q;
  logic [31:0]           rnd;

  // combinational evaluation
  logic signed [F_W-1:0] f_n;
  logic signed [F_W:0]   d_e;
  logic [63:0]           lhs, rhs;
  logic                  accept, uphill;
  logic [T_W-1:0]        temp_next;
  logic                  last_phase_cycle;

  xorshift32 u_rng (
    .clk(clk), .rst_n(rst_n), .load(state == SA_IDLE && start), .seed(seed),
    .en(state != SA_IDLE), .rnd(rnd)
  );

  strategy_perturb #(.ACT(N_ACT), .I_INT(I_INT)) u_pert_p (
    .strat(p_c), .r_src(rnd[7:0]), .r_dst(rnd[15:8]), .strat_n(p_g)
  );
  strategy_perturb #(.ACT(M_ACT), .I_INT(I_INT)) u_pert_q (
    .strat(q_c), .r_src(rnd[23:16]), .r_dst({1'b0, rnd[30:24]}), .strat_n(q_g)
  );

  assign last_phase_cycle = (int'(cnt) == SETTLE - 1);

  always_comb begin
    f_n       = F_W'(mx_mq_q) + F_W'(mx_ntp_q) - F_W'(vmv_m) - F_W'(vmv_n);
    d_e       = (F_W+1)'(f_n) - (F_W+1)'(f_c);
    uphill    = d_e > 0;
    lhs       = 64'(unsigned'(d_e)) << (LN_FRAC + T_FRAC);
    rhs       = 64'(temp) * 64'(NEG_LN[rnd[U_W-1:0]]);
    accept    = !uphill || (lhs <= rhs);
    temp_next = T_W'((64'(temp) * 64'(alpha)) >> ALPHA_W);
  end

  assign p_drv  = p_n;
  assign q_drv  = q_n;
  assign phase1 = (state == SA_PH1);
  assign wta_en = (state == SA_PH1);
  assign busy   = (state != SA_IDLE);
  assign p_sol  = p_c;
  assign q_sol  = q_c;
  assign f_sol  = f_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= SA_IDLE;
      cnt      <= '0;
      first    <= 1'b0;
      temp     <= '0;
      done     <= 1'b0;
      f_c      <= '0;
      mx_mq_q  <= '0;
      mx_ntp_q <= '0;
      n_iter   <= '0;
      n_down   <= '0;
      n_up     <= '0;
      n_rej    <= '0;
      for (int a = 0; a < N_ACT; a++) begin p_c[a] <= '0; p_n[a] <= '0; end
      for (int a = 0; a < M_ACT; a++) begin q_c[a] <= '0; q_n[a] <= '0; end
    end else begin
      unique case (state)
        SA_IDLE: if (start) begin
          p_n    <= p_init;
          q_n    <= q_init;
          temp   <= t_max;
          first  <= 1'b1;
          done   <= 1'b0;
          cnt    <= '0;
          n_iter <= '0;
          n_down <= '0;
          n_up   <= '0;
          n_rej  <= '0;
          state  <= SA_PH1;
        end
        SA_PH1: begin
          cnt <= cnt + 1'b1;
          if (last_phase_cycle) begin
            mx_mq_q  <= max_mq;
            mx_ntp_q <= max_ntp;
            cnt      <= '0;
            state    <= SA_PH2;
          end
        end
        SA_PH2: begin
          // vmv_m / vmv_n are used in SA_EVAL straight from the ADCs: the
          // drivers hold Phase 2 inputs until the state changes.
          cnt <= cnt + 1'b1;
          if (last_phase_cycle) begin
            cnt   <= '0;
            state <= SA_EVAL;
          end
        end
        SA_EVAL: begin
          if (first) begin
            first <= 1'b0;
            f_c   <= f_n;
            p_c   <= p_n;
            q_c   <= q_n;
            if (temp >= t_min && temp != '0) state <= SA_GEN;
            else begin state <= SA_IDLE; done <= 1'b1; end
          end else begin
            n_iter <= n_iter + 1;
            if (accept) begin
              f_c <= f_n;
              p_c <= p_n;
              q_c <= q_n;
              if (uphill) n_up <= n_up + 1;
              else        n_down <= n_down + 1;
            end else begin
              n_rej <= n_rej + 1;
            end
            temp <= temp_next;
            if (temp_next >= t_min && temp_next != '0) state <= SA_GEN;
            else begin state <= SA_IDLE; done <= 1'b1; end
          end
        end
        SA_GEN: begin
          // one player moves per iteration, chosen by rnd[31]
          p_n   <= rnd[31] ? p_c : p_g;
          q_n   <= rnd[31] ? q_g : q_c;
          state <= SA_PH1;
        end
        default: state <= SA_IDLE;
      endcase
    end
  end

  function automatic int unsigned sum_p(logic [SW-1:0] s [N_ACT]);
    int unsigned t = 0;
    for (int a = 0; a < N_ACT; a++) t += int'(s[a]);
    return t;
  endfunction
  function automatic int unsigned sum_q(logic [SW-1:0] s [M_ACT]);
    int unsigned t = 0;
    for (int a = 0; a < M_ACT; a++) t += int'(s[a]);
    return t;
  endfunction

  // Strategies are probability distributions: the initial pair must sum to
  // one, and the perturbation must keep it so.
  a_init_p: assert property (@(posedge clk) disable iff (!rst_n)
    (state == SA_IDLE && start) |-> sum_p(p_init) == I_INT);
  a_init_q: assert property (@(posedge clk) disable iff (!rst_n)
    (state == SA_IDLE && start) |-> sum_q(q_init) == I_INT);
  a_gen_p: assert property (@(posedge clk) disable iff (!rst_n)
    (state == SA_GEN) |-> sum_p(p_g) == I_INT);
  a_gen_q: assert property (@(posedge clk) disable iff (!rst_n)
    (state == SA_GEN) |-> sum_q(q_g) == I_INT);

endmodule
