// tb_cnash_full: end-to-end run of the C-Nash solver at its default size
// (8 actions per player, I = 4 intervals, t = 4 cells per element; two
// 32 x 128-cell arrays). It loads an 8 x 8 coordination game (4 on the
// diagonal for both players, small off-diagonal payoffs, so each (k, k) is a
// pure equilibrium), makes three annealing runs of about 52,000 iterations
// from random initial pairs, checks the analog datapath against the matrices
// every clock, and checks that every run ends at a Nash equilibrium. It also
// counts the load back-pressure, a refused load, both phases and all three
// move outcomes.
module tb_cnash_full;
  timeunit 1ns; timeprecision 1ps;

  // Default-size array (8 x 8 actions, I = 4, t = 4), the 8-action game, and
  // an annealing schedule of about 52,000 iterations per run.
  localparam int N      = cnash_pkg::N_ACT_DEF;
  localparam int M      = cnash_pkg::M_ACT_DEF;
  localparam int I      = cnash_pkg::I_INT_DEF;
  localparam int T      = cnash_pkg::T_CELL_DEF;
  localparam int GAME   = 2;
  localparam int RUNS   = 3;
  localparam int T_MAX  = 30 << cnash_pkg::T_FRAC;
  localparam int T_MIN  = 1 << (cnash_pkg::T_FRAC - 2);
  localparam int ALPHA  = 65530;
  localparam int MIN_NE = 3;
  localparam string NAME = "8-action game";

  logic clk = 0;
  int   checks, failures;
  bit   finished;
  always #5 clk = ~clk;

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  import cnash_pkg::*;

  localparam int SW = $clog2(I + 1);
  localparam int AW = idx_w((N > M) ? N : M);
  localparam int VW = $clog2(T + 1);
  localparam int CODE_W = $clog2(I * N * I * T * M + 1);

  logic rst_n = 0;
  logic pay_valid = 0, pay_ready, pay_sel = 0;
  logic [AW-1:0] pay_i = 0, pay_j = 0;
  logic [VW-1:0] pay_value = 0;
  logic start = 0;
  logic [31:0] t_max = 32'(T_MAX), t_min = 32'(T_MIN);
  logic [15:0] alpha = 16'(ALPHA);
  logic [31:0] seed = 0;
  logic [SW-1:0] p_init [N], q_init [M], p_sol [N], q_sol [M];
  logic busy, done, adc_overrange;
  logic signed [CODE_W+2:0] f_sol;
  logic [31:0] n_iter, n_down, n_up, n_rej;

  cnash_top dut (.*);

  // Games: 0 Battle of the Sexes, M = [3 0; 0 2], N = [2 0; 0 3];
  // 1 rock-paper-scissors shifted to 0..2 (win 2, draw 1, lose 0);
  // 2 an 8-action coordination game: 4 on the diagonal for both players,
  //   (3i + 5j) mod 3 and (5i + 7j) mod 3 elsewhere, so every (k, k) is a
  //   pure equilibrium.
  function automatic int payoff(bit player2, int i, int j);
    case (GAME)
      0: return player2 ? ((i == j) ? (i == 0 ? 2 : 3) : 0) : ((i == j) ? (i == 0 ? 3 : 2) : 0);
      1: return player2 ? ((i - j + 3) % 3 == 0 ? 1 : ((j - i + 3) % 3 == 1 ? 2 : 0))
                        : ((i - j + 3) % 3 == 0 ? 1 : ((i - j + 3) % 3 == 1 ? 2 : 0));
      default: return (i == j) ? 4 : (player2 ? (5 * i + 7 * j) % 3 : (3 * i + 5 * j) % 3);
    endcase
  endfunction

  int GM [N][M], GN [N][M];
  initial for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) begin
    GM[i][j] = payoff(0, i, j);
    GN[i][j] = payoff(1, i, j);
  end

  int c_bp, c_refused, c_ph1, c_ph2, c_down, c_up, c_rej, c_end, c_ne;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL [%s]: %s", NAME, what); end
  endtask

  function automatic int row_m(int i, logic [SW-1:0] q [M]);
    int s = 0;
    for (int j = 0; j < M; j++) s += GM[i][j] * int'(q[j]);
    return s;
  endfunction
  function automatic int col_n(int j, logic [SW-1:0] p [N]);
    int s = 0;
    for (int i = 0; i < N; i++) s += GN[i][j] * int'(p[i]);
    return s;
  endfunction

  // f * I^2 of a pair, from the matrices
  function automatic int f_of(logic [SW-1:0] p [N], logic [SW-1:0] q [M]);
    int mx1 = 0, mx2 = 0, v1 = 0, v2 = 0;
    for (int i = 0; i < N; i++) begin
      if (I * row_m(i, q) > mx1) mx1 = I * row_m(i, q);
      v1 += int'(p[i]) * row_m(i, q);
    end
    for (int j = 0; j < M; j++) begin
      if (I * col_n(j, p) > mx2) mx2 = I * col_n(j, p);
      v2 += int'(q[j]) * col_n(j, p);
    end
    return mx1 + mx2 - v1 - v2;
  endfunction

  // Nash conditions: no pure deviation improves either player
  function automatic bit is_nash(logic [SW-1:0] p [N], logic [SW-1:0] q [M]);
    int v1 = 0, v2 = 0;
    for (int i = 0; i < N; i++) v1 += int'(p[i]) * row_m(i, q);
    for (int j = 0; j < M; j++) v2 += int'(q[j]) * col_n(j, p);
    for (int i = 0; i < N; i++) if (I * row_m(i, q) > v1) return 0;
    for (int j = 0; j < M; j++) if (I * col_n(j, p) > v2) return 0;
    return 1;
  endfunction

  // datapath monitor
  always @(negedge clk) if (rst_n && busy) begin
    int mx;
    if (dut.u_sa.state == SA_PH1) begin
      c_ph1++;
      mx = 0;
      for (int i = 0; i < N; i++) if (I * row_m(i, dut.q_drv) > mx) mx = I * row_m(i, dut.q_drv);
      check(int'(dut.max_mq) == mx, "Phase 1 max(Mq)");
      mx = 0;
      for (int j = 0; j < M; j++) if (I * col_n(j, dut.p_drv) > mx) mx = I * col_n(j, dut.p_drv);
      check(int'(dut.max_ntp) == mx, "Phase 1 max(N^T p)");
    end
    if (dut.u_sa.state == SA_PH2) begin
      c_ph2++;
      mx = 0;
      for (int i = 0; i < N; i++) mx += int'(dut.p_drv[i]) * row_m(i, dut.q_drv);
      check(int'(dut.vmv_m) == mx, "Phase 2 p^T M q");
      mx = 0;
      for (int j = 0; j < M; j++) mx += int'(dut.q_drv[j]) * col_n(j, dut.p_drv);
      check(int'(dut.vmv_n) == mx, "Phase 2 p^T N q");
      check(dut.wta_m == '0 && dut.wta_n == '0, "WTA trees off in Phase 2");
    end
  end

  task automatic load(bit sel, int i, int j, int v);
    @(negedge clk);
    pay_valid = 1; pay_sel = sel; pay_i = AW'(i); pay_j = AW'(j); pay_value = VW'(v);
    while (!pay_ready) begin @(negedge clk); end
    @(negedge clk);
    pay_valid = 0;
    // the mapper is now writing: the next element has to wait
    if (!pay_ready) c_bp++;
  endtask

  initial begin
    int k, cyc, f;
    checks = 0; failures = 0; finished = 0;
    c_bp = 0; c_refused = 0; c_ph1 = 0; c_ph2 = 0; c_down = 0; c_up = 0; c_rej = 0; c_end = 0; c_ne = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    if (GAME == 1) check(GM[0][2] == 2 && GM[1][0] == 2 && GN[0][1] == 2 && GM[0][0] == 1, "rock-paper-scissors table");
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        load(0, i, j, GM[i][j]);
        load(1, i, j, GN[i][j]);
      end
    repeat (I + 1) @(negedge clk);
    for (int r = 0; r < RUNS; r++) begin
      for (int a = 0; a < N; a++) p_init[a] = '0;
      for (int a = 0; a < M; a++) q_init[a] = '0;
      for (int u = 0; u < I; u++) begin
        k = $urandom_range(0, N - 1); p_init[k] = p_init[k] + 1'b1;
        k = $urandom_range(0, M - 1); q_init[k] = q_init[k] + 1'b1;
      end
      seed = $urandom;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 0;
      while (!done) begin
        @(negedge clk);
        cyc++;
        if (cyc == 7 && r == 0) begin
          // a load attempt while annealing must be refused
          pay_valid = 1; pay_sel = 0; pay_i = 0; pay_j = 0; pay_value = 0;
          #1;
          if (!pay_ready) c_refused++;
          @(negedge clk);
          check(!dut.m_wr_en && !dut.n_wr_en, "no cell write while annealing");
          pay_valid = 0;
          cyc++;
        end
      end
      f = f_of(p_sol, q_sol);
      check(int'(f_sol) == f, $sformatf("run %0d: reported f %0d, recomputed %0d", r, f_sol, f));
      check((f == 0) == is_nash(p_sol, q_sol), "f = 0 exactly at a Nash equilibrium");
      check(cyc == 3 + 4 * int'(n_iter), $sformatf("run %0d: %0d clocks for %0d iterations", r, cyc, n_iter));
      check(!adc_overrange, "no ADC over-range");
      if (f == 0) c_ne++;
      c_down += n_down; c_up += n_up; c_rej += n_rej;
      c_end++;
    end
    $display("[%s] %0d runs: %0d ended at a Nash equilibrium; moves down %0d up %0d rejected %0d",
             NAME, RUNS, c_ne, c_down, c_up, c_rej);
    $display("[%s] mechanisms: load back-pressure %0d, load refused %0d, phase1 %0d, phase2 %0d, t_min end %0d",
             NAME, c_bp, c_refused, c_ph1, c_ph2, c_end);
    check(c_bp > 0, "load back-pressure happened");
    check(c_refused > 0, "load refused while annealing happened");
    check(c_ph1 > 0 && c_ph2 > 0, "both phases happened");
    check(c_down > 0 && c_up > 0 && c_rej > 0, "downhill, uphill and rejected moves happened");
    check(c_end == RUNS, "every run ended on t_min");
    check(c_ne >= MIN_NE, $sformatf("%0d of %0d runs reached an equilibrium", c_ne, RUNS));
    finished = 1;
  end
endmodule
