// tb_sa_logic: checks the two-phase annealing controller against a model of
// the analog arrays and an independent reference of the annealing rules.
//
// The arrays are replaced by arithmetic on a 2 x 2 Battle-of-the-Sexes game
// (M = [3 0; 0 2], N = [2 0; 0 3], I = 4): in Phase 1 the WL-side strategy is
// the all-ones vector and the WTA output is the largest row-block current; in
// Phase 2 the VMV outputs are p^T M q and p^T N q (all scaled by I^2). For
// every evaluation the testbench recomputes f, the Metropolis decision
// (dE <= 0, or dE * 2^24 <= T * round(256 * -ln((u + 0.5) / 256)) with u the
// controller's random byte) and the recorded pair, and compares. It also
// checks: each move shifts exactly one interval of one player; strategies sum to
// I; the WTA trees are enabled only in Phase 1; the iteration count follows
// the geometric decay and the run takes 3 + 4 * iterations clocks; a hot run
// accepts uphill moves and ends at f = 0 (a Nash equilibrium); a cold run
// never accepts uphill.
module tb_sa_logic;
  timeunit 1ns; timeprecision 1ps;
  import cnash_pkg::*;
  localparam int N = 2, M = 2, I = 4, CW = 13;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] t_max, t_min;
  logic [15:0] alpha;
  logic [31:0] seed;
  logic [2:0]  p_init [N], q_init [M], p_drv [N], q_drv [M], p_sol [N], q_sol [M];
  logic        phase1, wta_en, busy, done;
  logic [CW-1:0] max_mq, max_ntp, vmv_m, vmv_n;
  logic signed [15:0] f_sol;
  logic [31:0] n_iter, n_down, n_up, n_rej;

  int GM [N][M] = '{'{3, 0}, '{0, 2}};
  int GN [N][M] = '{'{2, 0}, '{0, 3}};

  sa_logic #(.N_ACT(N), .M_ACT(M), .I_INT(I), .CODE_W(CW), .T_W(32), .SETTLE(1)) dut (.*);

  always #5 clk = ~clk;

  // ---- model of the two arrays, WTA trees and ADCs
  always_comb begin
    int pe, qe, rs, mx, tot;
    mx = 0; tot = 0;
    for (int i = 0; i < N; i++) begin
      pe = phase1 ? I : int'(p_drv[i]);
      rs = 0;
      for (int j = 0; j < M; j++) rs += GM[i][j] * int'(q_drv[j]);
      if (pe * rs > mx) mx = pe * rs;
      tot += pe * rs;
    end
    max_mq = wta_en ? CW'(mx) : '0;
    vmv_m  = CW'(tot);
    mx = 0; tot = 0;
    for (int j = 0; j < M; j++) begin
      qe = phase1 ? I : int'(q_drv[j]);
      rs = 0;
      for (int i = 0; i < N; i++) rs += GN[i][j] * int'(p_drv[i]);
      if (qe * rs > mx) mx = qe * rs;
      tot += qe * rs;
    end
    max_ntp = wta_en ? CW'(mx) : '0;
    vmv_n   = CW'(tot);
  end

  // ---- reference
  function automatic int f_ref(logic [2:0] p [N], logic [2:0] q [M]);
    int mq, ntp, pmq, pnq, s;
    mq = 0; ntp = 0; pmq = 0; pnq = 0;
    for (int i = 0; i < N; i++) begin
      s = 0;
      for (int j = 0; j < M; j++) s += GM[i][j] * int'(q[j]);
      if (I * s > mq) mq = I * s;
      pmq += int'(p[i]) * s;
    end
    for (int j = 0; j < M; j++) begin
      s = 0;
      for (int i = 0; i < N; i++) s += GN[i][j] * int'(p[i]);
      if (I * s > ntp) ntp = I * s;
      pnq += int'(q[j]) * s;
    end
    return mq + ntp - pmq - pnq;
  endfunction

  function automatic longint neg_ln(int u);
    return longint'(int'(-$ln((real'(u) + 0.5) / 256.0) * 256.0));
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int l1_dist(logic [2:0] a [2], logic [2:0] b [2]);
    int d = 0;
    for (int k = 0; k < 2; k++) d += (a[k] > b[k]) ? int'(a[k] - b[k]) : int'(b[k] - a[k]);
    return d;
  endfunction

  // per-evaluation reference check
  bit       first_ref;
  int       fc_ref;
  longint   exp_up_prob;   // sum of acceptance probabilities * 1e6
  logic [2:0] pc_ref [N], qc_ref [M];
  int       n_gen_bad, n_wta_bad;

  always @(negedge clk) if (rst_n) begin
    if (dut.state == SA_EVAL) begin
      int fn, de;
      bit acc;
      longint l;
      fn = f_ref(p_drv, q_drv);
      check(int'(dut.f_n) == fn, "f of the evaluated pair");
      if (first_ref) begin
        acc = 1;
      end else begin
        de = fn - fc_ref;
        l = neg_ln(int'(dut.rnd[7:0]));
        acc = (de <= 0) || (longint'(de) * (longint'(1) << (LN_FRAC + T_FRAC)) <= longint'(dut.temp) * l);
        if (de > 0) exp_up_prob += longint'(1.0e6 * $exp(-real'(de) / (real'(dut.temp) / real'(1 << T_FRAC))));
      end
      if (acc) begin fc_ref = fn; pc_ref = p_drv; qc_ref = q_drv; end
      first_ref = 0;
    end
    if (dut.state == SA_GEN) begin
      // the pair applied next must be one interval away from the recorded one
      @(negedge clk);
      if (l1_dist(p_drv, p_sol) + l1_dist(q_drv, q_sol) != 2) n_gen_bad++;
      if (int'(p_drv[0]) + int'(p_drv[1]) != I || int'(q_drv[0]) + int'(q_drv[1]) != I) n_gen_bad++;
    end
    if (wta_en != (dut.state == SA_PH1) || phase1 != (dut.state == SA_PH1)) n_wta_bad++;
  end

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int tmax, input int tmin, input int alph, input int sd,
                     input int p0, input int q0, output int cycles);
    t_max = 32'(tmax); t_min = 32'(tmin); alpha = 16'(alph); seed = sd;
    p_init = '{3'(p0), 3'(I - p0)}; q_init = '{3'(q0), 3'(I - q0)};
    first_ref = 1; exp_up_prob = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 0;  // clocks after the edge that takes start
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic int expected_iters(int tmax, int tmin, int alph);
    longint t = tmax;
    int it = 0;
    if (t >= tmin && t != 0)
      do begin t = (t * alph) >>> 16; it++; end while (t >= tmin && t != 0);
    return it;
  endfunction

  initial begin
    int cyc, it;
    n_gen_bad = 0; n_wta_bad = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !done, "idle after reset");

    // hot-to-cold run
    run(30 << T_FRAC, 1 << (T_FRAC - 2), 65505, 32'h1234_5678, 2, 2, cyc);
    it = expected_iters(30 << T_FRAC, 1 << (T_FRAC - 2), 65505);
    check(int'(n_iter) == it, $sformatf("iterations %0d, expected %0d", n_iter, it));
    check(cyc == 3 + 4 * it, $sformatf("run took %0d clocks, expected %0d", cyc, 3 + 4 * it));
    check(n_down + n_up + n_rej == n_iter, "every iteration accepted or rejected");
    check(n_up > 0, "uphill moves accepted while hot");
    check(n_rej > 0, "moves rejected");
    check(int'(f_sol) == fc_ref && p_sol == pc_ref && q_sol == qc_ref, "recorded pair matches reference");
    check(int'(f_sol) == f_ref(p_sol, q_sol), "f_sol is f of the recorded pair");
    check(f_sol == 0, $sformatf("hot run ends at a Nash equilibrium (f = %0d)", f_sol));
    $display("hot run: %0d iterations, %0d down, %0d up, %0d rejected, p=(%0d,%0d) q=(%0d,%0d)",
             n_iter, n_down, n_up, n_rej, p_sol[0], p_sol[1], q_sol[0], q_sol[1]);

    // fixed-temperature run: Metropolis rate (T close to 16 units for ~1500 moves)
    run((16 << T_FRAC) + 1500 * 16, 16 << T_FRAC, 65535, 32'hcafe_0001, 1, 3, cyc);
    begin
      real e, sd;
      e  = real'(exp_up_prob) / 1.0e6;
      sd = $sqrt(e) + 2.0;
      $display("fixed T: %0d uphill accepted, %0.1f expected", n_up, e);
      check(((real'(n_up) > e) ? real'(n_up) - e : e - real'(n_up)) < 4.0 * sd, "uphill acceptance rate follows exp(-dE/T)");
    end
    check(int'(f_sol) == fc_ref && p_sol == pc_ref && q_sol == qc_ref, "recorded pair matches reference (fixed T)");

    // cold run: never uphill
    run(40, 1, 65535, 32'h0bad_f00d, 1, 3, cyc);
    it = expected_iters(40, 1, 65535);
    check(int'(n_iter) == it && it == 40, $sformatf("cold iterations %0d", n_iter));
    check(cyc == 3 + 4 * it, "cold run clock count");
    check(n_up == 0, "no uphill acceptance when cold");
    check(int'(f_sol) == fc_ref && p_sol == pc_ref && q_sol == qc_ref, "recorded pair matches reference (cold)");

    // start below t_min: only the initial evaluation
    run(10, 20, 60000, 32'h1, 4, 0, cyc);
    check(n_iter == 0 && cyc == 3, "no iteration when t_max < t_min");
    check(p_sol[0] == 3'd4 && q_sol[0] == 3'd0 && int'(f_sol) == f_ref(p_sol, q_sol), "initial pair recorded");

    check(n_gen_bad == 0, $sformatf("%0d malformed moves", n_gen_bad));
    check(n_wta_bad == 0, "WTA enabled only in Phase 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
