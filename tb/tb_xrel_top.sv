// tb_xrel_top -- end-to-end test of the X-Rel TMR system at its default size
// (N = 16, Q_DUBV = 12.5 % so k = 12; 8-tap and 64-tap FIR, 8 x 8 MM, 3x3 SMT;
// multipliers truncated by the default variance rule: 5 input LSBs in the
// FIRs and the MM, 6 in the 9-term SMT).
//
// Every cycle each benchmark gets a new input with probability 3/4 and a set
// of noise masks on its three module outputs, chosen from five patterns:
// none, noise only in the k relaxed low bits, one module's upper bits
// corrupted, all three upper parts different, and independent bit flips with
// probability P_f = 5 % per bit (the evaluation's noise model).  The
// testbench models the truncated modules and the voter independently and
// checks the registered result, error flag, vote status and the latency
// (FIR: 2 edges after the sample edge counting that edge as 1 -> result on
// the following edge; MM/SMT: on the input edge).  It also checks both
// quality bounds: each approximate module's predicted mean squared error
// against the exact result is below v_UB = N/(N-1)*(2^k-1)^2 and the measured
// one matches the prediction, and a voted output is
// within 2^k of the module result whenever at most one module's upper bits
// are corrupted.
//
// Mechanisms counted (each must occur): all-agree votes, each of M1/M2/M3
// out-voted, no-majority errors, low-bit disagreements that a strict word
// voter would reject but X-Rel accepts, truncation changing a module output,
// and idle cycles (valid low).
module tb_xrel_top;
  import xrel_pkg::*;
  import xrel_ref_pkg::*;

  localparam int unsigned N = 16, K = 12, DW = 8;
  localparam int unsigned TS = 8, TL = 64, D = 8;
  // Default truncation of each benchmark's multipliers (variance rule).
  localparam int unsigned MJ_S = 5, MJ_L = 5, MJ_D = 5, MJ_9 = 6;
  localparam int unsigned CYCLES = 400;

  int checks = 0, failures = 0;
  int mech [string];
  real sq_err [4];   // summed squared module error: short FIR, long FIR, SMT, MM
  int  n_err  [4];

  logic clk = 0, rst_n = 0;
  logic          fs_valid = 0, fl_valid = 0, mm_valid = 0, sm_valid = 0;
  logic [DW-1:0] fs_x = 0, fl_x = 0;
  logic [7:0]    fs_coef [TS];
  logic [7:0]    fl_coef [TL];
  logic [N-1:0]  fs_noise [3], fl_noise [3], sm_noise [3];
  logic [DW-1:0] mm_a [D][D], mm_b [D][D];
  logic [N-1:0]  mm_noise [3][D][D];
  logic [DW-1:0] sm_win [9];
  logic [7:0]    sm_w [9];
  logic          fs_ovalid, fl_ovalid, mm_ovalid, sm_ovalid;
  logic [N-1:0]  fs_y, fl_y, sm_y;
  logic          fs_err, fl_err, sm_err;
  vote_status_e  fs_status, fl_status, sm_status;
  logic [N-1:0]  mm_c [D][D];
  logic          mm_err [D][D];
  vote_status_e  mm_status [D][D];

  xrel_top dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int                due;
    longint unsigned   y;
    int                status;
  } exp_t;
  exp_t q_fs[$], q_fl[$], q_sm[$];
  longint unsigned mm_exp_y [D][D];
  int              mm_exp_s [D][D];
  int              mm_due;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (CYCLES * 4 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Noise masks for the three outputs of one voter.
  function automatic void make_noise(output longint unsigned n[3]);
    longint unsigned lowm, u1, u2;
    int mode, who;
    lowm = (64'd1 << K) - 1;
    mode = $urandom % 5;
    foreach (n[i]) n[i] = 0;
    case (mode)
      1: foreach (n[i]) n[i] = 64'($urandom) & lowm;
      2: begin
           who = $urandom % 3;
           n[who] = ((64'($urandom % 15) + 1) << K) | (64'($urandom) & lowm);
         end
      3: begin
           u1 = 64'($urandom % 15) + 1;
           u2 = (u1 + 1 + 64'($urandom % 14)) % 16;
           if (u2 == 0) u2 = (u1 == 15) ? 1 : 15;
           n[1] = u1 << K; n[2] = u2 << K;
         end
      4: foreach (n[i]) n[i] = noise_mask(N, 50_000);
      default: ;
    endcase
  endfunction

  // Expected vote of module value `a` under masks n; also counts mechanisms.
  task automatic vote_exp(int bench, longint unsigned a, longint unsigned exact,
                                   longint unsigned n[3], output longint unsigned y,
                                   output int st);
    longint unsigned o[3], d;
    foreach (o[i]) o[i] = (a ^ n[i]) & 64'hFFFF;
    ref_vote(N, K, 1'b0, o[0], o[1], o[2], y, st);
    case (st)
      0: mech["vote_agree"]++;
      1: mech["m3_outvoted"]++;
      2: mech["m1_outvoted"]++;
      3: mech["m2_outvoted"]++;
      default: mech["no_majority_error"]++;
    endcase
    if (st != 4 && o[0] != o[1] && o[1] != o[2] && o[0] != o[2])
      mech["lowbit_disagreement_tolerated"]++;
    if (a != exact) mech["module_truncation_active"]++;
    d = (a > exact) ? a - exact : exact - a;
    sq_err[bench] += real'(d) * real'(d);
    n_err[bench]++;
    // With at most one module's upper bits corrupted the vote must land
    // within 2^k of the module value (two equal corruptions are accepted by
    // any majority voter and are not covered by the bound).
    if (((n[0] >> K) != 0) + ((n[1] >> K) != 0) + ((n[2] >> K) != 0) <= 1) begin
      d = (y > a) ? y - a : a - y;
      check(d < (64'd1 << K), "voted error below 2^k");
    end
  endtask

  function automatic void put_noise(longint unsigned n[3], output logic [N-1:0] m[3]);
    foreach (m[i]) m[i] = N'(n[i]);
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Output checker: one #1 after each rising edge.
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      if (q_fs.size() > 0 && q_fs[0].due == cyc) begin
        check(fs_ovalid, "short FIR result valid on time");
        check(fs_y == N'(q_fs[0].y) && int'(fs_status) == q_fs[0].status && fs_err == (q_fs[0].status == 4),
              "short FIR voted result");
        void'(q_fs.pop_front());
      end else check(!fs_ovalid, "short FIR no spurious valid");
      if (q_fl.size() > 0 && q_fl[0].due == cyc) begin
        check(fl_ovalid, "long FIR result valid on time");
        check(fl_y == N'(q_fl[0].y) && int'(fl_status) == q_fl[0].status && fl_err == (q_fl[0].status == 4),
              "long FIR voted result");
        void'(q_fl.pop_front());
      end else check(!fl_ovalid, "long FIR no spurious valid");
      if (q_sm.size() > 0 && q_sm[0].due == cyc) begin
        check(sm_ovalid, "SMT result valid on time");
        check(sm_y == N'(q_sm[0].y) && int'(sm_status) == q_sm[0].status && sm_err == (q_sm[0].status == 4),
              "SMT voted result");
        void'(q_sm.pop_front());
      end else check(!sm_ovalid, "SMT no spurious valid");
      if (mm_due == cyc) begin
        check(mm_ovalid, "MM result valid on time");
        for (int i = 0; i < D; i++)
          for (int j = 0; j < D; j++)
            check(mm_c[i][j] == N'(mm_exp_y[i][j]) && int'(mm_status[i][j]) == mm_exp_s[i][j]
                  && mm_err[i][j] == (mm_exp_s[i][j] == 4), "MM voted element");
      end else check(!mm_ovalid, "MM no spurious valid");
    end
  end

  initial begin
    longint unsigned hs[], hl[], cs[], cl[], row[], col[], win[], ker[], n[3], a, e, y;
    int unsigned js[], jl[], zs[], zl[], jd[], zd[], j9[], z8[];
    int st;
    exp_t ex;
    hs = new[TS]; hl = new[TL]; cs = new[TS]; cl = new[TL]; row = new[D]; col = new[D];
    win = new[9]; ker = new[9];
    js = new[TS]; jl = new[TL]; zs = new[TS-1]; zl = new[TL-1]; jd = new[D]; zd = new[D-1];
    j9 = new[9]; z8 = new[8];
    foreach (js[i]) js[i] = MJ_S;  foreach (zs[i]) zs[i] = 0;
    foreach (jl[i]) jl[i] = MJ_L;  foreach (zl[i]) zl[i] = 0;
    foreach (jd[i]) jd[i] = MJ_D;  foreach (zd[i]) zd[i] = 0;
    foreach (j9[i]) j9[i] = MJ_9;  foreach (z8[i]) z8[i] = 0;
    foreach (hs[i]) hs[i] = 0;   foreach (hl[i]) hl[i] = 0;
    foreach (cs[i]) begin cs[i] = 64'($urandom % 256); fs_coef[i] = 8'(cs[i]); end
    foreach (cl[i]) begin cl[i] = 64'($urandom % 256); fl_coef[i] = 8'(cl[i]); end
    foreach (fs_noise[i]) begin fs_noise[i] = 0; fl_noise[i] = 0; sm_noise[i] = 0; end
    for (int r = 0; r < 3; r++) for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) mm_noise[r][i][j] = 0;
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin mm_a[i][j] = 0; mm_b[i][j] = 0; end
    foreach (sm_win[i]) begin sm_win[i] = 0; sm_w[i] = 0; end
    mm_due = -1;

    check(dut.K == K, "k derived from N and Q_DUBV");
    foreach (sq_err[i]) begin sq_err[i] = 0.0; n_err[i] = 0; end
    check(dut.FIR_S_MJ == MJ_S && dut.FIR_L_MJ == MJ_L && dut.MM_MJ == MJ_D && dut.SMT_MJ == MJ_9,
          "default module truncation");

    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;

    for (int c = 0; c < CYCLES; c++) begin
      @(negedge clk);
      // ---- short FIR
      fs_valid = ($urandom % 4) != 0;
      if (fs_valid) begin
        fs_x = 8'($urandom);
        for (int t = TS - 1; t > 0; t--) hs[t] = hs[t-1];
        hs[0] = 64'(fs_x);
        a = ref_dot(hs, cs, js, zs, 3, N); e = exact_dot(hs, cs, 3, N);
        make_noise(n); put_noise(n, fs_noise);
        vote_exp(0, a, e, n, y, st);
        ex.due = cyc + 2; ex.y = y; ex.status = st; q_fs.push_back(ex);
      end else mech["idle_cycle"]++;
      // ---- long FIR
      fl_valid = ($urandom % 4) != 0;
      if (fl_valid) begin
        fl_x = 8'($urandom);
        for (int t = TL - 1; t > 0; t--) hl[t] = hl[t-1];
        hl[0] = 64'(fl_x);
        a = ref_dot(hl, cl, jl, zl, 6, N); e = exact_dot(hl, cl, 6, N);
        make_noise(n); put_noise(n, fl_noise);
        vote_exp(1, a, e, n, y, st);
        ex.due = cyc + 2; ex.y = y; ex.status = st; q_fl.push_back(ex);
      end
      // ---- SMT
      sm_valid = ($urandom % 4) != 0;
      if (sm_valid) begin
        foreach (win[i]) begin win[i] = 64'($urandom % 256); ker[i] = 64'($urandom % 256);
                               sm_win[i] = 8'(win[i]); sm_w[i] = 8'(ker[i]); end
        a = ref_dot(win, ker, j9, z8, 4, N); e = exact_dot(win, ker, 4, N);
        make_noise(n); put_noise(n, sm_noise);
        vote_exp(2, a, e, n, y, st);
        ex.due = cyc + 1; ex.y = y; ex.status = st; q_sm.push_back(ex);
      end
      // ---- MM
      mm_valid = ($urandom % 4) != 0;
      if (mm_valid) begin
        for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
          mm_a[i][j] = 8'($urandom); mm_b[i][j] = 8'($urandom);
        end
        for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
          for (int t = 0; t < D; t++) begin row[t] = 64'(mm_a[i][t]); col[t] = 64'(mm_b[t][j]); end
          a = ref_dot(row, col, jd, zd, 3, N); e = exact_dot(row, col, 3, N);
          make_noise(n);
          for (int r = 0; r < 3; r++) mm_noise[r][i][j] = N'(n[r]);
          vote_exp(3, a, e, n, mm_exp_y[i][j], mm_exp_s[i][j]);
        end
        mm_due = cyc + 1;
      end
    end
    @(negedge clk);
    fs_valid = 0; fl_valid = 0; sm_valid = 0; mm_valid = 0;
    repeat (4) @(posedge clk);
    #2;
    check(q_fs.size() == 0 && q_fl.size() == 0 && q_sm.size() == 0, "all results delivered");

    begin
      real pred [4], tol [4];
      pred = '{v_dot(DW, DW, TS, N, MJ_S), v_dot(DW, DW, TL, N, MJ_L),
               v_dot(DW, DW, 9, N, MJ_9), v_dot(DW, DW, D, N, MJ_D)};
      // ~300 samples for the streams, ~19000 for MM: loose vs. tight tolerance.
      tol  = '{0.4, 0.4, 0.4, 0.1};
      foreach (sq_err[i]) begin
        real v;
        v = sq_err[i] / real'(n_err[i]);
        $display("module MSE bench %0d: measured %e predicted %e v_UB %e (%0d samples)",
                 i, v, pred[i], v_ub(N, K), n_err[i]);
        check(pred[i] <= v_ub(N, K), "predicted module MSE within v_UB");
        check(n_err[i] > 0 && v >= pred[i] * (1.0 - tol[i]) && v <= pred[i] * (1.0 + tol[i]),
              "measured module MSE matches prediction");
      end
    end
    foreach (mech[m]) $display("mechanism %-32s %0d", m, mech[m]);
    begin
      static string need [8] = '{"vote_agree", "m1_outvoted", "m2_outvoted", "m3_outvoted",
                          "no_majority_error", "lowbit_disagreement_tolerated",
                          "module_truncation_active", "idle_cycle"};
      foreach (need[i]) begin
        checks++;
        if (!mech.exists(need[i]) || mech[need[i]] == 0) begin
          failures++;
          $display("FAIL mechanism %s never happened", need[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
