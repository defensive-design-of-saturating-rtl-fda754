// tb_tournament_psc -- end-to-end testbench of the tournament predictor
// with probabilistic counters, at the design's full default size.
//
// A synthetic branch trace (32 static branches: loops of several trip
// counts, biased branches, alternating branches and branches that repeat
// the previous outcome) is run through the predictor under four settings
// of (m, p): (1, 0) conventional, (0.5, 0.5), (0.5, 0.1) and (0.8, 0.4).
// Before each setting the predictor is reset and the clearing sweep is
// timed (2^GHIST_BITS cycles).
//
// The testbench contains its own model of the whole predictor: tables,
// histories, two xorshift32 random sources with the same seeds, and the
// probabilistic update rule written from the counter's definition. Every
// prediction and every table selection is compared with the model, so the
// probabilistic settings are checked exactly, not only statistically.
//
// Mechanisms counted (each must occur at least once): a transition
// suppressed by the random draw, a strong-state reversal (ST reading T or
// SN reading NT and still moving), a weak state jumping to the opposite
// strong state, a choice counter being trained, predictions taken from the
// global and from the local table, and the clearing sweep. It also checks
// that (m, p) = (0.5, 0.5) mispredicts more than the conventional setting.
module tb_tournament_psc;
  import psc_pkg::*;
  localparam int unsigned W = psc_pkg::PSC_PROB_W;
  localparam int unsigned ONE = 1 << W;
  // defaults of tournament_psc
  localparam int LHT_N = 2048, LHB = 11, GHB = 13, CHB = 12;
  localparam logic [31:0] SEED_L = 32'h2545_F491, SEED_G = 32'h9E37_79B9;
  localparam int BRANCHES = 30000;
  localparam int NSTATIC = 32;

  logic clk = 0, rst_n = 0, br_valid = 0, br_taken = 0;
  logic [W:0] cfg_m, cfg_p;
  logic [63:0] br_pc;
  logic pred_taken, pred_global, init_busy;
  int checks = 0, failures = 0;

  tournament_psc dut (
    .clk(clk), .rst_n(rst_n), .cfg_m(cfg_m), .cfg_p(cfg_p),
    .br_valid(br_valid), .br_pc(br_pc), .br_taken(br_taken),
    .pred_taken(pred_taken), .pred_global(pred_global), .init_busy(init_busy));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ model
  int lht_m [LHT_N];
  int lpht_m [1 << LHB];
  int gpht_m [1 << GHB];
  int cpht_m [1 << CHB];
  int ghr_m;
  logic [31:0] xl, xg;

  // mechanism counters
  int n_hold, n_reverse, n_jump, n_choice, n_sel_g, n_sel_l, n_sweep;

  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  // probabilistic update of one 2-bit prediction counter (SN=0 .. ST=3)
  function automatic int psc(int s, bit t, int r, int mq, int pq,
                             inout int hold, inout int rev, inout int jump);
    int mp, prob, dest;
    bit mv;
    mp = int'((longint'(mq) * longint'(pq)) >>> W);
    if (s == 3)      begin prob = t ? mp : mq - mp; dest = 2; end
    else if (s == 0) begin prob = t ? mq - mp : mp; dest = 1; end
    else             begin prob = mq;              dest = t ? 3 : 0; end
    mv = (r >= int'(ONE) - prob);
    if (!mv && dest != s && !((s == 3 && t) || (s == 0 && !t))) hold++;
    if (mv && ((s == 3 && t) || (s == 0 && !t))) rev++;
    if (mv && ((s == 2 && !t) || (s == 1 && t))) jump++;
    return mv ? dest : s;
  endfunction

  task automatic model_reset();
    foreach (lht_m[i]) lht_m[i] = 0;
    foreach (lpht_m[i]) lpht_m[i] = 1;
    foreach (gpht_m[i]) gpht_m[i] = 1;
    foreach (cpht_m[i]) cpht_m[i] = 1;
    ghr_m = 0;
    xl = SEED_L; xg = SEED_G;
  endtask

  // returns predicted direction and selection; then updates with t
  task automatic model_step(input longint pc, input bit t, input int mq, input int pq,
                            output bit pred, output bit selg);
    int li, lh, ci, lc, gc, cc;
    bit lp, gp;
    li = int'((pc >> 2) % LHT_N);
    lh = lht_m[li];
    ci = ghr_m % (1 << CHB);
    lc = lpht_m[lh]; gc = gpht_m[ghr_m]; cc = cpht_m[ci];
    lp = (lc >= 2); gp = (gc >= 2);
    selg = (cc >= 2);
    pred = selg ? gp : lp;
    lpht_m[lh] = psc(lc, t, int'(xl >> 16), mq, pq, n_hold, n_reverse, n_jump);
    gpht_m[ghr_m] = psc(gc, t, int'(xg >> 16), mq, pq, n_hold, n_reverse, n_jump);
    xl = xs(xl); xg = xs(xg);
    if (lp != gp) begin
      int nc;
      nc = (gp == t) ? ((cc < 3) ? cc + 1 : 3) : ((cc > 0) ? cc - 1 : 0);
      if (nc != cc) n_choice++;
      cpht_m[ci] = nc;
    end
    lht_m[li] = ((lh << 1) | int'(t)) % (1 << LHB);
    ghr_m = ((ghr_m << 1) | int'(t)) % (1 << GHB);
  endtask

  // ------------------------------------------------------------ trace
  int kind [NSTATIC];     // 0 loop, 1 biased, 2 alternating, 3 copy previous
  int param [NSTATIC];
  int iter [NSTATIC];
  bit last_outcome;

  function automatic bit outcome(int b);
    case (kind[b])
      0: return (iter[b] % param[b]) != param[b] - 1;
      1: return ($urandom % 100) < param[b];
      2: return iter[b][0];
      default: return last_outcome ^ (($urandom % 100) < 5);
    endcase
  endfunction

  task automatic run_setting(input int mq, input int pq, output int miss);
    int cyc;
    bit mp_, ms_;
    cfg_m = mq[W:0]; cfg_p = pq[W:0];
    br_valid = 0;
    rst_n = 0;
    @(posedge clk); #1;
    rst_n = 1;
    cyc = 0;
    while (init_busy) begin @(posedge clk); #1; cyc++; end
    check(cyc == (1 << GHB), $sformatf("clearing sweep took %0d cycles", cyc));
    n_sweep++;
    model_reset();
    foreach (iter[i]) iter[i] = 0;
    miss = 0;
    for (int i = 0; i < BRANCHES; i++) begin
      int b;
      bit t;
      longint pc;
      b = (i % 5 == 0) ? int'($urandom % NSTATIC) : (i % NSTATIC);
      t = outcome(b);
      iter[b]++;
      last_outcome = t;
      pc = 64'h0000_0000_0040_0000 + longint'(b) * 64'd52;
      br_valid = 1; br_pc = pc; br_taken = t;
      #1;
      model_step(pc, t, mq, pq, mp_, ms_);
      if (i < 2000) begin
        check(pred_taken == mp_, $sformatf("branch %0d: prediction %0d, model %0d", i, pred_taken, mp_));
        check(pred_global == ms_, $sformatf("branch %0d: selection %0d, model %0d", i, pred_global, ms_));
      end else if (pred_taken != mp_ || pred_global != ms_) begin
        checks++; failures++;
        if (failures < 30) $display("FAIL: branch %0d differs from the model", i);
      end
      if (ms_) n_sel_g++; else n_sel_l++;
      if (pred_taken != t) miss++;
      @(posedge clk); #1;
    end
    br_valid = 0;
    $display("m=%0.2f p=%0.2f: %0d mispredictions in %0d branches (%0.2f%%)",
             real'(mq) / ONE, real'(pq) / ONE, miss, BRANCHES, 100.0 * miss / BRANCHES);
  endtask

  initial begin
    int miss_sc, miss_55, miss_x;
    n_hold = 0; n_reverse = 0; n_jump = 0; n_choice = 0; n_sel_g = 0; n_sel_l = 0; n_sweep = 0;
    for (int b = 0; b < NSTATIC; b++) begin
      kind[b] = b % 4;
      case (b % 4)
        0: param[b] = 3 + (b % 7);
        1: param[b] = (b % 8 < 4) ? 90 : 15;
        default: param[b] = 0;
      endcase
    end
    last_outcome = 0;
    cfg_m = ONE[W:0]; cfg_p = '0;
    br_pc = '0;
    repeat (3) @(posedge clk);
    run_setting(ONE, 0, miss_sc);
    check(n_hold == 0 && n_reverse == 0, "conventional setting never suppresses or reverses");
    run_setting(ONE / 2, ONE / 2, miss_55);
    run_setting(ONE / 2, 6554, miss_x);
    run_setting(52429, 26214, miss_x);
    check(miss_55 > miss_sc, "m=p=0.5 mispredicts more than the conventional counters");
    $display("mechanisms: suppressed=%0d reversed=%0d weak-jump=%0d choice-trained=%0d global-selected=%0d local-selected=%0d sweeps=%0d",
             n_hold, n_reverse, n_jump, n_choice, n_sel_g, n_sel_l, n_sweep);
    check(n_hold > 0, "a transition was suppressed by the random draw");
    check(n_reverse > 0, "a strong state reversed");
    check(n_jump > 0, "a weak state jumped to the opposite strong state");
    check(n_choice > 0, "a choice counter was trained");
    check(n_sel_g > 0, "the global table was selected");
    check(n_sel_l > 0, "the local table was selected");
    check(n_sweep == 4, "clearing sweeps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
