// tb_attack_cutoff -- the cut-off (prime+probe) attack on one counter.
//
// The attacker primes the counter with taken branches until it is in ST,
// the victim executes its branch once (taken or not taken), and the
// attacker then probes with not-taken branches and counts the
// mispredictions c before the first correct prediction. The testbench
// repeats this TRIALS times for each victim direction and compares the
// histogram of c with the distribution of a Markov-chain model computed
// here: after the victim the counter is in ST or WT; each probe moves
// ST to WT with probability m(1-p) and WT to SN with probability m; the
// probe that finds the counter in SN is the first hit.
//
// Settings:
//   m=1,   p=0   conventional counter: c is 2 after T and 1 after NT, always.
//   m=1/2, p=0   earlier probabilistic counter: P(c=1|T)=0 exactly (the
//                attacker is never wrong on c=1), P(c=2|T)=P(c=2|NT)=1/4.
//   m=1/2, p=1/2 new counter: the two distributions are the same, so the
//                best guess succeeds with probability 1/2.
//   m=0.8, p=0.4 and m=1/2, p=0.1: distributions checked against the model.
// For each setting the success rate of the optimal guess (guess the
// direction whose model probability of c is larger) is also measured and
// compared with the model. Tolerance: 0.02 on every probability.
module tb_attack_cutoff;
  import psc_pkg::*;
  localparam int unsigned W = 16;
  localparam int unsigned ONE = 1 << W;
  localparam int TRIALS = 20000;
  localparam int CMAX = 12;

  logic clk = 0, rst_n = 0, valid = 0, taken = 0;
  logic [W:0] m, p;
  logic pred;
  sc_state_e st;
  int checks = 0, failures = 0;

  psc_counter #(.PROB_W(W), .SEED(32'hC0FF_EE11)) dut (
    .clk(clk), .rst_n(rst_n), .m_i(m), .p_i(p), .valid_i(valid), .taken_i(taken),
    .pred_o(pred), .state_o(st));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Execute the target branch once; returns whether the prediction hit.
  task automatic exec(input bit t, output bit hit);
    hit = (pred == t);
    valid = 1; taken = t;
    @(posedge clk); #1;
    valid = 0;
  endtask

  // One run of the attack; returns c.
  task automatic attack(input bit v, output int c);
    bit hit;
    int guard;
    // phase 1: prime until ST (the analysis starts from ST)
    guard = 0;
    do begin exec(1'b1, hit); guard++; end while (st != ST && guard < 1000);
    // phase 2: victim
    exec(v, hit);
    // phase 3: probe
    c = 0;
    forever begin
      exec(1'b0, hit);
      if (hit || c >= 200) break;
      c++;
    end
  endtask

  // Model: probability of observing c given the victim direction.
  function automatic real model(real mm, real pp, bit v, int c);
    real st_, wt_, pr;
    // after the victim
    if (v) begin wt_ = mm * pp;        st_ = 1.0 - wt_; end
    else   begin wt_ = mm * (1.0 - pp); st_ = 1.0 - wt_; end
    // c mispredictions, then a hit: the counter reaches SN at probe c
    // (probes 1..c see ST or WT), the hit happens at probe c+1.
    pr = 0.0;
    for (int k = 1; k <= c; k++) begin
      real to_sn;
      to_sn = wt_ * mm;
      if (k == c) pr = to_sn;
      wt_ = wt_ * (1.0 - mm) + st_ * mm * (1.0 - pp);
      st_ = st_ * (1.0 - mm * (1.0 - pp));
    end
    return pr;
  endfunction

  task automatic run_setting(input int mq, input int pq);
    int hist [2][CMAX+2];
    real mm, pp, succ_model, f, pm;
    int succ;
    mm = real'(mq) / real'(ONE);
    pp = real'(pq) / real'(ONE);
    m = mq[W:0]; p = pq[W:0];
    foreach (hist[v, c]) hist[v][c] = 0;
    succ = 0;
    for (int i = 0; i < TRIALS; i++)
      for (int v = 0; v < 2; v++) begin
        int c;
        bit guess;
        attack(v[0], c);
        guess = model(mm, pp, 1'b1, c) > model(mm, pp, 1'b0, c);
        if (guess == v[0]) succ++;
        if (c > CMAX) c = CMAX + 1;
        hist[v][c]++;
      end
    check(hist[0][0] == 0 && hist[1][0] == 0, "c=0 never observed");
    succ_model = 0.0;
    for (int c = 1; c <= 200; c++) begin
      real pt, pn;
      pt = model(mm, pp, 1'b1, c);
      pn = model(mm, pp, 1'b0, c);
      // ties are guessed as not taken
      succ_model += 0.5 * ((pt > pn) ? pt : pn);
    end
    for (int c = 1; c <= CMAX; c++) begin
      real pt, pn;
      pt = model(mm, pp, 1'b1, c);
      pn = model(mm, pp, 1'b0, c);
      for (int v = 0; v < 2; v++) begin
        pm = v ? pt : pn;
        f = real'(hist[v][c]) / real'(TRIALS);
        check(f > pm - 0.02 && f < pm + 0.02,
              $sformatf("m=%0.3f p=%0.3f v=%0d: P(c=%0d) = %0.4f, model %0.4f", mm, pp, v, c, f, pm));
      end
    end
    f = real'(succ) / real'(2 * TRIALS);
    check(f > succ_model - 0.02 && f < succ_model + 0.02,
          $sformatf("m=%0.3f p=%0.3f: success rate %0.4f, model %0.4f", mm, pp, f, succ_model));
    $display("m=%0.3f p=%0.3f  P(c=1|T)=%0.4f P(c=1|NT)=%0.4f P(c=2|T)=%0.4f P(c=2|NT)=%0.4f  success %0.4f (model %0.4f)",
             mm, pp, hist[1][1] / real'(TRIALS), hist[0][1] / real'(TRIALS),
             hist[1][2] / real'(TRIALS), hist[0][2] / real'(TRIALS), f, succ_model);
    // figures quoted for the analysed settings
    if (mq == int'(ONE) && pq == 0) begin
      check(hist[1][2] == TRIALS && hist[0][1] == TRIALS, "conventional: c=2 after T, c=1 after NT");
    end
    if (mq == int'(ONE / 2) && pq == 0) begin
      check(hist[1][1] == 0, "original PSC: c=1 never follows a taken victim");
      check(hist[1][2] / real'(TRIALS) > 0.23 && hist[1][2] / real'(TRIALS) < 0.27, "P(c=2|T) = 0.25");
      check(hist[0][2] / real'(TRIALS) > 0.23 && hist[0][2] / real'(TRIALS) < 0.27, "P(c=2|NT) = 0.25");
    end
    if (mq == int'(ONE / 2) && pq == int'(ONE / 2)) begin
      check(hist[1][1] > 0, "new PSC: c=1 also follows a taken victim");
      check(f > 0.48 && f < 0.52, "new PSC m=p=1/2: success rate 1/2");
    end
  endtask

  initial begin
    m = ONE[W:0]; p = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_setting(ONE, 0);
    run_setting(ONE / 2, 0);
    run_setting(ONE / 2, ONE / 2);
    run_setting(52429, 26214);   // m=0.8, p=0.4
    run_setting(ONE / 2, 6554);  // m=0.5, p=0.1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
