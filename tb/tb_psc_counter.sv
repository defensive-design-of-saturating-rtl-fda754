// tb_psc_counter -- self-checking testbench for one probabilistic
// saturating counter.
//
// 1. m=1, p=0: the counter must behave exactly as the conventional 2-bit
//    prediction counter (ST -NT-> WT -NT-> SN, weak states jump to the
//    opposite strong state, MSB is the prediction). Checked cycle by cycle
//    against a transition table on a random outcome sequence.
// 2. m=0: the state never changes.
// 3. valid low: the state holds.
// 4. m=p=1/2: the empirical probabilities of single transitions are
//    measured over many trials and compared with the model: ST reading T
//    moves to WT with m*p = 1/4, ST reading NT with m*(1-p) = 1/4, WT
//    reading T moves to ST with m = 1/2. Tolerance: 0.015.
module tb_psc_counter;
  import psc_pkg::*;
  localparam int unsigned W = 16;
  localparam int unsigned ONE = 1 << W;

  logic clk = 0, rst_n = 0, valid = 0, taken = 0;
  logic [W:0] m, p;
  logic pred;
  sc_state_e st;
  int checks = 0, failures = 0;

  psc_counter #(.PROB_W(W)) dut (.clk(clk), .rst_n(rst_n), .m_i(m), .p_i(p),
                                 .valid_i(valid), .taken_i(taken),
                                 .pred_o(pred), .state_o(st));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one update; returns the state afterwards
  task automatic upd(input bit t);
    valid = 1; taken = t;
    @(posedge clk); #1;
    valid = 0;
  endtask

  // drive to state s with m=1, p=0
  task automatic go_to(input int s);
    m = ONE[W:0]; p = '0;
    case (s)
      3: begin upd(1); upd(1); end
      2: begin upd(1); upd(1); upd(0); end
      1: begin upd(0); upd(0); upd(1); end
      default: begin upd(0); upd(0); end
    endcase
  endtask

  initial begin
    // next state of the conventional counter [state][taken]
    int nxt [4][2] = '{'{0, 1}, '{0, 3}, '{0, 3}, '{2, 3}};
    int ref_s;
    m = ONE[W:0]; p = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    check(st == WN && pred == 1'b0, "reset state WN");
    ref_s = 1;
    // 1. conventional behaviour
    for (int i = 0; i < 3000; i++) begin
      bit t;
      t = ($urandom % 100) < 60;
      check(pred == ref_s[1], $sformatf("prediction at step %0d", i));
      upd(t);
      ref_s = nxt[ref_s][t];
      check(int'(st) == ref_s, $sformatf("step %0d: state %0d expected %0d", i, st, ref_s));
    end
    // 2. m = 0 freezes the counter
    for (int s0 = 0; s0 < 4; s0++) begin
      go_to(s0);
      check(int'(st) == s0, $sformatf("go_to %0d", s0));
      m = '0; p = 17'(ONE / 2);
      for (int i = 0; i < 50; i++) upd($urandom % 2 == 1);
      check(int'(st) == s0, $sformatf("m=0 froze state %0d", s0));
    end
    // 3. valid low holds
    go_to(3);
    taken = 0;
    repeat (10) @(posedge clk);
    #1 check(st == ST, "hold without valid");
    // 4. statistics at m = p = 1/2
    begin
      int n_st_t, n_st_nt, n_wt_t;
      real f;
      n_st_t = 0; n_st_nt = 0; n_wt_t = 0;
      for (int i = 0; i < 6000; i++) begin
        go_to(3); m = 17'(ONE / 2); p = 17'(ONE / 2);
        upd(1); if (st == WT) n_st_t++;
        go_to(3); m = 17'(ONE / 2); p = 17'(ONE / 2);
        upd(0); if (st == WT) n_st_nt++;
        go_to(2); m = 17'(ONE / 2); p = 17'(ONE / 2);
        upd(1); if (st == ST) n_wt_t++;
      end
      f = n_st_t / 6000.0;
      check(f > 0.235 && f < 0.265, $sformatf("P(ST-T->WT) = %f, expected 0.25", f));
      f = n_st_nt / 6000.0;
      check(f > 0.235 && f < 0.265, $sformatf("P(ST-NT->WT) = %f, expected 0.25", f));
      f = n_wt_t / 6000.0;
      check(f > 0.485 && f < 0.515, $sformatf("P(WT-T->ST) = %f, expected 0.5", f));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
