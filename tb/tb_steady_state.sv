// tb_steady_state -- steady-state misprediction rate of one counter.
//
// A branch taken with probability s (independently each time) is fed to a
// psc_counter. After a warm-up the misprediction rate is measured and
// compared with the closed form for the stationary distribution of the
// counter's 4-state Markov chain (q = 1-p, t = 1-s):
//   A = q*s + p*t,  B = q*t + p*s
//   r = s*t*(A*(1+B) + B*(1+A)) / (s*A*(1+B) + t*B*(1+A))
// which does not depend on m. The settings are those of the merge-sort
// measurement: the conventional counter (m=1, p=0) and the new counter with
// (m, p) = (0.5, 0.5) and (0.8, 0.4), at the eight branch probabilities
// s = 0.939, 0.495, 0.355, 0.437, 0.891, 1, 0, 0.895. The rate is also
// compared with the published theoretical values (three decimals).
// Tolerance: 0.008 against the closed form and 0.01 against the published
// values, over SAMPLES branches per point.
module tb_steady_state;
  import psc_pkg::*;
  localparam int unsigned W = 16;
  localparam int unsigned ONE = 1 << W;
  localparam int SAMPLES = 200000;
  localparam int WARMUP = 2000;

  logic clk = 0, rst_n = 0, valid = 0, taken = 0;
  logic [W:0] m, p;
  logic pred;
  sc_state_e st;
  int checks = 0, failures = 0;

  psc_counter #(.PROB_W(W), .SEED(32'h5EED_0001)) dut (
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
    repeat (10000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rate(real s, real pp);
    real t, q, a, b, den;
    t = 1.0 - s; q = 1.0 - pp;
    a = q * s + pp * t;
    b = q * t + pp * s;
    den = s * a * (1.0 + b) + t * b * (1.0 + a);
    if (den == 0.0) return 0.0;
    return s * t * (a * (1.0 + b) + b * (1.0 + a)) / den;
  endfunction

  initial begin
    real svals [8] = '{0.939, 0.495, 0.355, 0.437, 0.891, 1.0, 0.0, 0.895};
    int  mq [3] = '{ONE, ONE / 2, 52429};
    int  pq [3] = '{0, ONE / 2, 26214};
    // published theoretical rates [setting][branch]
    real pub [3][8] = '{'{0.068, 0.500, 0.433, 0.487, 0.128, 0.0, 0.0, 0.123},
                        '{0.114, 0.500, 0.458, 0.492, 0.194, 0.0, 0.0, 0.188},
                        '{0.104, 0.500, 0.453, 0.491, 0.179, 0.0, 0.0, 0.173}};
    int sthr;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++)
      for (int b = 0; b < 8; b++) begin
        int miss;
        real f, r;
        m = mq[k][W:0]; p = pq[k][W:0];
        sthr = int'(svals[b] * 1000000.0);
        miss = 0;
        for (int i = 0; i < WARMUP + SAMPLES; i++) begin
          bit t;
          t = ($urandom % 1000000) < sthr;
          if (i >= WARMUP && pred != t) miss++;
          valid = 1; taken = t;
          @(posedge clk); #1;
        end
        valid = 0;
        f = real'(miss) / real'(SAMPLES);
        r = rate(svals[b], real'(pq[k]) / real'(ONE));
        $display("m=%0.2f p=%0.2f s=%0.3f  measured %0.4f  closed form %0.4f  published %0.3f",
                 real'(mq[k]) / ONE, real'(pq[k]) / ONE, svals[b], f, r, pub[k][b]);
        check(f > r - 0.008 && f < r + 0.008,
              $sformatf("k=%0d s=%0.3f: rate %0.4f vs closed form %0.4f", k, svals[b], f, r));
        check(f > pub[k][b] - 0.01 && f < pub[k][b] + 0.01,
              $sformatf("k=%0d s=%0.3f: rate %0.4f vs published %0.3f", k, svals[b], f, pub[k][b]));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
