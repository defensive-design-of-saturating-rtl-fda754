// tb_mergesort -- the merge-sort branch workload.
//
// A top-down merge sort of N = 100000 integers runs inside the testbench
// (with an explicit stack in place of recursion, splitting each range at
// (high-low)/2 as the recursive form does). Its four conditional branches
//   B1: while (i != left.size && j != right.size)
//   B2: if (left[i] <= right[j])
//   B3: while (i != left.size)
//   B4: while (j != right.size)
// are each given their own psc_counter for each of three settings,
// conventional (m=1, p=0) and the new counter with (m, p) = (0.5, 0.5)
// and (0.8, 0.4); "taken" means the condition is true. Every evaluation of
// a branch is one update of its three counters. The sort is run on
// uniformly distributed data and on sorted data.
//
// Checks: the array is sorted; the taken fraction s of each branch matches
// the published one (0.939, 0.495, 0.355, 0.437 for uniform data; 0.891,
// 1, 0, 0.895 for sorted data) within 0.01; every measured misprediction
// rate lies within 0.01 of the published measured value and within 0.06 of
// the steady-state closed form evaluated at the measured s (loop branches
// are periodic rather than independent, so the closed form is only
// approximate for them; the published measurements differ from it by up
// to 0.057 as well).
module tb_mergesort;
  import psc_pkg::*;
  localparam int unsigned W = 16;
  localparam int unsigned ONE = 1 << W;
  localparam int N = 100000;

  logic clk = 0, rst_n = 0;
  logic [3:0] valid = '0;
  logic taken = 0;
  logic pred [3][4];
  sc_state_e st [3][4];
  int checks = 0, failures = 0;

  localparam int MQ [3] = '{ONE, ONE / 2, 52429};
  localparam int PQ [3] = '{0, ONE / 2, 26214};

  for (genvar k = 0; k < 3; k++) begin : g_set
    for (genvar b = 0; b < 4; b++) begin : g_br
      psc_counter #(.PROB_W(W), .SEED(32'h1000_0001 + 32'(k * 4 + b) * 32'h0101_0101)) u_ctr (
        .clk(clk), .rst_n(rst_n), .m_i(17'(MQ[k])), .p_i(17'(PQ[k])),
        .valid_i(valid[b]), .taken_i(taken), .pred_o(pred[k][b]), .state_o(st[k][b]));
    end
  end

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

  int list [N];
  int lft [N];
  int rgt [N];
  longint n_eval [4];
  longint n_taken [4];
  longint n_miss [3][4];

  task automatic branch(input int b, input bit t);
    for (int k = 0; k < 3; k++) if (pred[k][b] != t) n_miss[k][b]++;
    n_eval[b]++;
    if (t) n_taken[b]++;
    valid = 4'(1 << b); taken = t;
    @(posedge clk); #1;
    valid = '0;
  endtask

  task automatic merge(input int low, input int mid, input int high);
    int nl, nr, i, j, k;
    nl = mid - low; nr = high - mid;
    for (int x = 0; x < nl; x++) lft[x] = list[low + x];
    for (int x = 0; x < nr; x++) rgt[x] = list[mid + x];
    i = 0; j = 0; k = 0;
    forever begin
      bit c1;
      c1 = (i != nl) && (j != nr);
      branch(0, c1);
      if (!c1) break;
      if (lft[i] <= rgt[j]) begin branch(1, 1'b1); list[low + k] = lft[i]; i++; end
      else                  begin branch(1, 1'b0); list[low + k] = rgt[j]; j++; end
      k++;
    end
    forever begin
      branch(2, i != nl);
      if (i == nl) break;
      list[low + k] = lft[i]; i++; k++;
    end
    forever begin
      branch(3, j != nr);
      if (j == nr) break;
      list[low + k] = rgt[j]; j++; k++;
    end
  endtask

  // top-down merge sort with an explicit stack of (low, high, phase)
  task automatic mergesort();
    int s_low [$], s_high [$], s_ph [$];
    s_low.push_back(0); s_high.push_back(N); s_ph.push_back(0);
    while (s_low.size() > 0) begin
      int low, high, ph, mm;
      low = s_low.pop_back(); high = s_high.pop_back(); ph = s_ph.pop_back();
      if (low + 1 >= high) continue;
      mm = (high - low) / 2;
      if (ph == 0) begin
        // after both halves: merge
        s_low.push_back(low); s_high.push_back(high); s_ph.push_back(1);
        s_low.push_back(low + mm); s_high.push_back(high); s_ph.push_back(0);
        s_low.push_back(low); s_high.push_back(low + mm); s_ph.push_back(0);
      end else begin
        merge(low, low + mm, high);
      end
    end
  endtask

  function automatic real rate(real s, real pp);
    real t, q, a, b, den;
    t = 1.0 - s; q = 1.0 - pp;
    a = q * s + pp * t;
    b = q * t + pp * s;
    den = s * a * (1.0 + b) + t * b * (1.0 + a);
    if (den == 0.0) return 0.0;
    return s * t * (a * (1.0 + b) + b * (1.0 + a)) / den;
  endfunction

  task automatic run(input bit sorted_in, input real s_pub [4], input real p_exp [3][4]);
    bit ok;
    rst_n = 0;
    @(posedge clk); #1;
    rst_n = 1;
    for (int b = 0; b < 4; b++) begin
      n_eval[b] = 0; n_taken[b] = 0;
      for (int k = 0; k < 3; k++) n_miss[k][b] = 0;
    end
    for (int x = 0; x < N; x++) list[x] = sorted_in ? x : int'($urandom % 1000000000);
    mergesort();
    ok = 1;
    for (int x = 1; x < N; x++) if (list[x - 1] > list[x]) ok = 0;
    check(ok, "array sorted");
    for (int b = 0; b < 4; b++) begin
      real s;
      s = real'(n_taken[b]) / real'(n_eval[b]);
      check(s > s_pub[b] - 0.01 && s < s_pub[b] + 0.01,
            $sformatf("%s B%0d: s = %0.3f, published %0.3f", sorted_in ? "sorted" : "uniform", b + 1, s, s_pub[b]));
      for (int k = 0; k < 3; k++) begin
        real f, r;
        f = real'(n_miss[k][b]) / real'(n_eval[b]);
        r = rate(s, real'(PQ[k]) / real'(ONE));
        $display("%s B%0d s=%0.3f m=%0.2f p=%0.2f: misprediction %0.3f (published measured %0.3f, closed form %0.3f)",
                 sorted_in ? "sorted " : "uniform", b + 1, s, real'(MQ[k]) / ONE, real'(PQ[k]) / ONE,
                 f, p_exp[k][b], r);
        check(f > p_exp[k][b] - 0.01 && f < p_exp[k][b] + 0.01,
              $sformatf("B%0d setting %0d: rate %0.3f vs published %0.3f", b + 1, k, f, p_exp[k][b]));
        check(f > r - 0.06 && f < r + 0.06,
              $sformatf("B%0d setting %0d: rate %0.3f vs closed form %0.3f", b + 1, k, f, r));
      end
    end
  endtask

  initial begin
    // published s and measured rates [setting][branch]
    real s_u [4] = '{0.939, 0.495, 0.355, 0.437};
    real s_s [4] = '{0.891, 1.0, 0.0, 0.895};
    real e_u [3][4] = '{'{0.061, 0.510, 0.406, 0.544},
                        '{0.094, 0.504, 0.471, 0.514},
                        '{0.089, 0.506, 0.469, 0.525}};
    real e_s [3][4] = '{'{0.109, 0.0, 0.0, 0.105},
                        '{0.154, 0.0, 0.0, 0.158},
                        '{0.149, 0.0, 0.0, 0.154}};
    repeat (2) @(posedge clk);
    run(1'b0, s_u, e_u);
    run(1'b1, s_s, e_s);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
