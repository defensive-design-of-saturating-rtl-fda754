// tb_psc_update -- exhaustive check of the PSC next-state function.
//
// For several (m, p) settings, every state, both outcomes and all 2^16
// random numbers, the testbench computes the expected move probability
// independently (weak state: m; strong state and agreeing outcome: m*p;
// strong state and disagreeing outcome: m - m*p, with m*p rounded down)
// and checks that
//   - exactly that many of the 2^16 random numbers cause a move, and they
//     are the largest ones (the number must be at least 1 - probability);
//   - a move goes where the counter's transition list says
//     (ST -NT-> WT, WT -T-> ST, WT -NT-> SN, WN -T-> ST, WN -NT-> SN,
//      SN -T-> WN, strong states reverse to their weak neighbour);
//   - no move leaves the state unchanged, and moved_o agrees.
module tb_psc_update;
  import psc_pkg::*;
  localparam int unsigned W = 16;
  localparam int unsigned ONE = 1 << W;

  sc_state_e s_i, s_o;
  logic taken, moved;
  logic [W-1:0] rnd;
  logic [W:0] m, p;
  int checks = 0, failures = 0;

  psc_update #(.PROB_W(W)) dut (.state_i(s_i), .taken_i(taken), .rnd_i(rnd),
                                .m_i(m), .p_i(p), .state_o(s_o), .moved_o(moved));

  initial begin : watchdog
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int target(int s, int t);
    case (s)
      3: return 2;            // ST moves to WT only
      2: return t ? 3 : 0;    // WT
      1: return t ? 3 : 0;    // WN
      default: return 1;      // SN moves to WN only
    endcase
  endfunction

  initial begin
    int ms [8] = '{ONE, 32768, 32768, 32768, 52429, 0, ONE, 32768};
    int ps [8] = '{0,   0,     32768, 6554,  26214, 32768, ONE, 47186};
    for (int k = 0; k < 8; k++) begin
      m = ms[k][W:0];
      p = ps[k][W:0];
      for (int s = 0; s < 4; s++)
        for (int t = 0; t < 2; t++) begin
          int mp, thr, n_moved, first_move, bad;
          bit strong_st, agree;
          mp = int'((longint'(ms[k]) * longint'(ps[k])) / ONE);
          strong_st = (s == 0 || s == 3);
          agree = (s == 3) ? (t == 1) : (t == 0);
          thr = !strong_st ? ms[k] : (agree ? mp : ms[k] - mp);
          n_moved = 0; first_move = -1; bad = 0;
          s_i = sc_state_e'(s);
          taken = t[0];
          for (int r = 0; r < int'(ONE); r++) begin
            rnd = r[W-1:0];
            #1;
            if (moved) begin
              n_moved++;
              if (first_move < 0) first_move = r;
              if (int'(s_o) != target(s, t)) bad++;
            end else begin
              if (s_o != s_i) bad++;
              if (first_move >= 0) bad++;   // moves must be one contiguous top range
            end
          end
          check(n_moved == thr, $sformatf("m=%0d p=%0d s=%0d t=%0d: %0d moves, expected %0d",
                                          ms[k], ps[k], s, t, n_moved, thr));
          check(bad == 0, $sformatf("m=%0d p=%0d s=%0d t=%0d: %0d wrong next states",
                                    ms[k], ps[k], s, t, bad));
          check(thr == 0 || first_move == int'(ONE) - thr,
                $sformatf("m=%0d p=%0d s=%0d t=%0d: first moving number %0d",
                          ms[k], ps[k], s, t, first_move));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
