// psc_update -- next-state function of the new probabilistic saturating
// counter (PSC).
//
// The counter keeps the transitions of a conventional 2-bit prediction
// counter: ST and WT go to ST on T; WT goes to SN on NT (a weak state jumps
// to the opposite strong state); WN goes to ST on T and to SN on NT; ST goes
// to WT on NT and SN to WN on T. Each transition is only carried out with
// probability m; otherwise the counter keeps its state. The new design adds
// a reversal probability p to the two strong states: in ST (and likewise
// SN) the counter moves to its weak neighbour
//   with probability m*p      when the outcome agrees with the state, and
//   with probability m*(1-p)  when it disagrees,
// and stays otherwise. m=1, p=0 gives the conventional counter; p=0 gives
// the earlier probabilistic counter; m=p=1/2 makes the distribution of the
// cut-off attack's observation the same for both victim directions.
//
// Mechanism: a single comparison. The move probability thr is selected
// from {m, m*p, m-m*p} by the state and the outcome, and the transition is
// taken when the random number is at least 2^PROB_W - thr (the number is
// "bigger than the threshold" 1-thr). Over a uniform rnd exactly thr of the
// 2^PROB_W values move, so the probability is exact; m*p is rounded down.
//
// The transition probabilities are those of the published counter. The
// single-comparison realisation, the fixed-point format and the rounding of
// m*p are this design's choices.
//
// Interface: purely combinational. m_i and p_i are fixed point with
// 2^PROB_W meaning 1.0; rnd_i is uniform in [0, 2^PROB_W). moved_o reports
// that the draw allowed a transition (for a strong state with an agreeing
// outcome, that is a reversal).
module psc_update
  import psc_pkg::*;
#(
  parameter int unsigned PROB_W = psc_pkg::PSC_PROB_W
) (
  input  sc_state_e         state_i,
  input  logic              taken_i,
  input  logic [PROB_W-1:0] rnd_i,
  input  logic [PROB_W:0]   m_i,
  input  logic [PROB_W:0]   p_i,
  output sc_state_e         state_o,
  output logic              moved_o
);

  logic [2*PROB_W+1:0] mp_full;
  logic [PROB_W:0]     mp, m_minus_mp, thr, one;
  logic                strong_st, agree;
  sc_state_e           target;

  always_comb begin
    one        = {1'b1, {PROB_W{1'b0}}};
    mp_full    = m_i * p_i;
    mp         = mp_full[2*PROB_W:PROB_W];     // floor(m*p), m,p <= 1
    m_minus_mp = m_i - mp;
    strong_st  = is_strong(state_i);
    agree      = (state_i == ST) ? taken_i : !taken_i;

    if (!strong_st)     thr = m_i;
    else if (agree)  thr = mp;
    else             thr = m_minus_mp;

    moved_o = ({1'b0, rnd_i} >= (one - thr));

    // Where a strong state moves, it always moves to its weak neighbour.
    unique case (state_i)
      ST:      target = WT;
      SN:      target = WN;
      default: target = sc_next(state_i, taken_i);
    endcase

    state_o = moved_o ? target : state_i;
  end

endmodule
