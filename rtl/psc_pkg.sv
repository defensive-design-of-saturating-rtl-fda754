// psc_pkg -- types and constants shared by the probabilistic saturating
// counter (PSC) blocks.
//
// A 2-bit saturating counter is a Moore machine with four states. The state
// codes are the usual ones: SN (strongly not taken) = 00, WN (weakly not
// taken) = 01, WT (weakly taken) = 10, ST (strongly taken) = 11. The most
// significant bit is the prediction.
//
// Probabilities (the update probability m and the strong-state reversal
// probability p) are unsigned fixed-point numbers with PSC_PROB_W fraction bits
// and one integer bit, so that both 0.0 and 1.0 are exact: the value v
// stands for v / 2^PSC_PROB_W. PSC_PROB_W = 16 is this design's choice.
//
// The package also holds the conventional (deterministic) transition
// function of the prediction counter, in which a weak state jumps to the
// opposite strong state, and the choice counter's up/down function.
package psc_pkg;

  localparam int unsigned PSC_PROB_W = 16;


  typedef enum logic [1:0] {
    SN = 2'b00,
    WN = 2'b01,
    WT = 2'b10,
    ST = 2'b11
  } sc_state_e;

  // Choice counter states: T1 selected in 11/10, T2 selected in 01/00.
  typedef enum logic [1:0] {
    T2_STRONG = 2'b00,
    T2_WEAK   = 2'b01,
    T1_WEAK   = 2'b10,
    T1_STRONG = 2'b11
  } choice_state_e;

  // Conventional prediction counter: the state reached when a transition
  // is taken on input 'taken'.
  function automatic sc_state_e sc_next(sc_state_e s, logic taken);
    unique case (s)
      ST: sc_next = taken ? ST : WT;
      WT: sc_next = taken ? ST : SN;
      WN: sc_next = taken ? ST : SN;
      SN: sc_next = taken ? WN : SN;
      default: sc_next = s;
    endcase
  endfunction

  function automatic logic is_strong(sc_state_e s);
    return (s == ST) || (s == SN);
  endfunction

endpackage
