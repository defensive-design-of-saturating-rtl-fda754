// choice_counter_next -- next-state function of the 2-bit choice counter.
//
// A tournament predictor keeps one choice counter per entry to select
// which of its two prediction tables, T1 or T2, to believe. States 11 and
// 10 select T1, states 01 and 00 select T2 (the MSB is the selection). A hit
// (H) of T1 moves the counter one step towards 11, a miss (M) one step
// towards 00, saturating at both ends:
//   11 -H-> 11, 11 -M-> 10, 10 -H-> 11, 10 -M-> 01,
//   01 -H-> 10, 01 -M-> 00, 00 -H-> 01, 00 -M-> 00.
// This counter is deterministic: the probabilistic update is applied to the
// prediction counters only.
//
// Interface: purely combinational.
module choice_counter_next
  import psc_pkg::*;
(
  input  choice_state_e state_i,
  input  logic          hit_i,
  output choice_state_e state_o
);

  always_comb begin
    unique case (state_i)
      T1_STRONG: state_o = hit_i ? T1_STRONG : T1_WEAK;
      T1_WEAK:   state_o = hit_i ? T1_STRONG : T2_WEAK;
      T2_WEAK:   state_o = hit_i ? T1_WEAK   : T2_STRONG;
      T2_STRONG: state_o = hit_i ? T2_WEAK   : T2_STRONG;
      default:   state_o = state_i;
    endcase
  end

endmodule
