// psc_counter -- one stand-alone probabilistic saturating counter.
//
// This is the new 2-bit PSC as a complete Moore machine: a state register,
// its own random source (psc_rng) and the probabilistic next-state logic
// (psc_update). The output, the prediction, is the MSB of the state (T in
// ST and WT, NT in WN and SN). The parameters m and p are run-time inputs,
// so one instance can act as a conventional counter (m=1, p=0), as the
// earlier probabilistic counter (p=0) or as the new one.
//
// Timing: pred_o and state_o show the state before the current update.
// When valid_i is high at a rising edge the counter reads taken_i, makes at
// most one transition and the random source advances by one number. The
// synchronous active-low reset puts the counter in INIT (WN, this design's
// choice) and reloads the seed.
module psc_counter
  import psc_pkg::*;
#(
  parameter int unsigned PROB_W = psc_pkg::PSC_PROB_W,
  parameter logic [31:0] SEED   = 32'h2545_F491,
  parameter sc_state_e   INIT   = WN
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [PROB_W:0] m_i,
  input  logic [PROB_W:0] p_i,
  input  logic            valid_i,
  input  logic            taken_i,
  output logic            pred_o,
  output sc_state_e       state_o
);

  sc_state_e         state_q, state_d;
  logic [PROB_W-1:0] rnd;

  psc_rng #(.PROB_W(PROB_W), .SEED(SEED)) u_rng (
    .clk  (clk),
    .rst_n(rst_n),
    .step (valid_i),
    .rnd  (rnd)
  );

  psc_update #(.PROB_W(PROB_W)) u_upd (
    .state_i(state_q),
    .taken_i(taken_i),
    .rnd_i  (rnd),
    .m_i    (m_i),
    .p_i    (p_i),
    .state_o(state_d),
    .moved_o()
  );

  always_ff @(posedge clk) begin
    if (!rst_n)       state_q <= INIT;
    else if (valid_i) state_q <= state_d;
  end

  assign state_o = state_q;
  assign pred_o  = state_q[1];

endmodule
