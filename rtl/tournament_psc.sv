// tournament_psc -- Tournament branch direction predictor built from
// probabilistic saturating counters (PSCs).
//
// What it does: for the conditional branch at br_pc it predicts taken or
// not taken, and it learns from the branch's resolved direction. The
// organisation is the classic tournament one: a local predictor (a local
// history table indexed by the branch address, whose history selects a
// 2-bit counter in the local PHT), a global predictor (the global history
// register selects a 2-bit counter in the global PHT) and a choice PHT,
// indexed by the global history, whose 2-bit choice counter picks the
// global prediction (states 11/10) or the local one (01/00).
//
// What is new: every prediction counter in the local and global PHTs is
// updated by psc_update, the probabilistic next-state function, with the
// run-time parameters cfg_m (update probability m) and cfg_p (reversal
// probability p of the strong states). The two PHTs each have their own
// random source. With m=1, p=0 the predictor is the conventional one. The
// choice counters stay deterministic and are trained, as usual, only when
// the two predictors disagree: towards the global side when the global
// prediction was right.
//
// Sizes: 2048 local histories of 11 bits, 2048 local counters, 8192 global
// counters and 4096 choice counters, 51200 bits (6.25 KiB) of state, close
// to the 6.3 KB budget quoted for the evaluated predictor. The table
// organisation, the index functions and the sizes of the individual
// tables are this design's choices.
//
// Interface and timing (one branch per cycle, trace driven): present
// br_valid, br_pc and br_taken together. pred_taken and pred_global are
// combinational functions of br_pc and the current tables, i.e. the
// prediction made before the branch's own update. At the rising edge with
// br_valid high, the selected local and global counters are updated, the
// choice counter is trained if needed, and the branch's direction is
// shifted into its local history and the global history. History is
// updated non-speculatively.
//
// Reset: the synchronous active-low reset clears the global history and
// starts a clearing sweep that writes one index of every table per cycle
// (histories to 0, every counter to 01, i.e. WN in the PHTs). The sweep
// takes 2^GHIST_BITS cycles (8192 by default); init_busy is high meanwhile
// and br_valid must be held low until it falls.
module tournament_psc
  import psc_pkg::*;
#(
  parameter int unsigned PC_W        = 64,
  parameter int unsigned LHT_ENTRIES = 2048,
  parameter int unsigned LHIST_BITS  = 11,
  parameter int unsigned GHIST_BITS  = 13,
  parameter int unsigned CHOICE_BITS = 12,
  parameter int unsigned PROB_W      = psc_pkg::PSC_PROB_W,
  parameter logic [31:0] SEED_LOCAL  = 32'h2545_F491,
  parameter logic [31:0] SEED_GLOBAL = 32'h9E37_79B9
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [PROB_W:0] cfg_m,
  input  logic [PROB_W:0] cfg_p,
  input  logic            br_valid,
  input  logic [PC_W-1:0] br_pc,
  input  logic            br_taken,
  output logic            pred_taken,
  output logic            pred_global,
  output logic            init_busy
);

  localparam int unsigned LHT_IDX_W = $clog2(LHT_ENTRIES);
  localparam int unsigned LPHT_ENT  = 1 << LHIST_BITS;
  localparam int unsigned GPHT_ENT  = 1 << GHIST_BITS;
  localparam int unsigned CPHT_ENT  = 1 << CHOICE_BITS;
  // The clearing sweep covers the largest table.
  localparam int unsigned SWEEP_W   = GHIST_BITS > LHIST_BITS ? GHIST_BITS : LHIST_BITS;

  // ---------------------------------------------------------------- state
  logic [LHIST_BITS-1:0] lht  [LHT_ENTRIES];   // local histories
  sc_state_e             lpht [LPHT_ENT];      // local prediction counters
  sc_state_e             gpht [GPHT_ENT];      // global prediction counters
  choice_state_e         cpht [CPHT_ENT];      // choice counters
  logic [GHIST_BITS-1:0] ghr;                  // global history
  logic [SWEEP_W-1:0]    sweep_idx;            // clearing sweep position
  logic                  sweeping;             // clearing sweep running

  // ---------------------------------------------------------------- lookup
  logic [LHT_IDX_W-1:0]   lht_idx;
  logic [LHIST_BITS-1:0]  lhist;
  logic [CHOICE_BITS-1:0] c_idx;
  sc_state_e              lctr, gctr, lctr_d, gctr_d;
  choice_state_e          cctr, cctr_d;
  logic                   lpred, gpred;

  always_comb begin
    lht_idx     = br_pc[2 +: LHT_IDX_W];       // 4-byte instructions
    lhist       = lht[lht_idx];
    c_idx       = ghr[CHOICE_BITS-1:0];
    lctr        = lpht[lhist];
    gctr        = gpht[ghr];
    cctr        = cpht[c_idx];
    lpred       = lctr[1];
    gpred       = gctr[1];
    pred_global = cctr[1];
    pred_taken  = pred_global ? gpred : lpred;
  end

  // ---------------------------------------------------------------- update
  logic [PROB_W-1:0] rnd_l, rnd_g;

  logic upd_en;
  assign upd_en = br_valid && !sweeping;

  psc_rng #(.PROB_W(PROB_W), .SEED(SEED_LOCAL)) u_rng_l (
    .clk(clk), .rst_n(rst_n), .step(upd_en), .rnd(rnd_l));
  psc_rng #(.PROB_W(PROB_W), .SEED(SEED_GLOBAL)) u_rng_g (
    .clk(clk), .rst_n(rst_n), .step(upd_en), .rnd(rnd_g));

  psc_update #(.PROB_W(PROB_W)) u_upd_l (
    .state_i(lctr), .taken_i(br_taken), .rnd_i(rnd_l),
    .m_i(cfg_m), .p_i(cfg_p), .state_o(lctr_d), .moved_o());
  psc_update #(.PROB_W(PROB_W)) u_upd_g (
    .state_i(gctr), .taken_i(br_taken), .rnd_i(rnd_g),
    .m_i(cfg_m), .p_i(cfg_p), .state_o(gctr_d), .moved_o());

  choice_counter_next u_choice (
    .state_i(cctr), .hit_i(gpred == br_taken), .state_o(cctr_d));

  // ---------------------------------------------------------------- clear

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sweeping  <= 1'b1;
      sweep_idx <= '0;
    end else if (sweeping) begin
      sweep_idx <= sweep_idx + 1'b1;
      if (&sweep_idx) sweeping <= 1'b0;
    end
  end

  assign init_busy = sweeping;

  // ---------------------------------------------------------------- tables
  always_ff @(posedge clk) begin
    if (sweeping) begin
      if (int'(sweep_idx) < int'(LHT_ENTRIES)) lht[LHT_IDX_W'(sweep_idx)] <= '0;
      if (int'(sweep_idx) < int'(LPHT_ENT)) lpht[LHIST_BITS'(sweep_idx)] <= WN;
      if (int'(sweep_idx) < int'(GPHT_ENT)) gpht[GHIST_BITS'(sweep_idx)] <= WN;
      if (int'(sweep_idx) < int'(CPHT_ENT)) cpht[CHOICE_BITS'(sweep_idx)] <= T2_WEAK;
    end else if (rst_n && br_valid) begin
      lpht[lhist]  <= lctr_d;
      gpht[ghr]    <= gctr_d;
      if (lpred != gpred) cpht[c_idx] <= cctr_d;
      lht[lht_idx] <= {lhist[LHIST_BITS-2:0], br_taken};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                      ghr <= '0;
    else if (br_valid && !sweeping)  ghr <= {ghr[GHIST_BITS-2:0], br_taken};
  end

  initial begin
    assert (CHOICE_BITS <= GHIST_BITS)
      else $error("tournament_psc: CHOICE_BITS must not exceed GHIST_BITS");
    assert (2 + LHT_IDX_W <= PC_W)
      else $error("tournament_psc: PC_W too small for LHT_ENTRIES");
    assert (LHT_ENTRIES <= (1 << SWEEP_W))
      else $error("tournament_psc: LHT_ENTRIES larger than the clearing sweep");
  end

endmodule
