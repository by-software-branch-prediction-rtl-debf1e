// boss_pred_mux -- the prediction override multiplexer of the BOSS unit.
//
// Outcomes supplied by software are exact, so whenever the fetched branch
// instance finds a valid outcome in the BOSS outcome table that outcome replaces
// the direction from the conventional predictor; otherwise the conventional
// direction passes unchanged. Input 0 is the conventional predictor, input 1 the
// BOSS outcome, and the select is the table's hit signal, as in the paper's block
// diagram. Purely combinational, same cycle as the lookup.
module boss_pred_mux (
  input  logic conv_taken,   // direction from the conventional predictor
  input  logic boss_hit,     // the outcome table holds this instance's outcome
  input  logic boss_taken,   // that outcome (1 = taken)
  output logic pred_taken    // direction sent to the front end
);

  always_comb pred_taken = boss_hit ? boss_taken : conv_taken;

endmodule
