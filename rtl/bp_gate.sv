// bp_gate: switches the core's branch predictor off inside folded regions.
//
// A branch target predictor is indexed by instruction address, so consulting
// or training it with the instructions of a folded region would record which
// block of a level ran -- the secret branch outcome -- in a structure an
// attacker shares. Following the paper, this design disables the predictor
// completely while the Libra context is folded, and never uses it for
// level-offset branches or calls, whose successor slice is known without
// prediction. Outside folded regions the predictor works unchanged.
//
// The block sits between the frontend and the predictor:
//  * lookup: the frontend asks (req_i) for the instruction at pc_i; the
//    request reaches the predictor (bp_lookup_valid_o) only when allowed, and
//    the prediction returned (bp_hit_i, bp_target_i, answered in the same
//    cycle) is passed on as pred_taken_o/pred_target_o, forced to
//    "not taken" otherwise;
//  * training: a resolved branch (upd_valid_i) is forwarded to the
//    predictor only if it was issued outside a folded region and is an
//    ordinary branch or jump (upd_allowed_i).
// suppressed_o marks a lookup that was blocked. Purely combinational.
module bp_gate
  import libra_pkg::*;
(
  // lookup side, from the frontend
  input  logic            req_i,
  input  ikind_e          kind_i,
  input  logic            folded_i,
  input  logic [XLEN-1:0] pc_i,
  output logic            pred_taken_o,
  output logic [XLEN-1:0] pred_target_o,
  output logic            suppressed_o,
  // lookup side, to the predictor
  output logic            bp_lookup_valid_o,
  output logic [XLEN-1:0] bp_lookup_pc_o,
  input  logic            bp_hit_i,
  input  logic [XLEN-1:0] bp_target_i,
  // training
  input  logic            upd_valid_i,
  input  logic            upd_allowed_i,
  output logic            bp_update_valid_o
);

  logic allowed;

  // Only ordinary conditional branches are predicted, and only outside
  // folded regions.
  assign allowed           = !folded_i && (kind_i == K_BR);
  assign bp_lookup_valid_o = req_i && allowed;
  assign bp_lookup_pc_o    = allowed ? pc_i : '0;
  assign pred_taken_o      = bp_lookup_valid_o && bp_hit_i;
  assign pred_target_o     = pred_taken_o ? bp_target_i : '0;
  assign suppressed_o      = req_i && !allowed && (kind_i inside {K_BR, K_LOBR, K_TLOBR});
  assign bp_update_valid_o = upd_valid_i && upd_allowed_i;

endmodule
