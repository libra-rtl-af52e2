// tb_bp_gate: self-checking test of the branch-predictor gate.
//
// Sweeps instruction kinds, folded/unfolded contexts and predictor answers
// and checks that the predictor is consulted and trusted only for ordinary
// branches outside folded regions, that blocked lookups are flagged, and that
// training is forwarded only when allowed.
module tb_bp_gate;
  import libra_pkg::*;

  logic        req, folded, hit, upd_valid, upd_allowed;
  ikind_e      kind;
  logic [31:0] pc, target, pred_target, lk_pc;
  logic        pred_taken, suppressed, lk_valid, upd_out;
  int          checks = 0, failures = 0;

  bp_gate dut (
    .req_i(req), .kind_i(kind), .folded_i(folded), .pc_i(pc),
    .pred_taken_o(pred_taken), .pred_target_o(pred_target), .suppressed_o(suppressed),
    .bp_lookup_valid_o(lk_valid), .bp_lookup_pc_o(lk_pc), .bp_hit_i(hit),
    .bp_target_i(target), .upd_valid_i(upd_valid), .upd_allowed_i(upd_allowed),
    .bp_update_valid_o(upd_out)
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s kind=%0d folded=%0d", what, kind, folded); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit use_bp;
    for (int i = 0; i < 400; i++) begin
      req = 1'($urandom); folded = 1'($urandom); hit = 1'($urandom);
      kind = ikind_e'($urandom_range(0, 10));
      pc = $urandom; target = $urandom;
      upd_valid = 1'($urandom); upd_allowed = 1'($urandom);
      #1;
      use_bp = req && !folded && kind == K_BR;
      check(lk_valid == use_bp, "lookup only for unfolded ordinary branches");
      check(!use_bp || lk_pc == pc, "lookup address");
      check(pred_taken == (use_bp && hit), "prediction used only when allowed");
      check(!pred_taken || pred_target == target, "predicted target");
      check(suppressed == (req && !use_bp && (kind == K_BR || kind == K_LOBR || kind == K_TLOBR)),
            "blocked lookups flagged");
      check(upd_out == (upd_valid && upd_allowed), "training gated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
