// tb_xbp_attack -- the two cross-context training attacks (BTB target
// injection and PHT direction training) run against the predictor at its
// default size, with a key change between attacker and victim as a
// context switch brings.
//
// BTB attack: attacker and victim share one indirect call site; the
// attacker trains it towards its own function, a context switch follows,
// and the victim executes the call.  The attack succeeds when the victim's
// predicted target is the attacker's function.  10000 iterations.
// PHT attack: attacker commits 40 not-taken outcomes of a shared
// conditional branch, a context switch follows, and the victim (whose real
// outcome is taken) asks for a prediction; one iteration is 100 such
// attempts and succeeds when more than 90 of the victim's predictions are
// the trained direction.  100 iterations.
// Controls with the same training but no switch (same key) must succeed
// nearly always, which shows that the training itself works.
// Checked: no BTB attack succeeds, at most 1 % of PHT iterations succeed,
// the controls succeed in more than 90 % of the cases.
module tb_xbp_attack;
  import xbp_pkg::*;

  localparam int unsigned AW = 32, GW = 130;
  localparam logic [AW-1:0] CALL_PC = 32'h8000_2010;   // p() in shared_interface
  localparam logic [AW-1:0] ATTACKER_FN = 32'h8000_6000;
  localparam logic [AW-1:0] VICTIM_FN = 32'h8000_7000;
  localparam logic [AW-1:0] BR_PC = 32'h8000_3024;     // if (i < array_size)

  logic          clk = 1'b0, rst_n;
  logic [0:0]    ctx_switch, priv_switch;
  logic          rng_valid, rng_ready;
  logic [63:0]   rng_data;
  logic [0:0]    pr_tid, bu_tid, pu_tid;
  logic [AW-1:0] pr_pc, pr_target, pr_next_pc, bu_pc, bu_target, pu_pc;
  logic          pr_ready, pr_btb_hit, pr_taken;
  br_type_e      pr_type, bu_type;
  logic [2:0]    pr_provider;
  logic [1:0]    pr_base_ctr, pu_base_ctr;
  logic [GW-1:0] pr_ghr, pu_ghr;
  logic          bu_valid, pu_valid, pu_pred, pu_taken, ev_alloc, ev_alloc_fail;

  xbp_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign rng_valid = 1'b1;
  always @(posedge clk) rng_data <= {$urandom, $urandom};

  task automatic switch_context();
    ctx_switch = 1;
    @(posedge clk); @(negedge clk);
    ctx_switch = 0;
    while (!pr_ready) begin @(posedge clk); @(negedge clk); end
  endtask

  // one executed branch: predict, then train as the core would at commit
  task automatic exec_branch(input logic [AW-1:0] pc, input br_type_e ty, input bit taken,
                             input logic [AW-1:0] target, output logic [AW-1:0] next_pred,
                             output bit dir_pred);
    pr_pc = pc;
    #1;
    next_pred = pr_next_pc;
    dir_pred  = pr_taken;
    bu_valid  = taken && (!pr_btb_hit || pr_target != target);
    bu_pc = pc; bu_target = target; bu_type = ty;
    pu_valid  = ty == BR_COND;
    pu_pc = pc; pu_ghr = pr_ghr; pu_base_ctr = pr_base_ctr; pu_pred = pr_taken; pu_taken = taken;
    @(posedge clk); @(negedge clk);
    bu_valid = 0; pu_valid = 0;
  endtask

  int btb_success, btb_control, pht_success, pht_control;
  logic [AW-1:0] np;
  bit dp;

  initial begin
    rst_n = 0; ctx_switch = 0; priv_switch = 0; bu_valid = 0; pu_valid = 0;
    pr_tid = 0; bu_tid = 0; pu_tid = 0; pr_pc = 0; bu_pc = 0; bu_target = 0; bu_type = BR_COND;
    pu_pc = 0; pu_ghr = 0; pu_base_ctr = 0; pu_pred = 0; pu_taken = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk);
    while (!pr_ready) begin @(posedge clk); @(negedge clk); end

    // ---- BTB attack ----
    btb_success = 0; btb_control = 0;
    for (int it = 0; it < 10000; it++) begin
      exec_branch(CALL_PC, BR_IND, 1, ATTACKER_FN, np, dp);        // train
      exec_branch(CALL_PC, BR_IND, 1, ATTACKER_FN, np, dp);
      // control: same context predicts the trained target
      pr_pc = CALL_PC; #1;
      if (pr_next_pc == ATTACKER_FN) btb_control++;
      switch_context();
      exec_branch(CALL_PC, BR_IND, 1, VICTIM_FN, np, dp);          // victim
      if (np == ATTACKER_FN) btb_success++;
      switch_context();
    end
    $display("BTB attack: %0d of 10000 iterations steered the victim (control %0d)", btb_success, btb_control);
    check(btb_success == 0, "BTB attack never succeeds");
    check(btb_control > 9000, "BTB training works without a key change");

    // ---- PHT attack ----
    pht_success = 0; pht_control = 0;
    for (int it = 0; it < 100; it++) begin
      int follow, follow_ctl;
      follow = 0; follow_ctl = 0;
      for (int a = 0; a < 100; a++) begin
        for (int k = 0; k < 40; k++) exec_branch(BR_PC, BR_COND, 0, BR_PC + 64, np, dp);
        pr_pc = BR_PC; #1;
        if (!pr_taken) follow_ctl++;
        switch_context();
        exec_branch(BR_PC, BR_COND, 1, BR_PC + 64, np, dp);        // victim
        if (!dp) follow++;
        switch_context();
      end
      if (follow > 90) pht_success++;
      if (follow_ctl > 90) pht_control++;
    end
    $display("PHT attack: %0d of 100 iterations succeeded (control %0d)", pht_success, pht_control);
    check(pht_success <= 1, "PHT attack succeeds in at most 1 % of iterations");
    check(pht_control > 90, "PHT training works without a key change");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
