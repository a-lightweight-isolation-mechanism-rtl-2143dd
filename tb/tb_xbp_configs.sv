// tb_xbp_configs -- the predictor at the other table sizes of its area and
// timing study: BTB of 2 x 128, 2 x 256 and 2 x 512 entries, TAGE tables of
// 1024, 2048 and 4096 entries.  Three instances of xbp_top, one per size
// pair (128/1024, 256/2048, 512/4096), receive the same stimulus.
//
// For each instance:
//   1. 128 indirect branches at consecutive word addresses (so they fall into
//      distinct BTB sets under any index key) are written into the BTB; every
//      one must then hit with its own target and type;
//   2. after a context switch and key refill, at most one of them may hit
//      (a chance tag match under the new key); a hit must not return the
//      real target;
//   3. the branches are written again under the new key and must all hit;
//   4. one conditional branch with the repeating outcome 0,0,1,1,1 is
//      predicted and trained 600 times; of the last 200 predictions at
//      least 95 % must be correct, and some must come from a tagged table.
module tb_xbp_configs;
  import xbp_pkg::*;

  localparam int unsigned AW = 32, GW = 130, NCFG = 3, NBR = 128;
  localparam int unsigned BTB_SETS_C [NCFG] = '{128, 256, 512};
  localparam int unsigned TAGE_ENT_C [NCFG] = '{1024, 2048, 4096};

  logic          clk = 1'b0, rst_n;
  logic [0:0]    ctx_switch, priv_switch;
  logic          rng_valid;
  logic [63:0]   rng_data;
  logic [0:0]    pr_tid, bu_tid, pu_tid;
  logic [AW-1:0] pr_pc, bu_pc, bu_target, pu_pc;
  br_type_e      bu_type;
  logic          bu_valid, pu_valid, pu_taken;
  logic          pu_pred     [NCFG];
  logic [1:0]    pu_base_ctr [NCFG];
  logic [GW-1:0] pu_ghr;

  // per-instance outputs
  logic          rng_ready  [NCFG];
  logic          pr_ready   [NCFG], pr_btb_hit [NCFG], pr_taken [NCFG];
  logic [AW-1:0] pr_target  [NCFG], pr_next_pc [NCFG];
  br_type_e      pr_type    [NCFG];
  logic [2:0]    pr_provider[NCFG];
  logic [1:0]    pr_base_ctr[NCFG];
  logic [GW-1:0] pr_ghr     [NCFG];
  logic          ev_alloc   [NCFG], ev_alloc_fail [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_dut
    xbp_top #(.BTB_SETS(BTB_SETS_C[c]), .TAGE_ENTRIES(TAGE_ENT_C[c])) dut (
      .clk, .rst_n, .ctx_switch, .priv_switch, .rng_valid, .rng_data,
      .rng_ready     (rng_ready[c]),
      .pr_tid, .pr_pc,
      .pr_ready      (pr_ready[c]),
      .pr_btb_hit    (pr_btb_hit[c]),
      .pr_target     (pr_target[c]),
      .pr_type       (pr_type[c]),
      .pr_taken      (pr_taken[c]),
      .pr_provider   (pr_provider[c]),
      .pr_base_ctr   (pr_base_ctr[c]),
      .pr_ghr        (pr_ghr[c]),
      .pr_next_pc    (pr_next_pc[c]),
      .bu_valid, .bu_tid, .bu_pc, .bu_target, .bu_type,
      .pu_valid, .pu_tid, .pu_pc, .pu_ghr,
      .pu_base_ctr   (pu_base_ctr[c]),
      .pu_pred       (pu_pred[c]),
      .pu_taken,
      .ev_alloc      (ev_alloc[c]),
      .ev_alloc_fail (ev_alloc_fail[c])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit [AW-1:0] tgt [NBR];
  localparam bit [AW-1:0] BASE = 32'h8000_2000, CPC = 32'h8000_7f40;

  function automatic bit all_ready();
    for (int c = 0; c < NCFG; c++) if (!pr_ready[c]) return 1'b0;
    return 1'b1;
  endfunction

  task automatic step();
    @(posedge clk);
    @(negedge clk);
  endtask

  task automatic refill();
    int w;
    w = 0;
    rng_valid = 1'b1;
    #1;
    while (!all_ready() && w < 10) begin
      rng_data = {$urandom, $urandom};
      step();
      #1;
      w++;
    end
    rng_valid = 1'b0;
    check(all_ready(), "key refilled");
  endtask

  task automatic train_btb();
    for (int i = 0; i < NBR; i++) begin
      bu_valid = 1'b1; bu_pc = BASE + 32'(4 * i); bu_target = tgt[i]; bu_type = BR_IND;
      step();
    end
    bu_valid = 1'b0;
  endtask

  task automatic probe_btb(input bit expect_hit, input string phase);
    int hits [NCFG];
    for (int c = 0; c < NCFG; c++) hits[c] = 0;
    for (int i = 0; i < NBR; i++) begin
      pr_pc = BASE + 32'(4 * i);
      #1;
      for (int c = 0; c < NCFG; c++) begin
        if (pr_btb_hit[c]) hits[c]++;
        if (expect_hit)
          check(pr_btb_hit[c] && pr_target[c] == tgt[i] && pr_type[c] == BR_IND &&
                pr_next_pc[c] == tgt[i],
                $sformatf("cfg %0d %s: branch %0d hits with its target", c, phase, i));
        else
          check(!pr_btb_hit[c] || pr_target[c] != tgt[i],
                $sformatf("cfg %0d %s: old target unreadable for branch %0d", c, phase, i));
      end
      step();
    end
    if (!expect_hit)
      for (int c = 0; c < NCFG; c++)
        check(hits[c] <= 1, $sformatf("cfg %0d %s: %0d stale hits", c, phase, hits[c]));
  endtask

  int correct [NCFG], n_tagged [NCFG];
  bit outcome;

  initial begin
    rst_n = 0; ctx_switch = 0; priv_switch = 0; rng_valid = 0; rng_data = 0;
    pr_tid = 0; bu_tid = 0; pu_tid = 0; pr_pc = 0;
    bu_valid = 0; bu_pc = 0; bu_target = 0; bu_type = BR_COND;
    pu_valid = 0; pu_pc = 0; pu_ghr = 0; pu_taken = 0;
    for (int c = 0; c < NCFG; c++) begin pu_base_ctr[c] = 0; pu_pred[c] = 0; end
    for (int i = 0; i < NBR; i++) tgt[i] = {$urandom} & ~32'h3;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk);

    refill();
    train_btb();
    probe_btb(1'b1, "trained");

    ctx_switch = 1'b1;
    step();
    ctx_switch = 1'b0;
    refill();
    probe_btb(1'b0, "after switch");
    train_btb();
    probe_btb(1'b1, "retrained");

    // direction: pattern 0,0,1,1,1
    for (int c = 0; c < NCFG; c++) begin correct[c] = 0; n_tagged[c] = 0; end
    for (int n = 0; n < 600; n++) begin
      outcome = (n % 5) >= 2;
      pr_pc = CPC;
      #1;
      if (n >= 400)
        for (int c = 0; c < NCFG; c++) begin
          if (pr_taken[c] == outcome) correct[c]++;
          if (pr_provider[c] != 3'd6) n_tagged[c]++;
        end
      // all instances see the same outcomes, so their histories agree
      for (int c = 1; c < NCFG; c++) check(pr_ghr[c] == pr_ghr[0], "histories agree");
      pu_valid = 1'b1; pu_pc = CPC; pu_ghr = pr_ghr[0]; pu_taken = outcome;
      for (int c = 0; c < NCFG; c++) begin
        pu_base_ctr[c] = pr_base_ctr[c];
        pu_pred[c]     = pr_taken[c];
      end
      step();
      pu_valid = 1'b0;
    end
    for (int c = 0; c < NCFG; c++) begin
      $display("cfg %0d (BTB 2 x %0d, TAGE %0d): %0d/200 correct, %0d tagged",
               c, BTB_SETS_C[c], TAGE_ENT_C[c], correct[c], n_tagged[c]);
      check(correct[c] >= 190, $sformatf("cfg %0d learns the pattern", c));
      check(n_tagged[c] > 0, $sformatf("cfg %0d uses a tagged table", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
