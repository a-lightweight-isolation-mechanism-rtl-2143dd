// tb_xbp_top -- end-to-end test of the isolated branch predictor at its
// default size (one thread, 256 x 2 BTB, 6 x 4096 TAGE, 4096 base).
//
// A small synthetic program of 12 branches (conditional branches with
// repeating outcome patterns, direct jumps, indirect jumps with a fixed
// target) is executed repeatedly.  The testbench plays the core: it asks
// for a prediction, compares pr_next_pc with the real next PC, trains the
// BTB when the target was wrong and trains the TAGE at commit with the
// metadata kept from prediction time.  Every 600 branches a privilege
// switch and every 3000 a context switch happen; the random number source
// is valid only half the time, so key refills stall for a varying number
// of cycles.
// Checked:
//   * a BTB hit always returns the branch's real target;
//   * while the key is stale the predictor reports no hit and pc + 4, and
//     it stalls no longer than the random source leaves it waiting;
//   * after every key change, no branch hits in the BTB on its first
//     lookup (the entries written under the old key are unreadable);
//   * after warm-up, each interval between switches reaches at least 80 %
//     correct next-PC predictions.
// Each mechanism (context switch, privilege switch, refill stall, BTB hit,
// BTB miss with fall-through, TAGE tagged prediction, allocation, failed
// allocation, dropped update) is counted and must occur.
module tb_xbp_top;
  import xbp_pkg::*;

  localparam int unsigned AW = 32, GW = 130;

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
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // mechanism counters
  int n_ctx = 0, n_priv = 0, n_stall = 0, n_hit = 0, n_miss = 0, n_tagged = 0;
  int n_alloc = 0, n_fail = 0, n_drop = 0, n_first_hit = 0;
  always @(posedge clk) begin
    if (ev_alloc) n_alloc++;
    if (ev_alloc_fail) n_fail++;
  end

  // the program
  typedef struct {
    bit [AW-1:0] pc;
    br_type_e    ty;
    bit [AW-1:0] target;
    bit [7:0]    pattern;   // outcome pattern of a conditional branch
    int          period;
  } br_t;
  br_t prog [12];
  int  occ  [12];
  bit  seen [12];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random number source: valid half of the time
  always @(negedge clk) begin
    rng_valid <= ($urandom % 2) == 0;
    rng_data  <= {$urandom, $urandom};
  end

  task automatic wait_ready();
    int w;
    w = 0;
    pr_tid = 0;
    #1;
    while (!pr_ready) begin
      n_stall++;
      check(!pr_btb_hit && pr_next_pc == pr_pc + 4, "stale key: no hit, fall-through");
      // a branch resolving now must not train the tables
      bu_valid = 1; bu_tid = 0; bu_pc = prog[0].pc; bu_target = 32'hdead_0000; bu_type = BR_IND;
      n_drop++;
      @(posedge clk);
      @(negedge clk);
      bu_valid = 0;
      w++;
      check(w < 200, "refill completes");
      #1;
    end
  endtask

  int correct, total, interval;
  bit          actual_taken;
  bit [AW-1:0] actual_next;

  initial begin
    rst_n = 0; ctx_switch = 0; priv_switch = 0; bu_valid = 0; pu_valid = 0;
    bu_tid = 0; pu_tid = 0; pr_tid = 0; pr_pc = 0; bu_pc = 0; bu_target = 0; bu_type = BR_COND;
    pu_pc = 0; pu_ghr = 0; pu_base_ctr = 0; pu_pred = 0; pu_taken = 0;
    for (int i = 0; i < 12; i++) begin
      prog[i].pc      = 32'h8000_0000 + 32'(i * 52);
      prog[i].ty      = (i % 4 == 0) ? BR_IND : (i % 4 == 1) ? BR_JUMP : BR_COND;
      prog[i].target  = 32'h8001_0000 + 32'(i * 256);
      prog[i].pattern = 8'($urandom);
      prog[i].period  = 2 + i % 5;
      occ[i] = 0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk);

    correct = 0; total = 0; interval = 0;
    for (int n = 0; n < 30000; n++) begin
      int b;
      b = n % 12;
      // switches
      if (n > 0 && n % 3000 == 0) begin ctx_switch = 1; n_ctx++; end
      else if (n > 0 && n % 600 == 0) begin priv_switch = 1; n_priv++; end
      if (ctx_switch || priv_switch) begin
        @(posedge clk);
        @(negedge clk);
        ctx_switch = 0; priv_switch = 0;
        if (interval > 400) check(correct * 10 >= total * 8,
                                  $sformatf("accuracy %0d/%0d in interval", correct, total));
        correct = 0; total = 0; interval = 0;
        for (int i = 0; i < 12; i++) seen[i] = 0;
      end
      pr_pc = prog[b].pc;
      wait_ready();
      // real outcome
      actual_taken = (prog[b].ty != BR_COND) ? 1'b1 : prog[b].pattern[occ[b] % prog[b].period];
      actual_next  = actual_taken ? prog[b].target : prog[b].pc + 4;
      occ[b]++;
      // checks on the prediction
      if (pr_btb_hit) begin
        n_hit++;
        check(pr_target == prog[b].target && pr_type == prog[b].ty, "BTB returns the real target");
        if (!seen[b] && n >= 600) n_first_hit++;
      end else begin
        n_miss++;
        check(pr_next_pc == pr_pc + 4, "BTB miss falls through");
      end
      seen[b] = 1;
      if (pr_provider != 3'd6) n_tagged++;
      if (n % 600 > 100) begin
        total++;
        if (pr_next_pc == actual_next) correct++;
      end
      interval++;
      // commit
      bu_valid  = actual_taken && (!pr_btb_hit || pr_target != prog[b].target);
      bu_tid = 0; bu_pc = prog[b].pc; bu_target = prog[b].target; bu_type = prog[b].ty;
      pu_valid  = prog[b].ty == BR_COND;
      pu_tid = 0; pu_pc = prog[b].pc; pu_ghr = pr_ghr; pu_base_ctr = pr_base_ctr;
      pu_pred = pr_taken; pu_taken = actual_taken;
      @(posedge clk);
      @(negedge clk);
      bu_valid = 0; pu_valid = 0;
    end

    check(n_first_hit == 0, $sformatf("%0d first lookups hit after a key change", n_first_hit));
    $display("context switches %0d, privilege switches %0d, stall cycles %0d, dropped updates %0d",
             n_ctx, n_priv, n_stall, n_drop);
    $display("BTB hits %0d, misses %0d, tagged predictions %0d, allocations %0d, failed allocations %0d",
             n_hit, n_miss, n_tagged, n_alloc, n_fail);
    check(n_ctx > 0, "context switch happened");
    check(n_priv > 0, "privilege switch happened");
    check(n_stall > 0, "refill stall happened");
    check(n_drop > 0, "update dropped while stale");
    check(n_hit > 0 && n_miss > 0, "BTB hit and miss happened");
    check(n_tagged > 0, "tagged TAGE prediction happened");
    check(n_alloc > 0, "TAGE allocation happened");
    check(n_fail > 0, "TAGE failed allocation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
