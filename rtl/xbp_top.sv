// xbp_top -- Noisy-XOR-BP: a branch predictor whose tables are isolated
// between threads and privilege levels by thread-private keys.
//
// Three parts:
//   * xbp_key_manager  one random key per hardware thread, redrawn from an
//                      external random number generator on every context
//                      switch and privilege switch;
//   * xbp_btb          target predictor with XOR-encoded tag and target and
//                      a key-randomised set index (Noisy-XOR-BTB);
//   * xbp_tage         TAGE direction predictor (six tagged tables of 4096
//                      entries and a bimodal base table) whose counters are
//                      XOR-encoded and whose indices are key-randomised
//                      (Noisy-XOR-PHT); its base table is an xbp_pht.
// All tables receive the same per-thread keys.  INDEX_ENC = 0 turns the
// design into XOR-BP (content encoding only); ENHANCED = 0 makes the
// direction tables use one key slice for every counter instead of keys
// that vary from entry to entry.  The sizes are those of the FPGA prototype
// the scheme was measured on (256-set 2-way BTB, 6 x 4096-entry TAGE).
//
// Interface and timing:
//   pr_*   prediction, combinational.  pr_ready is low while the thread's
//          key is being redrawn; the predictor then reports a BTB miss and
//          a fall-through next PC.  pr_next_pc is the BTB target when the
//          BTB hits and the branch is unconditional or predicted taken,
//          otherwise pc + 4.  pr_base_ctr, pr_ghr and pr_taken go to the
//          core's branch reorder buffer and come back with the update.
//   bu_*   BTB update (typically on a target misprediction), clocked.
//   pu_*   direction-predictor update at commit, clocked.
//   ev_*   one-cycle event flags of the TAGE (entry allocated / allocation
//          failed), for performance counters.
//   Updates of a thread whose key is stale are dropped, so no entry is
//   ever written with a key the thread no longer owns.
//   rng_*  valid/ready handshake with the random number generator.
//
// Following the paper: the set of tables protected, one key pair per thread
// shared by all tables, key change on context and privilege switch, and
// the fall-through prediction on a BTB miss.  This design's choices: the
// stale-key stall, dropping updates of a stale thread, and the next-PC
// rule.
module xbp_top
  import xbp_pkg::*;
#(
  parameter int unsigned NTHREADS    = 1,
  parameter int unsigned BTB_SETS    = 256,
  parameter int unsigned BTB_WAYS    = 2,
  parameter int unsigned TAGE_ENTRIES = 4096,
  parameter int unsigned BASE_ENTRIES = 4096,
  parameter int unsigned VADDR_W     = 32,
  parameter bit          INDEX_ENC   = 1'b1,
  parameter bit          ENHANCED    = 1'b1,
  localparam int unsigned TID_W      = (NTHREADS > 1) ? $clog2(NTHREADS) : 1,
  localparam int unsigned NTABLES    = 6,
  localparam int unsigned GHR_W      = 130,
  localparam int unsigned PROV_W     = $clog2(NTABLES + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // thread events
  input  logic [NTHREADS-1:0] ctx_switch,
  input  logic [NTHREADS-1:0] priv_switch,
  // random number generator
  input  logic                rng_valid,
  input  logic [KEY_W-1:0]    rng_data,
  output logic                rng_ready,
  // prediction
  input  logic [TID_W-1:0]    pr_tid,
  input  logic [VADDR_W-1:0]  pr_pc,
  output logic                pr_ready,
  output logic                pr_btb_hit,
  output logic [VADDR_W-1:0]  pr_target,
  output br_type_e            pr_type,
  output logic                pr_taken,
  output logic [PROV_W-1:0]   pr_provider,
  output logic [1:0]          pr_base_ctr,
  output logic [GHR_W-1:0]    pr_ghr,
  output logic [VADDR_W-1:0]  pr_next_pc,
  // BTB update
  input  logic                bu_valid,
  input  logic [TID_W-1:0]    bu_tid,
  input  logic [VADDR_W-1:0]  bu_pc,
  input  logic [VADDR_W-1:0]  bu_target,
  input  br_type_e            bu_type,
  // direction-predictor update
  input  logic                pu_valid,
  input  logic [TID_W-1:0]    pu_tid,
  input  logic [VADDR_W-1:0]  pu_pc,
  input  logic [GHR_W-1:0]    pu_ghr,
  input  logic [1:0]          pu_base_ctr,
  input  logic                pu_pred,
  input  logic                pu_taken,
  // events
  output logic                ev_alloc,
  output logic                ev_alloc_fail
);

  key_t                key    [NTHREADS];
  logic [NTHREADS-1:0] key_ok;
  logic                btb_hit;

  xbp_key_manager #(.NTHREADS(NTHREADS)) u_keys (
    .clk, .rst_n, .ctx_switch, .priv_switch,
    .rng_valid, .rng_data, .rng_ready,
    .key, .key_ok
  );

  xbp_btb #(
    .NTHREADS(NTHREADS), .SETS(BTB_SETS), .WAYS(BTB_WAYS),
    .VADDR_W(VADDR_W), .INDEX_ENC(INDEX_ENC)
  ) u_btb (
    .clk, .rst_n, .key,
    .lk_tid(pr_tid), .lk_pc(pr_pc),
    .lk_hit(btb_hit), .lk_target(pr_target), .lk_type(pr_type),
    .up_valid(bu_valid && key_ok[bu_tid]), .up_tid(bu_tid), .up_pc(bu_pc),
    .up_target(bu_target), .up_type(bu_type)
  );

  xbp_tage #(
    .NTHREADS(NTHREADS), .TBL_ENTRIES(TAGE_ENTRIES), .BASE_ENTRIES(BASE_ENTRIES),
    .VADDR_W(VADDR_W), .INDEX_ENC(INDEX_ENC), .ENHANCED(ENHANCED)
  ) u_tage (
    .clk, .rst_n, .key,
    .pr_tid, .pr_pc, .pr_taken, .pr_provider, .pr_base_ctr, .pr_ghr,
    .up_valid(pu_valid && key_ok[pu_tid]), .up_tid(pu_tid), .up_pc(pu_pc),
    .up_ghr(pu_ghr), .up_base_ctr(pu_base_ctr), .up_pred(pu_pred), .up_taken(pu_taken),
    .ev_alloc, .ev_alloc_fail
  );

  assign pr_ready   = key_ok[pr_tid];
  assign pr_btb_hit = btb_hit && pr_ready;

  always_comb begin
    if (pr_btb_hit && (pr_type != BR_COND || pr_taken)) pr_next_pc = pr_target;
    else                                                pr_next_pc = pr_pc + VADDR_W'(4);
  end

endmodule
