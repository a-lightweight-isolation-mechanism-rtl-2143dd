// xbp_btb -- Noisy-XOR-BTB: branch target buffer with encoded content and a
// randomised index.
//
// A WAYS-way set-associative BTB with SETS sets.  Each entry holds Valid,
// Type, Tag and Target.  Relative to a plain BTB two things are added:
//   * content encoding: the tag (the PC bits above the set index) and the
//     target address are XORed with the thread's content key before they are
//     written, and a lookup compares the stored tag with PC-tag XOR key and
//     XORs the stored target with the key again to recover it.  A thread
//     that holds a different key (another thread, or the same thread after a
//     context or privilege switch) almost never hits, and if it does it
//     reads a scrambled target.
//   * index encoding (INDEX_ENC = 1): the set index is the PC's index bits
//     XOR the thread's index key, so the set a branch lands in is unknown to
//     other threads.  With INDEX_ENC = 0 the block is the plain XOR-BTB.
// Valid and Type are stored in the clear.
//
// Interface and timing:
//   lk_*   lookup port, combinational: lk_hit/lk_target/lk_type describe the
//          entry for (lk_tid, lk_pc) in the same cycle.
//   up_*   update port, written at the clock edge.  If the branch already
//          has an entry (same set, same encoded tag) that entry is
//          rewritten, otherwise an invalid way is filled or, with all ways
//          valid, the set's round-robin victim is replaced.
// The caller decides when to update (the paper updates on a target
// misprediction of a resolved branch).
//
// Following the paper: the entry fields, which fields are encoded, the
// XOR operations and where they sit (Fig. 4a), 256 sets x 2 ways.  This
// design's choices: 32-bit addresses with 2 ignored offset bits (so a 22-bit
// tag), the content key's low TAG_W bits as the tag key, the round-robin
// replacement and the combinational read.
module xbp_btb
  import xbp_pkg::*;
#(
  parameter int unsigned NTHREADS  = 1,
  parameter int unsigned SETS      = 256,
  parameter int unsigned WAYS      = 2,
  parameter int unsigned VADDR_W   = 32,
  parameter int unsigned OFF_W     = 2,
  parameter bit          INDEX_ENC = 1'b1,
  localparam int unsigned TID_W    = (NTHREADS > 1) ? $clog2(NTHREADS) : 1,
  localparam int unsigned IDX_W    = $clog2(SETS),
  localparam int unsigned TAG_W    = VADDR_W - IDX_W - OFF_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  key_t                key [NTHREADS],
  // lookup
  input  logic [TID_W-1:0]    lk_tid,
  input  logic [VADDR_W-1:0]  lk_pc,
  output logic                lk_hit,
  output logic [VADDR_W-1:0]  lk_target,
  output br_type_e            lk_type,
  // update
  input  logic                up_valid,
  input  logic [TID_W-1:0]    up_tid,
  input  logic [VADDR_W-1:0]  up_pc,
  input  logic [VADDR_W-1:0]  up_target,
  input  br_type_e            up_type
);

  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    br_type_e            btype;
    logic [TAG_W-1:0]    tag;      // encoded
    logic [VADDR_W-1:0]  target;   // encoded
  } entry_t;

  logic               valid_q [SETS][WAYS];
  entry_t             entry_q [SETS][WAYS];
  logic [WAY_W-1:0]   victim_q [SETS];

  // ---- key slices --------------------------------------------------------
  function automatic logic [IDX_W-1:0] set_index(input logic [VADDR_W-1:0] pc, input key_t k);
    logic [IDX_W-1:0] raw;
    raw = pc[OFF_W +: IDX_W];
    return INDEX_ENC ? (raw ^ k.ikey[IDX_W-1:0]) : raw;
  endfunction

  function automatic logic [TAG_W-1:0] enc_tag(input logic [VADDR_W-1:0] pc, input key_t k);
    return pc[VADDR_W-1 -: TAG_W] ^ k.ckey[TAG_W-1:0];
  endfunction

  function automatic logic [VADDR_W-1:0] xor_target(input logic [VADDR_W-1:0] t, input key_t k);
    return t ^ k.ckey[VADDR_W-1:0];
  endfunction

  // ---- lookup ------------------------------------------------------------
  key_t             lk_key;
  logic [IDX_W-1:0] lk_set;
  logic [TAG_W-1:0] lk_tag;

  always_comb begin
    lk_key    = key[lk_tid];
    lk_set    = set_index(lk_pc, lk_key);
    lk_tag    = enc_tag(lk_pc, lk_key);
    lk_hit    = 1'b0;
    lk_target = '0;
    lk_type   = BR_COND;
    for (int w = 0; w < WAYS; w++) begin
      if (!lk_hit && valid_q[lk_set][w] && entry_q[lk_set][w].tag == lk_tag) begin
        lk_hit    = 1'b1;
        lk_target = xor_target(entry_q[lk_set][w].target, lk_key);
        lk_type   = entry_q[lk_set][w].btype;
      end
    end
  end

  // ---- update ------------------------------------------------------------
  key_t             up_key;
  logic [IDX_W-1:0] up_set;
  logic [TAG_W-1:0] up_tag;
  logic             up_match, up_free;
  logic [WAY_W-1:0] up_way, free_way;

  always_comb begin
    up_key   = key[up_tid];
    up_set   = set_index(up_pc, up_key);
    up_tag   = enc_tag(up_pc, up_key);
    up_match = 1'b0;
    up_free  = 1'b0;
    up_way   = '0;
    free_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!up_match && valid_q[up_set][w] && entry_q[up_set][w].tag == up_tag) begin
        up_match = 1'b1;
        up_way   = WAY_W'(w);
      end
      if (!up_free && !valid_q[up_set][w]) begin
        up_free  = 1'b1;
        free_way = WAY_W'(w);
      end
    end
    if (!up_match) up_way = up_free ? free_way : victim_q[up_set];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        victim_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) valid_q[s][w] <= 1'b0;
      end
    end else if (up_valid) begin
      valid_q[up_set][up_way] <= 1'b1;
      if (!up_match && !up_free)
        victim_q[up_set] <= (victim_q[up_set] == WAY_W'(WAYS - 1)) ? '0 : victim_q[up_set] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (up_valid) begin
      entry_q[up_set][up_way] <= '{btype:  up_type,
                                   tag:    up_tag,
                                   target: xor_target(up_target, up_key)};
    end
  end

endmodule
