// xbp_pht -- Noisy-XOR-PHT: a 2-bit counter table with encoded content and
// a randomised index (gshare form by default, bimodal with HIST_LEN = 0).
//
// A pattern history table of ENTRIES 2-bit saturating counters, indexed
// gshare-style by PC XOR a HIST_LEN-bit global history (GHR), or by the PC
// alone when HIST_LEN = 0 (the form used as the base table of xbp_tage).
// The table is stored as
// ENTRIES/16 rows of 32-bit words, 16 counters per word:
//   * content encoding (Enhanced-XOR-PHT): each stored word is the XOR of
//     its 16 counters with the thread's 32-bit content key, so counter i of a
//     word uses key bits [2i+1:2i] ("Key0".."Key15").  Neighbouring counters
//     use different key bits, which hides more than a single 2-bit key would.
//     With ENHANCED = 0 every counter uses key bits [1:0] (plain XOR-PHT).
//   * index encoding (INDEX_ENC = 1): the gshare index is XORed with the
//     thread's index key before it selects the row and the counter in it.
// Counter semantics are those of an ordinary 2-bit counter: predict taken
// when its upper bit is 1, count towards the resolved direction.
//
// Update follows the branch-reorder-buffer (BROB) variant: the decoded
// counter read at prediction travels with the branch (pr_ctr, pr_ghr) and
// comes back at commit on up_ctr/up_ghr.  The block advances the counter,
// encodes it with the committing thread's current key and writes the two
// bits back; the other 15 counters of the word are not touched, which is
// exact because XOR encodes bit by bit.  Each thread has its own GHR, shifted
// by the resolved direction of every committed conditional branch.
//
// Interface and timing:
//   pr_*   prediction port, combinational (same cycle).
//   up_*   commit-time update port, written at the clock edge; the thread's
//          GHR shifts at the same edge.
// The table itself is not reset (as an SRAM would not be); the GHRs are.
//
// Following the paper: gshare hash of GHR and PC, index key XORed after the
// hash, word-wise content encoding with one 2-bit key slice per counter,
// BROB-based update (Fig. 4b, Fig. 5), 4K counters as 256 x 32-bit words.
// This design's choices: a 12-bit GHR, the PC bits used, commit-time GHR
// update, and the key slices used.  With HIST_LEN = 0 the GHR is a constant
// zero and pr_ghr/up_ghr carry nothing.
module xbp_pht
  import xbp_pkg::*;
#(
  parameter int unsigned NTHREADS  = 1,
  parameter int unsigned ENTRIES   = 4096,
  parameter int unsigned VADDR_W   = 32,
  parameter int unsigned OFF_W     = 2,
  parameter bit          INDEX_ENC = 1'b1,
  parameter bit          ENHANCED  = 1'b1,
  parameter int unsigned HIST_LEN  = 12,
  localparam int unsigned TID_W    = (NTHREADS > 1) ? $clog2(NTHREADS) : 1,
  localparam int unsigned IDX_W    = $clog2(ENTRIES),
  localparam int unsigned HIST_W   = (HIST_LEN > 0) ? HIST_LEN : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  key_t                key [NTHREADS],
  // prediction
  input  logic [TID_W-1:0]    pr_tid,
  input  logic [VADDR_W-1:0]  pr_pc,
  output logic                pr_taken,
  output logic [1:0]          pr_ctr,    // decoded counter, kept by the BROB
  output logic [HIST_W-1:0]   pr_ghr,    // history used, kept by the BROB
  // commit-time update
  input  logic                up_valid,
  input  logic [TID_W-1:0]    up_tid,
  input  logic [VADDR_W-1:0]  up_pc,
  input  logic [HIST_W-1:0]   up_ghr,
  input  logic [1:0]          up_ctr,
  input  logic                up_taken
);

  localparam int unsigned WORD_W = 32;              // encoding word
  localparam int unsigned CTRS   = WORD_W / 2;      // counters per word
  localparam int unsigned COL_W  = $clog2(CTRS);
  localparam int unsigned ROWS   = ENTRIES / CTRS;
  localparam int unsigned ROW_W  = IDX_W - COL_W;

  logic [WORD_W-1:0] table_q [ROWS];

  if (HIST_LEN > IDX_W) begin : g_bad_hist
    $error("HIST_LEN must not exceed the index width");
  end
  logic [HIST_W-1:0] ghr_q   [NTHREADS];

  // Encoded table index: hash(GHR, PC), then XOR index key.
  function automatic logic [IDX_W-1:0] pht_index(input logic [VADDR_W-1:0] pc,
                                                 input logic [HIST_W-1:0]  ghr,
                                                 input key_t               k);
    logic [IDX_W-1:0] h;
    h = pc[OFF_W +: IDX_W];
    if (HIST_LEN > 0) h = h ^ IDX_W'(ghr);
    return INDEX_ENC ? (h ^ k.ikey[IDX_W-1:0]) : h;
  endfunction

  // Key slice for counter position col of a word.
  function automatic logic [1:0] ctr_key(input logic [COL_W-1:0] col, input key_t k);
    return ENHANCED ? k.ckey[2*col +: 2] : k.ckey[1:0];
  endfunction

  // ---- prediction --------------------------------------------------------
  key_t              pr_key;
  logic [IDX_W-1:0]  pr_idx;
  logic [WORD_W-1:0] pr_word;

  always_comb begin
    pr_key   = key[pr_tid];
    pr_ghr   = ghr_q[pr_tid];
    pr_idx   = pht_index(pr_pc, pr_ghr, pr_key);
    pr_word  = table_q[pr_idx[IDX_W-1 -: ROW_W]];
    pr_ctr   = pr_word[2*pr_idx[COL_W-1:0] +: 2] ^ ctr_key(pr_idx[COL_W-1:0], pr_key);
    pr_taken = pr_ctr[1];
  end

  // ---- update ------------------------------------------------------------
  key_t             up_key;
  logic [IDX_W-1:0] up_idx;
  logic [1:0]       up_new;

  always_comb begin
    up_key = key[up_tid];
    up_idx = pht_index(up_pc, up_ghr, up_key);
    up_new = sat2_next(up_ctr, up_taken) ^ ctr_key(up_idx[COL_W-1:0], up_key);
  end

  always_ff @(posedge clk) begin
    if (up_valid) table_q[up_idx[IDX_W-1 -: ROW_W]][2*up_idx[COL_W-1:0] +: 2] <= up_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NTHREADS; t++) ghr_q[t] <= '0;
    end else if (up_valid) begin
      ghr_q[up_tid] <= (HIST_LEN > 0) ? HIST_W'({ghr_q[up_tid], up_taken}) : '0;
    end
  end

endmodule
