// xbp_tage -- TAGE direction predictor protected by Noisy-XOR-PHT.
//
// A TAGE predictor: a bimodal base table and NTABLES tagged tables indexed
// by hashes of the PC and of geometrically longer slices of the global
// history (12, 27, 44, 63, 90 and 130 branches).  The prediction comes from
// the tagged table with the longest history whose tag matches (the
// provider), or from the base table if none matches.
//
// Isolation is added exactly as for the simple PHT:
//   * index encoding (INDEX_ENC = 1): the PC is XORed with the thread's
//     index key before it enters every index and tag hash, and the base
//     table XORs its index with the key as well;
//   * content encoding: every prediction counter is stored XORed with a
//     slice of the thread's content key.  The slice depends on the low three
//     index bits (ENHANCED = 1), so neighbouring entries use different key
//     bits; with ENHANCED = 0 every counter uses key bits [2:0].  Tags and
//     useful bits are stored in the clear, as in the encoded TAGE the
//     design follows.  The base table is xbp_pht in its bimodal form.
// A key change therefore makes the thread's trained counters read as noise
// and moves its branches to other entries; nothing is flushed.
//
// Update, at commit (up_*): the tagged tables are read again with the
// committed branch's PC and history snapshot, the provider's counter is
// decoded, advanced, re-encoded with the current key and written back (the
// read-decode-update-encode path for tables without a reorder-buffer copy);
// the base counter comes back from the branch reorder buffer (up_base_ctr)
// as in xbp_pht.  Policy: the provider's useful counter moves up when it
// was right and the alternate prediction wrong, down in the opposite case;
// with no provider the base table is trained; on a misprediction one entry
// is allocated in the lowest longer-history table whose useful counter is
// zero (tag, weak counter, u = 0), and if there is none the useful counters
// of all longer tables are decremented.
//
// Interface and timing: prediction is combinational (pr_*); pr_ghr and
// pr_base_ctr must be kept with the branch and returned at update.  Updates
// are written at the clock edge, at most one per cycle.  The tables are not
// reset; the per-thread history registers are.
//
// Following the paper: six tables of 4096 entries with histories 12, 27,
// 44, 63, 90, 130 (FPGA prototype), the index key XORed into the PC ahead of
// the hash functions and the content key XORed onto the counters (Fig. 6b).
// This design's choices: 3-bit counters, 2-bit useful counters and 6-bit
// tags (which give exactly the 33 KB the prototype quotes), the 4096-entry
// bimodal base, the hash functions, commit-time history, and the
// simplified policy above (no alternate-on-new-entry counter and no
// periodic useful-bit aging).
module xbp_tage
  import xbp_pkg::*;
#(
  parameter int unsigned NTHREADS     = 1,
  parameter int unsigned NTABLES      = 6,
  parameter int unsigned TBL_ENTRIES  = 4096,
  parameter int unsigned HIST_LENS [NTABLES] = '{12, 27, 44, 63, 90, 130},
  parameter int unsigned TAG_W        = 6,
  parameter int unsigned BASE_ENTRIES = 4096,
  parameter int unsigned VADDR_W      = 32,
  parameter int unsigned OFF_W        = 2,
  parameter bit          INDEX_ENC    = 1'b1,
  parameter bit          ENHANCED     = 1'b1,
  localparam int unsigned TID_W       = (NTHREADS > 1) ? $clog2(NTHREADS) : 1,
  localparam int unsigned GHR_W       = HIST_LENS[NTABLES-1],
  localparam int unsigned PROV_W      = $clog2(NTABLES + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  key_t                key [NTHREADS],
  // prediction
  input  logic [TID_W-1:0]    pr_tid,
  input  logic [VADDR_W-1:0]  pr_pc,
  output logic                pr_taken,
  output logic [PROV_W-1:0]   pr_provider,  // providing table, NTABLES = base
  output logic [1:0]          pr_base_ctr,  // kept by the BROB
  output logic [GHR_W-1:0]    pr_ghr,       // kept by the BROB
  // commit-time update
  input  logic                up_valid,
  input  logic [TID_W-1:0]    up_tid,
  input  logic [VADDR_W-1:0]  up_pc,
  input  logic [GHR_W-1:0]    up_ghr,
  input  logic [1:0]          up_base_ctr,
  input  logic                up_pred,      // final prediction made
  input  logic                up_taken,
  // events, for performance counting
  output logic                ev_alloc,     // an entry was allocated
  output logic                ev_alloc_fail // no free entry: u decremented
);

  localparam int unsigned IDX_W = $clog2(TBL_ENTRIES);
  localparam int unsigned CTR_W = 3;
  localparam int unsigned U_W   = 2;

  typedef struct packed {
    logic [CTR_W-1:0] ctr;   // encoded
    logic [TAG_W-1:0] tag;
    logic [U_W-1:0]   u;
  } entry_t;

  // ---- hashing -----------------------------------------------------------
  function automatic logic [31:0] fold(input logic [GHR_W-1:0] h, input int unsigned len,
                                       input int unsigned w);
    logic [31:0] r;
    r = '0;
    for (int unsigned i = 0; i < GHR_W; i++)
      if (i < len) r[i % w] = r[i % w] ^ h[i];
    return r;
  endfunction

  function automatic logic [VADDR_W-1:0] key_pc(input logic [VADDR_W-1:0] pc, input key_t k);
    return INDEX_ENC ? (pc ^ VADDR_W'(k.ikey)) : pc;
  endfunction

  function automatic logic [IDX_W-1:0] t_index(input logic [VADDR_W-1:0] pcx,
                                               input logic [GHR_W-1:0] h, input int unsigned t);
    return pcx[OFF_W +: IDX_W] ^ pcx[OFF_W + IDX_W +: IDX_W] ^ IDX_W'(t)
           ^ IDX_W'(fold(h, HIST_LENS[t], IDX_W));
  endfunction

  function automatic logic [TAG_W-1:0] t_tag(input logic [VADDR_W-1:0] pcx,
                                             input logic [GHR_W-1:0] h, input int unsigned t);
    return pcx[OFF_W +: TAG_W] ^ TAG_W'(fold(h, HIST_LENS[t], TAG_W))
           ^ TAG_W'(fold(h, HIST_LENS[t], TAG_W - 1) << 1);
  endfunction

  function automatic logic [CTR_W-1:0] ctr_key(input logic [IDX_W-1:0] idx, input key_t k);
    return ENHANCED ? k.ckey[CTR_W*idx[2:0] +: CTR_W] : k.ckey[CTR_W-1:0];
  endfunction

  function automatic logic [CTR_W-1:0] sat3(input logic [CTR_W-1:0] c, input logic t);
    if (t) return (c == '1) ? c : c + 1'b1;
    return (c == '0) ? c : c - 1'b1;
  endfunction

  // ---- per-thread global history -----------------------------------------
  logic [GHR_W-1:0] ghr_q [NTHREADS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NTHREADS; t++) ghr_q[t] <= '0;
    end else if (up_valid) begin
      ghr_q[up_tid] <= {ghr_q[up_tid][GHR_W-2:0], up_taken};
    end
  end

  // ---- tables ------------------------------------------------------------
  key_t              pr_key, up_key;
  logic [VADDR_W-1:0] pr_pcx, up_pcx;
  logic [IDX_W-1:0]  pr_idx [NTABLES], up_idx [NTABLES];
  entry_t            pr_ent [NTABLES], up_ent [NTABLES];
  logic              wr_en  [NTABLES];
  entry_t            wr_ent [NTABLES];

  assign pr_key = key[pr_tid];
  assign up_key = key[up_tid];
  assign pr_pcx = key_pc(pr_pc, pr_key);
  assign up_pcx = key_pc(up_pc, up_key);
  assign pr_ghr = ghr_q[pr_tid];

  for (genvar t = 0; t < NTABLES; t++) begin : g_tbl
    entry_t mem [TBL_ENTRIES];
    assign pr_idx[t] = t_index(pr_pcx, pr_ghr, t);
    assign up_idx[t] = t_index(up_pcx, up_ghr, t);
    assign pr_ent[t] = mem[pr_idx[t]];
    assign up_ent[t] = mem[up_idx[t]];
    always_ff @(posedge clk) begin
      if (wr_en[t]) mem[up_idx[t]] <= wr_ent[t];
    end
  end

  // ---- base table (bimodal Noisy-XOR-PHT) ---------------------------------
  logic base_taken, base_up;
  logic base_ghr_unused;

  xbp_pht #(
    .NTHREADS(NTHREADS), .ENTRIES(BASE_ENTRIES), .VADDR_W(VADDR_W), .OFF_W(OFF_W),
    .INDEX_ENC(INDEX_ENC), .ENHANCED(ENHANCED), .HIST_LEN(0)
  ) u_base (
    .clk, .rst_n, .key,
    .pr_tid, .pr_pc, .pr_taken(base_taken), .pr_ctr(pr_base_ctr), .pr_ghr(base_ghr_unused),
    .up_valid(base_up), .up_tid, .up_pc, .up_ghr(1'b0), .up_ctr(up_base_ctr), .up_taken
  );

  // ---- prediction --------------------------------------------------------
  always_comb begin
    logic [CTR_W-1:0] c;
    pr_taken    = base_taken;
    pr_provider = PROV_W'(NTABLES);
    c           = '0;
    for (int t = 0; t < NTABLES; t++) begin
      if (pr_ent[t].tag == t_tag(pr_pcx, pr_ghr, t)) begin
        c           = pr_ent[t].ctr ^ ctr_key(pr_idx[t], pr_key);
        pr_taken    = c[CTR_W-1];
        pr_provider = PROV_W'(t);
      end
    end
  end

  // ---- update ------------------------------------------------------------
  logic             hit  [NTABLES];
  logic [CTR_W-1:0] dctr [NTABLES];   // decoded counters
  int               prov, alt;
  logic             prov_pred, alt_pred, free_found;

  always_comb begin
    prov = -1;
    alt  = -1;
    for (int t = 0; t < NTABLES; t++) begin
      hit[t]  = (up_ent[t].tag == t_tag(up_pcx, up_ghr, t));
      dctr[t] = up_ent[t].ctr ^ ctr_key(up_idx[t], up_key);
      if (hit[t]) begin
        alt  = prov;
        prov = t;
      end
    end
    alt_pred  = (alt >= 0) ? dctr[alt][CTR_W-1] : up_base_ctr[1];
    prov_pred = (prov >= 0) ? dctr[prov][CTR_W-1] : up_base_ctr[1];
    base_up   = up_valid && (prov < 0);

    free_found = 1'b0;
    for (int t = 0; t < NTABLES; t++) begin
      wr_en[t]  = 1'b0;
      wr_ent[t] = up_ent[t];
      if (t == prov) begin
        wr_en[t]      = up_valid;
        wr_ent[t].ctr = sat3(dctr[t], up_taken) ^ ctr_key(up_idx[t], up_key);
        if (prov_pred != alt_pred) begin
          if (prov_pred == up_taken) wr_ent[t].u = (up_ent[t].u == '1) ? up_ent[t].u : up_ent[t].u + 1'b1;
          else                       wr_ent[t].u = (up_ent[t].u == '0) ? up_ent[t].u : up_ent[t].u - 1'b1;
        end
      end else if (t > prov && up_pred != up_taken && !free_found && up_ent[t].u == '0) begin
        free_found = 1'b1;
        wr_en[t]   = up_valid;
        wr_ent[t]  = '{ctr: (up_taken ? CTR_W'(4) : CTR_W'(3)) ^ ctr_key(up_idx[t], up_key),
                       tag: t_tag(up_pcx, up_ghr, t),
                       u:   '0};
      end
    end
    // no free entry in any longer table: age them all
    if (up_pred != up_taken && !free_found) begin
      for (int t = 0; t < NTABLES; t++) begin
        if (t > prov && up_ent[t].u != '0) begin
          wr_en[t]    = up_valid;
          wr_ent[t].u = up_ent[t].u - 1'b1;
        end
      end
    end
  end

  assign ev_alloc      = up_valid && up_pred != up_taken && free_found;
  assign ev_alloc_fail = up_valid && up_pred != up_taken && !free_found && prov < NTABLES - 1;

endmodule
