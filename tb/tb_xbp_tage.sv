// tb_xbp_tage -- self-checking test of the Noisy-XOR TAGE predictor.
//
// Default geometry (6 x 4096 n_tagged entries, histories 12..130, 4096-entry
// base), two threads.
//  1. Model check: random predictions and commits from two threads with
//     occasional key changes, compared every cycle (prediction, provider,
//     base counter, history) with a reference model of the whole predictor
//     written out in this file.  The tables have no reset: the test fills
//     them with random contents (as at power-up) and the model copies them.
//  2. Learning: one branch with the repeating outcome pattern T,T,T,N,N is
//     committed 3000 times with its own history; over the last 500 the
//     prediction must be right at least 95 % of the time (a bimodal table
//     alone would manage 60 %).
//  3. Isolation: after the owning thread's key changes, the first 50
//     predictions of the same branch come from n_tagged tables at most a few
//     times (the trained entries are no longer found).
// Counts of allocations and failed allocations must both be non-zero.
module tb_xbp_tage;
  import xbp_pkg::*;

  localparam int unsigned NT = 2, NTAB = 6, N = 4096, IW = 12, TW = 6, AW = 32, OFF = 2;
  localparam int unsigned GW = 130;
  localparam int unsigned HL [NTAB] = '{12, 27, 44, 63, 90, 130};

  logic          clk = 1'b0, rst_n;
  key_t          key [NT];
  logic          pr_tid, up_valid, up_tid, up_pred, up_taken;
  logic [AW-1:0] pr_pc, up_pc;
  logic          pr_taken;
  logic [2:0]    pr_provider;
  logic [1:0]    pr_base_ctr, up_base_ctr;
  logic [GW-1:0] pr_ghr, up_ghr;
  logic          ev_alloc, ev_alloc_fail;

  int checks = 0, failures = 0, n_alloc = 0, n_fail = 0;

  xbp_tage #(.NTHREADS(NT)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (ev_alloc) n_alloc++;
    if (ev_alloc_fail) n_fail++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- reference model ----------------------------------------------------
  bit [2:0]    m_ctr [NTAB][N];   // encoded as stored
  bit [TW-1:0] m_tag [NTAB][N];
  bit [1:0]    m_u   [NTAB][N];
  bit [1:0]    m_base [N];        // encoded as stored
  bit [GW-1:0] m_ghr [NT];

  for (genvar t = 0; t < NTAB; t++) begin : g_copy
    // fill the table with random power-up contents, then copy them
    task automatic copy();
      for (int i = 0; i < N; i++) begin
        dut.g_tbl[t].mem[i] = 11'($urandom);
        {m_ctr[t][i], m_tag[t][i], m_u[t][i]} = dut.g_tbl[t].mem[i];
      end
    endtask
  end

  function automatic bit [31:0] mfold(input bit [GW-1:0] h, input int len, input int w);
    bit [31:0] r = 0;
    for (int i = 0; i < len; i++) r[i % w] ^= h[i];
    return r;
  endfunction
  function automatic bit [AW-1:0] mpcx(input bit [AW-1:0] pc, input key_t k);
    return pc ^ k.ikey;
  endfunction
  function automatic int midx(input bit [AW-1:0] x, input bit [GW-1:0] h, input int t);
    return int'(IW'(x >> OFF) ^ IW'(x >> (OFF + IW)) ^ IW'(t) ^ IW'(mfold(h, HL[t], IW)));
  endfunction
  function automatic bit [TW-1:0] mtagf(input bit [AW-1:0] x, input bit [GW-1:0] h, input int t);
    return TW'(x >> OFF) ^ TW'(mfold(h, HL[t], TW)) ^ TW'(mfold(h, HL[t], TW - 1) << 1);
  endfunction
  function automatic bit [2:0] mck(input int idx, input key_t k);
    return k.ckey[3 * (idx % 8) +: 3];
  endfunction
  function automatic int mbidx(input bit [AW-1:0] pc, input key_t k);
    return int'(IW'(pc >> OFF) ^ k.ikey[IW-1:0]);
  endfunction
  function automatic bit [1:0] mbk(input int idx, input key_t k);
    return k.ckey[2 * (idx % 16) +: 2];
  endfunction

  task automatic m_predict(input bit [AW-1:0] pc, input int tid,
                           output bit tk, output int prov, output bit [1:0] bctr);
    bit [AW-1:0] x;
    int bi;
    x = mpcx(pc, key[tid]);
    bi = mbidx(pc, key[tid]);
    bctr = m_base[bi] ^ mbk(bi, key[tid]);
    tk = bctr[1];
    prov = NTAB;
    for (int t = 0; t < NTAB; t++) begin
      int i;
      i = midx(x, m_ghr[tid], t);
      if (m_tag[t][i] == mtagf(x, m_ghr[tid], t)) begin
        bit [2:0] c;
        c = m_ctr[t][i] ^ mck(i, key[tid]);
        tk = c[2];
        prov = t;
      end
    end
  endtask

  task automatic m_update(input bit [AW-1:0] pc, input int tid, input bit [GW-1:0] h,
                          input bit [1:0] bctr, input bit pred, input bit taken);
    bit [AW-1:0] x;
    int idx [NTAB];
    bit [2:0] dc [NTAB];
    int prov = -1, alt = -1;
    bit ppred, apred, found = 0;
    key_t k;
    k = key[tid];
    x = mpcx(pc, k);
    for (int t = 0; t < NTAB; t++) begin
      idx[t] = midx(x, h, t);
      dc[t]  = m_ctr[t][idx[t]] ^ mck(idx[t], k);
      if (m_tag[t][idx[t]] == mtagf(x, h, t)) begin alt = prov; prov = t; end
    end
    apred = (alt >= 0) ? dc[alt][2] : bctr[1];
    ppred = (prov >= 0) ? dc[prov][2] : bctr[1];
    if (prov >= 0) begin
      bit [2:0] c;
      c = dc[prov];
      if (taken && c != 7) c++;
      if (!taken && c != 0) c--;
      m_ctr[prov][idx[prov]] = c ^ mck(idx[prov], k);
      if (ppred != apred) begin
        if (ppred == taken) begin if (m_u[prov][idx[prov]] != 3) m_u[prov][idx[prov]]++; end
        else begin if (m_u[prov][idx[prov]] != 0) m_u[prov][idx[prov]]--; end
      end
    end else begin
      int bi;
      bit [1:0] nb;
      bi = mbidx(pc, k);
      nb = bctr;
      if (taken && nb != 3) nb++;
      if (!taken && nb != 0) nb--;
      m_base[bi] = nb ^ mbk(bi, k);
    end
    if (pred != taken) begin
      for (int t = prov + 1; t < NTAB; t++)
        if (!found && m_u[t][idx[t]] == 0) begin
          found = 1;
          m_ctr[t][idx[t]] = (taken ? 3'd4 : 3'd3) ^ mck(idx[t], k);
          m_tag[t][idx[t]] = mtagf(x, h, t);
        end
      if (!found)
        for (int t = prov + 1; t < NTAB; t++)
          if (m_u[t][idx[t]] != 0) m_u[t][idx[t]]--;
    end
    m_ghr[tid] = {m_ghr[tid][GW-2:0], taken};
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit          e_tk;
  int          e_prov;
  bit [1:0]    e_b;
  bit [AW-1:0] pool [16];
  int          correct;
  int          n_tagged;
  bit [4:0]    pattern = 5'b00111;

  initial begin
    rst_n = 0; up_valid = 0; up_tid = 0; up_pc = 0; up_ghr = 0; up_base_ctr = 0; up_pred = 0;
    up_taken = 0; pr_tid = 0; pr_pc = 0;
    key[0] = '{ikey: 32'h1234_5678, ckey: 32'hacbc_df21};
    key[1] = '{ikey: 32'h9abc_def0, ckey: 32'h0bad_f00d};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    g_copy[0].copy(); g_copy[1].copy(); g_copy[2].copy();
    g_copy[3].copy(); g_copy[4].copy(); g_copy[5].copy();
    for (int r = 0; r < N / 16; r++)
      for (int c = 0; c < 16; c++) m_base[r*16 + c] = dut.u_base.table_q[r][2*c +: 2];
    for (int t = 0; t < NT; t++) m_ghr[t] = 0;

    // 1. random traffic against the model
    for (int i = 0; i < 16; i++) pool[i] = {$urandom} & ~32'h3;
    for (int c = 0; c < 15000; c++) begin
      @(negedge clk);
      if (($urandom % 1000) == 0) begin
        int t;
        t = $urandom % NT;
        key[t] = '{ikey: {$urandom}, ckey: {$urandom}};
      end
      pr_tid = 1'($urandom);
      pr_pc  = pool[$urandom % 16];
      #1;
      m_predict(pr_pc, pr_tid, e_tk, e_prov, e_b);
      check(pr_taken == e_tk && pr_provider == 3'(e_prov) && pr_base_ctr == e_b,
            $sformatf("prediction %0d/%0d/%0d exp %0d/%0d/%0d", pr_taken, pr_provider, pr_base_ctr, e_tk, e_prov, e_b));
      check(pr_ghr == m_ghr[pr_tid], "history");
      up_valid = ($urandom % 2) == 0;
      up_tid   = 1'($urandom);
      up_pc    = pool[$urandom % 16];
      up_ghr   = (($urandom % 2) == 0) ? m_ghr[up_tid] : {$urandom, $urandom, $urandom, $urandom, $urandom};
      up_base_ctr = 2'($urandom);
      up_pred  = 1'($urandom);
      up_taken = 1'($urandom);
      @(posedge clk);
      if (up_valid) m_update(up_pc, up_tid, up_ghr, up_base_ctr, up_pred, up_taken);
    end
    @(negedge clk);
    up_valid = 0;

    // 2. learning a period-5 pattern on thread 0
    correct = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      pr_tid = 0; pr_pc = 32'h8000_4000;
      #1;
      if (n >= 2500 && pr_taken == pattern[n % 5]) correct++;
      up_valid = 1; up_tid = 0; up_pc = pr_pc; up_ghr = pr_ghr; up_base_ctr = pr_base_ctr;
      up_pred = pr_taken; up_taken = pattern[n % 5];
      @(posedge clk);
    end
    @(negedge clk);
    up_valid = 0;
    check(correct >= 475, $sformatf("learned pattern: %0d of 500 correct", correct));
    $display("pattern accuracy %0d/500", correct);

    // 3. isolation: new key for thread 0, n_tagged hits for the branch vanish
    key[0] = '{ikey: 32'h0f1e_2d3c, ckey: 32'h4b5a_6978};
    n_tagged = 0;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      pr_tid = 0; pr_pc = 32'h8000_4000;
      #1;
      if (pr_provider != 3'(NTAB)) n_tagged++;
      // keep history moving without training the tables
      up_valid = 0;
    end
    check(n_tagged <= 5, $sformatf("tagged hits after key change: %0d", n_tagged));

    check(n_alloc > 0, "allocations happened");
    check(n_fail > 0, "failed allocations happened");
    $display("allocations %0d, failed allocations %0d", n_alloc, n_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
