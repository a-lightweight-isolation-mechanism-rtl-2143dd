// tb_xbp_btb -- self-checking test of the Noisy-XOR-BTB.
//
// Default geometry (256 sets x 2 ways, 32-bit addresses), two threads.
//  1. Worked example: with content key 0xacbcdf21 the target 0x80004000 is
//     stored as 0x80004000 ^ 0xacbcdf21 = 0x2cbc9f21 and read back as
//     0x80004000; the entry sits in set (PC index bits ^ index key).
//  2. Isolation: the same PC misses for a thread with another key, and for
//     the owning thread once its key has changed.
//  3. Random traffic on a small pool of PCs (so sets conflict and victims
//     rotate) with keys that change now and then, compared each cycle with
//     a reference model of the BTB written out in this file.
module tb_xbp_btb;
  import xbp_pkg::*;

  localparam int unsigned NT = 2, SETS = 256, WAYS = 2, AW = 32, OFF = 2;
  localparam int unsigned IW = $clog2(SETS), TW = AW - IW - OFF;

  logic          clk = 1'b0, rst_n;
  key_t          key [NT];
  logic          lk_tid, up_valid, up_tid;
  logic [AW-1:0] lk_pc, lk_target, up_pc, up_target;
  logic          lk_hit;
  br_type_e      lk_type, up_type;

  int checks = 0, failures = 0;

  xbp_btb #(.NTHREADS(NT)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- reference model ----------------------------------------------------
  bit          m_v   [SETS][WAYS];
  bit [TW-1:0] m_tag [SETS][WAYS];
  bit [AW-1:0] m_tgt [SETS][WAYS];
  bit [1:0]    m_ty  [SETS][WAYS];
  int          m_vic [SETS];

  function automatic int m_set(input bit [AW-1:0] pc, input key_t k);
    return int'(pc[OFF +: IW] ^ k.ikey[IW-1:0]);
  endfunction

  task automatic m_lookup(input bit [AW-1:0] pc, input key_t k,
                          output bit hit, output bit [AW-1:0] tgt, output bit [1:0] ty);
    int s;
    s = m_set(pc, k);
    hit = 0; tgt = 0; ty = 0;
    for (int w = 0; w < WAYS; w++)
      if (!hit && m_v[s][w] && m_tag[s][w] == (pc[AW-1 -: TW] ^ k.ckey[TW-1:0])) begin
        hit = 1; tgt = m_tgt[s][w] ^ k.ckey; ty = m_ty[s][w];
      end
  endtask

  task automatic m_update(input bit [AW-1:0] pc, input bit [AW-1:0] tgt, input bit [1:0] ty, input key_t k);
    int s, way;
    bit [TW-1:0] t;
    s = m_set(pc, k);
    t = pc[AW-1 -: TW] ^ k.ckey[TW-1:0];
    way = -1;
    for (int w = 0; w < WAYS; w++) if (way < 0 && m_v[s][w] && m_tag[s][w] == t) way = w;
    if (way < 0) for (int w = 0; w < WAYS; w++) if (way < 0 && !m_v[s][w]) way = w;
    if (way < 0) begin way = m_vic[s]; m_vic[s] = (m_vic[s] + 1) % WAYS; end
    m_v[s][way] = 1; m_tag[s][way] = t; m_tgt[s][way] = tgt ^ k.ckey; m_ty[s][way] = ty;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit          e_hit;
  bit [AW-1:0] e_tgt, pool [24];
  bit [1:0]    e_ty;

  initial begin
    rst_n = 0; up_valid = 0; up_tid = 0; lk_tid = 0; lk_pc = 0; up_pc = 0; up_target = 0;
    up_type = BR_COND;
    key[0] = '{ikey: 32'h0000_005a, ckey: 32'hacbc_df21};
    key[1] = '{ikey: 32'h0000_00c3, ckey: 32'h1357_9bdf};
    for (int s = 0; s < SETS; s++) begin m_vic[s] = 0; for (int w = 0; w < WAYS; w++) m_v[s][w] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // 1. worked example
    @(negedge clk);
    up_valid = 1; up_tid = 0; up_pc = 32'h8000_1234; up_target = 32'h8000_4000; up_type = BR_IND;
    @(posedge clk); #1 up_valid = 0;
    m_update(32'h8000_1234, 32'h8000_4000, BR_IND, key[0]);
    begin
      int s;
      s = int'(IW'(32'h8000_1234 >> OFF) ^ 8'h5a);
      check(dut.valid_q[s][0], "entry lands in set PC-index ^ index key");
      check(dut.entry_q[s][0].target == 32'h2cbc_9f21,
            $sformatf("stored target %h exp 2cbc9f21", dut.entry_q[s][0].target));
      check(dut.entry_q[s][0].tag == ((32'h8000_1234 >> (IW + OFF)) ^ TW'(32'hacbc_df21)), "stored tag encoded");
    end
    lk_tid = 0; lk_pc = 32'h8000_1234; #1;
    check(lk_hit && lk_target == 32'h8000_4000 && lk_type == BR_IND, "owner reads back 0x80004000");

    // 2. isolation between threads and across a key change
    lk_tid = 1; #1;
    check(!lk_hit, "other thread misses");
    key[0] = '{ikey: 32'h0000_0011, ckey: 32'h0f0f_1234};
    lk_tid = 0; #1;
    check(!lk_hit, "owner misses after key change");
    key[0] = '{ikey: 32'h0000_005a, ckey: 32'hacbc_df21};
    #1 check(lk_hit && lk_target == 32'h8000_4000, "old key finds the entry again");

    // 3. random traffic against the model
    for (int i = 0; i < 24; i++) pool[i] = {$urandom} & ~32'h3;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      if (($urandom % 500) == 0) begin
        int t;
        t = $urandom % NT;
        key[t] = '{ikey: {$urandom}, ckey: {$urandom}};
      end
      up_valid  = ($urandom % 2) == 0;
      up_tid    = 1'($urandom);
      up_pc     = pool[$urandom % 24];
      // the low set bits of some pool PCs are forced equal to collide
      if (($urandom % 3) == 0) up_pc[OFF +: IW] = key[up_tid].ikey[IW-1:0] ^ 8'h07;
      up_target = {$urandom};
      up_type   = br_type_e'($urandom);
      lk_tid    = 1'($urandom);
      lk_pc     = (($urandom % 4) == 0) ? up_pc : pool[$urandom % 24];
      #1;
      m_lookup(lk_pc, key[lk_tid], e_hit, e_tgt, e_ty);
      check(lk_hit == e_hit, $sformatf("hit %0d exp %0d pc %h", lk_hit, e_hit, lk_pc));
      if (e_hit) check(lk_target == e_tgt && lk_type == br_type_e'(e_ty), "target/type");
      @(posedge clk);
      if (up_valid) m_update(up_pc, up_target, up_type, key[up_tid]);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
