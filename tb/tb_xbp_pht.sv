// tb_xbp_pht -- self-checking test of the Noisy-XOR gshare PHT.
//
// Two instances at the default size (4096 counters as 256 x 32-bit words),
// two threads each: one in the full Noisy-XOR-PHT mode (index key, word-wise
// content key) and one with both options off (plain XOR-PHT: one 2-bit key
// for every counter, index not randomised).
//  1. Directed: a committed update stores sat2(counter) ^ key slice in the
//     right two bits of the right word; prediction decodes it; GHR shifts.
//  2. Isolation: after a thread is trained strongly taken on a branch, a
//     thread with another key reads a different counter.
//  3. Random commit/predict traffic with key changes, checked each cycle
//     against a reference model of the table kept in this file.  The
//     model starts from the table's power-up contents (the table has no
//     reset).
module tb_xbp_pht;
  import xbp_pkg::*;

  localparam int unsigned NT = 2, N = 4096, IW = 12, AW = 32, OFF = 2;

  logic          clk = 1'b0, rst_n;
  key_t          key [NT];
  logic          pr_tid, up_valid, up_tid, up_taken;
  logic [AW-1:0] pr_pc, up_pc;
  logic [IW-1:0] up_ghr;
  logic [1:0]    up_ctr;
  // outputs of the two instances
  logic          a_taken, b_taken;
  logic [1:0]    a_ctr, b_ctr;
  logic [IW-1:0] a_ghr, b_ghr;

  int checks = 0, failures = 0;

  xbp_pht #(.NTHREADS(NT)) dut_a (
    .clk, .rst_n, .key, .pr_tid, .pr_pc, .pr_taken(a_taken), .pr_ctr(a_ctr), .pr_ghr(a_ghr),
    .up_valid, .up_tid, .up_pc, .up_ghr, .up_ctr, .up_taken);
  xbp_pht #(.NTHREADS(NT), .INDEX_ENC(1'b0), .ENHANCED(1'b0)) dut_b (
    .clk, .rst_n, .key, .pr_tid, .pr_pc, .pr_taken(b_taken), .pr_ctr(b_ctr), .pr_ghr(b_ghr),
    .up_valid, .up_tid, .up_pc, .up_ghr, .up_ctr, .up_taken);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- reference model: raw stored counters, per mode ---------------------
  bit [1:0]    ma [N], mb [N];
  bit [IW-1:0] mghr [NT];

  function automatic int idx_of(input bit [AW-1:0] pc, input bit [IW-1:0] g, input key_t k, input bit noisy);
    bit [IW-1:0] h;
    h = pc[OFF +: IW] ^ g;
    return int'(noisy ? h ^ k.ikey[IW-1:0] : h);
  endfunction
  function automatic bit [1:0] kslice(input int idx, input key_t k, input bit enh);
    return enh ? k.ckey[2*(idx % 16) +: 2] : k.ckey[1:0];
  endfunction
  function automatic bit [1:0] sat(input bit [1:0] c, input bit t);
    if (t) return (c == 3) ? 2'd3 : c + 2'd1;
    return (c == 0) ? 2'd0 : c - 2'd1;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ia, ib;

  initial begin
    rst_n = 0; up_valid = 0; up_tid = 0; up_pc = 0; up_ghr = 0; up_ctr = 0; up_taken = 0;
    pr_tid = 0; pr_pc = 0;
    key[0] = '{ikey: 32'h0000_0a5c, ckey: 32'hacbc_df21};
    key[1] = '{ikey: 32'h0000_0377, ckey: 32'h5ee1_2b90};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < N / 16; r++)
      for (int c = 0; c < 16; c++) begin
        ma[r*16 + c] = dut_a.table_q[r][2*c +: 2];
        mb[r*16 + c] = dut_b.table_q[r][2*c +: 2];
      end
    for (int t = 0; t < NT; t++) mghr[t] = 0;
    check(a_ghr == 0 && b_ghr == 0, "GHR reset");

    // 1. directed update: counter 1 -> taken -> 2, stored encoded
    @(negedge clk);
    up_valid = 1; up_tid = 0; up_pc = 32'h0000_4a38; up_ghr = 0; up_ctr = 2'd1; up_taken = 1;
    @(posedge clk); #1 up_valid = 0;
    ia = idx_of(32'h0000_4a38, 0, key[0], 1);
    ib = idx_of(32'h0000_4a38, 0, key[0], 0);
    ma[ia] = 2'd2 ^ kslice(ia, key[0], 1); mb[ib] = 2'd2 ^ kslice(ib, key[0], 0);
    mghr[0] = 1;
    check(dut_a.table_q[ia / 16][2*(ia % 16) +: 2] == (2'd2 ^ key[0].ckey[2*(ia % 16) +: 2]),
          "noisy mode stores counter ^ its own key slice");
    check(dut_b.table_q[ib / 16][2*(ib % 16) +: 2] == (2'd2 ^ key[0].ckey[1:0]),
          "plain mode stores counter ^ key[1:0]");
    check(ia != ib, "index key moves the counter");
    pr_tid = 0; #1;
    check(a_ghr == 1 && b_ghr == 1, "GHR shifted in the taken outcome");

    // 2. isolation: train thread 0 strongly taken on one branch (GHR kept 0)
    @(negedge clk);
    for (int i = 0; i < 3; i++) begin
      up_valid = 1; up_tid = 0; up_pc = 32'h0000_1000; up_ghr = 0; up_ctr = 2'(i + 1); up_taken = 1;
      @(posedge clk); #1;
      ia = idx_of(32'h0000_1000, 0, key[0], 1); ma[ia] = sat(2'(i + 1), 1) ^ kslice(ia, key[0], 1);
      ib = idx_of(32'h0000_1000, 0, key[0], 0); mb[ib] = sat(2'(i + 1), 1) ^ kslice(ib, key[0], 0);
      mghr[0] = {mghr[0][IW-2:0], 1'b1};
    end
    up_valid = 0;
    ia = idx_of(32'h0000_1000, 0, key[0], 1);
    check((dut_a.table_q[ia / 16][2*(ia % 16) +: 2] ^ key[0].ckey[2*(ia % 16) +: 2]) == 2'd3,
          "thread 0 trained to strongly taken");
    ib = idx_of(32'h0000_1000, 0, key[1], 1);
    check(ib != ia, "thread 1 indexes a different counter for the same branch");

    // 3. random traffic
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      if (($urandom % 400) == 0) begin
        int t;
        t = $urandom % NT;
        key[t] = '{ikey: {$urandom}, ckey: {$urandom}};
      end
      pr_tid = 1'($urandom);
      pr_pc  = {$urandom} & 32'h0000_fffc;
      #1;
      ia = idx_of(pr_pc, mghr[pr_tid], key[pr_tid], 1);
      ib = idx_of(pr_pc, mghr[pr_tid], key[pr_tid], 0);
      check(a_ghr == mghr[pr_tid] && b_ghr == mghr[pr_tid], "GHR");
      check(a_ctr == (ma[ia] ^ kslice(ia, key[pr_tid], 1)) && a_taken == a_ctr[1], "noisy prediction");
      check(b_ctr == (mb[ib] ^ kslice(ib, key[pr_tid], 0)) && b_taken == b_ctr[1], "plain prediction");
      up_valid = ($urandom % 2) == 0;
      up_tid   = 1'($urandom);
      up_pc    = {$urandom} & 32'h0000_fffc;
      up_ghr   = IW'($urandom);
      up_ctr   = 2'($urandom);
      up_taken = 1'($urandom);
      @(posedge clk);
      if (up_valid) begin
        ia = idx_of(up_pc, up_ghr, key[up_tid], 1); ma[ia] = sat(up_ctr, up_taken) ^ kslice(ia, key[up_tid], 1);
        ib = idx_of(up_pc, up_ghr, key[up_tid], 0); mb[ib] = sat(up_ctr, up_taken) ^ kslice(ib, key[up_tid], 0);
        mghr[up_tid] = {mghr[up_tid][IW-2:0], up_taken};
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
