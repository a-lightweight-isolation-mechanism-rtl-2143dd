// tb_xbp_key_manager -- self-checking test of the per-thread key registers.
//
// Three threads.  Random context/privilege switch pulses and a random number
// source that is valid only part of the time drive the block; a reference
// model kept in this testbench (stale flags, lowest stale thread served
// first, switch during refill keeps the key stale) predicts key[], key_ok
// and rng_ready every cycle.  Directed steps first check the reset state
// and the one-cycle latency from a number being taken to the key changing.
module tb_xbp_key_manager;
  import xbp_pkg::*;

  localparam int unsigned NT = 3;

  logic             clk = 1'b0;
  logic             rst_n;
  logic [NT-1:0]    ctx_switch, priv_switch;
  logic             rng_valid;
  logic [KEY_W-1:0] rng_data;
  logic             rng_ready;
  key_t             key [NT];
  logic [NT-1:0]    key_ok;

  int checks = 0, failures = 0;

  xbp_key_manager #(.NTHREADS(NT)) dut (.*);

  always #5 clk = ~clk;

  // reference model
  logic [NT-1:0]    m_stale;
  logic [KEY_W-1:0] m_key [NT];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic compare_all();
    check(key_ok == ~m_stale, $sformatf("key_ok %b exp %b", key_ok, ~m_stale));
    check(rng_ready == (m_stale != '0), "rng_ready");
    for (int t = 0; t < NT; t++)
      if (!m_stale[t]) check(key[t] == m_key[t], $sformatf("key[%0d] %h exp %h", t, key[t], m_key[t]));
  endtask

  // advance the model by one clock edge, given the inputs of this cycle
  task automatic model_step();
    int g;
    g = -1;
    for (int t = 0; t < NT; t++) if (m_stale[t] && g < 0) g = t;
    if (rng_valid && g >= 0) begin
      m_key[g]   = rng_data;
      m_stale[g] = 1'b0;
    end
    m_stale = m_stale | ctx_switch | priv_switch;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; ctx_switch = '0; priv_switch = '0; rng_valid = 1'b0; rng_data = '0;
    m_stale = '1;
    for (int t = 0; t < NT; t++) m_key[t] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // reset state: all keys stale, generator requested
    check(key_ok == '0, "all stale after reset");
    check(rng_ready, "rng requested after reset");

    // directed: one number per cycle fills threads 0,1,2 in order
    for (int i = 0; i < NT; i++) begin
      rng_valid = 1'b1;
      rng_data  = {32'hacbcdf21 + i, 32'h1000 + i};
      @(posedge clk); model_step(); #1;
      check(key_ok[i], $sformatf("thread %0d refilled after one cycle", i));
      check(key[i] == {32'hacbcdf21 + i, 32'h1000 + i}, "refill value");
      compare_all();
    end
    rng_valid = 1'b0;
    check(!rng_ready, "no request when all fresh");

    // directed: privilege switch of thread 1 marks it stale next cycle
    priv_switch = 3'b010;
    @(posedge clk); model_step(); #1;
    priv_switch = '0;
    check(key_ok == 3'b101, "priv switch stales thread 1");
    compare_all();

    // random phase
    for (int c = 0; c < 5000; c++) begin
      ctx_switch  = (($urandom % 8) == 0) ? NT'($urandom) : '0;
      priv_switch = (($urandom % 8) == 0) ? NT'($urandom) : '0;
      rng_valid   = ($urandom % 3) != 0;
      rng_data    = {$urandom, $urandom};
      @(posedge clk); model_step(); #1;
      compare_all();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
