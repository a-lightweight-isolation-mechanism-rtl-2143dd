// xbp_key_manager -- thread-private key registers.
//
// Holds one KEY_W-bit random number per hardware thread.  The register is
// not visible to software.  Whenever a thread is switched in (context switch)
// or changes privilege level, its key is marked stale and is replaced by the
// next number from the hardware random number generator; from then on every
// table access of that thread uses the new key.  Replacing the key is what
// makes the thread's earlier table contents unreadable to it and to others,
// so no flush is needed.  The content key and the index key handed to the
// tables are the two halves of the number (see xbp_pkg).
//
// Interface and timing:
//   ctx_switch[t], priv_switch[t]  one-cycle pulses; either marks thread t's
//                                  key stale from the next cycle on.
//   rng_valid/rng_data/rng_ready   random-number source.  A number is taken
//                                  in a cycle where rng_valid and rng_ready
//                                  are both high.  rng_ready is high when
//                                  some key is stale; the lowest-numbered
//                                  stale thread receives it.
//   key[t], key_ok[t]              current key of thread t and whether it is
//                                  fresh.  key[t] changes the cycle after
//                                  the number is taken.  While key_ok[t] is
//                                  low the predictor must neither predict nor
//                                  train for thread t.
// After reset every key is stale, so no thread runs with a predictable key.
//
// Following the paper: one private key register per hardware thread,
// redrawn on context and privilege switches, RNG taken as given.  This
// design's choices: the stale flag with its handshake to the RNG, the
// fixed-priority service order, and the all-stale reset state.
module xbp_key_manager
  import xbp_pkg::*;
#(
  parameter int unsigned NTHREADS = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NTHREADS-1:0]    ctx_switch,
  input  logic [NTHREADS-1:0]    priv_switch,
  input  logic                   rng_valid,
  input  logic [KEY_W-1:0]       rng_data,
  output logic                   rng_ready,
  output key_t                   key    [NTHREADS],
  output logic [NTHREADS-1:0]    key_ok
);

  logic [NTHREADS-1:0] stale_q;
  logic [NTHREADS-1:0] grant;
  key_t                key_q [NTHREADS];

  // Fixed priority: the lowest-numbered stale thread is served first.
  always_comb begin
    grant = '0;
    for (int t = 0; t < NTHREADS; t++) begin
      if (stale_q[t] && grant == '0) grant[t] = 1'b1;
    end
  end

  assign rng_ready = |stale_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stale_q <= '1;
    end else begin
      // A switch in the same cycle as a refill leaves the key stale again,
      // so the key in use is always drawn after the latest switch.
      stale_q <= (stale_q & ~(grant & {NTHREADS{rng_valid}})) | ctx_switch | priv_switch;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NTHREADS; t++) key_q[t] <= '0;
    end else if (rng_valid) begin
      for (int t = 0; t < NTHREADS; t++) begin
        if (grant[t]) key_q[t] <= key_t'(rng_data);
      end
    end
  end

  always_comb begin
    for (int t = 0; t < NTHREADS; t++) key[t] = key_q[t];
  end
  assign key_ok = ~stale_q;

  // At most one thread is served per random number.
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));

endmodule
