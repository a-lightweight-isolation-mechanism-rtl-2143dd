# Noisy-XOR-BP: a branch predictor isolated by per-thread keys

Branch predictors are shared by every process and privilege level that runs
on a core. An attacker can therefore train entries that a victim will later
use, as Spectre v2 does. An attacker can also prime entries and later read
back what the victim left in them, as BranchScope and BTB-eviction attacks
do. The usual defences flush the tables on every switch or give each context
its own tables. Both cost performance or area, and neither stops a second
SMT thread that is running at the same time.

This design isolates the *contents* of the tables instead. Each hardware
thread owns a random key. The key is redrawn whenever the thread is switched
in or changes privilege level. Two things are done with it:

* **Content encoding.** Whatever is written into a table is XORed with the
  thread's *content key*. Whatever is read is XORed with it again. An entry
  written under one key reads as noise under any other key. This holds for
  another thread and for the same thread after a switch. A BTB entry
  practically never matches, and if it does, its target is scrambled.
* **Index encoding.** Before a table is indexed, the PC (or the hashed
  index) is XORed with the thread's *index key*. Which entry a branch uses
  is therefore unknown outside the thread, and it moves at every key
  change. This makes it hard to locate a victim's entry in order to prime
  or probe it.

Content encoding alone is called XOR-BP. With index encoding added it is
Noisy-XOR-BP. Nothing is ever flushed. A key change simply makes the old
contents useless, and they are overwritten as the tables retrain. The cost is
one XOR stage on each side of every table and a key register per thread.

The RTL implements the predictor of the single-threaded FPGA prototype on
which the scheme was measured:

* a 256-set, 2-way BTB;
* a TAGE direction predictor with six tagged tables of 4096 entries and
  histories of 12, 27, 44, 63, 90 and 130 branches;
* a bimodal base table;
* the key registers.

The number of hardware threads is a parameter. It is 1 by default, as on
the prototype.

## Files

| file | contents |
|---|---|
| `rtl/xbp_pkg.sv` | key width and split, branch-type enum, 2-bit counter function |
| `rtl/xbp_key_manager.sv` | per-thread key registers and their refill from the random source |
| `rtl/xbp_btb.sv` | Noisy-XOR-BTB |
| `rtl/xbp_pht.sv` | Noisy-XOR 2-bit counter table: gshare by default, bimodal with `HIST_LEN = 0` |
| `rtl/xbp_tage.sv` | TAGE with encoded counters and a randomised index; its base table is an `xbp_pht` |
| `rtl/xbp_top.sv` | the complete predictor |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the attack tests `tb_xbp_attack.sv` and `tb_xbp_attack_smt.sv` and the size sweep `tb_xbp_configs.sv` |

## Keys

`xbp_key_manager` holds one 64-bit register per thread. Software cannot
read it. Bits 31:0 are the content key and bits 63:32 are the index key.
Each table uses as many low bits of each key as it needs. The paper only
asks that both keys be portions of one random number. The exact split is
this design's choice.

A pulse on `ctx_switch[t]` or `priv_switch[t]` marks thread *t*'s key
stale. The random number generator is outside the design. It connects
through a valid/ready pair:

* `rng_ready` is high while any key is stale;
* a number is taken in any cycle in which `rng_valid` is also high;
* the lowest-numbered stale thread receives it;
* the new key is visible on the next clock edge.

If a switch arrives in the same cycle as the refill, the key stays stale. The
key a thread uses was therefore always drawn after its latest switch. After
reset, every key is stale.

While its key is stale, a thread must not use the tables. The old key must
not be used after the switch, and the new one does not exist yet. The top
handles this itself:

* the thread's predictions report a BTB miss and a fall-through next PC
  (`pr_ready` is low);
* its BTB and direction updates are dropped.

This stall is this design's choice; the paper does not say what happens
during a refill. With a random source that is always ready, the stall lasts
one cycle.

## Noisy-XOR-BTB

Each entry holds `valid`, `type`, `tag` and `target`. With the default
32-bit addresses, 2 ignored low bits and 256 sets, the tag is 22 bits.

* **Set index:** `pc[9:2] ^ ikey[7:0]`. Without index encoding
  (`INDEX_ENC = 0`) it is `pc[9:2]`.
* **Stored tag:** `pc[31:10] ^ ckey[21:0]`. A lookup compares the stored
  tag with the lookup PC's tag encoded the same way.
* **Stored target:** `target ^ ckey`. A hit returns `stored ^ ckey`.
* **Type and valid:** stored in the clear.

The tag is encoded as well as the target. Without that, a thread could
still notice a hit caused by another thread's entry, for example through a
"BTB hit but wrong target" performance counter.

**Worked example.** With content key `0xacbcdf21`, the target `0x80004000`
is stored as `0x2cbc9f21` and read back as `0x80004000`. The source paper
prints the stored value as `0x40bc9f21`, which is not the XOR of the two
numbers. Its figure also drops a digit of the target. The RTL and its test
use the correct XOR.

**Update.** An update (`up_*`) rewrites the branch's entry if it already has
one in the set. Otherwise it fills an invalid way, or replaces the set's
round-robin victim. The paper does not specify a replacement policy. The
caller decides when to update; normally this is on a target misprediction of
a taken branch.

Lookup is combinational and update is clocked. On silicon the entry arrays
would be SRAM with a registered read. That would add one cycle to both ports
but change nothing else.

## Encoding the direction tables

A 2-bit counter XORed with a 2-bit key can take only four values. An
attacker who knows one branch's direction could recover the key and use it
to read its neighbours. The enhanced scheme encodes a whole 32-bit word
instead.

`xbp_pht` stores its 4096 counters as 256 words of 16 counters. Counter *i*
of a word is XORed with content-key bits `[2i+1:2i]`. Neighbouring counters
therefore use different key bits. The index is the gshare hash
`pc[13:2] ^ GHR` XORed with the low 12 bits of the index key. The key thus
moves both the word and the position within the word.

With `ENHANCED = 0`, every counter uses key bits `[1:0]`. This is the weaker
XOR-PHT of the paper, kept for comparison. With `HIST_LEN = 0`, the table is
bimodal (PC only); this is how the TAGE uses it as its base predictor.

The table is updated as in a core that keeps each counter value in its
branch reorder buffer (BROB):

1. The decoded counter and the history snapshot that a prediction returns
   (`pr_ctr`, `pr_ghr`) travel with the branch.
2. They come back at commit on `up_ctr` and `up_ghr`.
3. The table advances the counter, encodes it with the committing thread's
   *current* key, and writes only those two bits. XOR works bit by bit, so
   the other 15 counters of the word stay valid.

The GHR is per thread and is shifted at commit.

## Noisy-XOR TAGE

`xbp_tage` is a textbook TAGE with isolation added in the two places where
it acts:

* **Index encoding.** The PC is XORed with the index key *before* it enters
  the index and tag hash of every table. Tags therefore change with the key
  as well. The base table applies its own index-key XOR.
* **Content encoding.** Each 3-bit prediction counter is stored XORed with
  content-key bits `[3k+2:3k]`, where *k* is the entry's low three index
  bits. Neighbouring entries therefore use different key bits. Tags and
  2-bit useful counters are stored in the clear, following the encoded
  TAGE the design is based on.

**Entry format.** Each entry is 11 bits: a 3-bit counter, a 6-bit tag and a
2-bit useful counter. 6 × 4096 × 11 bits is exactly the 33 KB quoted for the
prototype's TAGE. The paper gives only the total size, so the split is
inferred from it.

**Index and tag hashes.** Each table's index is the XOR of:

* two 12-bit slices of the keyed PC;
* the table number;
* the table's history folded to 12 bits.

The tag is the keyed PC XORed with two foldings of the history. The
folding is computed combinationally from a 130-bit per-thread history
register; a speed-tuned TAGE would keep incremental folded registers
instead.

**Prediction.** This is combinational. The tagged table with the longest
history whose tag matches is the *provider*, and its counter gives the
direction. If no table matches, the base table gives it. `pr_provider`
reports which table was used (6 = base).

**Update.** At commit the tagged tables are read again with the committed
PC and the history snapshot `up_ghr`. This is the read–decode–update–encode
path for tables with no copy in the reorder buffer. The base counter, in
contrast, comes back from the reorder buffer (`up_base_ctr`).

**Replacement policy.** This is a simplified standard TAGE:

* The provider's counter moves towards the outcome.
* Its useful counter rises when it was right and the alternate prediction
  was wrong, and falls in the opposite case.
* With no provider, the base counter is trained.
* On a misprediction (`up_pred != up_taken`), one entry is allocated in the
  lowest longer-history table whose useful counter is 0. It gets the new
  tag, a weak counter and u = 0.
* If no such entry exists, the useful counters of all longer tables are
  decremented (`ev_alloc_fail`).

Two refinements of full TAGE are left out: the use-alternate-on-new-entry
counter and the periodic reset of the useful bits.

## Top-level interface (`xbp_top`)

Prediction is combinational:

* Inputs: `pr_tid`, `pr_pc`.
* Outputs: `pr_ready`, `pr_btb_hit`, `pr_target`, `pr_type`, `pr_taken`,
  `pr_provider`, `pr_next_pc`.
* `pr_next_pc` is the BTB target if the BTB hits and the branch is
  unconditional or predicted taken. Otherwise it is `pc + 4`. On a BTB miss
  the predictor falls through, as the prototype core did.
* `pr_base_ctr`, `pr_ghr` and `pr_taken` belong in the core's reorder buffer.
  They come back with the direction update.

Updates are clocked:

* `bu_*` is the BTB update.
* `pu_*` is the direction update at commit: PC, history snapshot, base
  counter, the prediction made, and the outcome.
* `ev_alloc` and `ev_alloc_fail` pulse for TAGE allocations, for performance
  counting.

The remaining ports are the per-thread `ctx_switch` and `priv_switch`
pulses and the random-source handshake.

## Parameters

| parameter | default | from |
|---|---|---|
| `NTHREADS` | 1 | prototype is single-threaded; SMT was only simulated |
| `BTB_SETS` × `BTB_WAYS` | 256 × 2 | prototype BTB |
| `TAGE_ENTRIES` | 4096 per table, 6 tables | prototype TAGE |
| history lengths | 12, 27, 44, 63, 90, 130 | prototype TAGE |
| TAGE entry | 3-bit ctr, 6-bit tag, 2-bit u | chosen to give the quoted 33 KB |
| `BASE_ENTRIES` | 4096 | own choice |
| `VADDR_W` | 32 | own choice, matching the 32-bit example addresses |
| key | 64 bits: 32 content + 32 index | own choice of split |
| `INDEX_ENC` | 1 (Noisy-XOR-BP) | 0 gives XOR-BP |
| `ENHANCED` | 1 (word-wise counter keys) | 0 gives plain XOR-PHT |
| `xbp_pht` `ENTRIES`, `HIST_LEN` | 4096, 12 | 4K-entry example table; history length own choice |

## What is not here

* **The random number generator.** It is taken as given. Its handshake is
  brought out to top-level ports.
* **The host core and its branch reorder buffer.** The values the reorder
  buffer would carry are top-level outputs and update inputs. The
  testbenches play the core.
* **The return address stack.** The paper studies only the BTB and the
  direction tables.
* **Other direction predictors.** The scheme was also simulated on Gshare,
  Tournament, LTAGE and TAGE-SC-L predictors in an SMT core. Only the
  Gshare form exists here (`xbp_pht`). The others are alternative hosts for
  the same two XORs and were not built.
* **Key-dependent index selection.** One suggestion is to pick the PC bits
  that form an index dynamically, shifted by the index key, so that a
  reference branch sharing the target's key slice cannot be found. It is
  only suggested and is not built. Here the index key is XORed onto the
  whole table index, which already moves a counter both between words and
  within a word.
* **Speed-throttling countermeasure.** A countermeasure is suggested against
  single-stepping attacks on SMT cores: bypass predictor updates when
  execution slows down drastically. It is only suggested, not specified, and
  is not built.

## How far to trust it

Every module has a self-checking testbench. Each one compares the block
against a reference model written separately in the testbench, or against
worked values:

* `tb_xbp_key_manager`: three threads, random switches, a random source that
  is not always ready.
* `tb_xbp_btb`: the worked example, isolation between threads and across a
  key change, and 20 000 random cycles against a model.
* `tb_xbp_pht`: the word-wise and plain encodings, index encoding, GHR, and
  random traffic against a model.
* `tb_xbp_tage`:
  * the whole predictor against a model for 15 000 random cycles;
  * learning a period-5 pattern (500 of 500 correct at the end);
  * loss of the trained entries after a key change;
  * allocation and failed allocation both occur.
* `tb_xbp_top`: the default-size predictor runs a 12-branch synthetic
  program through 30 000 branches, 40 privilege switches and 9 context
  switches. It checks that:
  * BTB targets are always right;
  * no branch hits on its first lookup after a key change;
  * the stall behaves as described while the key is stale;
  * the next-PC prediction is at least 80 % correct once warm;
  * every mechanism above occurs.
* `tb_xbp_attack`: the two proof-of-concept training attacks, across a
  context switch, at default size. In both, the attacker and the victim
  share code.
  * The BTB attack trains a shared indirect call. None of 10 000 iterations
    steers the victim.
  * The PHT attack trains a shared conditional branch not-taken, 40 times
    per attempt. An iteration is 100 attempts, and it succeeds if the victim
    follows the trained direction more than 90 times. None of 100 iterations
    succeeds. The original experiment ran 10 000 iterations with longer
    training; this was cut for simulation time.
  * Without the switch, the same training works every time.
* `tb_xbp_attack_smt`: the same two attacks between two hardware threads
  (`NTHREADS = 2`) that share the predictor at the same time, with no
  context switch between them. They are separated only by their different
  keys. Neither attack succeeds.
* `tb_xbp_configs`: three instances of the top at the other sizes for which
  area and timing were reported (BTB 2 x 128 with 1024-entry TAGE tables,
  2 x 256 with 2048, 2 x 512 with 4096). Each must hit on every trained
  branch, lose its BTB contents at a context switch, and learn a branch
  whose outcome repeats every five executions.

Not verified: timing and area, and behaviour inside a real core. The
performance figures of the paper (under about 1.3 % loss on the prototype)
depend on the core and were not reproduced.

## Simulating

Each testbench is self-contained and prints one
`TB_RESULT checks=N failures=M` line. For example, run from the directory
that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/xbp_pkg.sv rtl/xbp_pht.sv \
  rtl/xbp_tage.sv rtl/xbp_btb.sv rtl/xbp_key_manager.sv rtl/xbp_top.sv \
  tb/tb_xbp_top.sv --top tb_xbp_top -o sim && ./obj_dir/sim
```

Each block testbench needs `xbp_pkg.sv`, its module, and that module's
submodules. `xbp_tage` uses `xbp_pht`. `tb_xbp_top` takes a few seconds.
`tb_xbp_attack` and `tb_xbp_attack_smt` take about a minute each.
