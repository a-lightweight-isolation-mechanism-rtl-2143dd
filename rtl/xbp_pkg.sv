// xbp_pkg -- shared types and constants of the XOR-isolated branch predictor.
//
// The predictor protects its tables with two thread-private keys that the
// hardware redraws on every context switch and privilege switch: a content
// key, XORed into everything written to a table and out of everything read
// from it, and an index key, XORed into every table index.  Both are slices
// of one random number held per hardware thread.
//
// Constants below follow the FPGA prototype configuration the design was
// evaluated on (32-bit example addresses and keys, a 256-set 2-way BTB, a
// 4K-entry 2-bit PHT).  The key width of 64 bits and the split of it into a
// 32-bit content key (bits 31:0) and an index key (bits 63:32) are this
// design's choice: the paper only says that portions of one random number
// serve as the two keys.
package xbp_pkg;

  // Width of the random number held per hardware thread.
  localparam int unsigned KEY_W  = 64;
  // Content key: the low 32 bits (the paper's example key is 32 bits wide).
  localparam int unsigned CKEY_W = 32;
  // Index key: the high 32 bits; each table uses as many low bits as it has
  // index bits.
  localparam int unsigned IKEY_W = KEY_W - CKEY_W;

  // Branch kinds kept in the BTB "Type" field (encoding is this design's).
  typedef enum logic [1:0] {
    BR_COND = 2'd0,   // conditional branch
    BR_JUMP = 2'd1,   // direct jump / call
    BR_IND  = 2'd2,   // indirect jump / call
    BR_RET  = 2'd3    // function return
  } br_type_e;

  // The two keys of one thread, as used by the tables.
  typedef struct packed {
    logic [IKEY_W-1:0] ikey;   // index key
    logic [CKEY_W-1:0] ckey;   // content key
  } key_t;

  // 2-bit saturating counter (the PHT's "FSM"): count up on taken, down on
  // not taken, predict taken when the upper bit is set.
  function automatic logic [1:0] sat2_next(input logic [1:0] ctr, input logic taken);
    if (taken) return (ctr == 2'b11) ? 2'b11 : ctr + 2'd1;
    else       return (ctr == 2'b00) ? 2'b00 : ctr - 2'd1;
  endfunction

endpackage
