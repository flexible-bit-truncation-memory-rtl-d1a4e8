// Shared constants and types of the bit-truncation memory.
//
// The memory is a single-port SRAM of WORDS words by WIDTH bits whose
// columns can be power-gated one by one. A truncated column no longer holds
// data; its read value is replaced by a dummy bit so that the truncated field
// of a word reads back as 10...0 (the value that minimises the expected
// squared error). The array of WIDTH column managers is split into bytes so
// that the same hardware truncates either the low bits of the whole word
// (word mode, for 32-bit floating point weights) or the low bits of every
// byte (byte mode, for 8-bit pixels).
//
// Sizes follow the fabricated 1024 x 32 macro. The three manager states are
// the three rows of the manager truth table.
package trunmem_pkg;

  localparam int unsigned WORDS   = 1024;            // memory depth
  localparam int unsigned WIDTH   = 32;              // word width m
  localparam int unsigned BYTE_W  = 8;               // bits per byte manager

  // Operating state of one column manager.
  typedef enum logic [1:0] {
    TM_NORMAL       = 2'd0,  // Head=0, Tail=0: column powered, DataOut = Read
    TM_MSB_TRUNC    = 2'd1,  // Head=1: rails floating, DataOut = 1
    TM_LESSER_TRUNC = 2'd2   // Head=0, Tail=1: rails floating, DataOut = 0
  } tm_state_e;

endpackage
