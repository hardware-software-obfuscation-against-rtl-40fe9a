// gpu_pkg: constants and types shared by the obfuscating GPU load path.
//
// The sizes follow the Fermi GTX480 configuration used throughout the
// design: 32 threads per warp, 64-byte L1 lines (one full-width coalesced
// transaction), 128-byte L2 lines, 16 random coalescing widths, 32 MSHR
// entries per level and 15 SMs. Addresses are 32-bit byte addresses (an
// assumption; the width is not fixed by the original description).
//
// Each SM runs NUM_WARPS warps; a transaction carries the id of the warp
// whose instruction produced it.
//
// A coalescing "width" is stored as its log2 subtransaction count
// r_log2 = log2(r), r in {1,2,4,8}; the subtransaction size in bytes is
// LINE_BYTES >> r_log2, i.e. 64, 32, 16 or 8 bytes.
package gpu_pkg;

  localparam int ADDR_W      = 32;
  localparam int WARP_SIZE   = 32;
  localparam int LINE_BYTES  = 64;
  localparam int OFF_W       = $clog2(LINE_BYTES);      // 6
  localparam int LINE_W      = ADDR_W - OFF_W;          // 26-bit L1 line number
  localparam int L2_LINE_W   = LINE_W - 1;              // 128 B L2 line number
  localparam int NUM_WIDTHS  = 16;                      // r[16]
  localparam int SUB_W       = 3;                       // up to 8 subtransactions
  localparam int NUM_SM      = 15;
  localparam int NUM_WARPS   = 2;                       // warps per SM
  localparam int WID_W       = 1;                       // warp id width

  typedef logic [ADDR_W-1:0]    addr_t;
  typedef logic [LINE_W-1:0]    line_t;
  typedef logic [L2_LINE_W-1:0] l2_line_t;
  typedef logic [OFF_W-1:0]     off_t;
  typedef logic [1:0]           rlog_t;                 // log2 of r[i]

  // Width-randomisation mode of the coalescing unit.
  typedef enum logic {
    MODE_FIXED   = 1'b0,   // one random width per kernel run for all lines
    MODE_DYNAMIC = 1'b1    // a random width per line (mod 16) per kernel run
  } width_mode_e;

  // One coalesced transaction sent from the coalescing unit to L1.
  typedef struct packed {
    logic [WID_W-1:0]   warp;   // warp that issued the instruction
    line_t              line;   // 64 B cache line number
    logic [SUB_W-1:0]   sub;    // subtransaction number within the line
    rlog_t              rlog;   // line split into 2**rlog subtransactions
  } txn_t;

  // Size in bytes of a subtransaction.
  function automatic logic [6:0] sub_bytes(rlog_t rlog);
    return 7'(LINE_BYTES >> rlog);
  endfunction

  // Subtransaction number of a byte offset: offset / (64 / r).
  function automatic logic [SUB_W-1:0] sub_of(off_t off, rlog_t rlog);
    return SUB_W'(off >> (OFF_W - int'(rlog)));
  endfunction

endpackage
