// gpu_obf_memsys: obfuscating GPU load path with hierarchical MSHRs.
//
// NSM streaming multiprocessors each own a load path (sm_ldst_path):
// address decode, a coalescing unit whose width is drawn at random per
// kernel run and per line (mod 16) by its own width generator, an L1 tag
// store and 32 first-level MSHRs. All SMs share one set of second-level
// MSHRs (unified_mshr), which merges requests of any SMs for the same
// 128-byte L2 line and sends only the first of them to L2. The L2 cache
// itself is outside this block: its request and response ports are brought
// out (l2_req_* / l2_resp_*), and the response is broadcast back to the
// SMs that asked.
//
// Per-SM interface: instr_valid/instr_ready/instr_addr/instr_active/
// instr_warp take a warp memory instruction of one of the NWARPS warps of
// the SM (each warp may have one in flight; instr_ready depends on
// instr_warp); done[s][w]/done_ntxn[s][w]/done_cycles[s][w] report its end,
// the number of transactions it became and its latency in cycles.
// kernel_start (all SMs) makes every width generator draw a new width set
// in the given mode (MODE_DYNAMIC: per-line widths; MODE_FIXED: one width
// per kernel) and must be given between instructions; instructions are
// accepted again 16 cycles later.
// Statistics: sm_ev[s] carries the per-SM event pulses of sm_ldst_path
// (bit 0 new transaction, 1 thread coalesced, 2 split subtransaction, 3 L1
// hit, 4 L1 MSHR allocation, 5 L1 MSHR merge, 6 stall on full L1 MSHRs,
// 7 request to the second level); u_ev carries the second level's pulses
// (bit 0 allocation, 1 merge, 2 merge with another SM's entry, 3 stall on
// full second-level MSHRs).
//
// Following the original design: the structure (per-SM randomised
// coalescers and MSHRs, one shared MSHR level, L2 behind it), 15 SMs of
// 2 warps, 32 threads, 64-byte L1 and 128-byte L2 lines, 48 KB L1, 32 MSHR entries
// per level and r[16]. Own choices: SM seeds, the handshakes and the
// statistics ports.
module gpu_obf_memsys
  import gpu_pkg::*;
#(
  parameter int unsigned NSM      = NUM_SM,
  parameter int unsigned WARP     = WARP_SIZE,
  parameter int unsigned NWID     = NUM_WIDTHS,
  parameter int unsigned L1_BYTES = 48 * 1024,
  parameter int unsigned L1_WAYS  = 6,
  parameter int unsigned L1_MSHRS = 32,
  parameter int unsigned L2_MSHRS = 32,
  parameter int unsigned NWARPS   = NUM_WARPS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              kernel_start,
  input  width_mode_e       mode,
  // per-SM warp memory instructions
  input  logic [NSM-1:0]    instr_valid,
  output logic [NSM-1:0]    instr_ready,
  input  addr_t             instr_addr   [NSM][WARP],
  input  logic [WARP-1:0]   instr_active [NSM],
  input  logic [WID_W-1:0]  instr_warp   [NSM],
  output logic [NWARPS-1:0] done         [NSM],
  output logic [$clog2(WARP+1)-1:0] done_ntxn [NSM][NWARPS],
  output logic [31:0]       done_cycles  [NSM][NWARPS],
  // L2 port
  output logic              l2_req_valid,
  input  logic              l2_req_ready,
  output logic [$clog2(L2_MSHRS)-1:0] l2_req_id,
  output l2_line_t          l2_req_line,
  input  logic              l2_resp_valid,
  input  logic [$clog2(L2_MSHRS)-1:0] l2_resp_id,
  // statistics
  output logic [7:0]        sm_ev [NSM],
  output logic [3:0]        u_ev
);

  logic [NSM-1:0] req_valid, req_ready;
  line_t          req_line [NSM];
  logic           bc_valid;
  l2_line_t       bc_l2line;
  logic [NSM-1:0] bc_mask;

  for (genvar s = 0; s < int'(NSM); s++) begin : g_sm
    sm_ldst_path #(
      .WARP(WARP), .NWID(NWID),
      .SEED(32'h9E37_79B9 * (s + 1)),
      .L1_BYTES(L1_BYTES), .L1_WAYS(L1_WAYS), .L1_MSHRS(L1_MSHRS),
      .NWARPS(NWARPS)
    ) u_sm (
      .clk, .rst_n, .kernel_start, .mode,
      .instr_valid (instr_valid[s]),
      .instr_ready (instr_ready[s]),
      .instr_addr  (instr_addr[s]),
      .instr_active(instr_active[s]),
      .instr_warp  (instr_warp[s]),
      .done        (done[s]),
      .done_ntxn   (done_ntxn[s]),
      .done_cycles (done_cycles[s]),
      .req_valid   (req_valid[s]),
      .req_ready   (req_ready[s]),
      .req_line    (req_line[s]),
      .bc_valid    (bc_valid && bc_mask[s]),
      .bc_l2line,
      .ev          (sm_ev[s])
    );
  end

  unified_mshr #(.NSM(NSM), .ENTRIES(L2_MSHRS)) u_umshr (
    .clk, .rst_n,
    .sm_req_valid(req_valid),
    .sm_req_ready(req_ready),
    .sm_req_line (req_line),
    .l2_req_valid, .l2_req_ready, .l2_req_id, .l2_req_line,
    .l2_resp_valid, .l2_resp_id,
    .bc_valid, .bc_l2line, .bc_mask,
    .ev_alloc(u_ev[0]), .ev_merge(u_ev[1]), .ev_merge_xsm(u_ev[2]), .ev_stall(u_ev[3])
  );

endmodule
