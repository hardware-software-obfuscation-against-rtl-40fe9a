// sm_ldst_path: the load path of one SM, from warp addresses to L2 requests.
//
// Chains the blocks of one streaming multiprocessor:
//   coalescing_unit (widths from width_rng) -> L1 lookup
//   (l1_tags) -> first-level MSHRs (l1_mshr) -> request to the shared
//   second-level MSHRs.
// A warp memory instruction (WARP addresses, an active mask and the id of
// the issuing warp) is accepted when the coalescer is free and that warp has
// no instruction in flight, so the NWARPS warps of the SM overlap: one
// warp's instruction is walked while the other's misses are outstanding. Every transaction from the coalescer is looked up
// in L1, one per cycle: a hit retires it at once; a miss is handed to the
// L1 MSHRs (allocated or merged) and retires when the second level
// broadcasts its L2 line. The instruction is complete when the coalescer has
// walked all threads and every transaction it produced has retired;
// done[w] then pulses with the number of transactions and the cycles taken,
// which is the timing an attacker would observe per instruction.
//
// Interface: instr_valid/instr_ready/instr_addr/instr_active/instr_warp
// in; done, done_ntxn, done_cycles out, one each per warp; req_valid/req_ready/req_line to the second
// level; bc_valid/bc_l2line from it (bc_valid already qualified with this
// SM's mask bit). kernel_start and mode go to the width generator.
// Statistic pulses in ev, bit by bit as listed at the end of this file.
//
// Own choices: one instruction in flight per warp, a one-transaction-per-
// cycle L1 lookup, and a lookup that waits one cycle while a broadcast is
// being written into the L1 MSHRs.
module sm_ldst_path
  import gpu_pkg::*;
#(
  parameter int unsigned WARP        = WARP_SIZE,
  parameter int unsigned NWID        = NUM_WIDTHS,
  parameter logic [31:0] SEED        = 32'h1,
  parameter int unsigned TXQ_DEPTH   = 8,
  parameter int unsigned L1_BYTES    = 48 * 1024,
  parameter int unsigned L1_WAYS     = 6,
  parameter int unsigned L1_MSHRS    = 32,
  parameter int unsigned NWARPS      = NUM_WARPS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            kernel_start,
  input  width_mode_e     mode,
  input  logic            instr_valid,
  output logic            instr_ready,
  input  addr_t           instr_addr [WARP],
  input  logic [WARP-1:0] instr_active,
  input  logic [WID_W-1:0] instr_warp,
  output logic [NWARPS-1:0] done,
  output logic [$clog2(WARP+1)-1:0] done_ntxn [NWARPS],
  output logic [31:0]     done_cycles [NWARPS],
  output logic            req_valid,
  input  logic            req_ready,
  output line_t           req_line,
  input  logic            bc_valid,
  input  l2_line_t        bc_l2line,
  output logic [7:0]      ev
);

  localparam int RW = 8 + $clog2(L1_MSHRS+1);

  rlog_t           r_log2   [NWID];
  logic            r_ready;
  logic            coal_in_ready, coal_busy, coal_done;
  logic [$clog2(WARP+1)-1:0] coal_ntxn;
  logic            txn_valid, txn_ready;
  txn_t            txn;
  logic            ev_new, ev_merge, ev_split;
  logic            lk_hit;
  logic [1:0]      fill_valid;
  line_t           fill_line [2];
  // the two 64-byte halves of the broadcast L2 line
  assign fill_line[0] = {bc_l2line, 1'b0};
  assign fill_line[1] = {bc_l2line, 1'b1};
  logic            miss_ready;
  logic [RW-1:0]   rel_count [NWARPS];
  logic            m_alloc, m_merge, m_full;
  logic [NWARPS-1:0] active, walked;
  logic [15:0]     outstanding [NWARPS];
  logic [WID_W-1:0] walk_warp;
  logic            accept, hit_retire;

  width_rng #(.NWID(NWID), .SEED(SEED)) u_rng (
    .clk, .rst_n, .kernel_start, .mode, .ready(r_ready), .r_log2
  );

  coalescing_unit #(.WARP(WARP), .NWID(NWID), .TXQ_DEPTH(TXQ_DEPTH)) u_coal (
    .clk, .rst_n,
    .r_log2, .r_ready(r_ready && !kernel_start),
    .in_valid (accept),
    .in_ready (coal_in_ready),
    .in_addr  (instr_addr),
    .in_active(instr_active),
    .in_warp  (instr_warp),
    .txn_valid, .txn_ready, .txn,
    .busy(coal_busy), .done(coal_done), .done_ntxn(coal_ntxn), .warp_q(walk_warp),
    .ev_new, .ev_merge, .ev_split
  );

  l1_tags #(.SIZE_BYTES(L1_BYTES), .WAYS(L1_WAYS)) u_l1 (
    .clk, .rst_n,
    .lk_line(txn.line), .lk_hit,
    .fill_valid, .fill_line
  );

  l1_mshr #(.ENTRIES(L1_MSHRS), .CNT_W(8), .NWARPS(NWARPS)) u_mshr (
    .clk, .rst_n,
    .miss_valid (txn_valid && !lk_hit),
    .miss_ready,
    .miss_line  (txn.line),
    .miss_warp  (txn.warp),
    .req_valid, .req_ready, .req_line,
    .resp_valid (bc_valid),
    .resp_l2line(bc_l2line),
    .fill_valid,
    .rel_count,
    .ev_alloc(m_alloc), .ev_merge(m_merge), .full(m_full)
  );

  assign hit_retire  = txn_valid && lk_hit;
  assign txn_ready   = lk_hit || miss_ready;
  assign instr_ready = !active[instr_warp] && coal_in_ready && !kernel_start;
  assign accept      = instr_valid && instr_ready;

  // per-warp bookkeeping: a warp's instruction is complete when it has been
  // walked by the coalescer and all its transactions have retired (the
  // count includes transactions still in the coalescer queue)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= '0;
      walked <= '0;
      done   <= '0;
      for (int w = 0; w < int'(NWARPS); w++) begin
        outstanding[w] <= '0;
        done_ntxn[w]   <= '0;
        done_cycles[w] <= '0;
      end
    end else begin
      for (int w = 0; w < int'(NWARPS); w++) begin
        done[w] <= 1'b0;
        outstanding[w] <= outstanding[w]
                          + 16'(ev_new && walk_warp == WID_W'(w))
                          - 16'(hit_retire && txn.warp == WID_W'(w))
                          - 16'(rel_count[w]);
        if (coal_done && walk_warp == WID_W'(w)) begin
          done_ntxn[w] <= coal_ntxn;
          walked[w]    <= 1'b1;
        end
        if (accept && instr_warp == WID_W'(w)) begin
          active[w]      <= 1'b1;
          walked[w]      <= 1'b0;
          done_cycles[w] <= 32'd1;
        end else if (active[w]) begin
          done_cycles[w] <= done_cycles[w] + 1'b1;
          if (walked[w] && outstanding[w] == '0) begin
            active[w] <= 1'b0;
            done[w]   <= 1'b1;
          end
        end
      end
    end
  end

  // event pulses: 0 new transaction, 1 thread coalesced, 2 split
  // subtransaction, 3 L1 hit, 4 L1 miss allocated an MSHR, 5 L1 miss merged
  // into an MSHR, 6 miss waiting on full MSHRs, 7 L1 MSHR request sent
  assign ev = {req_valid && req_ready,
               txn_valid && !lk_hit && !miss_ready && m_full,
               m_merge, m_alloc, hit_retire, ev_split, ev_merge, ev_new};

endmodule
