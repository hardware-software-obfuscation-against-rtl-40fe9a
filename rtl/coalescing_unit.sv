// coalescing_unit: coalescer with per-line random subtransaction width.
//
// A warp memory instruction (the byte address of each of WARP threads plus
// an active mask) is accepted when the width generator is ready. Each
// address is split into its 64-byte line number (address / 64) and its
// offset in the line (address % 64), the "cache line and offset detection"
// stage in front of the coalescer proper, which is plain wiring here. The unit then walks the threads in order, one per clock cycle.
// For an active thread with line L and offset o it looks up
//   r    = r[L % 16]              (here as r_log2 = log2 r)
//   size = 64 / r                 (the subtransaction width)
//   sub  = o / size               (the subtransaction number, 0..r-1)
// and searches the transactions already issued for this instruction (the
// ordered request list). If one has the same line and the same
// subtransaction number, the thread is coalesced into it. Otherwise a new
// transaction {line, sub, r_log2} is appended to the list and pushed into
// the queue towards L1, even when another subtransaction of the same line
// is already under way; that extra transaction is the intended timing noise.
// With r = 1 for every line the unit behaves as an ordinary 64-byte
// coalescer.
//
// Interface: in_valid/in_ready take an instruction and the id of the warp
// that issued it; txn_valid/txn_ready hand out transactions tagged with
// that id (queue of TXQ_DEPTH entries); done pulses for one cycle after the
// last thread, with the number of transactions issued; warp_q is the warp
// of the instruction being (or last) walked. A new instruction can be
// accepted as soon as the previous one has been walked, while its
// transactions are still queued or in flight.
// Statistics pulses: ev_new (a transaction issued), ev_merge (a thread
// coalesced), ev_split (a transaction issued for a line that already had
// one with another subtransaction number in this instruction).
//
// Timing: WARP cycles per instruction plus one cycle for every cycle the
// transaction queue is full. The first transaction can leave the queue the
// cycle after it is found.
//
// Following the original design: the subtransaction rule, the r[line % 16]
// indexing, the in-order check against earlier requests and the queue to
// L1. Own choices: one thread per cycle, the queue depth and the handshake.
// r_log2 must not change while an instruction is in progress (the width
// generator only redraws at a kernel start).
module coalescing_unit
  import gpu_pkg::*;
#(
  parameter int unsigned WARP      = WARP_SIZE,
  parameter int unsigned NWID      = NUM_WIDTHS,
  parameter int unsigned TXQ_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // width set from the random generator
  input  rlog_t       r_log2 [NWID],
  input  logic        r_ready,
  // warp instruction
  input  logic        in_valid,
  output logic        in_ready,
  input  addr_t       in_addr   [WARP],
  input  logic [WARP-1:0] in_active,
  input  logic [WID_W-1:0] in_warp,
  // transactions to L1
  output logic        txn_valid,
  input  logic        txn_ready,
  output txn_t        txn,
  // completion and statistics
  output logic        busy,
  output logic        done,
  output logic [$clog2(WARP+1)-1:0] done_ntxn,
  output logic [WID_W-1:0] warp_q,
  output logic        ev_new,
  output logic        ev_merge,
  output logic        ev_split
);

  localparam int TW = (WARP > 1) ? $clog2(WARP) : 1;
  localparam int NW = $clog2(WARP+1);

  line_t           line_q [WARP];
  off_t            off_q  [WARP];
  logic [WARP-1:0] act_q;
  logic [TW-1:0]   idx;

  // ordered list of transactions issued for the current instruction
  line_t            lst_line [WARP];
  logic [SUB_W-1:0] lst_sub  [WARP];
  logic [NW-1:0]    nlst;

  // current thread
  line_t            cur_line;
  rlog_t            cur_rlog;
  logic [SUB_W-1:0] cur_sub;
  logic             hit_same, hit_line;
  logic             q_in_ready;
  logic             do_push, advance, last;

  always_comb begin
    cur_line = line_q[idx];
    cur_rlog = r_log2[cur_line[$clog2(NWID)-1:0]];
    cur_sub  = sub_of(off_q[idx], cur_rlog);
    hit_same = 1'b0;
    hit_line = 1'b0;
    for (int e = 0; e < int'(WARP); e++) begin
      if (NW'(e) < nlst && lst_line[e] == cur_line) begin
        hit_line = 1'b1;
        if (lst_sub[e] == cur_sub) hit_same = 1'b1;
      end
    end
  end

  assign do_push  = busy && act_q[idx] && !hit_same;
  assign advance  = busy && (!do_push || q_in_ready);
  assign last     = (idx == TW'(WARP - 1));
  assign in_ready = !busy && r_ready;

  assign ev_new   = do_push && q_in_ready;
  assign ev_merge = busy && act_q[idx] && hit_same;
  assign ev_split = ev_new && hit_line;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      idx       <= '0;
      nlst      <= '0;
      act_q     <= '0;
      warp_q    <= '0;
      done      <= 1'b0;
      done_ntxn <= '0;
    end else begin
      done <= 1'b0;
      if (in_valid && in_ready) begin
        busy  <= 1'b1;
        idx   <= '0;
        nlst  <= '0;
        act_q <= in_active;
        warp_q <= in_warp;
      end else if (advance) begin
        if (ev_new) nlst <= nlst + 1'b1;
        if (last) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          done_ntxn <= nlst + NW'(ev_new);
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      for (int t = 0; t < int'(WARP); t++) begin
        line_q[t] <= in_addr[t][ADDR_W-1:OFF_W];
        off_q[t]  <= in_addr[t][OFF_W-1:0];
      end
    end
    if (ev_new) begin
      lst_line[nlst[TW-1:0]] <= cur_line;
      lst_sub[nlst[TW-1:0]]  <= cur_sub;
    end
  end

  txn_t q_in;
  assign q_in = '{warp: warp_q, line: cur_line, sub: cur_sub, rlog: cur_rlog};

  sync_fifo #(.T(txn_t), .DEPTH(TXQ_DEPTH)) u_txq (
    .clk, .rst_n,
    .in_valid (do_push),
    .in_ready (q_in_ready),
    .in_data  (q_in),
    .out_valid(txn_valid),
    .out_ready(txn_ready),
    .out_data (txn),
    .count    ()
  );

endmodule
