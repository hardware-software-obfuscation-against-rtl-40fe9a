// l1_mshr: first-level miss status holding registers of one SM.
//
// Every L1 miss is tracked here. A miss to a line that already has an entry
// is merged into it (its counter of waiting transactions is incremented);
// otherwise the lowest free entry is allocated. Each entry sends exactly one
// request for its line towards the shared second-level MSHRs. Misses of
// both warps of the SM share entries; each entry counts its waiting
// transactions per warp. When the
// second level broadcasts that a 128-byte L2 line has returned to this SM,
// every entry whose 64-byte line lies in it is released at once, those
// lines are filled into the L1 tags, and the number of transactions that
// were waiting on them is reported so the SM can retire them.
//
// Interface:
//   miss_valid/miss_ready/miss_line  miss from the L1 lookup. Not ready
//                                    when all entries are busy and none
//                                    matches, or while a response is being
//                                    taken in (one stall cycle).
//   req_valid/req_ready/req_line     request to the second level, oldest
//                                    free-index-first (lowest unsent entry).
//   resp_valid/resp_l2line           L2 line returned for this SM.
//   fill_valid[h]                    fill the 64-byte half h of the
//                                    returned L2 line into the L1 tags.
//   miss_warp                        warp of the missing transaction.
//   rel_count[w]                     transactions of warp w completed
//                                    this cycle.
//   ev_alloc/ev_merge, full          statistics.
// Timing: allocation and merge take effect at the clock edge; a new entry
// can request in the next cycle; release happens on the edge of the
// response cycle.
//
// Following the original design: 32 entries per SM, one outstanding
// request per missing line, merging of accesses within the SM and release
// on the L2 response. Own choices: the per-entry counter, release by L2
// line, lowest-index selection and the handshakes.
module l1_mshr
  import gpu_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned CNT_W   = 8,
  parameter int unsigned NWARPS  = NUM_WARPS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       miss_valid,
  output logic       miss_ready,
  input  line_t      miss_line,
  input  logic [WID_W-1:0] miss_warp,
  output logic       req_valid,
  input  logic       req_ready,
  output line_t      req_line,
  input  logic       resp_valid,
  input  l2_line_t   resp_l2line,
  output logic [1:0] fill_valid,
  output logic [CNT_W+$clog2(ENTRIES+1)-1:0] rel_count [NWARPS],
  output logic       ev_alloc,
  output logic       ev_merge,
  output logic       full
);

  localparam int EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int RW = CNT_W + $clog2(ENTRIES+1);

  logic [ENTRIES-1:0] valid, sent;
  line_t              line [ENTRIES];
  logic [CNT_W-1:0]   cnt  [ENTRIES][NWARPS];

  logic               match, has_free, has_req;
  logic [EW-1:0]      match_idx, free_idx, req_idx;
  logic [ENTRIES-1:0] rel;
  logic               accept;

  always_comb begin
    match = 1'b0; match_idx = '0;
    has_free = 1'b0; free_idx = '0;
    has_req = 1'b0; req_idx = '0;
    rel = '0;
    for (int w = 0; w < int'(NWARPS); w++) rel_count[w] = '0;
    fill_valid = '0;
    for (int e = int'(ENTRIES) - 1; e >= 0; e--) begin
      if (valid[e] && line[e] == miss_line) begin match = 1'b1; match_idx = EW'(e); end
      if (!valid[e])                        begin has_free = 1'b1; free_idx = EW'(e); end
      if (valid[e] && !sent[e])             begin has_req = 1'b1; req_idx = EW'(e); end
    end
    for (int e = 0; e < int'(ENTRIES); e++) begin
      if (resp_valid && valid[e] && line[e][LINE_W-1:1] == resp_l2line) begin
        rel[e]    = 1'b1;
        for (int w = 0; w < int'(NWARPS); w++) rel_count[w] = rel_count[w] + RW'(cnt[e][w]);
        fill_valid[line[e][0]] = 1'b1;
      end
    end
  end

  assign full       = !has_free;
  assign miss_ready = !resp_valid && (match || has_free);
  assign accept     = miss_valid && miss_ready;
  assign ev_alloc   = accept && !match;
  assign ev_merge   = accept && match;
  assign req_valid  = has_req;
  assign req_line   = line[req_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      sent  <= '0;
    end else begin
      if (req_valid && req_ready) sent[req_idx] <= 1'b1;
      if (ev_alloc) sent[free_idx] <= 1'b0;
      valid <= (valid & ~rel) | (ev_alloc ? (ENTRIES)'(1) << free_idx : '0);
    end
  end

  always_ff @(posedge clk) begin
    if (ev_alloc) begin
      line[free_idx] <= miss_line;
      for (int w = 0; w < int'(NWARPS); w++)
        cnt[free_idx][w] <= (WID_W'(w) == miss_warp) ? CNT_W'(1) : '0;
    end else if (ev_merge) begin
      cnt[match_idx][miss_warp] <= cnt[match_idx][miss_warp] + 1'b1;
    end
  end

endmodule
