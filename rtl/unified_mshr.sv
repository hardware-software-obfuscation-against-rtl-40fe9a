// unified_mshr: second-level MSHRs shared by all SMs.
//
// The L1 MSHRs of every SM send their requests (one 64-byte line each) to
// this single set of ENTRIES registers through a round-robin arbiter, one
// request per cycle. Requests are tracked per 128-byte L2 line. If an entry
// for the same L2 line is already outstanding, from this SM or any other,
// the request is merged into it by setting the requester's bit in the
// entry's SM mask, and nothing new is sent to L2. Otherwise a free entry is
// allocated and, in turn, one request is issued to L2 for it. When L2
// answers, the entry is freed and the L2 line together with the SM mask is
// broadcast to all SMs in the same cycle; each SM whose bit is set releases
// its first-level entries for that line. When all entries are busy and
// none matches, the granted SM waits (ev_stall).
//
// Interface:
//   sm_req_valid/sm_req_ready/sm_req_line  one request port per SM
//   l2_req_valid/l2_req_ready/l2_req_id/l2_req_line  request to L2; the id
//                                          is the entry index
//   l2_resp_valid/l2_resp_id               answer from L2, always accepted
//   bc_valid/bc_l2line/bc_mask             broadcast of the returned line
//   ev_alloc/ev_merge/ev_merge_xsm/ev_stall statistics pulses (ev_merge_xsm:
//                                          merged with another SM's entry)
// Timing: a request is accepted in the cycle it is granted; the L2 request
// of a new entry appears the next cycle; the broadcast is combinational
// from the L2 response.
//
// Following the original design: one shared level behind the per-SM
// MSHRs, 32 entries, merging of requests of different SMs within a
// 128-byte L2 line, only unmatched requests going to L2. Own choices: the
// arbiter, the SM mask, lowest-index issue order and broadcasting the
// response to all SMs.
module unified_mshr
  import gpu_pkg::*;
#(
  parameter int unsigned NSM     = NUM_SM,
  parameter int unsigned ENTRIES = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NSM-1:0]    sm_req_valid,
  output logic [NSM-1:0]    sm_req_ready,
  input  line_t             sm_req_line [NSM],
  output logic              l2_req_valid,
  input  logic              l2_req_ready,
  output logic [$clog2(ENTRIES)-1:0] l2_req_id,
  output l2_line_t          l2_req_line,
  input  logic              l2_resp_valid,
  input  logic [$clog2(ENTRIES)-1:0] l2_resp_id,
  output logic              bc_valid,
  output l2_line_t          bc_l2line,
  output logic [NSM-1:0]    bc_mask,
  output logic              ev_alloc,
  output logic              ev_merge,
  output logic              ev_merge_xsm,
  output logic              ev_stall
);

  localparam int EW = $clog2(ENTRIES);

  logic [ENTRIES-1:0] valid, sent, rel;
  l2_line_t           l2line [ENTRIES];
  logic [NSM-1:0]     mask   [ENTRIES];

  logic               g_any;
  logic [NSM-1:0]     g_onehot;
  logic [$clog2(NSM)-1:0] g_idx;
  l2_line_t           g_l2line;
  logic               match, has_free, has_req, accept;
  logic [EW-1:0]      match_idx, free_idx, req_idx;

  rr_arbiter #(.N(NSM)) u_arb (
    .clk, .rst_n,
    .req  (sm_req_valid),
    .take (accept),
    .any  (g_any),
    .grant(g_onehot),
    .idx  (g_idx)
  );

  assign g_l2line = sm_req_line[g_idx][LINE_W-1:1];

  always_comb begin
    rel = '0;
    if (l2_resp_valid) rel[l2_resp_id] = 1'b1;
    match = 1'b0; match_idx = '0;
    has_free = 1'b0; free_idx = '0;
    has_req = 1'b0; req_idx = '0;
    for (int e = int'(ENTRIES) - 1; e >= 0; e--) begin
      if (valid[e] && !rel[e] && l2line[e] == g_l2line) begin match = 1'b1; match_idx = EW'(e); end
      if (!valid[e])                                    begin has_free = 1'b1; free_idx = EW'(e); end
      if (valid[e] && !sent[e])                         begin has_req = 1'b1; req_idx = EW'(e); end
    end
  end

  assign accept       = g_any && (match || has_free);
  assign sm_req_ready = accept ? g_onehot : '0;
  assign ev_alloc     = accept && !match;
  assign ev_merge     = accept && match;
  assign ev_merge_xsm = ev_merge && ((mask[match_idx] & ~g_onehot) != '0);
  assign ev_stall     = g_any && !accept;

  assign l2_req_valid = has_req;
  assign l2_req_id    = req_idx;
  assign l2_req_line  = l2line[req_idx];

  assign bc_valid     = l2_resp_valid;
  assign bc_l2line    = l2line[l2_resp_id];
  assign bc_mask      = mask[l2_resp_id];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      sent  <= '0;
    end else begin
      if (l2_req_valid && l2_req_ready) sent[req_idx] <= 1'b1;
      if (ev_alloc) sent[free_idx] <= 1'b0;
      valid <= (valid & ~rel) | (ev_alloc ? ENTRIES'(1) << free_idx : '0);
    end
  end

  always_ff @(posedge clk) begin
    if (ev_alloc) begin
      l2line[free_idx] <= g_l2line;
      mask[free_idx]   <= g_onehot;
    end else if (ev_merge) begin
      mask[match_idx]  <= mask[match_idx] | g_onehot;
    end
  end

`ifndef SYNTHESIS
  // L2 only answers entries that are outstanding.
  assert property (@(posedge clk) disable iff (!rst_n)
                   l2_resp_valid |-> valid[l2_resp_id] && sent[l2_resp_id]);
`endif

endmodule
