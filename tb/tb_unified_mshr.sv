// tb_unified_mshr: checks the shared second-level MSHRs (15 SMs, 32
// entries) against a cycle-level reference model written here: a
// round-robin grant, per-entry L2 line, SM mask and sent flag, lowest free
// entry on allocation and lowest unsent entry for the L2 request.
// Random SM requests over a small set of lines make requests of different
// SMs collide in the same 128-byte L2 line; random L2 responses return
// entries. Each cycle the ready vector, the L2 request and the broadcast
// (line and SM mask) are compared with the model. It also checks that L2
// never sees two outstanding requests for the same L2 line, and counts
// merges across SMs and stalls on a full set.
module tb_unified_mshr;
  import gpu_pkg::*;

  localparam int NSM = NUM_SM, ENTRIES = 32, EW = 5;

  int checks = 0, failures = 0;
  int xsm_merges = 0, stalls = 0, allocs = 0;
  logic clk = 0, rst_n = 0;
  logic [NSM-1:0] sm_req_valid = '0, sm_req_ready;
  line_t sm_req_line [NSM];
  logic l2_req_valid, l2_req_ready = 0;
  logic [EW-1:0] l2_req_id, l2_resp_id;
  l2_line_t l2_req_line;
  logic l2_resp_valid = 0;
  logic bc_valid;
  l2_line_t bc_l2line;
  logic [NSM-1:0] bc_mask;
  logic ev_alloc, ev_merge, ev_merge_xsm, ev_stall;

  bit       m_valid [ENTRIES];
  bit       m_sent  [ENTRIES];
  l2_line_t m_line  [ENTRIES];
  logic [NSM-1:0] m_mask [ENTRIES];
  int       ptr = 0;

  unified_mshr dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(int req_pct, int resp_pct);
    int sent_ids [$];
    int g, match, free, req;
    logic [NSM-1:0] exp_ready;
    for (int s = 0; s < NSM; s++) begin
      sm_req_valid[s] = ($urandom_range(0, 99) < req_pct);
      sm_req_line[s]  = line_t'($urandom_range(0, 95));
    end
    l2_req_ready = ($urandom_range(0, 3) != 0);
    for (int e = 0; e < ENTRIES; e++) if (m_valid[e] && m_sent[e]) sent_ids.push_back(e);
    l2_resp_valid = (sent_ids.size() > 0) && ($urandom_range(0, 99) < resp_pct);
    l2_resp_id    = l2_resp_valid ? EW'(sent_ids[$urandom_range(0, sent_ids.size() - 1)]) : '0;
    #1;
    // model
    g = -1;
    for (int k = 0; k < NSM; k++) if (g < 0 && sm_req_valid[(ptr + k) % NSM]) g = (ptr + k) % NSM;
    match = -1; free = -1; req = -1;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (g >= 0 && m_valid[e] && !(l2_resp_valid && int'(l2_resp_id) == e)
          && m_line[e] == sm_req_line[g][LINE_W-1:1]) match = e;
      if (!m_valid[e]) free = e;
      if (m_valid[e] && !m_sent[e]) req = e;
    end
    exp_ready = '0;
    if (g >= 0 && (match >= 0 || free >= 0)) exp_ready[g] = 1'b1;
    check(sm_req_ready == exp_ready, $sformatf("ready %h expected %h", sm_req_ready, exp_ready));
    check(l2_req_valid == (req >= 0), "l2_req_valid");
    if (req >= 0) check(int'(l2_req_id) == req && l2_req_line == m_line[req], "l2 request entry/line");
    check(bc_valid == l2_resp_valid, "bc_valid");
    if (l2_resp_valid)
      check(bc_l2line == m_line[l2_resp_id] && bc_mask == m_mask[l2_resp_id], "broadcast line/mask");
    if (ev_merge_xsm) xsm_merges++;
    if (ev_stall) stalls++;
    // one outstanding L2 request per L2 line
    for (int a = 0; a < ENTRIES; a++)
      for (int b = a + 1; b < ENTRIES; b++)
        if (m_valid[a] && m_valid[b] && m_sent[a] && m_sent[b]) check(m_line[a] != m_line[b], "duplicate L2 request");
    // update
    if (req >= 0 && l2_req_ready) m_sent[req] = 1;
    if (l2_resp_valid) m_valid[l2_resp_id] = 0;
    if (g >= 0 && exp_ready[g]) begin
      ptr = (g + 1) % NSM;
      if (match >= 0) m_mask[match][g] = 1'b1;
      else begin
        m_valid[free] = 1; m_sent[free] = 0;
        m_line[free] = sm_req_line[g][LINE_W-1:1];
        m_mask[free] = '0; m_mask[free][g] = 1'b1;
        allocs++;
      end
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++)
      step((i / 1000) % 2 == 0 ? 30 : 80, (i / 1500) % 2 == 0 ? 60 : 10);
    check(xsm_merges > 100, $sformatf("cross-SM merges %0d", xsm_merges));
    check(stalls > 100, $sformatf("full stalls %0d", stalls));
    check(allocs > 100, $sformatf("allocations %0d", allocs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
