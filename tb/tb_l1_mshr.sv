// tb_l1_mshr: checks the first-level MSHRs against a reference model.
// Every cycle a random miss, a random request-ready and, now and then, an
// L2 response for a line that has already been requested are applied. The
// model (a list of outstanding lines with their waiting counts and a sent
// flag) predicts miss_ready, whether a request is pending, that the request
// is for an unsent line, the released transaction count of each warp and
// the L1 fills.
// At the end all entries are drained and the number of retired
// transactions must equal the number of accepted misses.
module tb_l1_mshr;
  import gpu_pkg::*;

  localparam int ENTRIES = 32;

  int checks = 0, failures = 0;
  int accepted = 0, retired = 0, merges = 0, full_cycles = 0;
  logic clk = 0, rst_n = 0;
  logic miss_valid = 0, miss_ready;
  line_t miss_line;
  logic [WID_W-1:0] miss_warp;
  logic req_valid, req_ready = 0;
  line_t req_line;
  logic resp_valid = 0;
  l2_line_t resp_l2line;
  logic [1:0] fill_valid;
  logic [8+$clog2(ENTRIES+1)-1:0] rel_count [NUM_WARPS];
  logic ev_alloc, ev_merge, full;

  // model: outstanding line -> count, sent
  int  m_cnt  [line_t];          // total waiting
  int  m_wcnt [line_t][NUM_WARPS]; // waiting per warp
  bit  m_sent [line_t];

  l1_mshr dut (.*);

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

  task automatic step(bit allow_miss, int resp_pct);
    line_t sent_lines [$];
    bit exp_ready, exp_req;
    int exp_rel;
    int exp_w [NUM_WARPS];
    logic [1:0] exp_fill;
    // drive
    miss_valid = allow_miss && ($urandom_range(0, 3) != 0);
    miss_line  = line_t'($urandom_range(0, 63));
    miss_warp  = WID_W'($urandom);
    req_ready  = ($urandom_range(0, 1) == 1);
    foreach (m_sent[l]) if (m_sent[l]) sent_lines.push_back(l);
    resp_valid = (sent_lines.size() > 0) && ($urandom_range(0, 99) < resp_pct);
    resp_l2line = resp_valid ? sent_lines[$urandom_range(0, sent_lines.size() - 1)][LINE_W-1:1] : '0;
    #1;
    // predict
    exp_ready = !resp_valid && (m_cnt.exists(miss_line) || m_cnt.num() < ENTRIES);
    exp_req = 0;
    foreach (m_sent[l]) if (!m_sent[l]) exp_req = 1;
    exp_rel = 0; exp_fill = '0;
    foreach (exp_w[w]) exp_w[w] = 0;
    if (resp_valid)
      foreach (m_cnt[l]) if (l[LINE_W-1:1] == resp_l2line) begin
        exp_rel += m_cnt[l]; exp_fill[l[0]] = 1;
        for (int w = 0; w < NUM_WARPS; w++) exp_w[w] += m_wcnt[l][w];
      end
    check(miss_ready == exp_ready, "miss_ready");
    check(req_valid == exp_req, "req_valid");
    if (req_valid) check(m_sent.exists(req_line) && !m_sent[req_line], $sformatf("request for line %0d not pending", req_line));
    for (int w = 0; w < NUM_WARPS; w++)
      check(int'(rel_count[w]) == exp_w[w], $sformatf("rel_count[%0d] %0d expected %0d", w, rel_count[w], exp_w[w]));
    check(fill_valid == exp_fill, "fill_valid");
    if (full) full_cycles++;
    // update model
    if (req_valid && req_ready) m_sent[req_line] = 1;
    if (resp_valid) begin
      line_t rl [$];
      foreach (m_cnt[l]) if (l[LINE_W-1:1] == resp_l2line) rl.push_back(l);
      foreach (rl[i]) begin m_cnt.delete(rl[i]); m_sent.delete(rl[i]); m_wcnt.delete(rl[i]); end
      retired += exp_rel;
    end
    if (miss_valid && miss_ready) begin
      accepted++;
      if (m_cnt.exists(miss_line)) begin m_cnt[miss_line]++; merges++; end
      else begin
        m_cnt[miss_line] = 1; m_sent[miss_line] = 0;
        for (int w = 0; w < NUM_WARPS; w++) m_wcnt[miss_line][w] = 0;
      end
      m_wcnt[miss_line][miss_warp]++;
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) step(1, (i / 2000) % 2 == 0 ? 5 : 40);
    // drain
    for (int i = 0; i < 2000 && m_cnt.num() > 0; i++) step(0, 60);
    check(m_cnt.num() == 0, "model drained");
    check(accepted == retired, $sformatf("accepted %0d retired %0d", accepted, retired));
    check(merges > 100 && full_cycles > 100, $sformatf("merges %0d full cycles %0d", merges, full_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
