// tb_gpu_obf_memsys: end-to-end test of the whole load path at its default
// size (15 SMs, 32 threads, 48 KB L1, 32 + 32 MSHR entries, 16 widths),
// with a fixed-latency L2 model behind the second-level MSHRs.
//
// Workloads, all SMs running at once:
//  1. AES last round: the 2 warps of each SM each do the 16 T4 look-ups of
//     the last round, interleaved so that both warps have an instruction
//     in flight. Each thread encrypts its own random plaintext, so every index
//     is a random byte; a T4 entry is 4 bytes and the 1 KB table fills 16
//     lines. Run with per-line (dynamic) widths, then with the table
//     rotated column by column (16 columns of 4-byte entries, each shifted
//     by a distinct random amount, as the software rotation does), then
//     with one random width per kernel (fixed mode), each after a new
//     kernel start.
//  2. Micro-benchmark: a warp of 32 float loads touching n unique
//     addresses, n = 1..32, addresses 128 bytes apart and a separate
//     array per SM, so the second-level MSHRs overflow.
// Checks: each instruction's transaction count against a reference that
// applies the width rule to the widths each SM drew; latency of at least
// WARP+1 cycles; every instruction completes; L2 never has two outstanding
// requests for the same line; no more than one L2 request per distinct L2
// line in the AES phases while the table stays resident. Mechanisms counted
// (each must occur): thread coalescing, split subtransactions, L1 hits,
// L1 MSHR allocation and merge, second-level merge across SMs, stall on a
// full second level, fixed and dynamic width modes, table rotation, two
// warps of an SM in flight at once.
module tb_gpu_obf_memsys;
  import gpu_pkg::*;

  localparam int NSM = NUM_SM, W = WARP_SIZE;
  localparam addr_t T4_BASE = 32'h0001_0000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, kernel_start = 0;
  width_mode_e mode = MODE_DYNAMIC;
  localparam int NW = NUM_WARPS;
  logic [NSM-1:0] instr_valid = '0, instr_ready;
  addr_t instr_addr [NSM][W];
  logic [W-1:0] instr_active [NSM];
  logic [WID_W-1:0] instr_warp [NSM];
  logic [NW-1:0] done [NSM];
  logic [$clog2(W+1)-1:0] done_ntxn [NSM][NW];
  logic [31:0] done_cycles [NSM][NW];
  // per warp: instruction in flight and its expected transaction count
  bit inflight [NSM][NW];
  int exp_n    [NSM][NW];
  int n_overlap = 0;
  logic l2_req_valid, l2_req_ready, l2_resp_valid;
  logic [4:0] l2_req_id, l2_resp_id;
  l2_line_t l2_req_line;
  logic [7:0] sm_ev [NSM];
  logic [3:0] u_ev;
  int l2_reqs, l2_max_pending;

  rlog_t rsnap [NSM][NUM_WIDTHS];

  // mechanism counters
  int n_coal = 0, n_split = 0, n_hit = 0, n_alloc = 0, n_l1merge = 0;
  int n_l1req = 0, n_xsm = 0, n_ustall = 0, n_fixed = 0, n_dynamic = 0, n_rotated = 0;
  longint lat_sum [4];
  int     lat_cnt [4];
  int     phase = 0;
  int     n_fin = 0;   // SM processes finished in the current phase

  gpu_obf_memsys dut (.*);

  l2_model #(.LATENCY(100), .QDEPTH(64), .IDW(5)) u_l2 (
    .clk, .rst_n,
    .req_valid(l2_req_valid), .req_ready(l2_req_ready),
    .req_id(l2_req_id), .req_line(l2_req_line),
    .resp_valid(l2_resp_valid), .resp_id(l2_resp_id),
    .reqs(l2_reqs), .max_pending(l2_max_pending)
  );

  for (genvar s = 0; s < NSM; s++) begin : g_peek
    assign rsnap[s] = dut.g_sm[s].u_sm.u_rng.r_log2;
  end

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // event counters and the one-request-per-L2-line rule
  int outstanding_l2 [l2_line_t];
  l2_line_t id_line [32];
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NSM; s++) begin
      if (sm_ev[s][1]) n_coal++;
      if (sm_ev[s][2]) n_split++;
      if (sm_ev[s][3]) n_hit++;
      if (sm_ev[s][4]) n_alloc++;
      if (sm_ev[s][5]) n_l1merge++;
      if (sm_ev[s][7]) n_l1req++;
    end
    if (u_ev[2]) n_xsm++;
    if (u_ev[3]) n_ustall++;
    if (l2_resp_valid) outstanding_l2.delete(id_line[l2_resp_id]);
    if (l2_req_valid && l2_req_ready) begin
      checks++;
      if (outstanding_l2.exists(l2_req_line)) begin
        failures++;
        $display("FAIL second L2 request for outstanding line %h", l2_req_line);
      end
      outstanding_l2[l2_req_line] = 1;
      id_line[l2_req_id] = l2_req_line;
    end
  end

  // expected transactions of one instruction on SM s
  function automatic int model(int s, input addr_t a [W], input logic [W-1:0] act);
    int n = 0;
    longint keys [$];
    for (int t = 0; t < W; t++) if (act[t]) begin
      line_t l;
      int r, sub;
      longint key;
      bit found;
      l   = line_t'(a[t] / 64);
      r   = 1 << rsnap[s][l % NUM_WIDTHS];
      sub = (a[t] % 64) / (64 / r);
      key = longint'(l) * 8 + sub;
      found = 0;
      foreach (keys[i]) if (keys[i] == key) found = 1;
      if (!found) begin keys.push_back(key); n++; end
    end
    return n;
  endfunction

  // completion monitor: checks every finished instruction
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NSM; s++) begin
      if (inflight[s][0] && inflight[s][1]) n_overlap++;
      for (int w = 0; w < NW; w++) if (done[s][w]) begin
        check(inflight[s][w], $sformatf("SM %0d warp %0d: done without an instruction", s, w));
        check(int'(done_ntxn[s][w]) == exp_n[s][w],
              $sformatf("SM %0d warp %0d: %0d transactions, expected %0d", s, w, done_ntxn[s][w], exp_n[s][w]));
        check(done_cycles[s][w] >= W + 1, $sformatf("SM %0d latency %0d", s, done_cycles[s][w]));
        lat_sum[phase] += longint'(done_cycles[s][w]);
        lat_cnt[phase]++;
        inflight[s][w] = 0;
      end
    end
  end

  // hand one instruction of warp w to SM s, once that warp is free
  task automatic issue(int s, int w, input addr_t a [W], input logic [W-1:0] act);
    @(negedge clk);
    while (inflight[s][w]) @(negedge clk);
    exp_n[s][w]     = model(s, a, act);
    instr_addr[s]   = a;
    instr_active[s] = act;
    instr_warp[s]   = WID_W'(w);
    instr_valid[s]  = 1'b1;
    do @(posedge clk); while (!instr_ready[s]);
    inflight[s][w] = 1;
    @(negedge clk);
    instr_valid[s] = 1'b0;
  endtask

  task automatic drain(int s);
    while (inflight[s][0] || inflight[s][1]) @(negedge clk);
  endtask

  task automatic new_kernel(width_mode_e m);
    @(negedge clk);
    mode = m; kernel_start = 1'b1;
    @(negedge clk);
    kernel_start = 1'b0;
    repeat (NUM_WIDTHS + 2) @(negedge clk);
    if (m == MODE_FIXED) n_fixed++; else n_dynamic++;
  endtask

  // AES last round on all SMs; rot[i] = shift of column i (or all zero)
  task automatic aes_round(input int rot [16]);
    for (int s0 = 0; s0 < NSM; s0++) begin
      fork
        automatic int s = s0;
        begin
          for (int k = 0; k < 16; k++)
            for (int w = 0; w < NW; w++) begin
              addr_t a [W];
              for (int t = 0; t < W; t++) begin
                int e, i, j;
                e = $urandom_range(0, 255);  // T4 index of this thread
                i = e % 16; j = e / 16;      // column, row (line)
                a[t] = T4_BASE + addr_t'((((j + rot[i]) % 16) * 16 + i) * 4);
              end
              issue(s, w, a, '1);
            end
          drain(s);
          n_fin++;
        end
      join_none
    end
    wait (n_fin == NSM);
    n_fin = 0;
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rot [16];
    int reqs_before;
    for (int s = 0; s < NSM; s++) begin
      instr_active[s] = '0;
      instr_warp[s] = '0;
      for (int w = 0; w < NW; w++) begin inflight[s][w] = 0; exp_n[s][w] = 0; end
      for (int t = 0; t < W; t++) instr_addr[s][t] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- phase 0: AES, dynamic widths, plain table
    phase = 0;
    new_kernel(MODE_DYNAMIC);
    foreach (rot[i]) rot[i] = 0;
    reqs_before = l2_reqs;
    aes_round(rot);
    // the second level must have merged part of the SMs' first-level requests
    $display("phase 0: %0d first-level requests, %0d L2 requests", n_l1req, l2_reqs - reqs_before);
    check(l2_reqs - reqs_before < n_l1req, "second level merged no request");

    // ---- phase 1: AES, dynamic widths, rotated table (distinct shifts)
    phase = 1;
    new_kernel(MODE_DYNAMIC);
    for (int i = 0; i < 16; i++) rot[i] = i;
    for (int i = 15; i > 0; i--) begin
      int j, tmp;
      j = $urandom_range(0, i);
      tmp = rot[i]; rot[i] = rot[j]; rot[j] = tmp;
    end
    n_rotated++;
    aes_round(rot);

    // ---- phase 2: AES, fixed random width
    phase = 2;
    new_kernel(MODE_FIXED);
    for (int s = 0; s < NSM; s++) begin
      bit same = 1;
      for (int i = 1; i < NUM_WIDTHS; i++) if (rsnap[s][i] != rsnap[s][0]) same = 0;
      check(same, $sformatf("SM %0d: fixed mode with differing widths", s));
    end
    aes_round(rot);

    // ---- phase 3: micro-benchmark, n unique addresses
    phase = 3;
    new_kernel(MODE_DYNAMIC);
    for (int s0 = 0; s0 < NSM; s0++) begin
      fork
        automatic int s = s0;
        begin
          for (int n = 1; n <= W; n++) begin
            addr_t a [W];
            for (int t = 0; t < W; t++)
              a[t] = 32'h0100_0000 + addr_t'(s) * 32'h0010_0000
                     + addr_t'(n) * 32'h1000 + addr_t'((t % n) * 128);
            issue(s, n % NW, a, '1);
          end
          drain(s);
          n_fin++;
        end
      join_none
    end
    wait (n_fin == NSM);
    n_fin = 0;
    repeat (200) @(negedge clk);

    for (int p = 0; p < 4; p++)
      $display("phase %0d: %0d instructions, mean latency %0d cycles", p, lat_cnt[p],
               lat_cnt[p] ? lat_sum[p] / lat_cnt[p] : 0);
    $display("coalesced %0d split %0d l1hit %0d l1alloc %0d l1merge %0d xsm-merge %0d l2mshr-stall %0d fixed %0d dynamic %0d rotated %0d l2reqs %0d overlap %0d",
             n_coal, n_split, n_hit, n_alloc, n_l1merge, n_xsm, n_ustall, n_fixed, n_dynamic, n_rotated, l2_reqs, n_overlap);
    check(n_coal > 0,    "no thread coalesced");
    check(n_split > 0,   "no split subtransaction");
    check(n_hit > 0,     "no L1 hit");
    check(n_alloc > 0,   "no L1 MSHR allocation");
    check(n_l1merge > 0, "no L1 MSHR merge");
    check(n_xsm > 0,     "no cross-SM merge in the second level");
    check(n_ustall > 0,  "second level never full");
    check(n_fixed > 0 && n_dynamic > 0, "both width modes");
    check(n_rotated > 0, "rotation");
    check(n_overlap > 0, "two warps of one SM never in flight together");
    check(lat_cnt[0] == NSM * 32 && lat_cnt[1] == NSM * 32 && lat_cnt[2] == NSM * 32 && lat_cnt[3] == NSM * 32,
          "every instruction completed");
    check(outstanding_l2.num() == 0, "L2 requests left outstanding");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
