// tb_timing_attack: the last-round correlation attack on AES, run against
// the full-size load path (default parameters) with a fixed-latency L2.
//
// Each sample is one kernel: a kernel start (new random widths in dynamic
// mode), then one warp instruction on SM 0 in which each of the 32 threads
// reads T4[x] for its own random state byte x. The ciphertext byte a thread
// produces is c = S[x] ^ K for a secret key byte K. The attacker sees c and
// the instruction's cost, here its transaction count done_ntxn (the
// quantity the original timing model makes the time linear in). For each
// key guess g it predicts the cost as the number of distinct 64-byte T4
// lines among InvS(c ^ g) and correlates that with the measured counts.
//
// The AES S-box is computed here (multiplicative inverse in GF(2^8) with
// the polynomial 0x11b, then the affine map with constant 0x63).
//
// Checks: S-box spot values and that InvS undoes S; every instruction's
// transaction count against the width rule applied to the widths SM 0
// drew; the correct-key prediction equals the distinct-line count of the
// real indices. Reported, and checked only loosely: the correlation of the
// correct guess and its rank among the 256 guesses, once with dynamic
// widths and once with 64-byte-only coalescing computed from the same
// indices (the unprotected baseline, where the correct guess predicts the
// count exactly). The widths must leave the correct guess a correlation
// below 1 and must lower it below the baseline's.
module tb_timing_attack;
  import gpu_pkg::*;

  localparam int NSM = NUM_SM, W = WARP_SIZE, NW = NUM_WARPS;
  localparam int N = 1500;                      // samples (kernel runs)
  localparam addr_t T4_BASE = 32'h0002_0000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, kernel_start = 0;
  width_mode_e mode = MODE_DYNAMIC;
  logic [NSM-1:0] instr_valid = '0, instr_ready;
  addr_t instr_addr [NSM][W];
  logic [W-1:0] instr_active [NSM];
  logic [WID_W-1:0] instr_warp [NSM];
  logic [NW-1:0] done [NSM];
  logic [$clog2(W+1)-1:0] done_ntxn [NSM][NW];
  logic [31:0] done_cycles [NSM][NW];
  logic l2_req_valid, l2_req_ready, l2_resp_valid;
  logic [4:0] l2_req_id, l2_resp_id;
  l2_line_t l2_req_line;
  logic [7:0] sm_ev [NSM];
  logic [3:0] u_ev;
  int l2_reqs, l2_max_pending;
  rlog_t rsnap [NUM_WIDTHS];

  gpu_obf_memsys dut (.*);

  l2_model #(.LATENCY(100), .QDEPTH(64), .IDW(5)) u_l2 (
    .clk, .rst_n,
    .req_valid(l2_req_valid), .req_ready(l2_req_ready),
    .req_id(l2_req_id), .req_line(l2_req_line),
    .resp_valid(l2_resp_valid), .resp_id(l2_resp_id),
    .reqs(l2_reqs), .max_pending(l2_max_pending)
  );

  assign rsnap = dut.g_sm[0].u_sm.u_rng.r_log2;

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---- AES S-box ----
  function automatic logic [7:0] gmul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p = '0;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
      b = b >> 1;
    end
    return p;
  endfunction

  function automatic logic [7:0] sbox_of(logic [7:0] x);
    logic [7:0] inv = 8'h01, y;
    // x^254 = x^-1 (and 0 for x = 0)
    for (int i = 0; i < 254; i++) inv = gmul(inv, x);
    if (x == 0) inv = 8'h00;
    y = inv;
    for (int i = 0; i < 8; i++)
      y[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return y ^ 8'h63;
  endfunction

  logic [7:0] sbox [256], isbox [256];

  // distinct 64-byte T4 lines (16 entries of 4 bytes per line)
  function automatic int lines_of(input logic [7:0] idx [W]);
    bit [15:0] seen = '0;
    int n = 0;
    for (int t = 0; t < W; t++) if (!seen[idx[t] / 16]) begin
      seen[idx[t] / 16] = 1'b1; n++;
    end
    return n;
  endfunction

  // transactions under the width rule with widths r
  function automatic int txns_of(input logic [7:0] idx [W], input rlog_t r [NUM_WIDTHS]);
    bit seen [int];
    int n = 0;
    for (int t = 0; t < W; t++) begin
      addr_t a;
      line_t l;
      int sub;
      a   = T4_BASE + addr_t'(idx[t]) * 4;
      l   = line_t'(a / 64);
      sub = (a % 64) / (64 >> r[int'(l) % NUM_WIDTHS]);
      if (!seen.exists(int'(l) * 8 + sub)) begin seen[int'(l) * 8 + sub] = 1; n++; end
    end
    return n;
  endfunction

  function automatic real pearson(input int xs [N], input int ys [N]);
    real mx = 0, my = 0, sxy = 0, sxx = 0, syy = 0;
    for (int i = 0; i < N; i++) begin mx += xs[i]; my += ys[i]; end
    mx /= N; my /= N;
    for (int i = 0; i < N; i++) begin
      sxy += (xs[i] - mx) * (ys[i] - my);
      sxx += (xs[i] - mx) * (xs[i] - mx);
      syy += (ys[i] - my) * (ys[i] - my);
    end
    if (sxx == 0 || syy == 0) return 0.0;
    return sxy / $sqrt(sxx * syy);
  endfunction

  // samples: ciphertext bytes of each thread and the measured counts
  logic [7:0] ct [N][W];
  int meas [N], base [N];

  // correlation of guess g with the measurement, and the rank of the key
  task automatic attack(input int m [N], input logic [7:0] key, output real c_key, output int rank);
    real c [256];
    int pred [N];
    for (int g = 0; g < 256; g++) begin
      for (int i = 0; i < N; i++) begin
        logic [7:0] idx [W];
        for (int t = 0; t < W; t++) idx[t] = isbox[ct[i][t] ^ 8'(g)];
        pred[i] = lines_of(idx);
      end
      c[g] = pearson(pred, m);
    end
    c_key = c[key];
    rank = 0;
    for (int g = 0; g < 256; g++) if (c[g] > c_key) rank++;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] key;
    real c_dyn, c_base;
    int r_dyn, r_base;

    for (int i = 0; i < 256; i++) sbox[i] = sbox_of(8'(i));
    for (int i = 0; i < 256; i++) isbox[sbox[i]] = 8'(i);
    check(sbox[8'h00] == 8'h63 && sbox[8'h01] == 8'h7c && sbox[8'h53] == 8'hed &&
          sbox[8'hff] == 8'h16, "S-box values");
    for (int i = 0; i < 256; i++) check(sbox[isbox[i]] == 8'(i), "InvS undoes S");

    for (int s = 0; s < NSM; s++) begin
      instr_active[s] = '1;
      instr_warp[s]   = '0;
      for (int t = 0; t < W; t++) instr_addr[s][t] = '0;
    end
    key = 8'($urandom_range(0, 255));
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int i = 0; i < N; i++) begin
      logic [7:0] idx [W];
      int exp_n;
      // new kernel: fresh widths
      @(negedge clk);
      kernel_start = 1'b1;
      @(negedge clk);
      kernel_start = 1'b0;
      repeat (NUM_WIDTHS + 2) @(negedge clk);

      for (int t = 0; t < W; t++) begin
        idx[t] = 8'($urandom_range(0, 255));
        ct[i][t] = sbox[idx[t]] ^ key;
        instr_addr[0][t] = T4_BASE + addr_t'(idx[t]) * 4;
      end
      exp_n   = txns_of(idx, rsnap);
      base[i] = lines_of(idx);
      instr_valid[0] = 1'b1;
      do @(posedge clk); while (!instr_ready[0]);
      @(negedge clk);
      instr_valid[0] = 1'b0;
      while (!done[0][0]) @(negedge clk);
      meas[i] = int'(done_ntxn[0][0]);
      check(meas[i] == exp_n, $sformatf("sample %0d: %0d transactions, expected %0d", i, meas[i], exp_n));
      begin
        logic [7:0] rec [W];
        for (int t = 0; t < W; t++) rec[t] = isbox[ct[i][t] ^ key];
        check(lines_of(rec) == base[i], "correct-key prediction");
      end
    end

    attack(meas, key, c_dyn, r_dyn);
    attack(base, key, c_base, r_base);
    $display("64-byte coalescing: correct key correlation %f, rank %0d of 256", c_base, r_base);
    $display("random widths     : correct key correlation %f, rank %0d of 256", c_dyn, r_dyn);
    check(c_base > 0.999 && r_base == 0, "baseline: correct key predicts the count exactly");
    check(c_dyn < 0.99, "random widths leave the correct key a correlation below 1");
    check(c_dyn < c_base, "random widths lower the correct key's correlation");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
