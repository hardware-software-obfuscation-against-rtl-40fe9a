// tb_coalescing_unit: checks the randomised-width coalescer.
//
// 1. The four cases of a 16-element table (4 elements of 16 bytes per
//    64-byte line) with 7 accesses: (a) fixed width of 2 elements,
//    (b) the same with columns rotated by 2,3,0,1, (c) per-row widths of
//    2,2,1,4 elements, (d) per-row widths with rotation. Expected
//    transaction counts: 6, 5, 5 and 4.
// 2. Random instructions with random widths, active masks and back-pressure
//    on the transaction queue. A reference model in this file lists the
//    expected transactions in thread order; every transaction, the count
//    reported by done and the end of the stream are compared.
// 3. With no back-pressure an instruction takes WARP+1 cycles from
//    acceptance to done.
// Transactions must carry the warp id given with their instruction.
module tb_coalescing_unit;
  import gpu_pkg::*;

  localparam int W = WARP_SIZE;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  rlog_t r_log2 [NUM_WIDTHS];
  logic in_valid = 0, in_ready;
  addr_t in_addr [W];
  logic [W-1:0] in_active;
  logic [WID_W-1:0] in_warp = '0, warp_q;
  logic txn_valid, txn_ready;
  txn_t txn;
  logic busy, done, ev_new, ev_merge, ev_split;
  logic [$clog2(W+1)-1:0] done_ntxn;
  bit   bp_random = 0;

  txn_t exp_q [$];
  txn_t got_q [$];

  coalescing_unit dut (
    .clk, .rst_n, .r_log2, .r_ready(1'b1),
    .in_valid, .in_ready, .in_addr, .in_active, .in_warp,
    .txn_valid, .txn_ready, .txn,
    .busy, .done, .done_ntxn, .warp_q, .ev_new, .ev_merge, .ev_split
  );

  always #5 clk = ~clk;

  always @(negedge clk) txn_ready <= bp_random ? ($urandom_range(0, 2) != 0) : 1'b1;

  always @(posedge clk) if (rst_n && txn_valid && txn_ready) got_q.push_back(txn);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // reference: transactions in thread order
  function automatic int model(input addr_t a [W], input logic [W-1:0] act);
    int n = 0;
    line_t            ls [$];
    logic [SUB_W-1:0] ss [$];
    for (int t = 0; t < W; t++) begin
      if (act[t]) begin
        line_t l;
        int r, size, sub;
        bit found;
        l    = line_t'(a[t] / 64);
        r    = 1 << r_log2[l % NUM_WIDTHS];
        size = 64 / r;
        sub  = (a[t] % 64) / size;
        found = 0;
        foreach (ls[i]) if (ls[i] == l && ss[i] == SUB_W'(sub)) found = 1;
        if (!found) begin
          ls.push_back(l); ss.push_back(SUB_W'(sub));
          exp_q.push_back('{warp: in_warp, line: l, sub: SUB_W'(sub), rlog: r_log2[l % NUM_WIDTHS]});
          n++;
        end
      end
    end
    return n;
  endfunction

  task automatic run(input addr_t a [W], input logic [W-1:0] act, output int ntxn, output int cycles);
    int exp_n;
    exp_q.delete(); got_q.delete();
    in_warp = WID_W'($urandom);
    exp_n = model(a, act);
    @(negedge clk);
    in_addr = a;
    in_active = act;
    in_valid  = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    cycles = 0;
    @(negedge clk); in_valid = 0;
    do begin @(posedge clk); cycles++; end while (!done);
    ntxn = int'(done_ntxn);
    check(warp_q == in_warp, "warp id of the walked instruction");
    // drain the queue
    while (txn_valid) @(posedge clk);
    repeat (2) @(posedge clk);
    check(ntxn == exp_n, $sformatf("done_ntxn %0d expected %0d", ntxn, exp_n));
    check(got_q.size() == exp_q.size(), $sformatf("%0d transactions, expected %0d", got_q.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++)
      check(got_q[i] == exp_q[i], $sformatf("txn %0d: got %h expected %h", i, got_q[i], exp_q[i]));
  endtask

  // element (row, col) of the 4x4 example table, 16-byte elements
  function automatic addr_t elem(int row, int col);
    return addr_t'(row * 64 + col * 16);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_t a [W];
    int ntxn, cycles;
    int rows [7], cols [7];
    int shift [4];
    int expect_n [4];
    for (int i = 0; i < NUM_WIDTHS; i++) r_log2[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- worked example: 7 accesses (row, col), 0-based
    rows = '{0, 1, 1, 2, 2, 3, 3};
    cols = '{2, 0, 1, 0, 3, 1, 3};
    shift = '{2, 3, 0, 1};
    expect_n = '{6, 5, 5, 4};
    for (int c = 0; c < 4; c++) begin
      bit rotated, dynamic;
      rotated = (c == 1 || c == 3);
      dynamic = (c >= 2);
      // widths in elements per row: fixed 2; dynamic 2,2,1,4 -> r = 2,2,4,1
      for (int i = 0; i < NUM_WIDTHS; i++) r_log2[i] = 2'd1;
      if (dynamic) begin r_log2[2] = 2'd2; r_log2[3] = 2'd0; end
      for (int t = 0; t < W; t++) a[t] = '0;
      for (int k = 0; k < 7; k++)
        a[k] = elem(rotated ? (rows[k] + shift[cols[k]]) % 4 : rows[k], cols[k]);
      run(a, 32'h7F, ntxn, cycles);
      check(ntxn == expect_n[c], $sformatf("example case %0d: %0d transactions, expected %0d", c, ntxn, expect_n[c]));
      check(cycles == W + 1, $sformatf("example case %0d: %0d cycles, expected %0d", c, cycles, W + 1));
    end

    // ---- random instructions
    for (int it = 0; it < 400; it++) begin
      logic [W-1:0] act;
      bp_random = (it % 2 == 1);
      for (int i = 0; i < NUM_WIDTHS; i++) r_log2[i] = rlog_t'($urandom_range(0, 3));
      act = (it % 5 == 0) ? '1 : W'($urandom);
      for (int t = 0; t < W; t++)
        a[t] = (it % 3 == 0) ? addr_t'($urandom) : addr_t'(32'h1000 + ($urandom_range(0, 255) * 4));
      run(a, act, ntxn, cycles);
      if (!bp_random && ntxn <= 8)
        check(cycles == W + 1, $sformatf("%0d cycles without back-pressure, expected %0d", cycles, W + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
