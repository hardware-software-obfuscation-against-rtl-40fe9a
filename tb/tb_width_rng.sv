// tb_width_rng: checks the random coalescing-width generator.
// - after a kernel_start, ready stays low for exactly 16 cycles;
// - in fixed mode all 16 entries are equal;
// - in dynamic mode the entries differ in almost every kernel;
// - over many kernels the share of each width is near the thresholds
//   (8 B: 13/256, 16 B: 64/256, 32 B: 103/256, 64 B: 76/256) and the
//   mean log2(width) is about 5.
module tb_width_rng;
  import gpu_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, kernel_start = 0;
  width_mode_e mode = MODE_DYNAMIC;
  logic ready;
  rlog_t r_log2 [NUM_WIDTHS];
  int hist [4];
  int diff_kernels;

  width_rng dut (.clk, .rst_n, .kernel_start, .mode, .ready, .r_log2);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic start_kernel(width_mode_e m);
    int cyc;
    @(negedge clk); mode = m; kernel_start = 1;
    @(negedge clk); kernel_start = 0;
    cyc = 0;
    while (!ready) begin @(negedge clk); cyc++; end
    check(cyc == 16, $sformatf("ready after %0d cycles, expected 16", cyc));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fixed mode: one width for every line
    for (int k = 0; k < 50; k++) begin
      bit same;
      start_kernel(MODE_FIXED);
      same = 1;
      for (int i = 1; i < NUM_WIDTHS; i++) if (r_log2[i] != r_log2[0]) same = 0;
      check(same, "fixed mode entries differ");
    end
    // dynamic mode: per-line widths and their distribution
    diff_kernels = 0;
    for (int k = 0; k < 1000; k++) begin
      bit same;
      start_kernel(MODE_DYNAMIC);
      same = 1;
      for (int i = 0; i < NUM_WIDTHS; i++) begin
        hist[r_log2[i]]++;
        if (r_log2[i] != r_log2[0]) same = 0;
      end
      if (!same) diff_kernels++;
    end
    begin
      real n, p8, p16, p32, p64, mean_k;
      n   = 16000.0;
      p8  = hist[3] / n; p16 = hist[2] / n; p32 = hist[1] / n; p64 = hist[0] / n;
      mean_k = 3.0 * p8 + 4.0 * p16 + 5.0 * p32 + 6.0 * p64;
      $display("share 8B %0.3f 16B %0.3f 32B %0.3f 64B %0.3f mean k %0.2f", p8, p16, p32, p64, mean_k);
      check(p8  > 0.035 && p8  < 0.067, "8 B share");
      check(p16 > 0.22  && p16 < 0.28,  "16 B share");
      check(p32 > 0.37  && p32 < 0.44,  "32 B share");
      check(p64 > 0.27  && p64 < 0.33,  "64 B share");
      check(mean_k > 4.85 && mean_k < 5.05, "mean k near 5");
      check(diff_kernels > 990, "dynamic widths differ across lines");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
