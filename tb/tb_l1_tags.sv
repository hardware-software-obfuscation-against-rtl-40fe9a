// tb_l1_tags: checks the L1 tag store (48 KB, 6 ways, 64-byte lines).
// A reference model keeps, per set, the resident lines in fill order
// (round-robin replacement evicts the oldest fill). Random lookups are
// compared with it every cycle while random single fills and two-half
// fills of 128-byte lines go in. Lines come from a small range so that
// sets overflow and evictions happen.
module tb_l1_tags;
  import gpu_pkg::*;

  localparam int SETS = 128, WAYS = 6;

  int checks = 0, failures = 0, evictions = 0, hits = 0;
  logic clk = 0, rst_n = 0;
  line_t lk_line;
  logic  lk_hit;
  logic [1:0] fill_valid = '0;
  line_t fill_line [2];
  line_t model [SETS][$];

  l1_tags dut (.clk, .rst_n, .lk_line, .lk_hit, .fill_valid, .fill_line);

  always #5 clk = ~clk;

  function automatic bit in_model(line_t l);
    foreach (model[l % SETS][i]) if (model[l % SETS][i] == l) return 1;
    return 0;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
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
    // empty cache misses everywhere
    for (int i = 0; i < 50; i++) begin
      lk_line = line_t'($urandom);
      #1 check(!lk_hit, "hit in an empty cache");
      @(negedge clk);
    end
    for (int it = 0; it < 20000; it++) begin
      line_t base;
      // lookup
      lk_line = line_t'($urandom_range(0, 2047));
      #1;
      check(lk_hit == in_model(lk_line), $sformatf("line %0d: hit=%0b model=%0b", lk_line, lk_hit, in_model(lk_line)));
      if (lk_hit) hits++;
      // fill
      base = line_t'($urandom_range(0, 1023) * 2);
      fill_line[0] = base;
      fill_line[1] = base + 1;
      case ($urandom_range(0, 3))
        0: fill_valid = 2'b00;
        1: fill_valid = 2'b01;
        2: fill_valid = 2'b10;
        default: fill_valid = 2'b11;
      endcase
      @(negedge clk);
      for (int f = 0; f < 2; f++) begin
        if (fill_valid[f] && !in_model(fill_line[f])) begin
          if (model[fill_line[f] % SETS].size() == WAYS) begin
            void'(model[fill_line[f] % SETS].pop_front());
            evictions++;
          end
          model[fill_line[f] % SETS].push_back(fill_line[f]);
        end
      end
      fill_valid = '0;
    end
    check(evictions > 100 && hits > 100, $sformatf("evictions %0d hits %0d", evictions, hits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
