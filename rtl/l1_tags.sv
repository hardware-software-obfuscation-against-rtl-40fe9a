// l1_tags: tag store of one SM's L1 data cache.
//
// Decides hit or miss for every transaction leaving the coalescing unit and
// records lines brought back from L2. The default geometry is 48 KB of
// 64-byte lines, 6 ways by 128 sets (768 lines); set = line % SETS,
// tag = line / SETS. Replacement is round-robin per set. Only tags are
// kept: this load path models which requests reach L2 and when, not the
// data itself.
//
// Interface: lk_line is looked up combinationally, lk_hit answers in the
// same cycle. Up to two lines (the two 64-byte halves of a 128-byte L2 line)
// can be filled per cycle through fill_valid/fill_line; a line already
// present is not filled twice. The two lines of one fill must fall in
// different sets, which holds for the two halves of an L2 line whenever
// SETS > 1.
//
// Following the original design: the 48 KB size and the 64-byte line. Own
// choices: associativity, round-robin replacement, tag-only storage and a
// read-only (load) cache.
module l1_tags
  import gpu_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 48 * 1024,
  parameter int unsigned WAYS       = 6
) (
  input  logic       clk,
  input  logic       rst_n,
  input  line_t      lk_line,
  output logic       lk_hit,
  input  logic [1:0] fill_valid,
  input  line_t      fill_line [2]
);

  localparam int unsigned SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int          SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int          TAG_W = LINE_W - SET_W;
  localparam int          WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic [WAYS-1:0]  valid [SETS];
  logic [TAG_W-1:0] tag   [SETS][WAYS];
  logic [WAY_W-1:0] rr    [SETS];

  function automatic logic [SET_W-1:0] set_of(line_t l);
    return SET_W'(l % line_t'(SETS));
  endfunction

  function automatic logic [TAG_W-1:0] tag_of(line_t l);
    return TAG_W'(l / line_t'(SETS));
  endfunction

  // hit test of any line against the current contents
  function automatic logic present(line_t l);
    logic h;
    h = 1'b0;
    for (int w = 0; w < int'(WAYS); w++)
      if (valid[set_of(l)][w] && tag[set_of(l)][w] == tag_of(l)) h = 1'b1;
    return h;
  endfunction

  assign lk_hit = present(lk_line);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(SETS); s++) begin
        valid[s] <= '0;
        rr[s]    <= '0;
      end
    end else begin
      for (int f = 0; f < 2; f++) begin
        if (fill_valid[f] && !present(fill_line[f])) begin
          valid[set_of(fill_line[f])][rr[set_of(fill_line[f])]] <= 1'b1;
          rr[set_of(fill_line[f])] <= (rr[set_of(fill_line[f])] == WAY_W'(WAYS - 1))
                                      ? '0 : rr[set_of(fill_line[f])] + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int f = 0; f < 2; f++)
      if (fill_valid[f] && !present(fill_line[f]))
        tag[set_of(fill_line[f])][rr[set_of(fill_line[f])]] <= tag_of(fill_line[f]);
  end

`ifndef SYNTHESIS
  assert property (@(posedge clk) disable iff (!rst_n)
                   &fill_valid |-> set_of(fill_line[0]) != set_of(fill_line[1]));
`endif

endmodule
