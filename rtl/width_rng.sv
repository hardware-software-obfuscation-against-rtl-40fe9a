// width_rng: random coalescing-width generator, r[16].
//
// At every kernel start this block draws a fresh set of NWID subtransaction
// counts r[i] in {1,2,4,8}, i.e. coalescing widths of 64, 32, 16 or 8 bytes.
// Line L of the address space is later coalesced with width 64 / r[L % 16].
// The draw follows a skewed distribution over k = log2(width) in 3..6 with
// most weight on large widths: an 8-bit uniform number u is compared with
// three cumulative thresholds,
//   u <  THR_W8            -> 8 B  (r = 8)
//   u <  THR_W16           -> 16 B (r = 4)
//   u <  THR_W32           -> 32 B (r = 2)
//   otherwise              -> 64 B (r = 1)
// The defaults give 5.1% / 25.0% / 40.2% / 29.7%, a mean k of about 5. The
// 5% share of 8-byte widths and the mean of k = 5 follow the original
// description; the other shares are this design's choice and can be moved
// by the parameters to trade security against performance.
//
// Mode MODE_DYNAMIC draws one value per entry. MODE_FIXED draws a single
// value per kernel run and gives it to all entries (the "fixed random width"
// variant).
//
// Uniform numbers come from a 32-bit xorshift generator that advances every
// clock cycle from reset, so the draw depends on when the kernel starts as
// well as on SEED; give every SM a different SEED.
//
// Timing: after reset or a kernel_start pulse, ready drops for NWID cycles
// while one entry is written per cycle; r_log2 is stable while ready is high.
module width_rng
  import gpu_pkg::*;
#(
  parameter int unsigned NWID    = NUM_WIDTHS,
  parameter logic [31:0] SEED    = 32'h1,
  parameter logic [7:0]  THR_W8  = 8'd13,
  parameter logic [7:0]  THR_W16 = 8'd77,
  parameter logic [7:0]  THR_W32 = 8'd180
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        kernel_start,
  input  width_mode_e mode,
  output logic        ready,
  output rlog_t       r_log2 [NWID]
);

  localparam int CNT_W = $clog2(NWID) + 1;

  logic [31:0]      state;
  logic [31:0]      state_nx;
  logic [CNT_W-1:0] cnt;
  logic             busy;
  width_mode_e      mode_q;
  rlog_t            draw;

  // xorshift32 step
  always_comb begin
    state_nx = state ^ (state << 13);
    state_nx = state_nx ^ (state_nx >> 17);
    state_nx = state_nx ^ (state_nx << 5);
  end

  // map the top byte onto the skewed width distribution
  always_comb begin
    logic [7:0] u;
    u = state[31:24];
    if (u < THR_W8)       draw = 2'd3;
    else if (u < THR_W16) draw = 2'd2;
    else if (u < THR_W32) draw = 2'd1;
    else                  draw = 2'd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= (SEED == 32'd0) ? 32'h2545_F491 : SEED;
      cnt    <= '0;
      busy   <= 1'b1;
      mode_q <= MODE_DYNAMIC;
      for (int i = 0; i < int'(NWID); i++) r_log2[i] <= '0;
    end else begin
      state <= state_nx;
      if (kernel_start) begin
        busy   <= 1'b1;
        cnt    <= '0;
        mode_q <= mode;
      end else if (busy) begin
        if (mode_q == MODE_FIXED && cnt != '0)
          r_log2[cnt[CNT_W-2:0]] <= r_log2[0];
        else
          r_log2[cnt[CNT_W-2:0]] <= draw;
        if (cnt == CNT_W'(NWID - 1)) busy <= 1'b0;
        cnt <= cnt + 1'b1;
      end
    end
  end

  assign ready = ~busy;

endmodule
