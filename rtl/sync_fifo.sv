// sync_fifo: synchronous first-in first-out queue with valid/ready ports.
//
// A circular buffer of DEPTH entries of type T. A word is written when
// in_valid && in_ready and read when out_valid && out_ready; both may happen
// in the same cycle, including on a full queue. out_data shows the head
// entry with no added latency. count gives the current fill level.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                 mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             push, pop;

  assign out_valid = (count != '0);
  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH)) || out_ready;
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (($clog2(DEPTH+1))'(push)) - (($clog2(DEPTH+1))'(pop));
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

`ifndef SYNTHESIS
  // A push is never accepted on a full queue unless a pop frees a slot.
  assert property (@(posedge clk) disable iff (!rst_n)
                   push && count == ($clog2(DEPTH+1))'(DEPTH) |-> pop);
`endif

endmodule
