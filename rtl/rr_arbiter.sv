// rr_arbiter: round-robin arbiter over N requesters.
//
// grant is one-hot (and idx its index) for the first requester at or after
// the rotating priority pointer. When the granted request is taken (take
// high), the pointer moves to the requester after the winner, so every
// requester is served within N grants. Combinational grant, registered
// pointer.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 take,
  output logic                 any,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] idx
);

  localparam int IW = $clog2(N);

  logic [IW-1:0] ptr;

  always_comb begin
    logic [IW:0] c;
    any   = 1'b0;
    idx   = '0;
    grant = '0;
    for (int k = 0; k < int'(N); k++) begin
      c = (IW+1)'(ptr) + (IW+1)'(k);
      if (c >= (IW+1)'(N)) c = c - (IW+1)'(N);
      if (!any && req[IW'(c)]) begin
        any = 1'b1;
        idx = IW'(c);
      end
    end
    if (any) grant[idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           ptr <= '0;
    else if (any && take) ptr <= (idx == IW'(N - 1)) ? '0 : idx + 1'b1;
  end

endmodule
