// l2_model: behavioural model of the shared L2 cache and the memory behind
// it, for simulation only. It takes one request per cycle (id and 128-byte
// line) while fewer than QDEPTH are waiting and answers each, in order,
// LATENCY cycles after it was taken, one answer per cycle. Data and hit or
// miss behaviour are not modelled: every request costs the same time.
// reqs and max_pending count the requests seen and the deepest queue.
module l2_model
  import gpu_pkg::*;
#(
  parameter int unsigned LATENCY = 100,
  parameter int unsigned QDEPTH  = 64,
  parameter int unsigned IDW     = 5
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  output logic           req_ready,
  input  logic [IDW-1:0] req_id,
  input  l2_line_t       req_line,
  output logic           resp_valid,
  output logic [IDW-1:0] resp_id,
  output int             reqs,
  output int             max_pending
);

  typedef struct {
    logic [IDW-1:0] id;
    longint         due;
  } pend_t;

  pend_t  q [$];
  longint now;

  assign req_ready = (q.size() < int'(QDEPTH));

  always_comb begin
    resp_valid = (q.size() > 0) && (q[0].due <= now);
    resp_id    = (q.size() > 0) ? q[0].id : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now         <= 0;
      reqs        <= 0;
      max_pending <= 0;
      q.delete();
    end else begin
      now <= now + 1;
      if (resp_valid) void'(q.pop_front());
      if (req_valid && req_ready) begin
        q.push_back('{id: req_id, due: now + longint'(LATENCY)});
        reqs <= reqs + 1;
        if (q.size() + 1 > max_pending) max_pending <= q.size() + 1;
      end
    end
  end

  // the line is not used: every access takes the same time
  logic unused_line;
  assign unused_line = ^req_line;

endmodule
