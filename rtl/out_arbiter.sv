// out_arbiter: merge unit of one output port of an OQ router.
//
// The 5 queues that feed an output (one per input port) request the output
// when they are not empty. A rotating priority encoder grants one of them:
// the search starts at the input after the one that was served last, so
// every non-empty queue is served within 5 transfers (round robin).
//
// Interface: req[i] = queue i not empty. gnt is the granted index and
// valid = |req; both depend only on req and the registered pointer, never on
// `fire`, so the downstream ready may depend on the forwarded flit without a
// combinational loop. fire (valid and downstream ready) pops the granted
// queue in the router and moves the pointer at the clock edge.
//
// The paper asks only for priority encoders at the outputs and mentions
// round robin; the rotating pointer is this design's realisation.
module out_arbiter #(
  parameter int N = 5,
  localparam int IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [N-1:0]  req,
  input  logic          fire,
  output logic          valid,
  output logic [IW-1:0] gnt
);

  logic [IW-1:0] last;   // index served last

  always_comb begin
    int idx;
    valid = |req;
    gnt   = '0;
    // Highest priority first: last+1, last+2, ..., last.
    for (int k = N; k >= 1; k--) begin
      idx = (int'(last) + k) % N;
      if (req[idx]) gnt = IW'(idx);
    end
  end

  always_ff @(posedge clk) begin
    if (rst)                last <= IW'(N - 1);
    else if (fire && valid) last <= gnt;
  end

endmodule
