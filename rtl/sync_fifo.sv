// sync_fifo: synchronous single-clock FIFO, one of the 25 output queues of
// a router.
//
// Entries live in a DEPTH x WIDTH register array addressed by a write
// pointer (tail) and a read pointer (head) that wrap at DEPTH. A separate
// counter holds the occupancy, which the router needs for its adaptive
// heuristic and for the freedom condition, so it is an output.
//
// Interface: enq writes enq_data at the clock edge unless the FIFO is full;
// deq removes the head at the clock edge unless it is empty. Both may happen
// in the same cycle. head shows the oldest entry combinationally (first-word
// fall-through), so a word written in cycle t can be read in cycle t+1.
// A full FIFO does not accept a write even if it is read in the same cycle.
// Reset (synchronous, active high) empties the FIFO; the storage itself is
// not reset.
//
// The queue's depth and width default to the paper's 8 entries of 64 bits;
// the internal organisation is this design's own (the paper only refers to
// a published formally verified synchronous FIFO).
module sync_fifo #(
  parameter int WIDTH = 64,
  parameter int DEPTH = 8,
  localparam int CW = $clog2(DEPTH + 1),
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             enq,
  input  logic [WIDTH-1:0] enq_data,
  input  logic             deq,
  output logic [WIDTH-1:0] head,
  output logic             empty,
  output logic             full,
  output logic [CW-1:0]    count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  wire do_enq = enq && !full;
  wire do_deq = deq && !empty;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_enq) wr_ptr <= inc(wr_ptr);
      if (do_deq) rd_ptr <= inc(rd_ptr);
      case ({do_enq, do_deq})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_enq) mem[wr_ptr] <= enq_data;
  end

  assign head  = mem[rd_ptr];
  assign empty = (count == '0);
  assign full  = (count == CW'(DEPTH));

endmodule
