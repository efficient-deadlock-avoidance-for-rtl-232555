// tb_sync_fifo: self-checking test of sync_fifo (8 x 64 bits).
//
// Random enqueue/dequeue traffic, biased in phases towards filling and
// draining, is compared every cycle against a reference queue kept by the
// testbench: head value, occupancy count, full and empty flags. Writes to a
// full FIFO and reads from an empty one must be ignored. The first word is
// checked to appear at the head one cycle after it is written.
module tb_sync_fifo;
  localparam int W = 64, D = 8;

  logic clk = 0, rst = 1;
  logic enq = 0, deq = 0;
  logic [W-1:0] din = '0, head;
  logic empty, full;
  logic [$clog2(D+1)-1:0] count;

  int checks = 0, failures = 0;
  logic was_full;   // full flag sampled just before each edge
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*, .enq_data(din));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bias;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    check(empty && !full && count == 0, "reset state");
    // One word: visible at the head in the next cycle.
    enq = 1; din = 64'hDEAD_BEEF_0123_4567;
    @(posedge clk); #1;
    enq = 0;
    model.push_back(64'hDEAD_BEEF_0123_4567);
    check(!empty && head == 64'hDEAD_BEEF_0123_4567 && count == 1, "first word latency");
    for (int cyc = 0; cyc < 6000; cyc++) begin
      bias = (cyc / 300) % 3;   // 0: fill, 1: drain, 2: balanced
      enq = ($urandom_range(99) < (bias == 0 ? 80 : bias == 1 ? 20 : 50));
      deq = ($urandom_range(99) < (bias == 0 ? 20 : bias == 1 ? 80 : 50));
      din = {$urandom, $urandom};
      @(posedge clk); #1;
      if (deq && model.size() > 0) void'(model.pop_front());
      // Reconstruct: the DUT accepted the write iff it was not full before.
      if (enq && !was_full) model.push_back(din);
      check(count == model.size(), "count");
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == D), "full");
      if (model.size() > 0) check(head == model[0], "head");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) was_full = full;
endmodule
