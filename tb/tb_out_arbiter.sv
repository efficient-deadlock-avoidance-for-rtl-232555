// tb_out_arbiter: self-checking test of the round-robin output arbiter.
//
// Random request vectors and random downstream readiness. A reference
// pointer kept by the testbench gives the expected grant: the first
// requesting index after the last served one, cyclically. The grant must
// not change while the output is stalled. With all five requesting and the
// output always ready, the grants must cycle 0,1,2,3,4.
module tb_out_arbiter;
  logic clk = 0, rst = 1;
  logic [4:0] req = '0;
  logic fire = 0, valid;
  logic [2:0] gnt;
  int checks = 0, failures = 0;
  int last_ref = 4;

  out_arbiter #(.N(5)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: req=%b gnt=%0d", what, $time, req, gnt);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // Full request, always ready: strict rotation.
    req = 5'b11111; fire = 1;
    for (int k = 0; k < 10; k++) begin
      #1 check(valid && gnt == 3'(k % 5), "rotation");
      @(posedge clk); #1;
    end
    last_ref = 4;
    for (int k = 0; k < 10000; k++) begin
      req  = 5'($urandom);
      fire = 1'($urandom_range(3) != 0);
      #1;
      exp = -1;
      for (int j = 1; j <= 5; j++)
        if (exp < 0 && req[(last_ref + j) % 5]) exp = (last_ref + j) % 5;
      check(valid == (req != 0), "valid");
      if (req != 0) check(gnt == 3'(exp), "grant");
      if (fire && valid) last_ref = exp;
      fire = fire && valid;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
