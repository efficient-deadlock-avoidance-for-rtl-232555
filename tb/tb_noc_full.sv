// tb_noc_full: the mesh at its default size (8x8 routers, queues of 8,
// 64-bit packets, XY/Adaptive), driven end to end.
//
// All 64 nodes inject uniform random traffic at full
// rate for 2000 cycles, then hot-spot traffic for 2000 cycles; injection
// then stops and the network must drain: every injected packet is
// delivered, at the right node, within 2000 cycles. The fallback, the
// F'-approved restricted turns, the adaptive Y choice and input stalls must
// all have occurred.
module tb_noc_full;
  import noc_pkg::*;
  localparam int NN = 64;

  logic clk = 0, rst = 1;
  logic inj_enable = 0;
  logic [8:0] inj_rate = 0;
  pattern_e pattern = PAT_UNIFORM;
  logic [31:0] inj_count [NN], rx_count [NN];
  logic [47:0] lat_sum [NN];
  logic [15:0] lat_max [NN];
  logic rx_err [NN];
  router_ev_t ev [NN];

  noc_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint n_fb = 0, n_rs = 0, n_ay = 0, n_st = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always @(posedge clk) if (!rst) begin
    for (int n = 0; n < NN; n++) begin
      n_fb += $countones(ev[n].fallback);
      n_rs += $countones(ev[n].restricted);
      n_ay += $countones(ev[n].adaptive_y);
      n_st += $countones(ev[n].stall);
    end
  end

  function automatic longint total(input logic [31:0] c [NN]);
    longint s = 0;
    foreach (c[n]) s += c[n];
    return s;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int drain;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    inj_rate = 256; inj_enable = 1;
    pattern = PAT_UNIFORM;    repeat (2000) @(posedge clk);
    #1 pattern = PAT_HOTSPOT; repeat (2000) @(posedge clk);
    #1 inj_enable = 0;
    drain = 0;
    while (total(rx_count) != total(inj_count) && drain < 2000) begin
      @(posedge clk); #1;
      drain++;
    end
    $display("injected %0d delivered %0d, drained in %0d cycles", total(inj_count), total(rx_count), drain);
    $display("fallback %0d restricted-pass %0d adaptive-Y %0d stall %0d", n_fb, n_rs, n_ay, n_st);
    check(total(rx_count) == total(inj_count), "network drains completely");
    check(total(rx_count) > 20000, "deliveries");
    for (int n = 0; n < NN; n++) check(!rx_err[n], "no misdelivery");
    check(n_fb > 0, "fallback happened");
    check(n_rs > 0, "restricted turn allowed by F' happened");
    check(n_ay > 0, "adaptive Y choice happened");
    check(n_st > 0, "stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
