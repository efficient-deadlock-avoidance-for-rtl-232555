// tb_packet_sink: self-checking test of the centre sink at node (2,5).
//
// Random packets with random time stamps arrive in random cycles. The
// testbench keeps its own count, latency sum (now - stamp modulo 2^16) and
// maximum, and compares them with the sink's counters after every cycle.
// The error flag must stay low for packets addressed to (2,5) and rise for
// one addressed elsewhere.
module tb_packet_sink;
  import noc_pkg::*;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready;
  flit_t in_flit = '0;
  logic [15:0] now = 0;
  logic [31:0] rx_count;
  logic [47:0] lat_sum;
  logic [15:0] lat_max;
  logic err;
  int checks = 0, failures = 0;

  packet_sink #(.X(2), .Y(5)) dut (.*);
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
    longint sum = 0;
    int cnt = 0, mx = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int k = 0; k < 5000; k++) begin
      int lat;
      now = 16'($urandom);
      in_valid = ($urandom_range(1) == 1);
      in_flit = '0;
      in_flit.dst_x = 2; in_flit.dst_y = 5;
      lat = $urandom_range(300);
      in_flit.stamp = now - 16'(lat);
      #1 check(in_ready, "always ready");
      if (in_valid) begin
        cnt++; sum += lat;
        if (lat > mx) mx = lat;
      end
      @(posedge clk); #1;
      check(rx_count == 32'(cnt), "count");
      check(lat_sum == 48'(sum), "latency sum");
      check(lat_max == 16'(mx), "latency max");
      check(!err, "no error");
    end
    in_valid = 1; in_flit.dst_x = 3;
    @(posedge clk); #1;
    in_valid = 0;
    check(err, "misdelivery flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
