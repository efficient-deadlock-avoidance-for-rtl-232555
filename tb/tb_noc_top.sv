// tb_noc_top: end-to-end test of the mesh at 4x4 with queues of 8.
//
// Two meshes run side by side, one with XY/Adaptive and one with
// XY/O1-Turn routing. Each goes through a sequence of traffic phases
// (uniform at low load, then saturating uniform, hot-spot, transpose and
// bit-complement traffic), after which injection stops and the network
// must drain completely: every packet injected is delivered exactly at its
// destination (no loss, no misdelivery) and nothing stays stuck, which is
// what deadlock freedom promises under saturation.
//
// Every mechanism must occur at least once in each mesh: deliveries,
// input stalls on full queues, northward packets allowed by F' although a
// restricted turn follows (restricted), packets rerouted by the fallback
// because F' failed (fallback), and for XY/Adaptive the heuristic choosing
// the Y direction. At low load the mean latency must stay close to the
// zero-load value (hops + 2 cycles, mean hops 2.5 on a 4x4 under uniform
// traffic).
module tb_noc_top;
  import noc_pkg::*;
  localparam int W = 4, H = 4, NN = W * H;

  logic clk = 0, rst = 1;
  logic inj_enable = 0;
  logic [8:0] inj_rate = 0;
  pattern_e pattern = PAT_UNIFORM;

  logic [31:0] inj_a [NN], rx_a [NN], inj_o [NN], rx_o [NN];
  logic [47:0] lat_a [NN], lat_o [NN];
  logic [15:0] max_a [NN], max_o [NN];
  logic err_a [NN], err_o [NN];
  router_ev_t ev_a [NN], ev_o [NN];

  noc_top #(.MESH_W(W), .MESH_H(H), .DEPTH(8), .ALGO(ALG_XY_ADAPTIVE)) u_a (
    .clk, .rst, .inj_enable, .inj_rate, .pattern,
    .inj_count(inj_a), .rx_count(rx_a), .lat_sum(lat_a), .lat_max(max_a),
    .rx_err(err_a), .ev(ev_a));
  noc_top #(.MESH_W(W), .MESH_H(H), .DEPTH(8), .ALGO(ALG_XY_O1TURN), .SEED(32'h0BAD_F00D)) u_o (
    .clk, .rst, .inj_enable, .inj_rate, .pattern,
    .inj_count(inj_o), .rx_count(rx_o), .lat_sum(lat_o), .lat_max(max_o),
    .rx_err(err_o), .ev(ev_o));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint n_fb [2], n_rs [2], n_ay [2], n_st [2];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always @(posedge clk) if (!rst) begin
    for (int n = 0; n < NN; n++) begin
      n_fb[0] += $countones(ev_a[n].fallback);   n_fb[1] += $countones(ev_o[n].fallback);
      n_rs[0] += $countones(ev_a[n].restricted); n_rs[1] += $countones(ev_o[n].restricted);
      n_ay[0] += $countones(ev_a[n].adaptive_y); n_ay[1] += $countones(ev_o[n].adaptive_y);
      n_st[0] += $countones(ev_a[n].stall);      n_st[1] += $countones(ev_o[n].stall);
    end
  end

  function automatic longint total(input logic [31:0] c [NN]);
    longint s = 0;
    foreach (c[n]) s += c[n];
    return s;
  endfunction

  function automatic longint total48(input logic [47:0] c [NN]);
    longint s = 0;
    foreach (c[n]) s += c[n];
    return s;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int drain;
    real lat0;
    foreach (n_fb[k]) begin n_fb[k] = 0; n_rs[k] = 0; n_ay[k] = 0; n_st[k] = 0; end
    repeat (3) @(posedge clk);
    #1 rst = 0;

    // Low load: latency near zero-load.
    pattern = PAT_UNIFORM; inj_rate = 5; inj_enable = 1;
    repeat (3000) @(posedge clk);
    #1 inj_enable = 0;
    repeat (100) @(posedge clk);
    #1;
    lat0 = real'(total48(lat_a)) / total(rx_a);
    $display("low load: %0d packets, mean latency %f", total(rx_a), lat0);
    check(total(rx_a) == total(inj_a) && total(rx_o) == total(inj_o), "low-load delivery");
    check(lat0 >= 4.5 && lat0 < 5.0, "low-load latency near hops+2 = 4.5");

    // Saturation phases.
    inj_rate = 256; inj_enable = 1;
    pattern = PAT_UNIFORM;   repeat (2000) @(posedge clk);
    #1 pattern = PAT_HOTSPOT;   repeat (2000) @(posedge clk);
    #1 pattern = PAT_TRANSPOSE; repeat (2000) @(posedge clk);
    #1 pattern = PAT_BITCOMP;   repeat (2000) @(posedge clk);
    #1 pattern = PAT_BURSTY;    repeat (2000) @(posedge clk);
    #1 inj_enable = 0;

    // Drain.
    drain = 0;
    while ((total(rx_a) != total(inj_a) || total(rx_o) != total(inj_o)) && drain < 3000) begin
      @(posedge clk); #1;
      drain++;
    end
    // Generators may hold one packet each that was never accepted; they
    // stay pending only while the network refuses them, so after draining
    // all counters must agree.
    $display("adaptive: injected %0d delivered %0d; O1-Turn: injected %0d delivered %0d; drain %0d cycles",
             total(inj_a), total(rx_a), total(inj_o), total(rx_o), drain);
    check(total(rx_a) == total(inj_a), "XY/Adaptive drains completely (no deadlock, no loss)");
    check(total(rx_o) == total(inj_o), "XY/O1-Turn drains completely (no deadlock, no loss)");
    for (int n = 0; n < NN; n++) check(!err_a[n] && !err_o[n], "no misdelivery");
    for (int k = 0; k < 2; k++) begin
      $display("%s: fallback %0d restricted-pass %0d adaptive-Y %0d stall %0d",
               k ? "XY/O1-Turn" : "XY/Adaptive", n_fb[k], n_rs[k], n_ay[k], n_st[k]);
      check(n_fb[k] > 0, "fallback happened");
      check(n_rs[k] > 0, "restricted turn allowed by F' happened");
      check(n_st[k] > 0, "stall happened");
    end
    check(n_ay[0] > 0, "adaptive Y choice happened");
    check(total(rx_a) > 10000 && total(rx_o) > 10000, "deliveries happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
