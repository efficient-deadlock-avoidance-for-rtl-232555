// tb_oq_router: self-checking test of one output-queued router.
//
// The router sits at (1,1) of an imagined mesh; the testbench plays all
// four neighbours, the local generator and the local sink. Directed parts:
//   latency     a packet accepted in cycle t is offered at the output in t+1;
//   stall       a queue takes exactly 8 packets, then in_ready drops and the
//               stall event fires; the 8 leave in order once released;
//   F' (S->E)   with the north neighbour's S->E queue at 6 and packets
//               piling up in the local C->N queue, northward packets pass
//               while 1 + 6 + occ(C->N) <= 8 and then fall back east;
//   F' (S->W)   the same for a westward packet with the S->W queue at 5,
//               counting the C->N and E->N queues;
//   serial F'   two packets (S and C inputs) in the same cycle: the second
//               one sees the first one's enqueue;
//   centre      a packet for (1,1) leaves on C.
// Random part: all five inputs inject minimal-route traffic with random
// downstream readiness and random neighbour occupancies; every packet that
// leaves must leave on a productive direction, in order with respect to
// other packets of the same input and output, and exactly once.
module tb_oq_router;
  import noc_pkg::*;

  logic clk = 0, rst = 1;
  logic  in_valid [NPORT];
  flit_t in_flit [NPORT];
  logic  in_ready [NPORT];
  logic  out_valid [NPORT];
  flit_t out_flit [NPORT];
  logic  out_ready [NPORT];
  logic [3:0] occ_nse_i = 0, occ_nsw_i = 0, occ_se_o, occ_sw_o;
  router_ev_t ev;

  int checks = 0, failures = 0;

  oq_router #(.X(1), .Y(1)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic flit_t mk(input int dx, dy, input int id, input int src = 0);
    flit_t f = '0;
    f.dst_x = COORD_W'(dx); f.dst_y = COORD_W'(dy);
    f.payload = 31'(id);
    f.src_x = COORD_W'(src);   // input port, for the scoreboard
    return f;
  endfunction

  // Drive packets on the ports in mask for one cycle; report accepted ones.
  logic [NPORT-1:0] acc_q;
  router_ev_t ev_q;
  task automatic cycle(input logic [NPORT-1:0] mask, input flit_t f [NPORT]);
    for (int i = 0; i < NPORT; i++) begin
      in_valid[i] = mask[i];
      in_flit[i]  = f[i];
    end
    #1;
    for (int i = 0; i < NPORT; i++) acc_q[i] = in_valid[i] && in_ready[i];
    ev_q = ev;
    @(posedge clk); #1;
    for (int i = 0; i < NPORT; i++) in_valid[i] = 0;
  endtask

  task automatic one(input dir_e port, input flit_t f);
    flit_t fs [NPORT];
    foreach (fs[i]) fs[i] = '0;
    fs[port] = f;
    cycle(5'(1 << port), fs);
  endtask

  task automatic set_ready(input logic [NPORT-1:0] m);
    for (int i = 0; i < NPORT; i++) out_ready[i] = m[i];
  endtask

  task automatic reset_dut();
    rst = 1;
    foreach (in_valid[i]) begin in_valid[i] = 0; in_flit[i] = '0; end
    repeat (2) @(posedge clk);
    #1 rst = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Scoreboard for the random phase.
  int seen [int];
  int last_id [NPORT][NPORT];
  bit scoreboard_on = 0;
  int n_out = 0;

  always @(posedge clk) if (scoreboard_on) begin
    for (int o = 0; o < NPORT; o++) if (out_valid[o] && out_ready[o]) begin
      flit_t f;
      int i, id, dx, dy;
      bit prod;
      f  = out_flit[o];
      i  = int'(f.src_x);
      id = int'(f.payload);
      dx = int'(f.dst_x) - 1;
      dy = int'(f.dst_y) - 1;
      case (dir_e'(o))
        DIR_E: prod = dx > 0;
        DIR_W: prod = dx < 0;
        DIR_N: prod = dy > 0;
        DIR_S: prod = dy < 0;
        default: prod = dx == 0 && dy == 0;
      endcase
      checks++;
      if (!prod) begin failures++; $display("FAIL non-minimal output %0d id %0d", o, id); end
      checks++;
      if (id <= last_id[i][o]) begin failures++; $display("FAIL order in %0d out %0d", i, o); end
      last_id[i][o] = id;
      checks++;
      if (seen.exists(id)) begin failures++; $display("FAIL duplicate %0d", id); end
      seen[id] = 1;
      n_out++;
    end
  end

  initial begin
    flit_t fs [NPORT];
    int id = 1000, n_acc = 0;
    int n_fb = 0, n_rs = 0, n_stall = 0;
    foreach (out_ready[i]) out_ready[i] = 1;
    reset_dut();

    // --- latency: C -> E
    one(DIR_C, mk(3, 1, 1));
    check(acc_q[DIR_C], "accept");
    check(out_valid[DIR_E] && out_flit[DIR_E] == mk(3, 1, 1), "one-cycle latency");
    @(posedge clk); #1;
    check(!out_valid[DIR_E], "output empty after transfer");

    // --- centre delivery
    one(DIR_W, mk(1, 1, 2));
    check(out_valid[DIR_C] && out_flit[DIR_C].payload == 2, "centre delivery");
    @(posedge clk); #1;

    // --- stall: W -> E queue holds 8
    set_ready(5'b11110);   // E blocked
    for (int k = 0; k < 8; k++) begin
      one(DIR_W, mk(3, 1, 10 + k));
      check(acc_q[DIR_W], "fill");
    end
    one(DIR_W, mk(3, 1, 18));
    check(!acc_q[DIR_W] && ev_q.stall[DIR_W], "stall when full");
    set_ready(5'b11111);
    for (int k = 0; k < 8; k++) begin
      check(out_valid[DIR_E] && out_flit[DIR_E].payload == 31'(10 + k), "drain order");
      @(posedge clk); #1;
    end
    check(!out_valid[DIR_E], "drained");

    // --- F' for the S->E turn at the north neighbour
    reset_dut();
    set_ready(5'b00000);
    for (int k = 0; k < 5; k++) one(DIR_C, mk(3, 1, 20 + k));   // C->E holds 5
    occ_nse_i = 6;
    one(DIR_C, mk(2, 2, 30));     // 1+6+0 = 7
    check(acc_q[DIR_C] && ev_q.restricted[DIR_C] && !ev_q.fallback[DIR_C], "F' pass 7");
    one(DIR_C, mk(2, 2, 31));     // 1+6+1 = 8
    check(acc_q[DIR_C] && ev_q.restricted[DIR_C], "F' pass at capacity");
    one(DIR_C, mk(2, 2, 32));     // 1+6+2 = 9 -> fallback east
    check(acc_q[DIR_C] && ev_q.fallback[DIR_C] && !ev_q.restricted[DIR_C], "F' fallback");
    #1 check(dut.occ[DIR_C][DIR_N] == 2 && dut.occ[DIR_C][DIR_E] == 6, "fallback went east");
    // --- F' for the S->W turn, E input (westbound packet)
    for (int k = 0; k < 3; k++) one(DIR_E, mk(0, 1, 40 + k));   // E->W holds 3
    occ_nsw_i = 5;
    one(DIR_E, mk(0, 2, 50));     // 1+5+CN 2+EN 0 = 8
    check(acc_q[DIR_E] && ev_q.restricted[DIR_E], "F' S->W pass at capacity");
    one(DIR_E, mk(0, 2, 51));     // 1+5+2+1 = 9
    check(acc_q[DIR_E] && ev_q.fallback[DIR_E], "F' S->W fallback");
    #1 check(dut.occ[DIR_E][DIR_N] == 1 && dut.occ[DIR_E][DIR_W] == 4, "fallback went west");
    set_ready(5'b11111);
    repeat (12) @(posedge clk);
    #1;

    // --- serial F' between inputs in the same cycle
    reset_dut();
    set_ready(5'b00000);
    one(DIR_S, mk(3, 1, 60));
    one(DIR_C, mk(3, 1, 61));
    occ_nse_i = 7;
    foreach (fs[i]) fs[i] = '0;
    fs[DIR_S] = mk(2, 2, 62); fs[DIR_C] = mk(2, 2, 63);
    cycle(5'b10010, fs);
    check(acc_q[DIR_S] && acc_q[DIR_C], "both accepted");
    check(ev_q.restricted[DIR_S] && ev_q.fallback[DIR_C], "second packet sees the first");
    occ_nse_i = 5;
    fs[DIR_S] = mk(2, 3, 64); fs[DIR_C] = mk(2, 3, 65);
    // S ties between its N and E queues (1 each) and goes east; C goes
    // north: 1 + 5 + occ(S->N) 1 = 7 fits.
    cycle(5'b10010, fs);
    check(!ev_q.fallback[DIR_C], "no fallback when it fits");
    set_ready(5'b11111);
    repeat (12) @(posedge clk);
    #1;

    // --- random traffic with scoreboard
    reset_dut();
    foreach (last_id[i, o]) last_id[i][o] = 0;
    scoreboard_on = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      logic [NPORT-1:0] m;
      for (int i = 0; i < NPORT; i++) begin
        int dx, dy;
        // minimal routes only: a packet from E travels west, etc.
        dx = $urandom_range(4); dy = $urandom_range(4);
        if (i == DIR_E && dx > 1) dx = $urandom_range(1);
        if (i == DIR_W && dx < 1) dx = 1 + $urandom_range(3);
        if (i == DIR_N && dy > 1) dy = $urandom_range(1);
        if (i == DIR_S && dy < 1) dy = 1 + $urandom_range(3);
        id++;
        fs[i] = mk(dx, dy, id, i);
        m[i] = ($urandom_range(99) < 45);
      end
      for (int o = 0; o < NPORT; o++) out_ready[o] = ($urandom_range(99) < 60);
      occ_nse_i = 4'($urandom_range(8));
      occ_nsw_i = 4'($urandom_range(8));
      cycle(m, fs);
      for (int i = 0; i < NPORT; i++) begin
        if (acc_q[i]) n_acc++;
        n_fb += int'(ev_q.fallback[i]);
        n_rs += int'(ev_q.restricted[i]);
        n_stall += int'(ev_q.stall[i]);
      end
    end
    set_ready(5'b11111);
    repeat (50) @(posedge clk);
    #1;
    check(n_out == n_acc, "every accepted packet left exactly once");
    check(n_fb > 0 && n_rs > 0 && n_stall > 0, "fallback, restricted pass and stall all seen");
    $display("random: accepted %0d delivered %0d fallback %0d restricted %0d stalls %0d",
             n_acc, n_out, n_fb, n_rs, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
