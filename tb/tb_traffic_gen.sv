// tb_traffic_gen: self-checking test of the packet generator at node
// (5,2) of an 8x8 mesh (address {y,x} = 6'b010_101).
//
// For each pattern the generator runs 4000 cycles against a randomly ready
// router. Checks: every packet carries the source (5,2), a destination
// inside the mesh, and the stamp of the cycle in which it was created;
// a packet stays unchanged on the port until accepted; inj_count equals
// the number of handshakes. Permutation patterns must give the expected
// fixed destination (bit complement (2,5), bit reverse (2,5), bit rotate
// right (2,5), butterfly (4,6), transpose (2,5)). With the router always
// ready, the Bernoulli rate 64/256 gives 25% +-3% packets per cycle, the
// bursty model about the same on average, and the hot spot (4,4) receives
// 4/67 of the uniform-with-hotspot traffic (+-2%). The O1-Turn tag takes
// both values.
module tb_traffic_gen;
  import noc_pkg::*;
  logic clk = 0, rst = 1;
  logic enable = 0;
  logic [8:0] rate = 64;
  pattern_e pattern = PAT_UNIFORM;
  logic [15:0] now = 0;
  logic out_valid, out_ready = 1;
  flit_t out_flit;
  logic [31:0] inj_count;
  int checks = 0, failures = 0;

  traffic_gen #(.X(5), .Y(2), .MESH_W(8), .MESH_H(8)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1'b1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (pattern %s) at %0t", what, pattern.name(), $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ex_x, ex_y;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int p = 0; p < 8; p++) begin
      int n, hot, tags, cyc;
      logic [31:0] c0;
      flit_t held;
      bit holding;
      real r, h;
      n = 0; hot = 0; tags = 0; cyc = 4000; holding = 0;
      pattern = pattern_e'(p);
      enable = 1;
      c0 = inj_count;
      for (int k = 0; k < cyc; k++) begin
        out_ready = (p == 0) ? 1'($urandom_range(1)) : 1'b1;
        #1;
        if (out_valid) begin
          if (holding) check(out_flit == held, "held stable until accepted");
          else check(out_flit.stamp == now - 16'd1, "stamp is creation cycle");
          check(out_flit.src_x == 5 && out_flit.src_y == 2, "source");
          check(out_flit.dst_x < 8 && out_flit.dst_y < 8, "destination in mesh");
          ex_x = -1;
          case (pattern)
            PAT_BITCOMP:   begin ex_x = 2; ex_y = 5; end
            PAT_BITREV:    begin ex_x = 2; ex_y = 5; end
            PAT_BITROT:    begin ex_x = 2; ex_y = 5; end
            PAT_BUTTERFLY: begin ex_x = 4; ex_y = 6; end
            PAT_TRANSPOSE: begin ex_x = 2; ex_y = 5; end
            default: ;
          endcase
          if (ex_x >= 0) check(out_flit.dst_x == 4'(ex_x) && out_flit.dst_y == 4'(ex_y), "permutation");
          if (out_ready) begin
            n++;
            if (out_flit.dst_x == 4 && out_flit.dst_y == 4) hot++;
            tags += int'(out_flit.yx);
            holding = 0;
          end else begin
            held = out_flit; holding = 1;
          end
        end
        @(posedge clk); #1;
      end
      enable = 0;
      out_ready = 1;
      #1;
      if (out_valid) n++;   // last one is accepted at the next edge
      @(posedge clk); #1;
      check(inj_count - c0 == 32'(n), "inj_count matches handshakes");
      if (p != 0) begin
        r = real'(n) / cyc;
        check(r > 0.22 && r < 0.28 || (p == PAT_BURSTY && r > 0.17 && r < 0.33), "injection rate");
        $display("pattern %s: rate %f hot %0d tags %0d", pattern.name(), r, hot, tags);
      end
      if (pattern == PAT_HOTSPOT) begin
        h = real'(hot) / n;
        check(h > 4.0 / 67 - 0.02 && h < 4.0 / 67 + 0.02, "hot spot share");
      end
      check(tags > n / 4 && tags < 3 * n / 4, "O1-Turn tag mix");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
