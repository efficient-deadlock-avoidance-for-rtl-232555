// tb_route_unit: self-checking test of the routing computation.
//
// Two instances, XY/Adaptive and XY/O1-Turn, receive random positions,
// destinations, tags and queue occupancies on a 8x8 mesh. The testbench
// computes the expected result itself: the fallback is XY order; the
// adaptive base takes the productive Y direction only when its queue holds
// strictly fewer packets than the productive X direction's queue; the
// O1-Turn base follows the tag; chk_se / chk_sw flag a north-east or
// north-west destination. Every base and fallback direction must also be
// minimal (it reduces the distance to the destination by one).
module tb_route_unit;
  import noc_pkg::*;

  logic [COORD_W-1:0] cur_x, cur_y;
  flit_t flit;
  logic [3:0] occ [NPORT];
  dir_e base_a, fb_a, base_o, fb_o;
  logic se_a, sw_a, se_o, sw_o, cy_a, cy_o;
  int checks = 0, failures = 0;
  int n_ydir = 0;

  route_unit #(.ALGO(ALG_XY_ADAPTIVE)) u_a (.cur_x, .cur_y, .flit, .occ,
    .base_dir(base_a), .fb_dir(fb_a), .chk_se(se_a), .chk_sw(sw_a), .chose_y(cy_a));
  route_unit #(.ALGO(ALG_XY_O1TURN)) u_o (.cur_x, .cur_y, .flit, .occ,
    .base_dir(base_o), .fb_dir(fb_o), .chk_se(se_o), .chk_sw(sw_o), .chose_y(cy_o));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s: cur (%0d,%0d) dst (%0d,%0d)", what, cur_x, cur_y, flit.dst_x, flit.dst_y);
    end
  endtask

  function automatic int mdist(input int x, y, dx, dy);
    return (x > dx ? x - dx : dx - x) + (y > dy ? y - dy : dy - y);
  endfunction

  function automatic int step_dist(input dir_e d);
    int x = cur_x, y = cur_y;
    case (d)
      DIR_E: x++;
      DIR_W: x--;
      DIR_N: y++;
      DIR_S: y--;
      default: ;
    endcase
    return mdist(x, y, flit.dst_x, flit.dst_y);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 20000; k++) begin
      int d0;
      dir_e xd, yd, exp_fb, exp_a, exp_o;
      bit hx, hy;
      cur_x = COORD_W'($urandom_range(7)); cur_y = COORD_W'($urandom_range(7));
      flit = '0;
      flit.dst_x = COORD_W'($urandom_range(7)); flit.dst_y = COORD_W'($urandom_range(7));
      flit.yx = 1'($urandom);
      foreach (occ[i]) occ[i] = 4'($urandom_range(8));
      #1;
      hx = flit.dst_x != cur_x; hy = flit.dst_y != cur_y;
      xd = (flit.dst_x > cur_x) ? DIR_E : DIR_W;
      yd = (flit.dst_y > cur_y) ? DIR_N : DIR_S;
      exp_fb = hx ? xd : hy ? yd : DIR_C;
      if (hx && hy) begin
        exp_a = (occ[yd] < occ[xd]) ? yd : xd;
        exp_o = flit.yx ? yd : xd;
      end else begin
        exp_a = exp_fb; exp_o = exp_fb;
      end
      if (exp_a == yd && hx && hy) n_ydir++;
      check(fb_a == exp_fb && fb_o == exp_fb, "fallback XY");
      check(base_a == exp_a, "adaptive base");
      check(base_o == exp_o, "O1-Turn base");
      check(cy_a == (hx && hy && exp_a == yd), "chose_y");
      check(se_a == (flit.dst_y > cur_y && flit.dst_x > cur_x) && se_o == se_a, "chk_se");
      check(sw_a == (flit.dst_y > cur_y && flit.dst_x < cur_x) && sw_o == sw_a, "chk_sw");
      d0 = mdist(cur_x, cur_y, flit.dst_x, flit.dst_y);
      if (d0 > 0) begin
        check(step_dist(base_a) == d0 - 1 && step_dist(base_o) == d0 - 1 &&
              step_dist(fb_a) == d0 - 1, "minimal");
        check(!(se_a || sw_a) || fb_a != DIR_N, "fallback never north when a turn is restricted");
      end else begin
        check(base_a == DIR_C && base_o == DIR_C, "deliver to centre");
      end
    end
    check(n_ydir > 1000, "adaptive Y choices occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
