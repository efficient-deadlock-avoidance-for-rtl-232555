// oq_router: 5x5 output-queued mesh router with freedom-condition routing.
//
// Organisation (split-merge switch). Every input port i in {E, S, W, N, C}
// owns one queue per output port o, q[i][o], 25 synchronous FIFOs in all.
// A packet arriving on input i is routed on arrival (route_unit), split
// into q[i][sel] in the same cycle, and later merged onto output sel by
// that output's round-robin arbiter (out_arbiter). There is no crossbar
// and no pipelining: a packet that enters in cycle t can leave in cycle t+1,
// one router per cycle.
//
// Routing (bimodal). The base algorithm (XY/Adaptive by default, XY/O1-Turn
// as an option) picks sel. If sel is north and the packet could make a
// north-last-forbidden turn (S->E or S->W) at the north neighbour, the
// freedom condition F' (freedom_check) is evaluated; when F' fails, the
// XY dimension-order fallback direction is used instead. F' is applied
// serially over the inputs in the fixed priority order E, S, W, N, C:
// packets of higher-priority inputs that are enqueued into north-bound
// queues in the same cycle are added to the worst-case sum of the later
// ones.
//
// Flow control. in_ready[i] is high when the queue the current packet on
// input i would be routed to has room; it depends combinationally on
// in_flit[i] (and on the other inputs through the serial F'), not on
// in_valid. Outputs offer out_valid/out_flit from the granted queue; the
// packet leaves when out_ready is high. A transfer on a link is
// valid && ready in the same cycle.
//
// Freedom-condition links. occ_se_o / occ_sw_o carry the occupancy of this
// router's S->E and S->W queues to the south neighbour; occ_nse_i / occ_nsw_i
// receive the same from the north neighbour (tie to 0 on the top row).
//
// ev reports per-input events of the cycle for statistics.
//
// What follows the paper: the 25-queue OQ organisation, routing on arrival,
// XY/Adaptive and XY/O1-Turn, F' with the serial priority step, ready-based
// flow control and the two southward occupancy links. This design's own
// choices: the input priority order, round-robin merging, and that a
// full target queue stalls the input rather than trying another direction.
module oq_router
  import noc_pkg::*;
#(
  parameter int    X     = 0,
  parameter int    Y     = 0,
  parameter int    DEPTH = 8,
  parameter algo_e ALGO  = ALG_XY_ADAPTIVE,
  localparam int   CW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid  [NPORT],
  input  flit_t         in_flit   [NPORT],
  output logic          in_ready  [NPORT],
  output logic          out_valid [NPORT],
  output flit_t         out_flit  [NPORT],
  input  logic          out_ready [NPORT],
  input  logic [CW-1:0] occ_nse_i,
  input  logic [CW-1:0] occ_nsw_i,
  output logic [CW-1:0] occ_se_o,
  output logic [CW-1:0] occ_sw_o,
  output router_ev_t    ev
);

  localparam logic [COORD_W-1:0] CX = COORD_W'(X);
  localparam logic [COORD_W-1:0] CY = COORD_W'(Y);

  // Queue state, indexed [input][output].
  logic [CW-1:0] occ   [NPORT][NPORT];
  logic          full  [NPORT][NPORT];
  logic          empty [NPORT][NPORT];
  flit_t         head  [NPORT][NPORT];
  logic          enq   [NPORT][NPORT];
  logic          deq   [NPORT][NPORT];

  // Routing results per input.
  dir_e sel     [NPORT];
  logic acc     [NPORT];

  // ---------------------------------------------------------------- inputs
  for (genvar i = 0; i < NPORT; i++) begin : g_in
    dir_e       base_dir, fb_dir;
    logic       chk_se, chk_sw, chose_y, f_ok, north;
    logic [2:0] pend_se, pend_sw;     // from higher-priority inputs
    logic [2:0] cum_se, cum_sw;       // including this input

    route_unit #(.ALGO(ALGO), .DEPTH(DEPTH)) u_route (
      .cur_x   (CX),
      .cur_y   (CY),
      .flit    (in_flit[i]),
      .occ     (occ[i]),
      .base_dir(base_dir),
      .fb_dir  (fb_dir),
      .chk_se  (chk_se),
      .chk_sw  (chk_sw),
      .chose_y (chose_y)
    );

    if (i == 0) begin : g_first
      assign pend_se = '0;
      assign pend_sw = '0;
    end else begin : g_next
      assign pend_se = g_in[i-1].cum_se;
      assign pend_sw = g_in[i-1].cum_sw;
    end

    freedom_check #(.DEPTH(DEPTH)) u_free (
      .chk_se (chk_se),
      .chk_sw (chk_sw),
      .occ_nse(occ_nse_i),
      .occ_nsw(occ_nsw_i),
      .occ_cn (occ[DIR_C][DIR_N]),
      .occ_sn (occ[DIR_S][DIR_N]),
      .occ_wn (occ[DIR_W][DIR_N]),
      .occ_en (occ[DIR_E][DIR_N]),
      .pend_se(pend_se),
      .pend_sw(pend_sw),
      .f_ok   (f_ok)
    );

    always_comb begin
      sel[i]      = (base_dir == DIR_N && !f_ok) ? fb_dir : base_dir;
      in_ready[i] = !full[i][sel[i]];
      acc[i]      = in_valid[i] && in_ready[i];
      north       = acc[i] && sel[i] == DIR_N;
      // Queues C->N, S->N, W->N feed q'_SE; C->N, S->N, E->N feed q'_SW.
      cum_se = pend_se + 3'((i == DIR_C || i == DIR_S || i == DIR_W) && north);
      cum_sw = pend_sw + 3'((i == DIR_C || i == DIR_S || i == DIR_E) && north);
      for (int o = 0; o < NPORT; o++) enq[i][o] = acc[i] && (sel[i] == dir_e'(o));
    end

    assign ev.fallback[i]   = acc[i] && base_dir == DIR_N && !f_ok;
    assign ev.restricted[i] = acc[i] && base_dir == DIR_N && (chk_se || chk_sw) && f_ok;
    assign ev.adaptive_y[i] = acc[i] && chose_y;
    assign ev.stall[i]      = in_valid[i] && !in_ready[i];

    for (genvar o = 0; o < NPORT; o++) begin : g_q
      sync_fifo #(.WIDTH(FLIT_W), .DEPTH(DEPTH)) u_q (
        .clk     (clk),
        .rst     (rst),
        .enq     (enq[i][o]),
        .enq_data(in_flit[i]),
        .deq     (deq[i][o]),
        .head    (head[i][o]),
        .empty   (empty[i][o]),
        .full    (full[i][o]),
        .count   (occ[i][o])
      );
    end
  end

  // --------------------------------------------------------------- outputs
  for (genvar o = 0; o < NPORT; o++) begin : g_out
    logic [NPORT-1:0] req;
    logic [2:0]       gnt;
    logic             fire;

    always_comb
      for (int i = 0; i < NPORT; i++) req[i] = !empty[i][o];

    out_arbiter #(.N(NPORT)) u_arb (
      .clk  (clk),
      .rst  (rst),
      .req  (req),
      .fire (fire),
      .valid(out_valid[o]),
      .gnt  (gnt)
    );

    assign out_flit[o] = head[gnt][o];
    assign fire        = out_valid[o] && out_ready[o];

    always_comb
      for (int i = 0; i < NPORT; i++) deq[i][o] = fire && (gnt == 3'(i));
  end

  assign occ_se_o = occ[DIR_S][DIR_E];
  assign occ_sw_o = occ[DIR_S][DIR_W];

  // A router never forwards a packet back through the port it came in on.
  for (genvar i = 0; i < NPORT - 1; i++) begin : g_chk
    a_no_uturn: assert property (@(posedge clk) disable iff (rst)
      !(in_valid[i] && in_ready[i] && sel[i] == dir_e'(i)));
  end

endmodule
