// route_unit: routing computation for one input port of an OQ router.
//
// For a packet arriving at node (cur_x, cur_y) it produces, combinationally:
//   base_dir  the direction chosen by the base algorithm, minimal routes only;
//   fb_dir    the direction chosen by the fallback algorithm, XY
//             dimension-order routing (X first, then Y, then the centre);
//   chk_se /  whether the packet, if sent north, could take the S->E
//   chk_sw    (resp. S->W) turn at the north neighbour, i.e. whether the
//             freedom condition must be consulted for a northward move.
//
// Base algorithms (parameter ALGO):
//   ALG_XY_ADAPTIVE  when both an X and a Y direction lie on a minimal path,
//                    take the one whose local queue (this input -> that
//                    output) holds fewer packets; on a tie take the X
//                    direction. Otherwise take the only productive one.
//   ALG_XY_O1TURN    the packet's yx tag selects YX order (Y first) or XY
//                    order for the whole path; the occupancy is not used.
// The router replaces base_dir by fb_dir when base_dir is north and the
// freedom condition fails. Since chk_se/chk_sw imply an X offset, fb_dir is
// then east or west and never north.
//
// The least-occupancy heuristic, O1-Turn and the XY fallback follow the
// paper; the tie-break towards X is this design's choice.
module route_unit
  import noc_pkg::*;
#(
  parameter algo_e ALGO  = ALG_XY_ADAPTIVE,
  parameter int    DEPTH = 8,
  localparam int   CW    = $clog2(DEPTH + 1)
) (
  input  logic [COORD_W-1:0] cur_x,
  input  logic [COORD_W-1:0] cur_y,
  input  flit_t              flit,
  input  logic [CW-1:0]      occ [NPORT],   // occupancy of this input's 5 queues
  output dir_e               base_dir,
  output dir_e               fb_dir,
  output logic               chk_se,
  output logic               chk_sw,
  output logic               chose_y        // adaptive choice went to Y over X
);

  logic go_e, go_w, go_n, go_s;
  dir_e xdir, ydir;

  always_comb begin
    go_e = flit.dst_x > cur_x;
    go_w = flit.dst_x < cur_x;
    go_n = flit.dst_y > cur_y;
    go_s = flit.dst_y < cur_y;
    xdir = go_e ? DIR_E : DIR_W;
    ydir = go_n ? DIR_N : DIR_S;

    // Fallback: XY dimension-order routing.
    if (go_e || go_w)      fb_dir = xdir;
    else if (go_n || go_s) fb_dir = ydir;
    else                   fb_dir = DIR_C;

    chose_y = 1'b0;
    if ((go_e || go_w) && (go_n || go_s)) begin
      if (ALGO == ALG_XY_O1TURN) begin
        base_dir = flit.yx ? ydir : xdir;
      end else begin
        chose_y  = occ[ydir] < occ[xdir];
        base_dir = chose_y ? ydir : xdir;
      end
    end else begin
      base_dir = fb_dir;
    end

    chk_se = go_n && go_e;
    chk_sw = go_n && go_w;
  end

endmodule
