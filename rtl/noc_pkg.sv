// noc_pkg: types and constants shared by the output-queued mesh NoC.
//
// Port numbering follows the order {E, S, W, N, C} (east, south, west,
// north, centre). A router with P = 5 ports has one queue per
// (input, output) pair, 25 in all, and queue q[i][o] is identified with
// the "turn" i -> o. x grows eastwards and y northwards; node (x, y) has
// index y*MESH_W + x.
//
// A packet is a single 64-bit flit. The split of the 64 bits into fields
// is this design's own choice: destination and source coordinates, the
// O1-Turn dimension-order tag, a 16-bit injection time stamp used to
// measure latency, and a payload filling the rest.
package noc_pkg;

  localparam int NPORT   = 5;
  localparam int COORD_W = 4;   // coordinates up to 15, enough for 8x8
  localparam int FLIT_W  = 64;
  localparam int STAMP_W = 16;

  typedef enum logic [2:0] {
    DIR_E = 3'd0,
    DIR_S = 3'd1,
    DIR_W = 3'd2,
    DIR_N = 3'd3,
    DIR_C = 3'd4
  } dir_e;

  // Base routing algorithm combined with the XY DOR fallback.
  typedef enum logic {
    ALG_XY_ADAPTIVE = 1'b0,   // minimal fully adaptive, least-occupied queue
    ALG_XY_O1TURN   = 1'b1    // O1-Turn: per-packet random XY or YX order
  } algo_e;

  // Synthetic destination patterns of the packet generators.
  typedef enum logic [2:0] {
    PAT_UNIFORM   = 3'd0,
    PAT_BURSTY    = 3'd1,
    PAT_BITCOMP   = 3'd2,
    PAT_BITREV    = 3'd3,
    PAT_BITROT    = 3'd4,
    PAT_BUTTERFLY = 3'd5,
    PAT_TRANSPOSE = 3'd6,
    PAT_HOTSPOT   = 3'd7
  } pattern_e;

  typedef struct packed {
    logic [COORD_W-1:0] dst_x;
    logic [COORD_W-1:0] dst_y;
    logic [COORD_W-1:0] src_x;
    logic [COORD_W-1:0] src_y;
    logic               yx;       // O1-Turn tag: 1 = route Y first
    logic [STAMP_W-1:0] stamp;    // injection cycle, modulo 2^16
    logic [FLIT_W-4*COORD_W-1-STAMP_W-1:0] payload;
  } flit_t;

  // Per-cycle events reported by a router, one bit per input port.
  typedef struct packed {
    logic [NPORT-1:0] fallback;    // F' false: packet rerouted by XY DOR
    logic [NPORT-1:0] restricted;  // sent north with F' true although a
                                   // north-last-forbidden turn is possible next hop
    logic [NPORT-1:0] adaptive_y;  // adaptive heuristic picked Y over X
    logic [NPORT-1:0] stall;       // input valid but its target queue full
  } router_ev_t;

endpackage
