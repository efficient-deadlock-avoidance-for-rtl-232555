// noc_top: MESH_W x MESH_H 2D mesh of output-queued routers with
// freedom-condition deadlock avoidance.
//
// Node (x, y), index y*MESH_W + x, holds an oq_router, a traffic_gen on the
// router's C input and a packet_sink on its C output. Neighbouring routers
// are joined by one valid/flit/ready link per direction: E of (x, y) to W
// of (x+1, y), N of (x, y) to S of (x, y+1). In addition each vertical link
// carries two southward occupancy buses, the S->E and S->W queue
// occupancies of the upper router, which the lower router's freedom
// condition reads. Ports at the mesh boundary are tied off (no valid in, no
// ready out; minimal routing never uses them), as are the occupancy inputs
// of the top row.
//
// A free-running 16-bit cycle counter time-stamps packets for latency.
// The per-node counters and events are brought out as arrays, indexed by
// node, for observation.
//
// Defaults follow the paper's hardware study: an 8x8 mesh, queues of 8
// entries, 64-bit single-flit packets, XY/Adaptive routing.
module noc_top
  import noc_pkg::*;
#(
  parameter int          MESH_W = 8,
  parameter int          MESH_H = 8,
  parameter int          DEPTH  = 8,
  parameter algo_e       ALGO   = ALG_XY_ADAPTIVE,
  parameter logic [31:0] SEED   = 32'h1234_5678,
  localparam int         NN     = MESH_W * MESH_H
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        inj_enable,
  input  logic [8:0]  inj_rate,        // injection probability * 256
  input  pattern_e    pattern,
  output logic [31:0] inj_count [NN],
  output logic [31:0] rx_count  [NN],
  output logic [47:0] lat_sum   [NN],
  output logic [15:0] lat_max   [NN],
  output logic        rx_err    [NN],
  output router_ev_t  ev        [NN]
);

  localparam int CW = $clog2(DEPTH + 1);

  logic          in_valid  [NN][NPORT];
  flit_t         in_flit   [NN][NPORT];
  logic          in_ready  [NN][NPORT];
  logic          out_valid [NN][NPORT];
  flit_t         out_flit  [NN][NPORT];
  logic          out_ready [NN][NPORT];
  logic [CW-1:0] occ_se    [NN];
  logic [CW-1:0] occ_sw    [NN];
  logic [CW-1:0] occ_nse   [NN];
  logic [CW-1:0] occ_nsw   [NN];

  logic [STAMP_W-1:0] now;

  always_ff @(posedge clk) begin
    if (rst) now <= '0;
    else     now <= now + 1'b1;
  end

  for (genvar y = 0; y < MESH_H; y++) begin : g_y
    for (genvar x = 0; x < MESH_W; x++) begin : g_x
      localparam int N = y * MESH_W + x;

      // East link
      if (x < MESH_W - 1) begin : g_e
        assign in_valid[N][DIR_E]  = out_valid[N+1][DIR_W];
        assign in_flit[N][DIR_E]   = out_flit[N+1][DIR_W];
        assign out_ready[N][DIR_E] = in_ready[N+1][DIR_W];
      end else begin : g_e_edge
        assign in_valid[N][DIR_E]  = 1'b0;
        assign in_flit[N][DIR_E]   = '0;
        assign out_ready[N][DIR_E] = 1'b0;
      end
      // West link
      if (x > 0) begin : g_w
        assign in_valid[N][DIR_W]  = out_valid[N-1][DIR_E];
        assign in_flit[N][DIR_W]   = out_flit[N-1][DIR_E];
        assign out_ready[N][DIR_W] = in_ready[N-1][DIR_E];
      end else begin : g_w_edge
        assign in_valid[N][DIR_W]  = 1'b0;
        assign in_flit[N][DIR_W]   = '0;
        assign out_ready[N][DIR_W] = 1'b0;
      end
      // North link, with the occupancy buses coming down from above
      if (y < MESH_H - 1) begin : g_n
        assign in_valid[N][DIR_N]  = out_valid[N+MESH_W][DIR_S];
        assign in_flit[N][DIR_N]   = out_flit[N+MESH_W][DIR_S];
        assign out_ready[N][DIR_N] = in_ready[N+MESH_W][DIR_S];
        assign occ_nse[N]          = occ_se[N+MESH_W];
        assign occ_nsw[N]          = occ_sw[N+MESH_W];
      end else begin : g_n_edge
        assign in_valid[N][DIR_N]  = 1'b0;
        assign in_flit[N][DIR_N]   = '0;
        assign out_ready[N][DIR_N] = 1'b0;
        assign occ_nse[N]          = '0;
        assign occ_nsw[N]          = '0;
      end
      // South link
      if (y > 0) begin : g_s
        assign in_valid[N][DIR_S]  = out_valid[N-MESH_W][DIR_N];
        assign in_flit[N][DIR_S]   = out_flit[N-MESH_W][DIR_N];
        assign out_ready[N][DIR_S] = in_ready[N-MESH_W][DIR_N];
      end else begin : g_s_edge
        assign in_valid[N][DIR_S]  = 1'b0;
        assign in_flit[N][DIR_S]   = '0;
        assign out_ready[N][DIR_S] = 1'b0;
      end

      traffic_gen #(
        .X(x), .Y(y), .MESH_W(MESH_W), .MESH_H(MESH_H), .SEED(SEED)
      ) u_gen (
        .clk      (clk),
        .rst      (rst),
        .enable   (inj_enable),
        .rate     (inj_rate),
        .pattern  (pattern),
        .now      (now),
        .out_valid(in_valid[N][DIR_C]),
        .out_flit (in_flit[N][DIR_C]),
        .out_ready(in_ready[N][DIR_C]),
        .inj_count(inj_count[N])
      );

      oq_router #(
        .X(x), .Y(y), .DEPTH(DEPTH), .ALGO(ALGO)
      ) u_router (
        .clk      (clk),
        .rst      (rst),
        .in_valid (in_valid[N]),
        .in_flit  (in_flit[N]),
        .in_ready (in_ready[N]),
        .out_valid(out_valid[N]),
        .out_flit (out_flit[N]),
        .out_ready(out_ready[N]),
        .occ_nse_i(occ_nse[N]),
        .occ_nsw_i(occ_nsw[N]),
        .occ_se_o (occ_se[N]),
        .occ_sw_o (occ_sw[N]),
        .ev       (ev[N])
      );

      packet_sink #(.X(x), .Y(y)) u_sink (
        .clk     (clk),
        .rst     (rst),
        .in_valid(out_valid[N][DIR_C]),
        .in_flit (out_flit[N][DIR_C]),
        .in_ready(out_ready[N][DIR_C]),
        .now     (now),
        .rx_count(rx_count[N]),
        .lat_sum (lat_sum[N]),
        .lat_max (lat_max[N]),
        .err     (rx_err[N])
      );
    end
  end

endmodule
