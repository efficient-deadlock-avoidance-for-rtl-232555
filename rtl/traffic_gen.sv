// traffic_gen: synthetic packet source at the centre (C) port of a node.
//
// Every cycle in which the generator holds no packet, it creates a new one
// with probability rate/256 (Bernoulli arrivals, rate = 256 injects every
// free cycle). The packet waits on out_valid/out_flit until the router
// accepts it (out_ready); meanwhile no further packet is created, so the
// offered load is throttled by back-pressure. inj_count counts accepted
// packets.
//
// Destination patterns (input pattern), on the node address a = {y, x}:
//   PAT_UNIFORM    uniformly random node (self included)
//   PAT_BURSTY     bursts of BURST_LEN packets to one random node; a burst
//                  starts with probability rate/(256*BURST_LEN) per free cycle
//   PAT_BITCOMP    ~a              PAT_BITREV     a with bits reversed
//   PAT_BITROT     a rotated right by one bit
//   PAT_BUTTERFLY  a with its most and least significant bits swapped
//   PAT_TRANSPOSE  (x, y) -> (y, x)
//   PAT_HOTSPOT    uniform, but the centre node (MESH_W/2, MESH_H/2) is
//                  drawn four times as often as any other node
// The bit-permutation patterns assume power-of-two mesh sides and transpose
// a square mesh; results are reduced modulo the mesh sides otherwise.
//
// Randomness comes from two xorshift32 generators seeded from SEED and the
// node position. Each packet gets a random O1-Turn tag (yx), the current
// time `now` as stamp, and its sequence number as payload.
//
// The paper's nodes only generate random packets; the list of patterns is
// the one its evaluation uses, but their exact definitions (standard
// textbook ones), the burst model and the throttled source are this
// design's choices.
module traffic_gen
  import noc_pkg::*;
#(
  parameter int          X         = 0,
  parameter int          Y         = 0,
  parameter int          MESH_W    = 8,
  parameter int          MESH_H    = 8,
  parameter int          BURST_LEN = 8,
  parameter logic [31:0] SEED      = 32'h1234_5678
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               enable,
  input  logic [8:0]         rate,      // injection probability * 256
  input  pattern_e           pattern,
  input  logic [STAMP_W-1:0] now,
  output logic               out_valid,
  output flit_t              out_flit,
  input  logic               out_ready,
  output logic [31:0]        inj_count
);

  localparam int XW = (MESH_W > 1) ? $clog2(MESH_W) : 1;
  localparam int YW = (MESH_H > 1) ? $clog2(MESH_H) : 1;
  localparam int AW = XW + YW;
  localparam int NN = MESH_W * MESH_H;
  localparam logic [AW-1:0] SELF = {YW'(Y), XW'(X)};

  logic [31:0] ra, rb;                 // xorshift states
  logic [$clog2(BURST_LEN+1)-1:0] burst_left;
  logic [COORD_W-1:0] burst_x, burst_y;

  function automatic logic [31:0] xorshift(input logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    return t ^ (t << 5);
  endfunction

  // Uniform coordinate in [0, n) from 16 random bits: (r * n) >> 16.
  function automatic logic [COORD_W-1:0] scale(input logic [15:0] r, input int n);
    logic [31:0] p;
    p = 32'(r) * 32'(n);
    return COORD_W'(p >> 16);
  endfunction

  logic [COORD_W-1:0] ux, uy, dx, dy;
  logic [AW-1:0]      perm;
  logic               hot, fire_new, start_burst, in_burst;

  always_comb begin
    ux = scale(ra[15:0], MESH_W);
    uy = scale(ra[31:16], MESH_H);
    // Hot spot: with probability 3/(NN+3) force the centre, else uniform.
    hot = (32'(rb[23:8]) * 32'(NN + 3)) < (32'd3 << 16);
    perm = SELF;
    case (pattern)
      PAT_BITCOMP:   perm = ~SELF;
      PAT_BITREV:    perm = {<<{SELF}};
      PAT_BITROT:    perm = {SELF[0], SELF[AW-1:1]};
      PAT_BUTTERFLY: begin
        perm = SELF;
        perm[AW-1] = SELF[0];
        perm[0]    = SELF[AW-1];
      end
      default:       perm = SELF;
    endcase
    case (pattern)
      PAT_BITCOMP, PAT_BITREV, PAT_BITROT, PAT_BUTTERFLY: begin
        dx = COORD_W'(32'(perm[XW-1:0]) % MESH_W);
        dy = COORD_W'(32'(perm[AW-1:XW]) % MESH_H);
      end
      PAT_TRANSPOSE: begin
        dx = COORD_W'(Y % MESH_W);
        dy = COORD_W'(X % MESH_H);
      end
      PAT_HOTSPOT: begin
        dx = hot ? COORD_W'(MESH_W / 2) : ux;
        dy = hot ? COORD_W'(MESH_H / 2) : uy;
      end
      PAT_BURSTY: begin
        dx = (burst_left != '0) ? burst_x : ux;
        dy = (burst_left != '0) ? burst_y : uy;
      end
      default: begin
        dx = ux;
        dy = uy;
      end
    endcase
    in_burst    = pattern == PAT_BURSTY && burst_left != '0;
    // Burst start with probability rate / (256 * BURST_LEN).
    start_burst = pattern == PAT_BURSTY && burst_left == '0 &&
                  (32'(rb[23:8]) * 32'(BURST_LEN) < (32'(rate) << 8));
    fire_new = enable && (!out_valid || out_ready) &&
               ((pattern == PAT_BURSTY) ? (in_burst || start_burst)
                                        : (10'(rb[7:0]) < 10'(rate)));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ra         <= SEED ^ (32'(X) * 32'h9E37_79B9) ^ (32'(Y) * 32'h85EB_CA6B) ^ 32'h0000_0001;
      rb         <= ~SEED ^ (32'(Y) * 32'h9E37_79B9) ^ (32'(X) * 32'hC2B2_AE35) ^ 32'h8000_0000;
      out_valid  <= 1'b0;
      out_flit   <= '0;
      inj_count  <= '0;
      burst_left <= '0;
      burst_x    <= '0;
      burst_y    <= '0;
    end else begin
      ra <= xorshift(ra);
      rb <= xorshift(rb);
      if (out_valid && out_ready) begin
        out_valid <= 1'b0;
        inj_count <= inj_count + 1'b1;
      end
      if (fire_new) begin
        out_valid        <= 1'b1;
        out_flit.dst_x   <= dx;
        out_flit.dst_y   <= dy;
        out_flit.src_x   <= COORD_W'(X);
        out_flit.src_y   <= COORD_W'(Y);
        out_flit.yx      <= rb[31];
        out_flit.stamp   <= now;
        out_flit.payload <= $bits(out_flit.payload)'(inj_count + 32'(out_valid && out_ready));
        if (start_burst) begin
          burst_left <= $bits(burst_left)'(BURST_LEN - 1);
          burst_x    <= ux;
          burst_y    <= uy;
        end else if (in_burst) begin
          burst_left <= burst_left - 1'b1;
        end
      end
    end
  end

endmodule
