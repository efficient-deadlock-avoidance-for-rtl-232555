// packet_sink: consumer at the centre (C) output of a node.
//
// The centre of a node is a sink: it accepts a packet every cycle
// (in_ready is constant 1) and so never takes part in a dependency cycle.
// For each received packet it checks that the destination coordinates are
// those of this node (err is set and stays set otherwise), counts the packet
// in rx_count, and adds its latency, now - stamp modulo 2^16, to lat_sum and
// to the running maximum lat_max. The latency is counted from the cycle in
// which the packet was created by the node's generator to the cycle in
// which it leaves the router's C output.
//
// The paper only states that the centre consumes packets; the checks and
// counters are this design's instrumentation.
module packet_sink
  import noc_pkg::*;
#(
  parameter int X = 0,
  parameter int Y = 0
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  flit_t              in_flit,
  output logic               in_ready,
  input  logic [STAMP_W-1:0] now,
  output logic [31:0]        rx_count,
  output logic [47:0]        lat_sum,
  output logic [STAMP_W-1:0] lat_max,
  output logic               err
);

  logic [STAMP_W-1:0] lat;

  assign in_ready = 1'b1;
  assign lat      = now - in_flit.stamp;

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_count <= '0;
      lat_sum  <= '0;
      lat_max  <= '0;
      err      <= 1'b0;
    end else if (in_valid) begin
      rx_count <= rx_count + 1'b1;
      lat_sum  <= lat_sum + 48'(lat);
      if (lat > lat_max) lat_max <= lat;
      if (in_flit.dst_x != COORD_W'(X) || in_flit.dst_y != COORD_W'(Y)) err <= 1'b1;
    end
  end

endmodule
