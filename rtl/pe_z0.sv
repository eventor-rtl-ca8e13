// pe_z0: canonical back-projection processing element, P(Z0).
//
// Maps an (undistorted) event (x_k, y_k) of the current camera through the
// homography H_Z0 onto the canonical plane Z0 of the reference view:
//   [u v w]^T = H * [x_k y_k 1]^T,   x(Z0) = u / w,  y(Z0) = v / w.
// Three mv_mac_unit rows form the matrix-vector MAC; two norm_divider
// instances (sharing w) form the normalisation function. h_load copies the
// matrix presented on h (from Buf_H) into local registers; it must not be
// pulsed while events are in flight. One event per cycle, fixed latency
// LAT = 2 + 17 = 19 cycles from in_valid to out_valid, no stall input (the
// destination Buf_I bank holds a whole frame).
// The MAC-plus-normalisation structure and one-event-per-cycle pipelining
// follow the paper; the unit split and latencies are this design's.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of the
// assertions below. Every flip-flop uses the asynchronous reset.
module pe_z0
  import eventor_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   h_load,
  input  param_t h [9],
  input  logic   in_valid,
  input  point_t in_pt,
  output logic   out_valid,
  output point_t out_pt
);
  localparam int unsigned ACC_W = PROD_W + 2;
  param_t                  h_q [9];
  logic signed [ACC_W-1:0] acc [3];
  logic [2:0]              mac_v;
  logic                    vx, vy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      for (int i = 0; i < 9; i++) h_q[i] <= '0;
    else if (h_load) for (int i = 0; i < 9; i++) h_q[i] <= h[i];
  end

  for (genvar r = 0; r < 3; r++) begin : g_row
    mv_mac_unit u_mac (
      .clk, .rst_n, .in_valid,
      .h0(h_q[3*r]), .h1(h_q[3*r+1]), .h2(h_q[3*r+2]),
      .x(in_pt.x), .y(in_pt.y),
      .out_valid(mac_v[r]), .acc(acc[r])
    );
  end

  norm_divider u_div_x (
    .clk, .rst_n, .in_valid(mac_v[0]), .num(acc[0]), .den(acc[2]),
    .out_valid(vx), .q(out_pt.x)
  );
  norm_divider u_div_y (
    .clk, .rst_n, .in_valid(mac_v[1]), .num(acc[1]), .den(acc[2]),
    .out_valid(vy), .q(out_pt.y)
  );

  assign out_valid = vx;
  a_lanes_aligned: assert property (@(posedge clk) disable iff (!rst_n) vx == vy);
  a_macs_aligned : assert property (@(posedge clk) disable iff (!rst_n)
                                    mac_v[0] == mac_v[2] && mac_v[1] == mac_v[2]);
endmodule
