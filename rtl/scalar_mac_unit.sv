// scalar_mac_unit: proportional back-projection P(Z0 ~> Zi) of one point.
//
// For the depth plane Zi handled this cycle it computes
//   xs = a * x(Z0) + bx,   ys = a * y(Z0) + by
// with x(Z0), y(Z0) in Q9.7 and a, bx, by (the plane's phi record) in
// Q11.21. Results are exact Q.28 numbers in ACC_W = 50 bits. The plane
// index z is carried along. Two pipeline stages (multiply, add) that advance
// only when en is high, so the proportional pipeline can be frozen as a whole
// when a vote buffer is full.
// The paper names scalar MAC units for this step; the linear form of phi
// (x(Zi) = a*x(Z0) + b, the space-sweep relation between parallel planes
// seen from one camera) and the staging are this design's.
module scalar_mac_unit
  import eventor_pkg::*;
#(
  parameter int unsigned Z_W = $clog2(NZ),
  localparam int unsigned ACC_W = PROD_W + 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    in_valid,
  input  point_t                  p0,
  input  phi_t                    phi,
  input  logic [Z_W-1:0]          z_in,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] xs,
  output logic signed [ACC_W-1:0] ys,
  output logic [Z_W-1:0]          z_out
);
  logic signed [PROD_W-1:0] px_q, py_q;
  logic signed [ACC_W-1:0]  bx_q, by_q;
  logic [Z_W-1:0]           z_q;
  logic                     v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; out_valid <= 1'b0;
      px_q <= '0; py_q <= '0; bx_q <= '0; by_q <= '0; z_q <= '0;
      xs <= '0; ys <= '0; z_out <= '0;
    end else if (en) begin
      v_q       <= in_valid;
      px_q      <= PROD_W'(phi.a) * PROD_W'(p0.x);
      py_q      <= PROD_W'(phi.a) * PROD_W'(p0.y);
      bx_q      <= ACC_W'(phi.bx) <<< COORD_FRAC;
      by_q      <= ACC_W'(phi.by) <<< COORD_FRAC;
      z_q       <= z_in;
      out_valid <= v_q;
      xs        <= ACC_W'(px_q) + bx_q;
      ys        <= ACC_W'(py_q) + by_q;
      z_out     <= z_q;
    end
  end
endmodule
