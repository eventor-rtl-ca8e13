// nearest_voxel_finder: nearest voting and projection-miss judgement.
//
// Rounds the Q.28 plane coordinates (xs, ys) to the nearest integer voxel
// (round half up: add 0.5, then floor) and checks that the voxel lies inside
// the W x H image. Inside: hit = 1 and (vx, vy) are the 8-bit voxel column
// and row. Outside: hit = 0 (a projection miss, which casts no vote).
// One pipeline stage, advancing when en is high; z is carried along.
// Nearest voting (instead of bilinear voting) and 8-bit integer voxel
// coordinates follow the paper; the rounding rule is this design's.
// Lint note: the 28 fraction bits of the rounded sums xr, yr are dropped by
// design (only the integer part selects a voxel).
module nearest_voxel_finder
  import eventor_pkg::*;
#(
  parameter int unsigned W   = IMG_W,
  parameter int unsigned H   = IMG_H,
  parameter int unsigned Z_W = $clog2(NZ),
  localparam int unsigned ACC_W = PROD_W + 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] xs,
  input  logic signed [ACC_W-1:0] ys,
  input  logic [Z_W-1:0]          z_in,
  output logic                    out_valid,
  output logic                    hit,
  output vox8_t                   vx,
  output vox8_t                   vy,
  output logic [Z_W-1:0]          z_out
);
  localparam int unsigned INT_W = ACC_W - PROD_FRAC;
  localparam logic signed [ACC_W-1:0] HALF = ACC_W'(1) <<< (PROD_FRAC - 1);
  logic signed [ACC_W-1:0] xr, yr;
  logic signed [INT_W-1:0] xi, yi;
  logic                    in_img;

  always_comb begin
    xr = xs + HALF;
    yr = ys + HALF;
    xi = xr[ACC_W-1:PROD_FRAC];
    yi = yr[ACC_W-1:PROD_FRAC];
    in_img = (xi >= 0) && (xi < INT_W'(W)) && (yi >= 0) && (yi < INT_W'(H));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; hit <= 1'b0; vx <= '0; vy <= '0; z_out <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      hit       <= in_valid && in_img;
      vx        <= vox8_t'(xi);
      vy        <= vox8_t'(yi);
      z_out     <= z_in;
    end
  end
endmodule
