// pe_zi: proportional projection processing element.
//
// Takes one canonical-plane point x(Z0), y(Z0) together with the phi record
// and index z of one depth plane, and produces the DSI vote address of the
// nearest voxel on that plane, or nothing when the projection misses the
// image. Chain: scalar_mac_unit (2 stages) -> nearest_voxel_finder (1) ->
// vote_addr_gen (2); LAT = 5 cycles when en stays high. One (point, plane)
// pair per cycle. en freezes the whole chain (used when Buf_V is full);
// miss pulses for every judged projection miss (for statistics).
// The three sub-units and their order follow the paper.
module pe_zi
  import eventor_pkg::*;
#(
  parameter int unsigned W      = IMG_W,
  parameter int unsigned H      = IMG_H,
  parameter int unsigned Z_W    = $clog2(NZ),
  parameter int unsigned ADDR_W = $clog2(IMG_W * IMG_H * NZ)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              in_valid,
  input  point_t            p0,
  input  phi_t              phi,
  input  logic [Z_W-1:0]    z,
  output logic              vote_valid,
  output logic [ADDR_W-1:0] vote_addr,
  output logic              miss
);
  localparam int unsigned ACC_W = PROD_W + 2;
  logic                    mac_v, nv_v, nv_hit;
  logic signed [ACC_W-1:0] xs, ys;
  logic [Z_W-1:0]          mac_z, nv_z;
  vox8_t                   vx, vy;

  scalar_mac_unit #(.Z_W(Z_W)) u_mac (
    .clk, .rst_n, .en, .in_valid, .p0, .phi, .z_in(z),
    .out_valid(mac_v), .xs, .ys, .z_out(mac_z)
  );
  nearest_voxel_finder #(.W(W), .H(H), .Z_W(Z_W)) u_nvf (
    .clk, .rst_n, .en, .in_valid(mac_v), .xs, .ys, .z_in(mac_z),
    .out_valid(nv_v), .hit(nv_hit), .vx, .vy, .z_out(nv_z)
  );
  vote_addr_gen #(.W(W), .H(H), .Z_W(Z_W), .ADDR_W(ADDR_W)) u_vag (
    .clk, .rst_n, .en, .in_valid(nv_v), .hit(nv_hit), .vx, .vy, .z(nv_z),
    .vote_valid, .vote_addr
  );

  assign miss = en && nv_v && !nv_hit;
endmodule
