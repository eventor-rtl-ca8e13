// vote_addr_gen: DSI vote address generator.
//
// Converts a hit voxel (vx, vy) on depth plane z into the linear voxel index
//   addr = (z * H + vy) * W + vx
// of a DSI stored plane after plane, row after row (scores are 16 bit, so the
// byte offset in DRAM is 2*addr). Misses are dropped: vote_valid is high only
// for hits. Two pipeline stages (row index, then linear index), advancing
// when en is high.
// The paper says the generated addresses are used directly to update DSI
// scores; the DSI memory layout is this design's choice.
module vote_addr_gen
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
  input  logic              hit,
  input  vox8_t             vx,
  input  vox8_t             vy,
  input  logic [Z_W-1:0]    z,
  output logic              vote_valid,
  output logic [ADDR_W-1:0] vote_addr
);
  logic [ADDR_W-1:0] row_q;
  vox8_t             x_q;
  logic              v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; row_q <= '0; x_q <= '0; vote_valid <= 1'b0; vote_addr <= '0;
    end else if (en) begin
      v_q        <= in_valid && hit;
      row_q      <= ADDR_W'(z) * ADDR_W'(H) + ADDR_W'(vy);
      x_q        <= vx;
      vote_valid <= v_q;
      vote_addr  <= row_q * ADDR_W'(W) + ADDR_W'(x_q);
    end
  end
endmodule
