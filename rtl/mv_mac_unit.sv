// mv_mac_unit: one row of the matrix-vector multiply-accumulate of PE_Z0.
//
// Computes acc = h0*x + h1*y + h2*1 for an event (x, y) in Q9.7 and a
// homography row (h0, h1, h2) in Q11.21. The two products are exact Q20.28
// numbers (48 bit); h2 is aligned to 28 fractional bits and the sum is kept
// exactly in ACC_W = 50 bits, so no precision is lost before normalisation.
// Two pipeline stages (multiply, add); a new event can enter every cycle and
// out_valid follows in_valid by LAT = 2 cycles.
// The paper names these units and says they are fully pipelined; the
// two-stage split and exact accumulation are this design's choices.
module mv_mac_unit
  import eventor_pkg::*;
#(
  localparam int unsigned ACC_W = PROD_W + 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  param_t                  h0,
  input  param_t                  h1,
  input  param_t                  h2,
  input  coord_t                  x,
  input  coord_t                  y,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] acc
);
  logic signed [PROD_W-1:0] p0_q, p1_q;
  logic signed [ACC_W-1:0]  c_q;
  logic                     v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
      p0_q      <= '0;
      p1_q      <= '0;
      c_q       <= '0;
      acc       <= '0;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
      p0_q      <= PROD_W'(h0) * PROD_W'(x);
      p1_q      <= PROD_W'(h1) * PROD_W'(y);
      c_q       <= ACC_W'(h2) <<< COORD_FRAC;
      acc       <= ACC_W'(p0_q) + ACC_W'(p1_q) + c_q;
    end
  end
endmodule
