// norm_divider: the normalisation function of PE_Z0.
//
// Turns a homogeneous coordinate into a pixel coordinate: q = num / den,
// where num and den are Q.28 fixed-point sums from the MV MAC units and q is
// Q9.7. The quotient is computed on magnitudes by restoring long division,
// one quotient bit per pipeline stage, and truncated toward zero; its sign
// is the XOR of the operand signs. If |q| would not fit (|q| >= 256, or
// den = 0) the result saturates to +/-32767 LSB (about +/-256 pixels), which
// lies outside any image and is later judged a projection miss.
// Fully pipelined: one division per cycle, latency QBITS + 2 = 17 cycles.
// The paper only names a normalisation function unit; the divider
// structure, rounding and saturation are this design's choices.
module norm_divider
  import eventor_pkg::*;
#(
  parameter int unsigned NUM_W = PROD_W + 2,
  localparam int unsigned QBITS = COORD_W - 1,
  localparam int unsigned REM_W = NUM_W + COORD_FRAC + QBITS + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [NUM_W-1:0] num,
  input  logic signed [NUM_W-1:0] den,
  output logic                    out_valid,
  output coord_t                  q
);
  // stage registers, index s = 0 .. QBITS
  logic [REM_W-1:0] rem_q  [QBITS+1];
  logic [REM_W-1:0] den_q  [QBITS+1];
  logic [QBITS-1:0] quo_q  [QBITS+1];
  logic             neg_q  [QBITS+1];
  logic             ovf_q  [QBITS+1];
  logic             vld_q  [QBITS+1];

  logic [NUM_W-1:0] abs_num, abs_den;
  logic [REM_W-1:0] n_ext, d_ext;
  assign abs_num = num[NUM_W-1] ? NUM_W'(-num) : NUM_W'(num);
  assign abs_den = den[NUM_W-1] ? NUM_W'(-den) : NUM_W'(den);
  assign n_ext   = REM_W'(abs_num) << COORD_FRAC;
  assign d_ext   = REM_W'(abs_den);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s <= QBITS; s++) begin
        rem_q[s] <= '0; den_q[s] <= '0; quo_q[s] <= '0;
        neg_q[s] <= 1'b0; ovf_q[s] <= 1'b0; vld_q[s] <= 1'b0;
      end
      out_valid <= 1'b0;
      q         <= '0;
    end else begin
      // stage 0: magnitudes, sign, overflow test (quotient >= 2^QBITS)
      rem_q[0] <= n_ext;
      den_q[0] <= d_ext;
      quo_q[0] <= '0;
      neg_q[0] <= num[NUM_W-1] ^ den[NUM_W-1];
      ovf_q[0] <= (abs_den == '0) || (n_ext >= (d_ext << QBITS));
      vld_q[0] <= in_valid;
      // stages 1..QBITS: quotient bit QBITS-s
      for (int s = 1; s <= QBITS; s++) begin
        logic [REM_W-1:0] shifted;
        shifted = den_q[s-1] << (QBITS - s);
        den_q[s] <= den_q[s-1];
        neg_q[s] <= neg_q[s-1];
        ovf_q[s] <= ovf_q[s-1];
        vld_q[s] <= vld_q[s-1];
        if (rem_q[s-1] >= shifted) begin
          rem_q[s] <= rem_q[s-1] - shifted;
          quo_q[s] <= quo_q[s-1] | (QBITS'(1) << (QBITS - s));
        end else begin
          rem_q[s] <= rem_q[s-1];
          quo_q[s] <= quo_q[s-1];
        end
      end
      // output stage: sign and saturation
      out_valid <= vld_q[QBITS];
      if (ovf_q[QBITS])
        q <= neg_q[QBITS] ? -coord_t'(2**QBITS - 1) : coord_t'(2**QBITS - 1);
      else
        q <= neg_q[QBITS] ? -coord_t'({1'b0, quo_q[QBITS]}) : coord_t'({1'b0, quo_q[QBITS]});
    end
  end
endmodule
