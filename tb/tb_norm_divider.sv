// tb_norm_divider: random numerators and denominators of both signs (and
// some zero or tiny denominators, which must saturate) enter one per cycle;
// each quotient must equal the reference trunc(num*128/den) saturated to
// +/-32767, 17 cycles after its input.
module tb_norm_divider;
  import eventor_pkg::*;
  import eventor_ref_pkg::*;
  localparam int LAT = 17;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic signed [PROD_W+1:0] num, den;
  coord_t q;
  norm_divider dut (.clk, .rst_n, .in_valid, .num, .den, .out_valid, .q);
  longint expq [$], tq [$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int checks = 0, failures = 0, nsat = 0;
  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    longint e, t;
    e = expq.pop_front(); t = tq.pop_front();
    checks += 2;
    if (longint'(q) != e) begin failures++; if (failures < 10) $display("FAIL got %0d exp %0d", q, e); end
    if (cyc - t != LAT) begin failures++; if (failures < 10) $display("FAIL latency %0d", cyc - t); end
  end
  initial begin
    in_valid = 0; num = 0; den = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 1000; k++) begin
      longint n, d;
      @(negedge clk);
      // numerator: a pixel coordinate of up to +/-300 px times a scale w
      d = longint'(srange(-(1 << 30), (1 << 30))) <<< 3;
      if (k % 10 == 0) d = 0;
      if (k % 10 == 1) d = srange(-5, 5);
      n = (d / 128) * longint'(srange(-300 * 128, 300 * 128)) + srange(-1000, 1000);
      num = n; den = d; in_valid = 1;
      expq.push_back(ref_div(n, d)); tq.push_back(cyc);
      if (ref_div(n, d) == 32767 || ref_div(n, d) == -32767) nsat++;
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks += 2;
    if (expq.size() != 0) begin failures++; $display("FAIL: outputs missing"); end
    if (nsat == 0) begin failures++; $display("FAIL: no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
