// tb_mv_mac_unit: random homography rows and events, one per cycle; each
// accumulator value must equal h0*x + h1*y + h2*128 (exact Q.28) two cycles
// after its input.
module tb_mv_mac_unit;
  import eventor_pkg::*;
  import eventor_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  param_t h0, h1, h2; coord_t x, y;
  logic signed [PROD_W+1:0] acc;
  mv_mac_unit dut (.clk, .rst_n, .in_valid, .h0, .h1, .h2, .x, .y, .out_valid, .acc);
  longint expq [$];
  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    longint e;
    e = expq.pop_front();
    checks++;
    if (longint'(acc) != e) begin failures++; $display("FAIL got %0d exp %0d", acc, e); end
  end
  initial begin
    in_valid = 0; h0 = 0; h1 = 0; h2 = 0; x = 0; y = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      in_valid = 1;
      h0 = param_t'(srange(-1 << 31, (1 << 31) - 1));
      h1 = param_t'(srange(-1 << 31, (1 << 31) - 1));
      h2 = param_t'(srange(-1 << 31, (1 << 31) - 1));
      x  = coord_t'(srange(-32768, 32767));
      y  = coord_t'(srange(-32768, 32767));
      expq.push_back(longint'(h0) * longint'(x) + longint'(h1) * longint'(y) + longint'(h2) * 128);
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: latency/missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
