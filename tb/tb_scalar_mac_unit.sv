// tb_scalar_mac_unit: random points and phi records with en toggled at
// random; every output taken while en is high must equal
// a*x0 + bx*128 and a*y0 + by*128, with the plane index carried along.
module tb_scalar_mac_unit;
  import eventor_pkg::*;
  import eventor_ref_pkg::*;
  localparam int ZW = $clog2(NZ);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, in_valid, out_valid;
  point_t p0; phi_t phi; logic [ZW-1:0] z_in, z_out;
  logic signed [PROD_W+1:0] xs, ys;
  scalar_mac_unit dut (.clk, .rst_n, .en, .in_valid, .p0, .phi, .z_in, .out_valid, .xs, .ys, .z_out);
  longint ex [$], ey [$]; int ez [$];
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && en && out_valid) begin
    longint a, b; int c;
    a = ex.pop_front(); b = ey.pop_front(); c = ez.pop_front();
    checks++;
    if (longint'(xs) != a || longint'(ys) != b || int'(z_out) != c) begin
      failures++; if (failures < 10) $display("FAIL got %0d %0d %0d exp %0d %0d %0d", xs, ys, z_out, a, b, c);
    end
  end
  initial begin
    en = 1; in_valid = 0; p0 = '0; phi = '0; z_in = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      if (!en) continue;
      in_valid = ($urandom_range(0, 7) != 0);
      p0  = '{y: coord_t'(srange(-32768, 32767)), x: coord_t'(srange(-32768, 32767))};
      phi = '{by: param_t'(srange(-1 << 31, (1 << 31) - 1)), bx: param_t'(srange(-1 << 31, (1 << 31) - 1)),
              a: param_t'(srange(-1 << 31, (1 << 31) - 1))};
      z_in = ZW'($urandom_range(0, NZ - 1));
      if (in_valid) begin
        ex.push_back(longint'(phi.a) * longint'(p0.x) + longint'(phi.bx) * 128);
        ey.push_back(longint'(phi.a) * longint'(p0.y) + longint'(phi.by) * 128);
        ez.push_back(int'(z_in));
      end
    end
    @(negedge clk); en = 1; in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (ex.size() != 0) begin failures++; $display("FAIL: outputs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
