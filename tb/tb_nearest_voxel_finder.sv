// tb_nearest_voxel_finder: random Q.28 coordinates around and beyond the
// image, including exact half-pixel and border cases; hit and the rounded
// 8-bit voxel coordinates must match round-half-up and the W x H bounds.
module tb_nearest_voxel_finder;
  import eventor_pkg::*;
  import eventor_ref_pkg::*;
  localparam int ZW = $clog2(NZ);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, in_valid, out_valid, hit;
  logic signed [PROD_W+1:0] xs, ys;
  logic [ZW-1:0] z_in, z_out; vox8_t vx, vy;
  nearest_voxel_finder dut (.clk, .rst_n, .en, .in_valid, .xs, .ys, .z_in, .out_valid, .hit, .vx, .vy, .z_out);
  int checks = 0, failures = 0, nhit = 0, nmiss = 0;
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 1; in_valid = 0; xs = 0; ys = 0; z_in = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      longint x, y, rx, ry; bit eh;
      int zz;
      @(negedge clk);
      x = (longint'(srange(-20 * 128, 260 * 128)) <<< 21) + srange(-1000, 1000);
      y = (longint'(srange(-20 * 128, 200 * 128)) <<< 21) + srange(-1000, 1000);
      if (k % 7 == 0) x = (longint'(srange(-2, 241)) <<< 28) + (longint'(1) <<< 27) - (k % 2);
      if (k % 11 == 0) y = (longint'(srange(-2, 181)) <<< 28) + (longint'(1) <<< 27) - (k % 2);
      zz = $urandom_range(0, NZ - 1);
      xs = x; ys = y; z_in = ZW'(zz); in_valid = 1;
      @(negedge clk);
      rx = (x + (longint'(1) <<< 27)) >>> 28;
      ry = (y + (longint'(1) <<< 27)) >>> 28;
      eh = rx >= 0 && rx < IMG_W && ry >= 0 && ry < IMG_H;
      checks++;
      if (!out_valid || hit != eh || int'(z_out) != zz || (eh && (int'(vx) != rx || int'(vy) != ry))) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d: hit %0d (%0d,%0d) exp %0d (%0d,%0d)", x, y, hit, vx, vy, eh, rx, ry);
      end
      if (eh) nhit++; else nmiss++;
    end
    checks++;
    if (nhit == 0 || nmiss == 0) begin failures++; $display("FAIL: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
