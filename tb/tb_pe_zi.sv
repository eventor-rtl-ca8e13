// tb_pe_zi: checks the proportional projection element (scalar MAC, nearest
// voxel finder, vote address generator) against the integer reference.
// Random canonical points and random phi records (some far outside the
// image) are fed one per cycle while en is toggled at random; the stream of
// vote addresses and the number of misses must match the reference exactly,
// and with en held high a pair must come out after 5 cycles.
module tb_pe_zi;
  import eventor_pkg::*;
  import eventor_ref_pkg::*;
  localparam int N = 3000;
  localparam int ZW = $clog2(NZ);
  localparam int AW = $clog2(IMG_W * IMG_H * NZ);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, in_valid, vote_valid, miss;
  point_t p0; phi_t phi; logic [ZW-1:0] z; logic [AW-1:0] vote_addr;
  pe_zi dut (.clk, .rst_n, .en, .in_valid, .p0, .phi, .z, .vote_valid, .vote_addr, .miss);

  int exp_addr [$];
  int exp_miss = 0, got_miss = 0, nvote = 0;
  int checks = 0, failures = 0;
  longint cyc = 0, t_in = -1, t_out = -1;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (miss) got_miss++;
    if (vote_valid && en) begin
      int e;
      checks++;
      if (t_out < 0) t_out = cyc;
      e = (exp_addr.size() > 0) ? exp_addr.pop_front() : -1;
      if (int'(vote_addr) != e) begin
        failures++;
        if (failures < 10) $display("FAIL vote %0d: got %0d exp %0d", nvote, vote_addr, e);
      end
      nvote++;
    end
  end

  initial begin
    en = 1; in_valid = 0; p0 = '0; phi = '0; z = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < N; k++) begin
      longint x0, y0, a, bx, by, xi, yi;
      int zz;
      real ar;
      @(negedge clk);
      en = (k < 20) ? 1'b1 : ($urandom_range(0, 3) != 0);
      if (!en) begin in_valid = 1'b1; continue; end   // frozen: input ignored
      x0 = (k == 0) ? 100 * 128 : srange(-30 * 128, 285 * 128 - 30 * 128);
      y0 = (k == 0) ? 80 * 128 : srange(-25 * 128, 230 * 128 - 25 * 128);
      zz = $urandom_range(0, NZ - 1);
      ar = (k == 0) ? 1.0 : 0.5 + $urandom_range(0, 1000) / 1000.0;
      a  = to_q21(ar);
      bx = to_q21((1.0 - ar) * (120.0 + srange(-400, 400) / 10.0));
      by = to_q21((1.0 - ar) * (90.0 + srange(-300, 300) / 10.0));
      in_valid = 1;
      p0  = '{y: coord_t'(y0), x: coord_t'(x0)};
      phi = '{by: param_t'(by), bx: param_t'(bx), a: param_t'(a)};
      z   = ZW'(zz);
      if (t_in < 0) t_in = cyc;
      xi = ref_round(a, x0, bx);
      yi = ref_round(a, y0, by);
      if (xi >= 0 && xi < IMG_W && yi >= 0 && yi < IMG_H)
        exp_addr.push_back((zz * IMG_H + int'(yi)) * IMG_W + int'(xi));
      else exp_miss++;
    end
    @(negedge clk); in_valid = 0; en = 1;
    repeat (10) @(negedge clk);
    checks += 3;
    if (exp_addr.size() != 0) begin failures++; $display("FAIL: %0d votes missing", exp_addr.size()); end
    if (got_miss != exp_miss) begin failures++; $display("FAIL: misses %0d exp %0d", got_miss, exp_miss); end
    if (t_out - t_in != 5) begin failures++; $display("FAIL: latency %0d", t_out - t_in); end
    $display("votes=%0d misses=%0d", nvote, got_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
