// tb_pe_z0: checks the canonical projection element against the integer
// reference: random near-identity homographies, random events, one event
// per cycle; every output is compared bit-exactly, in order, and the
// latency must be 19 cycles. A few events use a matrix whose third row is
// zero, which must saturate.
module tb_pe_z0;
  import eventor_pkg::*;
  import eventor_ref_pkg::*;
  localparam int N = 600;
  localparam int LAT = 19;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic h_load, in_valid, out_valid;
  param_t h [9];
  point_t in_pt, out_pt;
  pe_z0 dut (.clk, .rst_n, .h_load, .h, .in_valid, .in_pt, .out_valid, .out_pt);

  longint hq [2][9];
  longint ex [N], ey [N], rx [N], ry [N];
  longint in_cyc [N];
  int checks = 0, failures = 0, nout = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (longint'(out_pt.x) != rx[nout] || longint'(out_pt.y) != ry[nout]) begin
      failures++;
      if (failures < 10) $display("FAIL ev %0d: got (%0d,%0d) exp (%0d,%0d)", nout,
                                  out_pt.x, out_pt.y, rx[nout], ry[nout]);
    end
    checks++;
    if (cyc - in_cyc[nout] != LAT) begin
      failures++;
      if (failures < 10) $display("FAIL latency %0d", cyc - in_cyc[nout]);
    end
    nout++;
  end

  initial begin
    real hr [9];
    hr = '{1.02, 0.01, -1.5, -0.012, 0.98, 2.25, 0.0001, -0.00007, 1.0};
    for (int i = 0; i < 9; i++) hq[0][i] = to_q21(hr[i]);
    hq[1] = hq[0];
    hq[1][6] = 0; hq[1][7] = 0; hq[1][8] = 0;       // w = 0: saturation
    for (int k = 0; k < N; k++) begin
      int m;
      m = (k >= N - 20);
      ex[k] = $urandom_range(0, IMG_W * 128 - 1);
      ey[k] = $urandom_range(0, IMG_H * 128 - 1);
      ref_pz0(hq[m], ex[k], ey[k], rx[k], ry[k]);
    end
    h_load = 0; in_valid = 0; in_pt = '0;
    for (int i = 0; i < 9; i++) h[i] = param_t'(hq[0][i]);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); h_load = 1; @(negedge clk); h_load = 0;
    for (int k = 0; k < N; k++) begin
      if (k == N - 20) begin
        // wait for the pipeline to empty, then load the second matrix
        in_valid = 0;
        repeat (LAT + 2) @(negedge clk);
        for (int i = 0; i < 9; i++) h[i] = param_t'(hq[1][i]);
        h_load = 1; @(negedge clk); h_load = 0;
      end
      in_valid = 1; in_pt = '{y: coord_t'(ey[k]), x: coord_t'(ex[k])};
      in_cyc[k] = cyc;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (nout != N) begin failures++; $display("FAIL: %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
