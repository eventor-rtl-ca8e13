// tb_canonical_projection_module: the canonical module at full size (1024
// events, 100 planes, 2 lanes) fed by a DMA-like AXI4-Stream driver, with a
// behavioural consumer in place of the proportional module. Four frames
// (key, normal, key, normal; the second one partial with 300 events) go in
// back to back. The consumer takes each Buf_I/Buf_P bank pair, holds it for
// a random time, reads every canonical point and compares it with the
// bit-exact reference, reads all planes' phi on both ports, checks the DSI
// base tag and releases. Also checked: P(Z0) of a full frame finishes within
// 1024 + 30 cycles of its first event read (paper: 8.24 us at 130 MHz, i.e.
// ~1071 cycles), key frames wait (key_wait seen) while normal frames may run
// while the consumer still holds the previous frame, and one stray beat to
// the unused destination is dropped and counted.
module tb_canonical_projection_module;
  import eventor_pkg::*;
  import eventor_ref_pkg::*;
  localparam int NF = 4, AW = 10, CW = 11, ZW = 7;
  localparam bit KEY [NF] = '{1'b1, 1'b0, 1'b1, 1'b0};
  localparam int NEV [NF] = '{1024, 300, 1024, 1024};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] s_tdata; logic [1:0] s_tdest; logic s_tlast, s_tvalid, s_tready;
  logic cmd_valid, cmd_key, cmd_ready; logic [31:0] cmd_base;
  logic i_rd_en, i_avail, i_release, p_rd_en, p_avail, p_release, ppm_idle, key_wait, busy;
  logic [AW-1:0] i_rd_addr; point_t i_rd_data; logic [CW-1:0] i_count; logic [31:0] i_tag;
  logic [ZW-1:0] p_rd_addr [NPE]; phi_t p_rd_data [NPE]; logic [15:0] bad_beats;
  canonical_projection_module dut (.clk, .rst_n, .s_tdata, .s_tdest, .s_tlast, .s_tvalid, .s_tready,
    .cmd_valid, .cmd_key, .cmd_base, .cmd_ready, .i_rd_en, .i_rd_addr, .i_rd_data, .i_avail, .i_count,
    .i_tag, .i_release, .p_rd_en, .p_rd_addr, .p_rd_data, .p_avail, .p_release, .ppm_idle, .key_wait,
    .busy, .bad_beats);

  longint hq [NF][9], ev_x [NF][1024], ev_y [NF][1024], ph [NF][NZ][3];
  int checks = 0, failures = 0, n_keywait = 0, n_overlap = 0;
  longint cyc = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // P(Z0) timing: first event read to Buf_I commit
  longint t_first = -1; int rd_cycles = 0, fno = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (key_wait) n_keywait++;
    if (dut.u_ctrl.e_rd_en) begin rd_cycles++; if (t_first < 0) t_first = cyc; end
    if (busy && !ppm_idle && dut.u_ctrl.e_rd_en) n_overlap++;
    if (dut.u_ctrl.i_commit) begin
      check(rd_cycles == NEV[fno], "one event read per cycle");
      if (NEV[fno] == 1024) check(cyc - t_first <= 1024 + 30, $sformatf("P(Z0) took %0d cycles", cyc - t_first));
      fno++; t_first = -1; rd_cycles = 0;
    end
  end

  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(logic [31:0] d, logic [1:0] dest, logic last);
    @(negedge clk);
    s_tdata = d; s_tdest = dest; s_tlast = last; s_tvalid = 1'b1;
    @(negedge clk);
    while (!s_tready) @(negedge clk);
    @(posedge clk);
    s_tvalid = 1'b0;
    if ($urandom_range(0, 15) == 0) @(posedge clk);
  endtask

  initial begin
    s_tvalid = 0; s_tdata = 0; s_tdest = 0; s_tlast = 0; cmd_valid = 0; cmd_key = 0; cmd_base = 0;
    i_rd_en = 0; i_rd_addr = 0; p_rd_en = 0; i_release = 0; p_release = 0; ppm_idle = 1;
    for (int i = 0; i < NPE; i++) p_rd_addr[i] = 0;
    for (int f = 0; f < NF; f++) begin
      real s, hr [9];
      s = 1.0 + srange(-100, 100) / 2000.0;
      hr = '{s, srange(-20, 20) / 1000.0, srange(-200, 200) / 100.0, srange(-20, 20) / 1000.0, s,
             srange(-200, 200) / 100.0, srange(-10, 10) / 100000.0, srange(-10, 10) / 100000.0, 1.0};
      for (int i = 0; i < 9; i++) hq[f][i] = to_q21(hr[i]);
      if (f == 3) hq[f][8] = 0;   // degenerate homography: w = 0 at the origin
      for (int k = 0; k < 1024; k++) begin
        ev_x[f][k] = $urandom_range(0, IMG_W * 128 - 1); ev_y[f][k] = $urandom_range(0, IMG_H * 128 - 1);
      end
      ev_x[f][0] = 0; ev_y[f][0] = 0;
      for (int z = 0; z < NZ; z++) for (int j = 0; j < 3; j++) ph[f][z][j] = longint'($urandom);
    end
    repeat (5) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    fork
      begin
        send(32'h1234, 2'd3, 1'b0);
        for (int f = 0; f < NF; f++) begin
          for (int i = 0; i < 9; i++) send(32'(hq[f][i]), DEST_H, 1'b0);
          for (int z = 0; z < NZ; z++) for (int j = 0; j < 3; j++) send(32'(ph[f][z][j]), DEST_P, 1'b0);
          for (int k = 0; k < NEV[f]; k++) send({16'(ev_y[f][k]), 16'(ev_x[f][k])}, DEST_E, k == NEV[f] - 1);
        end
      end
      for (int f = 0; f < NF; f++) begin
        @(negedge clk);
        cmd_valid = 1'b1; cmd_key = KEY[f]; cmd_base = 32'h100000 * (f + 1);
        @(negedge clk);
        while (!cmd_ready) @(negedge clk);
        @(posedge clk);
        cmd_valid = 1'b0;
      end
      // consumer standing in for the proportional module
      for (int f = 0; f < NF; f++) begin
        @(negedge clk);
        while (!(i_avail && p_avail)) @(negedge clk);
        ppm_idle = 0;
        check(i_tag == 32'h100000 * (f + 1), $sformatf("frame %0d tag %h", f, i_tag));
        check(int'(i_count) == NEV[f], $sformatf("frame %0d count %0d", f, i_count));
        for (int k = 0; k < NEV[f]; k++) begin
          longint x0, y0;
          i_rd_en = 1; i_rd_addr = AW'(k);
          @(negedge clk);
          ref_pz0(hq[f], ev_x[f][k], ev_y[f][k], x0, y0);
          check(i_rd_data.x == 16'(x0) && i_rd_data.y == 16'(y0),
                $sformatf("frame %0d event %0d: (%0d,%0d) exp (%0d,%0d)", f, k,
                          $signed(i_rd_data.x), $signed(i_rd_data.y), x0, y0));
        end
        i_rd_en = 0;
        for (int z = 0; z < NZ; z += NPE) begin
          p_rd_en = 1;
          for (int l = 0; l < NPE; l++) p_rd_addr[l] = ZW'(z + l);
          @(negedge clk);
          for (int l = 0; l < NPE; l++)
            check(p_rd_data[l] == phi_t'({32'(ph[f][z+l][2]), 32'(ph[f][z+l][1]), 32'(ph[f][z+l][0])}),
                  $sformatf("frame %0d phi %0d", f, z + l));
        end
        p_rd_en = 0;
        repeat ($urandom_range(500, 3000)) @(negedge clk);
        i_release = 1; p_release = 1; @(negedge clk); i_release = 0; p_release = 0; ppm_idle = 1;
      end
    join
    repeat (10) @(posedge clk);
    check(fno == NF, "all frames projected");
    check(bad_beats == 16'd1, "stray beat counted");
    check(n_keywait > 0, "key frame waited for the consumer");
    check(n_overlap > 0, "normal frame overlapped the consumer");
    check(!busy && !i_avail && !p_avail, "idle at end");
    $display("key_wait cycles %0d, overlap cycles %0d", n_keywait, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
