// tb_eventor_top: end-to-end test of the accelerator at its default size
// (240 x 180 x 100 DSI, 1024-event frames, two PE_Zi lanes).
//
// Four frames are generated: key, normal, key, normal. Each gets a random
// near-identity homography and per-plane proportional parameters (some
// planes shifted so that part of the projections fall outside the image).
// The two key frames vote into two separate DSI regions of the behavioural
// DRAM. A bit-exact integer reference (eventor_ref_pkg) computes both DSIs;
// after the last frame every voxel of both regions is compared.
// Also checked: the number of votes cast, the canonical stage rate (about one
// event per cycle), the voting stage time per frame against the published
// 551.58 us at 130 MHz (within 25 %), that a normal frame's canonical work overlaps the
// previous frame's voting while a key frame's does not, and that each
// mechanism happened: input back-pressure, key-frame wait, Buf_V stall,
// projection misses and frame overlap.
module tb_eventor_top;
  import eventor_pkg::*;
  import eventor_ref_pkg::*;

  localparam int NF     = 4;
  localparam int NEV    = MAX_EVENTS;
  localparam int VOX    = IMG_W * IMG_H * NZ;
  localparam int REGION = VOX * 2;                 // bytes per DSI
  localparam int WORDS  = 2 * REGION / 4;
  localparam bit KEY [NF] = '{1'b1, 1'b0, 1'b1, 1'b0};
  localparam int REG [NF] = '{0, 0, 1, 1};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] s_tdata; logic [1:0] s_tdest; logic s_tlast, s_tvalid, s_tready;
  logic cmd_valid, cmd_key, cmd_ready; logic [31:0] cmd_base;
  logic [31:0] araddr [NPE]; logic arvalid [NPE], arready [NPE];
  logic [31:0] rdata [NPE];  logic rvalid [NPE], rready [NPE];
  logic [31:0] awaddr [NPE]; logic awvalid [NPE], awready [NPE];
  logic [31:0] wdata [NPE];  logic [3:0] wstrb [NPE]; logic wvalid [NPE], wready [NPE];
  logic bvalid [NPE], bready [NPE];
  logic frame_done, busy, key_wait, vbuf_stall;
  logic [NPE-1:0] miss, vote_cast;
  logic [15:0] bad_beats;

  eventor_top dut (
    .clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tdest(s_tdest), .s_axis_tlast(s_tlast),
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .cmd_valid, .cmd_key, .cmd_base, .cmd_ready,
    .m_araddr(araddr), .m_arvalid(arvalid), .m_arready(arready),
    .m_rdata(rdata), .m_rvalid(rvalid), .m_rready(rready),
    .m_awaddr(awaddr), .m_awvalid(awvalid), .m_awready(awready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wvalid(wvalid), .m_wready(wready),
    .m_bvalid(bvalid), .m_bready(bready),
    .frame_done, .busy, .key_wait, .vbuf_stall, .miss, .vote_cast, .bad_beats
  );

  axi_dram_model #(.NP(NPE), .WORDS(WORDS)) dram (
    .clk, .araddr, .arvalid, .arready, .rdata, .rvalid, .rready,
    .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bvalid, .bready
  );

  // ---------------- stimulus and reference ----------------
  longint hq   [NF][9];
  longint ev_x [NF][NEV], ev_y [NF][NEV];
  longint ph   [NF][NZ][3];
  shortint unsigned ref_dsi [2*VOX];
  longint exp_votes = 0, exp_miss = 0;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic gen_frame(int f);
    real s = 1.0 + srange(-100, 100) / 2000.0;
    real hr [9];
    hr = '{s, srange(-20, 20) / 1000.0, srange(-200, 200) / 100.0,
           srange(-20, 20) / 1000.0, s, srange(-200, 200) / 100.0,
           srange(-10, 10) / 100000.0, srange(-10, 10) / 100000.0, 1.0};
    for (int i = 0; i < 9; i++) hq[f][i] = to_q21(hr[i]);
    for (int k = 0; k < NEV; k++) begin
      ev_x[f][k] = $urandom_range(0, IMG_W * 128 - 1);
      ev_y[f][k] = $urandom_range(0, IMG_H * 128 - 1);
    end
    for (int z = 0; z < NZ; z++) begin
      real a  = 0.7 + 0.6 * z / NZ;
      real cx = 120.0 + srange(-300, 300) / 10.0;
      real cy = 90.0 + srange(-200, 200) / 10.0;
      ph[f][z][0] = to_q21(a);
      ph[f][z][1] = to_q21((1.0 - a) * cx);
      ph[f][z][2] = to_q21((1.0 - a) * cy);
    end
  endtask

  task automatic ref_frame(int f);
    longint x0, y0, xi, yi;
    for (int k = 0; k < NEV; k++) begin
      ref_pz0(hq[f], ev_x[f][k], ev_y[f][k], x0, y0);
      for (int z = 0; z < NZ; z++) begin
        xi = ref_round(ph[f][z][0], x0, ph[f][z][1]);
        yi = ref_round(ph[f][z][0], y0, ph[f][z][2]);
        if (xi >= 0 && xi < IMG_W && yi >= 0 && yi < IMG_H) begin
          int a = REG[f] * VOX + (z * IMG_H + int'(yi)) * IMG_W + int'(xi);
          if (ref_dsi[a] != 16'hFFFF) ref_dsi[a]++;
          exp_votes++;
        end else exp_miss++;
      end
    end
  endtask

  task automatic send(logic [31:0] d, logic [1:0] dest, logic last);
    // signals change after the negative edge; the beat is taken at the
    // positive edge that follows a negative edge with TREADY high
    @(negedge clk);
    s_tdata = d; s_tdest = dest; s_tlast = last; s_tvalid = 1'b1;
    @(negedge clk);
    while (!s_tready) @(negedge clk);
    @(posedge clk);
    s_tvalid = 1'b0;
    if ($urandom_range(0, 15) == 0) @(posedge clk);
  endtask

  // ---------------- observation ----------------
  longint n_votes = 0, n_miss = 0, n_done = 0;
  longint n_backpressure = 0, n_keywait = 0, n_stall = 0, n_overlap = 0;
  longint ppm_start [NF], ppm_end [NF], cpm_start [NF], cpm_end [NF];
  int ppm_frames = 0, cpm_frames = 0;
  logic ppm_idle_d = 1'b1;
  logic cpm_run_d  = 1'b0;
  logic cpm_run;
  assign cpm_run = dut.u_cpm.u_ctrl.e_rd_en;

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NPE; l++) begin
      if (vote_cast[l]) n_votes++;
      if (miss[l]) n_miss++;
    end
    if (frame_done) begin
      if (ppm_frames > 0) ppm_end[ppm_frames-1] = cyc;
      n_done++;
    end
    if (s_tvalid && !s_tready) n_backpressure++;
    if (key_wait) n_keywait++;
    if (vbuf_stall) n_stall++;
    if (cpm_run && !dut.u_ppm.idle) n_overlap++;
    if (ppm_idle_d && !dut.u_ppm.idle && ppm_frames < NF) begin
      ppm_start[ppm_frames] = cyc; ppm_frames++;
    end
    if (cpm_run && !cpm_run_d && cpm_frames < NF) cpm_start[cpm_frames] = cyc;
    if (!cpm_run && cpm_run_d && cpm_frames < NF) begin cpm_end[cpm_frames] = cyc; cpm_frames++; end
    ppm_idle_d = dut.u_ppm.idle;
    cpm_run_d  = cpm_run;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (frames done %0d, cpm state %0d, ppm state %0d, votes %0d)",
             n_done, dut.u_cpm.u_ctrl.state_q, dut.u_ppm.u_ctrl.state_q, n_votes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- main ----------------
  initial begin
    s_tvalid = 0; s_tdata = 0; s_tdest = 0; s_tlast = 0;
    cmd_valid = 0; cmd_key = 0; cmd_base = 0;
    for (int i = 0; i < 2 * VOX; i++) ref_dsi[i] = 0;
    for (int f = 0; f < NF; f++) begin gen_frame(f); ref_frame(f); end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    fork
      // DMA: parameters and events of every frame
      for (int f = 0; f < NF; f++) begin
        for (int i = 0; i < 9; i++) send(32'(hq[f][i]), DEST_H, 1'b0);
        for (int z = 0; z < NZ; z++)
          for (int j = 0; j < 3; j++) send(32'(ph[f][z][j]), DEST_P, 1'b0);
        for (int k = 0; k < NEV; k++)
          send({16'(ev_y[f][k]), 16'(ev_x[f][k])}, DEST_E, k == NEV - 1);
      end
      // host: one start instruction per frame
      for (int f = 0; f < NF; f++) begin
        @(negedge clk);
        cmd_valid = 1'b1; cmd_key = KEY[f]; cmd_base = 32'(REG[f] * REGION);
        @(negedge clk);
        while (!cmd_ready) @(negedge clk);
        @(posedge clk);
        cmd_valid = 1'b0;
        @(posedge clk);
      end
    join
    wait (n_done == NF);
    repeat (20) @(posedge clk);

    // DSI contents
    for (int i = 0; i < 2 * VOX; i++) begin
      logic [31:0] w;
      logic [15:0] got;
      w   = dram.mem[i / 2];
      got = (i % 2) ? w[31:16] : w[15:0];
      check(got == ref_dsi[i], $sformatf("voxel %0d: got %0d expected %0d", i, got, ref_dsi[i]));
    end
    check(n_votes == exp_votes, $sformatf("votes %0d expected %0d", n_votes, exp_votes));
    check(n_miss == exp_miss, $sformatf("misses %0d expected %0d", n_miss, exp_miss));
    check(n_done == NF, "frame count");
    check(bad_beats == 0, "no dropped stream beats");
    // canonical stage: one event per cycle
    for (int f = 0; f < NF; f++)
      check(cpm_end[f] - cpm_start[f] == NEV,
            $sformatf("P(Z0) of frame %0d read %0d cycles", f, cpm_end[f] - cpm_start[f]));
    // pipelining: normal frames overlap, key frames wait
    for (int f = 1; f < NF; f++) begin
      if (KEY[f])
        check(cpm_start[f] > ppm_end[f-1],
              $sformatf("key frame %0d started P(Z0) before frame %0d was voted", f, f-1));
      else
        check(cpm_end[f] < ppm_end[f-1] && ppm_start[f] - ppm_end[f-1] <= 3,
              $sformatf("normal frame %0d not overlapped (gap %0d)", f, ppm_start[f] - ppm_end[f-1]));
    end
    for (int f = 0; f < NF; f++) begin
      $display("frame %0d key=%0d: P(Z0) %0d..%0d, P(Zi)+R %0d..%0d (%0d cycles)", f, KEY[f],
               cpm_start[f], cpm_end[f], ppm_start[f], ppm_end[f], ppm_end[f] - ppm_start[f]);
      // published normal-frame time 551.58 us at 130 MHz = 71,705 cycles;
      // allow 25 % for this memory model's random latencies
      check(ppm_end[f] - ppm_start[f] <= 89_631,
            $sformatf("P(Zi)+R of frame %0d took %0d cycles", f, ppm_end[f] - ppm_start[f]));
    end
    // mechanisms
    $display("votes=%0d misses=%0d backpressure=%0d keywait=%0d vbuf_stall=%0d overlap=%0d",
             n_votes, n_miss, n_backpressure, n_keywait, n_stall, n_overlap);
    check(n_backpressure > 0, "input back-pressure never happened");
    check(n_keywait > 0, "key-frame wait never happened");
    check(n_stall > 0, "Buf_V stall never happened");
    check(n_miss > 0, "projection miss never happened");
    check(n_overlap > 0, "frame overlap never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
