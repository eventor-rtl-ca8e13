// tb_proportional_projection_module: the proportional module at a reduced
// size (40x30 image, 9 planes over 2 lanes, 64-event frames, 32-entry Buf_V
// banks) so that Buf_V fills and the pipeline stall is exercised often.
// Buf_I and Buf_P are modelled as registered RAMs that are handed over per
// frame; DRAM is the behavioural AXI model. Three frames are run, the first
// two into one DSI region and the third into a second region (base taken
// from the Buf_I tag). The DSI in DRAM must equal the bit-exact reference
// vote counts; vote and miss pulses must match the reference totals; each
// frame must release its buffers and pulse frame_done exactly once.
module tb_proportional_projection_module;
  import eventor_pkg::*;
  import eventor_ref_pkg::*;
  localparam int W = 40, H = 30, P = 9, L = 2, D = 64, VD = 32, NF = 3;
  localparam int VOX = W * H * P, AW = 6, CW = 7, ZW = 4;
  localparam int WORDS = VOX;              // two regions of VOX half-words
  localparam int REG [NF] = '{0, 0, 1};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic i_rd_en, i_avail, i_release, p_rd_en, p_avail, p_release, frame_done, idle, vbuf_stall;
  logic [AW-1:0] i_rd_addr; point_t i_rd_data; logic [CW-1:0] i_count; logic [31:0] i_tag;
  logic [ZW-1:0] p_rd_addr [L]; phi_t p_rd_data [L]; logic [L-1:0] miss, vote_cast;
  logic [31:0] araddr [L], rdata [L], awaddr [L], wdata [L]; logic [3:0] wstrb [L];
  logic arvalid [L], arready [L], rvalid [L], rready [L], awvalid [L], awready [L];
  logic wvalid [L], wready [L], bvalid [L], bready [L];
  proportional_projection_module #(.DEPTH(D), .PLANES(P), .LANES(L), .W(W), .H(H), .VDEPTH(VD)) dut (
    .clk, .rst_n, .i_rd_en, .i_rd_addr, .i_rd_data, .i_avail, .i_count, .i_tag, .i_release,
    .p_rd_en, .p_rd_addr, .p_rd_data, .p_avail, .p_release,
    .m_araddr(araddr), .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rvalid(rvalid),
    .m_rready(rready), .m_awaddr(awaddr), .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata),
    .m_wstrb(wstrb), .m_wvalid(wvalid), .m_wready(wready), .m_bvalid(bvalid), .m_bready(bready),
    .frame_done, .idle, .vbuf_stall, .miss, .vote_cast);
  axi_dram_model #(.NP(L), .WORDS(WORDS)) dram (.clk, .araddr, .arvalid, .arready, .rdata, .rvalid,
    .rready, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bvalid, .bready);

  point_t imem [D]; phi_t pmem [P];
  always @(posedge clk) begin
    if (i_rd_en) i_rd_data <= imem[i_rd_addr];
    if (p_rd_en) for (int l = 0; l < L; l++) p_rd_data[l] <= pmem[p_rd_addr[l]];
  end
  int checks = 0, failures = 0;
  longint n_votes = 0, n_miss = 0, n_stall = 0, n_done = 0, n_rel = 0, exp_votes = 0, exp_miss = 0;
  shortint unsigned ref_dsi [2 * VOX];
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < L; l++) begin if (vote_cast[l]) n_votes++; if (miss[l]) n_miss++; end
    if (vbuf_stall) n_stall++;
    if (frame_done) n_done++;
    if (i_release && p_release) n_rel++;
  end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (300000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 2 * VOX; i++) ref_dsi[i] = 0;
    i_avail = 0; p_avail = 0; i_count = 0; i_tag = 0;
    repeat (5) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      longint ph [P][3], x0 [D], y0 [D];
      for (int k = 0; k < D; k++) begin
        x0[k] = srange(-5 * 128, (W + 5) * 128); y0[k] = srange(-5 * 128, (H + 5) * 128);
        imem[k] = '{y: 16'(y0[k]), x: 16'(x0[k])};
      end
      for (int z = 0; z < P; z++) begin
        real a;
        a = 0.7 + 0.6 * z / P;
        ph[z][0] = to_q21(a);
        ph[z][1] = to_q21((1.0 - a) * (W / 2 + srange(-50, 50) / 10.0));
        ph[z][2] = to_q21((1.0 - a) * (H / 2 + srange(-50, 50) / 10.0));
        pmem[z] = '{by: 32'(ph[z][2]), bx: 32'(ph[z][1]), a: 32'(ph[z][0])};
      end
      for (int k = 0; k < D; k++) for (int z = 0; z < P; z++) begin
        longint xi, yi;
        xi = ref_round(ph[z][0], x0[k], ph[z][1]);
        yi = ref_round(ph[z][0], y0[k], ph[z][2]);
        if (xi >= 0 && xi < W && yi >= 0 && yi < H) begin
          int a;
          a = REG[f] * VOX + (z * H + int'(yi)) * W + int'(xi);
          if (ref_dsi[a] != 16'hFFFF) ref_dsi[a]++;
          exp_votes++;
        end else exp_miss++;
      end
      @(negedge clk);
      i_avail = 1; p_avail = 1; i_count = CW'(D); i_tag = 32'(REG[f] * VOX * 2);
      while (!(i_release && p_release)) @(negedge clk);
      @(negedge clk);
      i_avail = 0; p_avail = 0;
      check(n_done == f + 1, $sformatf("frame %0d done pulses %0d", f, n_done));
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    repeat (10) @(posedge clk);
    for (int a = 0; a < 2 * VOX; a++) begin
      logic [31:0] w; logic [15:0] s;
      w = dram.mem[a / 2]; s = (a % 2) ? w[31:16] : w[15:0];
      check(s == ref_dsi[a], $sformatf("voxel %0d: %0d exp %0d", a, s, ref_dsi[a]));
    end
    check(n_votes == exp_votes, $sformatf("votes %0d exp %0d", n_votes, exp_votes));
    check(n_miss == exp_miss, $sformatf("misses %0d exp %0d", n_miss, exp_miss));
    check(n_done == NF && n_rel == NF, "frames done and released");
    check(n_stall > 0, "Buf_V stall exercised");
    check(idle, "idle at end");
    $display("votes %0d misses %0d stall cycles %0d", n_votes, n_miss, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
