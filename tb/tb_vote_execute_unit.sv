// tb_vote_execute_unit: two lanes, Buf_V banks of 16 votes, against the
// behavioural DRAM model with random ready and response delays. Each lane
// gets 6 banks (full ones and a partial last one) of random voxel indices;
// lane 0 uses voxels 0..127 and lane 1 voxels 128..255, as disjoint depth
// planes would. Repeats within a lane are deliberate, two voxels are preset
// to 65535 to check saturation, and neighbouring half-words are preset to
// check the write strobes. At the end the DSI region (base 0x400) must equal
// the reference count per voxel, every bank must have been released once,
// and vote_done must have pulsed once per vote. The repeats must make a
// vote wait for an earlier one to the same score at least once, and several
// votes must have been in flight together.
module tb_vote_execute_unit;
  import eventor_pkg::*;
  localparam int L = 2, D = 16, AW = 10, NB = 6, WORDS = 1024;
  localparam logic [31:0] BASE = 32'h400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic v_avail [L]; logic [4:0] v_count [L]; logic v_rd_en [L]; logic [3:0] v_rd_addr [L];
  logic [AW-1:0] v_rd_data [L]; logic v_release [L];
  logic [31:0] araddr [L], rdata [L], awaddr [L], wdata [L]; logic [3:0] wstrb [L];
  logic arvalid [L], arready [L], rvalid [L], rready [L], awvalid [L], awready [L];
  logic wvalid [L], wready [L], bvalid [L], bready [L], vote_done [L], idle;
  vote_execute_unit #(.LANES(L), .DEPTH(D), .ADDR_W(AW)) dut (.clk, .rst_n, .dsi_base(BASE),
    .v_avail, .v_count, .v_rd_en, .v_rd_addr, .v_rd_data, .v_release,
    .m_araddr(araddr), .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rvalid(rvalid),
    .m_rready(rready), .m_awaddr(awaddr), .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata),
    .m_wstrb(wstrb), .m_wvalid(wvalid), .m_wready(wready), .m_bvalid(bvalid), .m_bready(bready),
    .vote_done, .idle);
  axi_dram_model #(.NP(L), .WORDS(WORDS)) dram (.clk, .araddr, .arvalid, .arready, .rdata, .rvalid,
    .rready, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bvalid, .bready);

  int unsigned votes [L][NB][D]; int cnt [L][NB]; int bank [L];
  int unsigned ref_s [256];
  int checks = 0, failures = 0, ndone = 0, nrel [L];
  // Buf_V model: registered read of the current bank
  always @(posedge clk) for (int l = 0; l < L; l++) begin
    if (v_rd_en[l]) v_rd_data[l] <= AW'(votes[l][bank[l]][v_rd_addr[l]]);
    if (rst_n && vote_done[l]) ndone++;
    if (rst_n && v_release[l]) begin nrel[l]++; bank[l]++; end
  end
  // pipelining: a repeated voxel must wait for its earlier vote, and more
  // than one vote must be in flight at some point
  int n_haz = 0, max_occ = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_lane[0].pend_q && dut.g_lane[0].hazard) n_haz++;
    if (int'(dut.g_lane[0].occ) > max_occ) max_occ = int'(dut.g_lane[0].occ);
  end
  always_comb for (int l = 0; l < L; l++) begin
    v_avail[l] = bank[l] < NB;
    v_count[l] = (bank[l] < NB) ? 5'(cnt[l][bank[l]]) : 5'd0;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int unsigned score(int a);
    logic [31:0] w; w = dram.mem[(BASE >> 2) + a / 2];
    return (a % 2) ? w[31:16] : w[15:0];
  endfunction
  initial begin
    int nv;
    nv = 0;
    for (int i = 0; i < 256; i++) ref_s[i] = 0;
    for (int l = 0; l < L; l++) begin
      bank[l] = 0; nrel[l] = 0;
      for (int b = 0; b < NB; b++) begin
        cnt[l][b] = (b == NB - 1) ? 5 : D;
        for (int i = 0; i < D; i++) begin
          int a;
          a = l * 128 + (($urandom_range(0, 3) == 0) ? 9 : int'($urandom_range(0, 127)));
          if (b == 0 && i == 0) a = l * 128 + 7;   // hit each saturated voxel
          votes[l][b][i] = a;
          if (i < cnt[l][b]) begin ref_s[a]++; nv++; end
        end
      end
    end
    // preset: voxels 7 and 135 saturated, voxel 200 at 1234
    #1;
    dram.mem[(BASE >> 2) + 3][31:16] = 16'hFFFF; ref_s[7] = 65535;
    dram.mem[(BASE >> 2) + 67][31:16] = 16'hFFFF; ref_s[135] = 65535;
    dram.mem[(BASE >> 2) + 100][15:0] = 16'd1234; ref_s[200] += 1234;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5) @(posedge clk);
    while (!(idle && bank[0] == NB && bank[1] == NB)) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int a = 0; a < 256; a++) begin
      checks++;
      if (score(a) != ref_s[a]) begin failures++; if (failures < 10) $display("FAIL voxel %0d: %0d exp %0d", a, score(a), ref_s[a]); end
    end
    for (int w = 0; w < BASE / 4; w++) begin
      checks++; if (dram.mem[w] != 0) begin failures++; $display("FAIL: write below DSI base at word %0d", w); end
    end
    checks += 3;
    if (ndone != nv) begin failures++; $display("FAIL vote_done %0d exp %0d", ndone, nv); end
    if (nrel[0] != NB || nrel[1] != NB) begin failures++; $display("FAIL releases %0d %0d", nrel[0], nrel[1]); end
    if (!idle) begin failures++; $display("FAIL not idle"); end
    checks += 2;
    if (n_haz == 0) begin failures++; $display("FAIL: same-score hazard never seen"); end
    if (max_occ < 2) begin failures++; $display("FAIL: never more than %0d vote in flight", max_occ); end
    $display("hazard waits %0d, most votes in flight %0d", n_haz, max_occ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
