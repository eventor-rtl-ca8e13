// tb_axi_interface: random AXI-Stream beats to all four TDEST values with
// random TVALID gaps, while the three buffer sinks toggle their ready at
// random. Each sink must receive exactly its beats, in order (Buf_E also
// with TLAST), unknown-destination beats must be counted and dropped, and
// TREADY must have been low at least once.
module tb_axi_interface;
  import eventor_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] s_tdata; logic [1:0] s_tdest; logic s_tlast, s_tvalid, s_tready;
  logic h_wr_en, h_wr_ready, e_wr_en, e_wr_last, e_wr_ready, p_wr_en, p_wr_ready;
  param_t h_wr_data, p_wr_data; point_t e_wr_data; logic [15:0] bad_beats;
  axi_interface dut (.clk, .rst_n, .s_tdata, .s_tdest, .s_tlast, .s_tvalid, .s_tready,
                     .h_wr_en, .h_wr_data, .h_wr_ready, .e_wr_en, .e_wr_data, .e_wr_last, .e_wr_ready,
                     .p_wr_en, .p_wr_data, .p_wr_ready, .bad_beats);
  logic [32:0] qh [$], qe [$], qp [$];
  int nbad = 0, checks = 0, failures = 0, nstall = 0;
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n) begin
    if (s_tvalid && !s_tready) nstall++;
    if (h_wr_en) begin
      logic [32:0] e; e = qh.pop_front(); checks++;
      if (!h_wr_ready || {1'b0, h_wr_data} != e) begin failures++; $display("FAIL H beat"); end
    end
    if (e_wr_en) begin
      logic [32:0] e; e = qe.pop_front(); checks++;
      if (!e_wr_ready || {e_wr_last, e_wr_data} != e) begin failures++; $display("FAIL E beat"); end
    end
    if (p_wr_en) begin
      logic [32:0] e; e = qp.pop_front(); checks++;
      if (!p_wr_ready || {1'b0, p_wr_data} != e) begin failures++; $display("FAIL P beat"); end
    end
    h_wr_ready <= $urandom_range(0, 1); e_wr_ready <= $urandom_range(0, 3) != 0; p_wr_ready <= $urandom_range(0, 1);
  end
  initial begin
    s_tvalid = 0; s_tdata = 0; s_tdest = 0; s_tlast = 0;
    h_wr_ready = 0; e_wr_ready = 0; p_wr_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      s_tvalid = 1; s_tdata = $urandom; s_tdest = 2'($urandom_range(0, 3)); s_tlast = $urandom_range(0, 1);
      while (!s_tready) @(negedge clk);
      case (s_tdest)
        2'd0: qh.push_back({1'b0, s_tdata});
        2'd1: qe.push_back({s_tlast, s_tdata});
        2'd2: qp.push_back({1'b0, s_tdata});
        default: nbad++;
      endcase
      @(posedge clk);
      if ($urandom_range(0, 3) == 0) begin @(negedge clk); s_tvalid = 0; end
    end
    @(negedge clk); s_tvalid = 0;
    repeat (50) @(negedge clk);
    checks += 3;
    if (qh.size() + qe.size() + qp.size() != 0) begin failures++; $display("FAIL: beats not delivered"); end
    if (int'(bad_beats) != nbad) begin failures++; $display("FAIL: bad_beats %0d exp %0d", bad_beats, nbad); end
    if (nstall == 0) begin failures++; $display("FAIL: no back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
