// tb_canonical_controller: the controller runs three frames against a model
// of its buffers and of PE_Z0 (a 19-cycle delay line). Checked per frame:
// it waits in the synchronisation state until Buf_E, Buf_H and a Buf_I bank
// are ready; a key frame additionally waits (key_wait) for the proportional
// side to be idle with both Buf_I banks empty; H is loaded once; exactly
// count consecutive reads with addresses 0..count-1 are issued (one event per
// cycle); the Buf_I commit carries the frame's DSI base and comes only after
// the last PE_Z0 result.
module tb_canonical_controller;
  import eventor_pkg::*;
  localparam int D = 64, LAT = 19;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_key, cmd_ready, h_avail, h_release, pe_h_load, e_avail, e_rd_en, e_release;
  logic pe_valid, pe_out_valid, i_wr_free, i_all_free, i_commit, ppm_idle, key_wait, busy;
  logic [31:0] cmd_base, i_tag; logic [6:0] e_count; logic [5:0] e_rd_addr;
  canonical_controller #(.DEPTH(D)) dut (.clk, .rst_n, .cmd_valid, .cmd_key, .cmd_base, .cmd_ready,
    .h_avail, .h_release, .pe_h_load, .e_avail, .e_count, .e_rd_en, .e_rd_addr, .e_release,
    .pe_valid, .pe_out_valid, .i_wr_free, .i_all_free, .i_commit, .i_tag, .ppm_idle, .key_wait, .busy);
  logic [LAT-1:0] dl = '0;
  logic [31:0] exp_tag;
  always @(posedge clk) dl <= rst_n ? {dl[LAT-2:0], pe_valid} : '0;
  assign pe_out_valid = dl[LAT-1];
  int checks = 0, failures = 0;
  int nrd, nload, nout, ncommit, nkw, first_rd, last_rd, next_addr, commit_at, last_out;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (e_rd_en) begin
      if (nrd == 0) first_rd = int'(cyc);
      last_rd = int'(cyc);
      if (int'(e_rd_addr) != next_addr) begin failures++; $display("FAIL addr %0d exp %0d", e_rd_addr, next_addr); end
      next_addr++; nrd++;
    end
    if (pe_h_load) nload++;
    if (pe_out_valid) begin nout++; last_out = int'(cyc); end
    if (i_commit) begin ncommit++; commit_at = int'(cyc);
      if (!e_release || i_tag != exp_tag) begin failures++; $display("FAIL commit tag/release"); end
    end
    if (key_wait) nkw++;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic frame(int f, bit key, int cnt);
    nrd = 0; nload = 0; nout = 0; ncommit = 0; nkw = 0; next_addr = 0;
    h_avail = 0; e_avail = 0; e_count = 7'(cnt);
    i_wr_free = 0; i_all_free = 0; ppm_idle = 0;
    @(negedge clk);
    cmd_valid = 1; cmd_key = key; cmd_base = 32'hA000 + 32'(f + 1); exp_tag = cmd_base;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    repeat (10) @(negedge clk);  h_avail = 1;
    repeat (10) @(negedge clk);  e_avail = 1;
    repeat (10) @(negedge clk);  i_wr_free = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (key != (nrd == 0)) begin failures++; $display("FAIL frame %0d: started=%0d key=%0d", f, nrd != 0, key); end
    if (key) begin
      ppm_idle = 1; repeat (5) @(negedge clk); i_all_free = 1;
    end
    while (ncommit == 0) @(negedge clk);
    h_avail = 0; e_avail = 0;
    checks += 6;
    if (nrd != cnt) begin failures++; $display("FAIL reads %0d", nrd); end
    if (last_rd - first_rd != cnt - 1) begin failures++; $display("FAIL reads not back to back"); end
    if (nload != 1) begin failures++; $display("FAIL h loads %0d", nload); end
    if (nout != cnt) begin failures++; $display("FAIL frame %0d outputs %0d", f, nout); end
    if (commit_at <= last_out) begin failures++; $display("FAIL commit before last result"); end
    if (key != (nkw > 0)) begin failures++; $display("FAIL key_wait %0d", nkw); end
  endtask
  initial begin
    cmd_valid = 0; cmd_key = 0; cmd_base = 0; h_avail = 0; e_avail = 0; e_count = 0;
    i_wr_free = 0; i_all_free = 0; ppm_idle = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    frame(0, 0, 40); frame(1, 1, 64); frame(2, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
