// tb_proportional_controller: two frames against models of the allocator
// (busy for count cycles after start), PE pipeline stall (en) and the vote
// path (busy for a while after the flush). Checked: the frame starts only
// when both Buf_I and Buf_P hold data; one allocator start with the right
// count; the DSI base is taken from the Buf_I tag; the flush comes only
// after the allocator and PE_LAT un-stalled cycles; the buffers are released
// and frame_done pulses once, only after all votes are written.
module tb_proportional_controller;
  import eventor_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, i_avail, p_avail, i_release, p_release, alloc_start, alloc_busy, v_flush, v_idle, veu_idle;
  logic frame_done, idle; logic [10:0] i_count, alloc_count; logic [31:0] i_tag, dsi_base;
  proportional_controller dut (.clk, .rst_n, .en, .i_avail, .i_count, .i_tag, .dsi_base, .p_avail,
    .i_release, .p_release, .alloc_start, .alloc_count, .alloc_busy, .v_flush, .v_idle, .veu_idle, .frame_done, .idle);
  logic [31:0] exp_tag; int checks = 0, failures = 0, nstart = 0, ndone = 0, busy_left = 0, vbusy = 0, flush_at = -1, alloc_end = -1;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && alloc_start) begin nstart++; busy_left = int'(alloc_count);
      checks++; if (alloc_count != i_count) begin failures++; $display("FAIL count"); end end
    else if (busy_left > 0 && en) begin busy_left--; if (busy_left == 0) alloc_end = int'(cyc); end
    if (v_flush && flush_at < 0) begin flush_at = int'(cyc); vbusy = 30; end
    if (vbusy > 0) vbusy--;
    if (rst_n && frame_done) begin
      ndone++; checks += 3;
      if (vbusy != 0) begin failures++; $display("FAIL: done before votes written"); end
      if (!i_release || !p_release) begin failures++; $display("FAIL: no release"); end
      if (dsi_base != exp_tag) begin failures++; $display("FAIL: dsi base %h exp %h", dsi_base, exp_tag); end
    end
  end
  assign alloc_busy = busy_left > 0;
  assign v_idle = (vbusy == 0);
  assign veu_idle = (vbusy == 0);
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic frame(int n, logic [31:0] tag);
    nstart = 0; ndone = 0; flush_at = -1; alloc_end = -1; exp_tag = tag;
    @(negedge clk); i_avail = 1; i_count = 11'(n); i_tag = tag; p_avail = 0;
    repeat (10) @(negedge clk);
    checks++; if (nstart != 0 || !idle) begin failures++; $display("FAIL: started without Buf_P"); end
    p_avail = 1;
    @(negedge clk); i_tag = 32'hDEAD;      // tag must have been latched
    while (ndone == 0) begin en = $urandom_range(0, 3) != 0; @(negedge clk); end
    i_tag = tag; i_avail = 0; p_avail = 0; en = 1;
    repeat (5) @(negedge clk);
    checks += 3;
    if (nstart != 1) begin failures++; $display("FAIL starts %0d", nstart); end
    if (flush_at - alloc_end < 5) begin failures++; $display("FAIL: flush %0d cycles after allocator", flush_at - alloc_end); end
    if (ndone != 1 || !idle) begin failures++; $display("FAIL: done %0d", ndone); end
  endtask
  initial begin
    en = 1; i_avail = 0; p_avail = 0; i_count = 0; i_tag = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    frame(100, 32'h1000); frame(7, 32'h2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
