// tb_buf_h: three homographies of nine words are written back to back; the
// third must wait (wr_ready low) until the first bank is released. Each
// matrix must appear complete on rd_h, in order.
module tb_buf_h;
  import eventor_pkg::*;
  localparam int NFR = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_ready, rd_avail, rd_release;
  param_t wr_data, rd_h [9];
  buf_h dut (.clk, .rst_n, .wr_en, .wr_data, .wr_ready, .rd_h, .rd_avail, .rd_release);
  logic [31:0] m [NFR][9];
  int checks = 0, failures = 0, held = 0;
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (wr_en && !wr_ready) held++;
  initial begin
    for (int f = 0; f < NFR; f++) for (int i = 0; i < 9; i++) m[f][i] = $urandom;
    wr_en = 0; wr_data = 0; rd_release = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      begin
        for (int f = 0; f < NFR; f++) for (int i = 0; i < 9; i++) begin
          @(negedge clk);
          wr_en = 1; wr_data = param_t'(m[f][i]);
          while (!wr_ready) @(negedge clk);
          @(posedge clk);
        end
        @(negedge clk); wr_en = 0;
      end
      for (int f = 0; f < NFR; f++) begin
        @(negedge clk);
        while (!rd_avail) @(negedge clk);
        repeat (30) @(negedge clk);
        for (int i = 0; i < 9; i++) begin
          checks++;
          if (rd_h[i] != param_t'(m[f][i])) begin failures++; $display("FAIL matrix %0d entry %0d", f, i); end
        end
        rd_release = 1; @(negedge clk); rd_release = 0;
      end
    join
    checks++;
    if (held == 0) begin failures++; $display("FAIL: writer never held off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
