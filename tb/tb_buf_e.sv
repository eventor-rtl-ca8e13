// tb_buf_e: a producer writes eight frames of random length (TLAST on the
// last event, one frame filling the whole bank) with random gaps; a slower
// consumer waits for rd_avail, reads every entry and releases the bank.
// Checked: frame order, counts, contents, and that the producer was held off
// (wr_ready low) while both banks were full.
module tb_buf_e;
  import eventor_pkg::*;
  localparam int D = 64, NFR = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_last, wr_ready, rd_en, rd_avail, rd_release;
  point_t wr_data, rd_data; logic [5:0] rd_addr; logic [6:0] rd_count;
  buf_e #(.DEPTH(D)) dut (.clk, .rst_n, .wr_en, .wr_data, .wr_last, .wr_ready, .rd_en, .rd_addr,
                          .rd_data, .rd_avail, .rd_count, .rd_release);
  int len [NFR];
  logic [31:0] data [NFR][D];
  int checks = 0, failures = 0, held = 0;
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (wr_en && !wr_ready) held++;
  initial begin
    for (int f = 0; f < NFR; f++) begin
      len[f] = (f == 3) ? D : $urandom_range(1, D - 1);
      for (int i = 0; i < D; i++) data[f][i] = $urandom;
    end
    wr_en = 0; wr_last = 0; wr_data = '0; rd_en = 0; rd_addr = 0; rd_release = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      for (int f = 0; f < NFR; f++)
        for (int i = 0; i < len[f]; i++) begin
          @(negedge clk);
          wr_en = 1; wr_data = point_t'(data[f][i]); wr_last = (i == len[f] - 1) && (f != 3);
          while (!wr_ready) @(negedge clk);
          @(posedge clk);
          if (i == len[f] - 1 && f == NFR - 1) begin @(negedge clk); wr_en = 0; end
        end
      for (int f = 0; f < NFR; f++) begin
        @(negedge clk);
        while (!rd_avail) @(negedge clk);
        repeat (20) @(negedge clk);
        checks++;
        if (int'(rd_count) != len[f]) begin failures++; $display("FAIL frame %0d count %0d exp %0d", f, rd_count, len[f]); end
        for (int i = 0; i < len[f]; i++) begin
          rd_en = 1; rd_addr = 6'(i);
          @(negedge clk); rd_en = 0;
          checks++;
          if (rd_data != point_t'(data[f][i])) begin
            failures++; if (failures < 10) $display("FAIL frame %0d entry %0d", f, i);
          end
        end
        rd_release = 1; @(negedge clk); rd_release = 0;
      end
    join
    checks++;
    if (held == 0) begin failures++; $display("FAIL: producer never held off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
