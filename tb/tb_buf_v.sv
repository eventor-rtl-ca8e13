// tb_buf_v: a writer appends random vote addresses whenever wr_ready is high
// and requests a flush after each of several bursts; a slow reader drains
// full banks. Every address written must come out exactly once and in order,
// banks must be committed both when full and on flush, idle must stay low
// while a partly filled bank waits for its flush, the writer must see
// wr_ready low while both banks are full, and idle must be high at the end.
module tb_buf_v;
  import eventor_pkg::*;
  localparam int D = 16, AW = 23;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_ready, flush, rd_en, rd_avail, rd_release, idle;
  logic [AW-1:0] wr_data, rd_data; logic [3:0] rd_addr; logic [4:0] rd_count;
  buf_v #(.DEPTH(D), .ADDR_W(AW)) dut (.clk, .rst_n, .wr_en, .wr_data, .wr_ready, .flush, .rd_en,
                                       .rd_addr, .rd_data, .rd_avail, .rd_count, .rd_release, .idle);
  int q [$];
  int checks = 0, failures = 0, n_full = 0, n_part = 0, n_held = 0, nread = 0, nwritten = 0;
  bit wdone = 0;
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && !wr_ready) n_held++;
  initial begin
    wr_en = 0; wr_data = 0; flush = 0; rd_en = 0; rd_addr = 0; rd_release = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      begin
        for (int b = 0; b < 6; b++) begin
          int n = $urandom_range(1, 3 * D);
          for (int i = 0; i < n; i++) begin
            @(negedge clk);
            while (!wr_ready) begin wr_en = 0; @(negedge clk); end
            wr_en = 1; wr_data = AW'($urandom); q.push_back(int'(wr_data)); nwritten++;
          end
          @(negedge clk); wr_en = 0; flush = 1;
          // hold the flush until the partial bank has been committed
          while (!(dut.ptr_q == 0)) @(negedge clk);
          flush = 0;
        end
        wdone = 1;
      end
      begin
        while (!(wdone && nread == nwritten)) begin
          @(negedge clk);
          if (rd_avail) begin
            int c;
            c = int'(rd_count);
            if (c == D) n_full++; else n_part++;
            repeat (30) @(negedge clk);
            for (int i = 0; i < c; i++) begin
              int e;
              rd_en = 1; rd_addr = 4'(i); @(negedge clk); rd_en = 0;
              e = q.pop_front(); nread++;
              checks++;
              if (int'(rd_data) != e) begin failures++; if (failures < 10) $display("FAIL %0d exp %0d", rd_data, e); end
            end
            rd_release = 1; @(negedge clk); rd_release = 0;
          end
        end
      end
    join
    @(negedge clk);
    checks += 4;
    if (n_full == 0 || n_part == 0) begin failures++; $display("FAIL: commits full %0d partial %0d", n_full, n_part); end
    if (n_held == 0) begin failures++; $display("FAIL: writer never held off"); end
    if (!idle) begin failures++; $display("FAIL: not idle at end"); end
    if (q.size() != 0) begin failures++; $display("FAIL: %0d addresses lost", q.size()); end
    // a partly filled bank that has not been flushed is not idle
    for (int i = 0; i < 3; i++) begin wr_en = 1; wr_data = AW'(i); @(negedge clk); end
    wr_en = 0; repeat (3) @(negedge clk);
    checks += 4;
    if (idle || rd_avail) begin failures++; $display("FAIL: idle with unflushed votes"); end
    flush = 1; @(negedge clk); flush = 0; @(negedge clk);
    if (!rd_avail || rd_count != 5'd3) begin failures++; $display("FAIL: flush of 3 votes"); end
    if (idle) begin failures++; $display("FAIL: idle with a committed bank"); end
    rd_release = 1; @(negedge clk); rd_release = 0; @(negedge clk);
    if (!idle) begin failures++; $display("FAIL: not idle after release"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
