// tb_buf_i: a producer writes six frames of random length, committing each
// with a tag once its bank is free; a slower consumer reads every entry with
// random read-enable gaps (data must hold while rd_en is low), checks count,
// tag and contents, and releases. all_free and wr_free are checked against
// the number of banks in use.
module tb_buf_i;
  import eventor_pkg::*;
  localparam int D = 32, NFR = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_commit, wr_free, rd_en, rd_avail, rd_release, all_free;
  logic [31:0] wr_tag, rd_tag;
  point_t wr_data, rd_data; logic [4:0] rd_addr; logic [5:0] rd_count;
  buf_i #(.DEPTH(D)) dut (.clk, .rst_n, .wr_en, .wr_data, .wr_commit, .wr_tag, .wr_free, .rd_en,
                          .rd_addr, .rd_data, .rd_avail, .rd_count, .rd_tag, .rd_release, .all_free);
  int len [NFR];
  logic [31:0] data [NFR][D];
  int checks = 0, failures = 0, inuse = 0;
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (all_free != (inuse == 0) || wr_free != (inuse < 2)) begin
      failures++; if (failures < 10) $display("FAIL flags: inuse %0d all_free %0d wr_free %0d", inuse, all_free, wr_free);
    end
    if (wr_commit && rd_release) ;
    else if (wr_commit) inuse++;
    else if (rd_release) inuse--;
  end
  initial begin
    for (int f = 0; f < NFR; f++) begin
      len[f] = $urandom_range(1, D);
      for (int i = 0; i < D; i++) data[f][i] = $urandom;
    end
    wr_en = 0; wr_commit = 0; wr_data = '0; wr_tag = 0; rd_en = 0; rd_addr = 0; rd_release = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      for (int f = 0; f < NFR; f++) begin
        @(negedge clk);
        while (!wr_free) @(negedge clk);
        for (int i = 0; i < len[f]; i++) begin
          wr_en = 1; wr_data = point_t'(data[f][i]); @(negedge clk);
        end
        wr_en = 0; wr_commit = 1; wr_tag = 32'(f * 1000 + 7); @(negedge clk); wr_commit = 0;
      end
      for (int f = 0; f < NFR; f++) begin
        @(negedge clk);
        while (!rd_avail) @(negedge clk);
        repeat (40) @(negedge clk);
        checks += 2;
        if (int'(rd_count) != len[f]) begin failures++; $display("FAIL frame %0d count %0d", f, rd_count); end
        if (rd_tag != 32'(f * 1000 + 7)) begin failures++; $display("FAIL frame %0d tag %0d", f, rd_tag); end
        for (int i = 0; i < len[f]; i++) begin
          rd_en = 1; rd_addr = 5'(i);
          @(negedge clk); rd_en = 0; rd_addr = 5'(i + 1);
          repeat ($urandom_range(0, 2)) @(negedge clk);
          checks++;
          if (rd_data != point_t'(data[f][i])) begin
            failures++; if (failures < 10) $display("FAIL frame %0d entry %0d", f, i);
          end
        end
        rd_release = 1; @(negedge clk); rd_release = 0;
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
