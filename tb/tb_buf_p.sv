// tb_buf_p: three frames of phi words (a, bx, by per plane) are streamed in;
// the writer must be held off while both banks are full. For each frame the
// reader fetches random planes on both read ports at once and compares them
// with the words sent, then releases the bank.
module tb_buf_p;
  import eventor_pkg::*;
  localparam int P = 10, NFR = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_ready, rd_en, rd_avail, rd_release;
  param_t wr_data; logic [3:0] rd_addr [2]; phi_t rd_data [2];
  buf_p #(.PLANES(P), .NRD(2)) dut (.clk, .rst_n, .wr_en, .wr_data, .wr_ready, .rd_en, .rd_addr,
                                    .rd_data, .rd_avail, .rd_release);
  logic [31:0] w [NFR][P][3];
  int checks = 0, failures = 0, held = 0;
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (wr_en && !wr_ready) held++;
  initial begin
    for (int f = 0; f < NFR; f++) for (int z = 0; z < P; z++) for (int j = 0; j < 3; j++) w[f][z][j] = $urandom;
    wr_en = 0; wr_data = 0; rd_en = 0; rd_addr = '{0, 0}; rd_release = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      begin
        for (int f = 0; f < NFR; f++) for (int z = 0; z < P; z++) for (int j = 0; j < 3; j++) begin
          @(negedge clk);
          wr_en = 1; wr_data = param_t'(w[f][z][j]);
          while (!wr_ready) @(negedge clk);
          @(posedge clk);
        end
        @(negedge clk); wr_en = 0;
      end
      for (int f = 0; f < NFR; f++) begin
        @(negedge clk);
        while (!rd_avail) @(negedge clk);
        repeat (50) @(negedge clk);
        for (int k = 0; k < 20; k++) begin
          int z0, z1;
          z0 = $urandom_range(0, P - 1); z1 = $urandom_range(0, P - 1);
          rd_en = 1; rd_addr = '{4'(z0), 4'(z1)}; @(negedge clk); rd_en = 0;
          checks += 2;
          if (rd_data[0] != phi_t'({w[f][z0][2], w[f][z0][1], w[f][z0][0]})) begin
            failures++; if (failures < 10) $display("FAIL frame %0d plane %0d port 0", f, z0); end
          if (rd_data[1] != phi_t'({w[f][z1][2], w[f][z1][1], w[f][z1][0]})) begin
            failures++; if (failures < 10) $display("FAIL frame %0d plane %0d port 1", f, z1); end
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
