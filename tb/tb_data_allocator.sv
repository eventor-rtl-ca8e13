// tb_data_allocator: seven planes over two lanes (the last group leaves lane
// 1 idle), frames of 1 and 23 events, en toggled at random. Buf_I and Buf_P
// are modelled as synchronous RAMs with read enable. Every pair a lane
// receives while en is high must be the next (event, plane) of the expected
// order: event k, planes g*2 + lane for g = 0..3, with that plane's phi.
module tb_data_allocator;
  import eventor_pkg::*;
  localparam int P = 7, L = 2, D = 32, ZW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, start, busy, i_rd_en, p_rd_en;
  logic [5:0] count; logic [4:0] i_rd_addr; point_t i_rd_data;
  logic [ZW-1:0] p_rd_addr [L]; phi_t p_rd_data [L];
  logic pe_valid [L]; point_t pe_pt; phi_t pe_phi [L]; logic [ZW-1:0] pe_z [L];
  data_allocator #(.PLANES(P), .LANES(L), .DEPTH(D)) dut (.clk, .rst_n, .en, .start, .count, .busy,
    .i_rd_en, .i_rd_addr, .i_rd_data, .p_rd_en, .p_rd_addr, .p_rd_data, .pe_valid, .pe_pt, .pe_phi, .pe_z);
  point_t imem [D]; phi_t pmem [P];
  always @(posedge clk) begin
    if (i_rd_en) i_rd_data <= imem[i_rd_addr];
    if (p_rd_en) for (int l = 0; l < L; l++) p_rd_data[l] <= pmem[p_rd_addr[l]];
  end
  int qk [L][$], qz [L][$];
  int checks = 0, failures = 0;
  always @(posedge clk) if (rst_n && en) for (int l = 0; l < L; l++) if (pe_valid[l]) begin
    int k, z;
    k = (qk[l].size() > 0) ? qk[l].pop_front() : -1; z = (qz[l].size() > 0) ? qz[l].pop_front() : -1;
    checks++;
    if (k < 0 || pe_pt != imem[k] || int'(pe_z[l]) != z || pe_phi[l] != pmem[z]) begin
      failures++; if (failures < 10) $display("FAIL lane %0d: z %0d exp event %0d plane %0d", l, pe_z[l], k, z);
    end
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic run(int n);
    for (int k = 0; k < n; k++) for (int g = 0; g < 4; g++) for (int l = 0; l < L; l++)
      if (g * L + l < P) begin qk[l].push_back(k); qz[l].push_back(g * L + l); end
    @(negedge clk); start = 1; count = 6'(n); @(negedge clk); start = 0;
    while (busy) begin en = $urandom_range(0, 2) != 0; @(negedge clk); end
    en = 1; repeat (3) @(negedge clk);
    checks++;
    if (qk[0].size() + qk[1].size() != 0) begin failures++; $display("FAIL: %0d pairs missing", qk[0].size() + qk[1].size()); end
  endtask
  initial begin
    for (int i = 0; i < D; i++) imem[i] = point_t'($urandom);
    for (int z = 0; z < P; z++) pmem[z] = phi_t'({$urandom, $urandom, $urandom});
    en = 1; start = 0; count = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(1); run(23);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
