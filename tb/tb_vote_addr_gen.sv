// tb_vote_addr_gen: random voxels on random planes, hits and misses, en
// toggled; every address taken while en is high must be (z*H + y)*W + x and
// misses must produce no address.
module tb_vote_addr_gen;
  import eventor_pkg::*;
  localparam int ZW = $clog2(NZ);
  localparam int AW = $clog2(IMG_W * IMG_H * NZ);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, in_valid, hit, vote_valid;
  vox8_t vx, vy; logic [ZW-1:0] z; logic [AW-1:0] vote_addr;
  vote_addr_gen dut (.clk, .rst_n, .en, .in_valid, .hit, .vx, .vy, .z, .vote_valid, .vote_addr);
  int expq [$];
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && en && vote_valid) begin
    int e;
    e = (expq.size() > 0) ? expq.pop_front() : -1;
    checks++;
    if (int'(vote_addr) != e) begin failures++; if (failures < 10) $display("FAIL got %0d exp %0d", vote_addr, e); end
  end
  initial begin
    en = 1; in_valid = 0; hit = 0; vx = 0; vy = 0; z = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      if (!en) continue;
      in_valid = $urandom_range(0, 1); hit = $urandom_range(0, 1);
      vx = vox8_t'($urandom_range(0, IMG_W - 1)); vy = vox8_t'($urandom_range(0, IMG_H - 1));
      z = ZW'($urandom_range(0, NZ - 1));
      if (in_valid && hit) expq.push_back((int'(z) * IMG_H + int'(vy)) * IMG_W + int'(vx));
    end
    @(negedge clk); en = 1; in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: outputs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
