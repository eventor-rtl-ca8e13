// axi_dram_model: behavioural stand-in for the DRAM controller and DRAM.
//
// Not synthesizable logic: a word-addressed memory of WORDS 32-bit words
// starting at byte address 0, served through NP single-beat AXI4 slave ports
// (AR/R and AW/W/B channels). Each port queues up to eight outstanding reads
// and eight writes and answers them in order, reads after 1 to 6 cycles and
// write responses 1 to 4 cycles after a write has both address and data.
// Ready signals are random (high about 7 cycles in 8), to exercise the
// masters' handshakes. Memory starts cleared. Byte strobes are honoured.
// A read returns the memory word as it is when the response is sent.
module axi_dram_model #(
  parameter int unsigned NP    = 2,
  parameter int unsigned WORDS = 1024
) (
  input  logic        clk,
  input  logic [31:0] araddr  [NP],
  input  logic        arvalid [NP],
  output logic        arready [NP],
  output logic [31:0] rdata   [NP],
  output logic        rvalid  [NP],
  input  logic        rready  [NP],
  input  logic [31:0] awaddr  [NP],
  input  logic        awvalid [NP],
  output logic        awready [NP],
  input  logic [31:0] wdata   [NP],
  input  logic [3:0]  wstrb   [NP],
  input  logic        wvalid  [NP],
  output logic        wready  [NP],
  output logic        bvalid  [NP],
  input  logic        bready  [NP]
);
  logic [31:0] mem [WORDS];

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    for (int p = 0; p < NP; p++) begin
      arready[p] = 0; rvalid[p] = 0; rdata[p] = 0;
      awready[p] = 0; wready[p] = 0; bvalid[p] = 0;
    end
  end

  function automatic int unsigned widx(logic [31:0] a);
    return a[31:2];
  endfunction

  for (genvar p = 0; p < NP; p++) begin : g_port
    // read requests: word index and the cycle from which the data may return
    int unsigned rq_a [$];
    longint      rq_t [$];
    // write addresses, write data, write responses (ready cycle)
    logic [31:0] awq [$];
    logic [31:0] wdq [$];
    logic [3:0]  wsq [$];
    longint      bq_t [$];
    longint      now;
    initial now = 0;

    always @(posedge clk) begin
      now = now + 1;
      // read channel: in-order responses after 1..6 cycles
      if (rvalid[p] && rready[p]) rvalid[p] <= 1'b0;
      if (arvalid[p] && arready[p]) begin
        rq_a.push_back(widx(araddr[p]));
        rq_t.push_back(now + longint'($urandom_range(1, 6)));
      end
      if ((!rvalid[p] || rready[p]) && rq_a.size() > 0 && rq_t[0] <= now) begin
        rdata[p]  <= mem[rq_a[0]];
        rvalid[p] <= 1'b1;
        void'(rq_a.pop_front()); void'(rq_t.pop_front());
      end
      arready[p] <= ($urandom_range(0, 7) != 0) && (rq_a.size() < 8);
      // write channels: a write happens once both its address and data are in
      if (bvalid[p] && bready[p]) bvalid[p] <= 1'b0;
      if (awvalid[p] && awready[p]) awq.push_back(awaddr[p]);
      if (wvalid[p] && wready[p]) begin wdq.push_back(wdata[p]); wsq.push_back(wstrb[p]); end
      if (awq.size() > 0 && wdq.size() > 0) begin
        for (int b = 0; b < 4; b++)
          if (wsq[0][b]) mem[widx(awq[0])][8*b +: 8] = wdq[0][8*b +: 8];
        void'(awq.pop_front()); void'(wdq.pop_front()); void'(wsq.pop_front());
        bq_t.push_back(now + longint'($urandom_range(1, 4)));
      end
      if ((!bvalid[p] || bready[p]) && bq_t.size() > 0 && bq_t[0] <= now) begin
        bvalid[p] <= 1'b1;
        void'(bq_t.pop_front());
      end
      awready[p] <= ($urandom_range(0, 7) != 0) && (awq.size() < 8);
      wready[p]  <= ($urandom_range(0, 7) != 0) && (wdq.size() < 8);
    end
  end
endmodule
