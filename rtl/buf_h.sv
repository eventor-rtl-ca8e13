// buf_h: double-buffered register file for the 3x3 homography H_Z0.
//
// One matrix per event frame is needed, so the buffer is built from
// registers rather than block RAM, as the paper describes. Nine Q11.21 words
// arrive row-major (h00 h01 h02 h10 ... h22) on the write port; after the
// ninth word the bank is committed and the writer moves to the other bank.
// The consumer (PE_Z0) sees the full matrix of the read bank in parallel on
// rd_h while rd_avail is high, and pulses rd_release when it has loaded it.
// Double buffering follows the paper; the word order and handshake are this
// design's choice. wr_ready is low while the write bank is still full.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of assertions
// in the instantiated blocks. Every flip-flop uses the asynchronous reset.
module buf_h
  import eventor_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   wr_en,
  input  param_t wr_data,
  output logic   wr_ready,
  output param_t rd_h [9],
  output logic   rd_avail,
  input  logic   rd_release
);
  param_t     regs_q [2][9];
  logic [3:0] ptr_q;
  logic       wr_sel, rd_sel, commit;
  logic [3:0] unused_cnt;
  logic       unused_all_free;

  assign commit = wr_en && wr_ready && (ptr_q == 4'd8);

  pingpong_ctrl #(.CNT_W(4)) u_pp (
    .clk, .rst_n, .wr_commit(commit), .wr_count(4'd9), .rd_release,
    .wr_sel, .wr_free(wr_ready), .rd_sel, .rd_avail, .rd_count(unused_cnt),
    .all_free(unused_all_free)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q <= '0;
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < 9; i++) regs_q[b][i] <= '0;
    end else if (wr_en && wr_ready) begin
      regs_q[wr_sel][ptr_q] <= wr_data;
      ptr_q <= (ptr_q == 4'd8) ? 4'd0 : ptr_q + 4'd1;
    end
  end

  always_comb
    for (int i = 0; i < 9; i++) rd_h[i] = regs_q[rd_sel][i];
endmodule
