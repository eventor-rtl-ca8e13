// buf_e: double-buffered event buffer (block RAM).
//
// Each entry is one event as a 32-bit word: y_k in [31:16], x_k in [15:0],
// both Q9.7, the packing the paper uses on the 32-bit bus. Words are appended
// to the write bank; the word flagged wr_last (the AXI-Stream TLAST of the
// frame), or the word that fills the bank, commits the bank with its event
// count. The read side is a synchronous RAM port: rd_data holds the entry at
// rd_addr of the read bank one cycle after rd_en. The controller pulses
// rd_release when the frame has been consumed.
// Double buffering and the word packing follow the paper; committing on TLAST
// and capping a frame at DEPTH events are this design's choices.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of assertions
// in the instantiated blocks. Every flip-flop uses the asynchronous reset.
module buf_e
  import eventor_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_EVENTS,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  point_t        wr_data,
  input  logic          wr_last,
  output logic          wr_ready,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output point_t        rd_data,
  output logic          rd_avail,
  output logic [CW-1:0] rd_count,
  input  logic          rd_release
);
  point_t        mem [2][DEPTH];
  logic [CW-1:0] ptr_q;
  logic          wr_sel, rd_sel, commit, do_wr;
  logic          unused_all_free;

  assign do_wr  = wr_en && wr_ready;
  assign commit = do_wr && (wr_last || ptr_q == CW'(DEPTH - 1));

  pingpong_ctrl #(.CNT_W(CW)) u_pp (
    .clk, .rst_n, .wr_commit(commit), .wr_count(ptr_q + CW'(1)), .rd_release,
    .wr_sel, .wr_free(wr_ready), .rd_sel, .rd_avail, .rd_count,
    .all_free(unused_all_free)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     ptr_q <= '0;
    else if (do_wr) ptr_q <= commit ? '0 : ptr_q + CW'(1);
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_sel][ptr_q[AW-1:0]] <= wr_data;
    if (rd_en) rd_data <= mem[rd_sel][rd_addr];
  end
endmodule
