// buf_i: double-buffered intermediate buffer (block RAM) between PE_Z0 and
// the Data Allocator.
//
// Holds the canonical-plane coordinates {y(Z0), x(Z0)} of one frame, Q9.7
// each, packed like an event word. PE_Z0 results are appended to the write
// bank with wr_en; the Canonical Projection Controller pulses wr_commit once
// the last result of the frame is written, which hands the bank (with its
// entry count) to the proportional side. The read port is synchronous with a
// read enable so a stalled reader keeps its data: rd_data is the entry at
// rd_addr one cycle after a cycle with rd_en. rd_release frees the bank.
// wr_free tells the canonical controller whether it may start a frame, and
// all_free (both banks empty) is used for the key-frame wait. A 32-bit tag
// (the frame's DSI base address) is stored with each committed bank and read
// back as rd_tag, so per-frame configuration travels with the frame.
// The double buffering follows the paper; the handshake is this design's.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of the
// assertions below. Every flip-flop uses the asynchronous reset.
module buf_i
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
  input  logic          wr_commit,
  input  logic [31:0]   wr_tag,
  output logic          wr_free,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output point_t        rd_data,
  output logic          rd_avail,
  output logic [CW-1:0] rd_count,
  output logic [31:0]   rd_tag,
  input  logic          rd_release,
  output logic          all_free
);
  point_t        mem [2][DEPTH];
  logic [CW-1:0] ptr_q;
  logic          wr_sel, rd_sel;
  logic [31:0]   tag_q [2];

  pingpong_ctrl #(.CNT_W(CW)) u_pp (
    .clk, .rst_n, .wr_commit, .wr_count(ptr_q), .rd_release,
    .wr_sel, .wr_free, .rd_sel, .rd_avail, .rd_count, .all_free
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         ptr_q <= '0;
    else if (wr_commit) ptr_q <= '0;
    else if (wr_en && ptr_q != CW'(DEPTH)) ptr_q <= ptr_q + CW'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         begin tag_q[0] <= '0; tag_q[1] <= '0; end
    else if (wr_commit) tag_q[wr_sel] <= wr_tag;
  end
  assign rd_tag = tag_q[rd_sel];

  always_ff @(posedge clk) begin
    if (wr_en && ptr_q != CW'(DEPTH)) mem[wr_sel][ptr_q[AW-1:0]] <= wr_data;
    if (rd_en) rd_data <= mem[rd_sel][rd_addr];
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  wr_en |-> ptr_q != CW'(DEPTH));
endmodule
