// buf_v: double-buffered vote-address buffer of one PE_Zi lane.
//
// PE_Zi appends linear DSI voxel indices (wr_en/wr_data). A bank is committed
// to the Vote Execute Unit when it is full or when the proportional
// controller requests a flush at the end of a frame (a flush of an empty
// bank does nothing). While the Vote Execute Unit drains one bank the PE
// fills the other; if both are full, wr_ready falls and the whole
// proportional pipeline stalls until a bank is released. The read side is a
// synchronous port: rd_data is the entry at rd_addr one cycle after rd_en.
// idle is high when both banks are empty and nothing is pending.
// A per-PE double-buffered vote buffer follows the paper and its figure (two
// stacked Buf_V); the bank depth and the flush rule are this design's.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of assertions
// in the instantiated blocks. Every flip-flop uses the asynchronous reset.
module buf_v
  import eventor_pkg::*;
#(
  parameter int unsigned DEPTH  = VBUF_DEPTH,
  parameter int unsigned ADDR_W = $clog2(IMG_W * IMG_H * NZ),
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_data,
  output logic              wr_ready,
  input  logic              flush,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [ADDR_W-1:0] rd_data,
  output logic              rd_avail,
  output logic [CW-1:0]     rd_count,
  input  logic              rd_release,
  output logic              idle
);
  logic [ADDR_W-1:0] mem [2][DEPTH];
  logic [CW-1:0]     ptr_q;
  logic              wr_sel, rd_sel, do_wr, commit, all_free;
  logic [CW-1:0]     commit_cnt;

  assign do_wr = wr_en && wr_ready;
  always_comb begin
    commit     = 1'b0;
    commit_cnt = ptr_q;
    if (do_wr && ptr_q == CW'(DEPTH - 1)) begin
      commit     = 1'b1;
      commit_cnt = CW'(DEPTH);
    end else if (flush && !do_wr && ptr_q != '0 && wr_ready) begin
      commit     = 1'b1;
    end
  end

  pingpong_ctrl #(.CNT_W(CW)) u_pp (
    .clk, .rst_n, .wr_commit(commit), .wr_count(commit_cnt), .rd_release,
    .wr_sel, .wr_free(wr_ready), .rd_sel, .rd_avail, .rd_count, .all_free
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      ptr_q <= '0;
    else if (commit) ptr_q <= '0;
    else if (do_wr)  ptr_q <= ptr_q + CW'(1);
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_sel][ptr_q[AW-1:0]] <= wr_data;
    if (rd_en) rd_data <= mem[rd_sel][rd_addr];
  end

  assign idle = all_free && (ptr_q == '0);
endmodule
