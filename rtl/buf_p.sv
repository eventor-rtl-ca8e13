// buf_p: double-buffered proportional back-projection parameter buffer.
//
// Holds the phi record of every depth plane of one frame: a, bx, by in
// Q11.21 (see eventor_pkg::phi_t). Words arrive in the order a, bx, by of
// plane 0, then plane 1, ...; the word completing plane NZ-1 commits the
// bank. The read side has one synchronous port per PE_Zi (NRD ports), each
// with its own address and a shared read enable, because every PE_Zi works
// on a different depth plane in the same cycle; rd_data[p] holds phi of
// plane rd_addr[p] one cycle after rd_en. The proportional controller pulses
// rd_release when the frame that used the bank is finished, so phi travels
// with its frame through both pipeline stages.
// Storing phi in the canonical module and handing it to the Data Allocator
// follows the paper; the record layout and the port count are this design's.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of assertions
// in the instantiated blocks. Every flip-flop uses the asynchronous reset.
module buf_p
  import eventor_pkg::*;
#(
  parameter int unsigned PLANES = NZ,
  parameter int unsigned NRD    = NPE,
  localparam int unsigned AW = (PLANES > 1) ? $clog2(PLANES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  param_t        wr_data,
  output logic          wr_ready,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr [NRD],
  output phi_t          rd_data [NRD],
  output logic          rd_avail,
  input  logic          rd_release
);
  // one memory per field so that each has a single write port; the bank
  // select is the top address bit
  param_t        mem_a [2**(AW+1)], mem_bx [2**(AW+1)], mem_by [2**(AW+1)];
  logic [AW-1:0] plane_q;
  logic [1:0]    field_q;
  logic          wr_sel, rd_sel, commit, do_wr, last_word;
  logic [AW-1:0] unused_cnt;
  logic          unused_all_free;

  assign do_wr     = wr_en && wr_ready;
  assign last_word = (field_q == 2'd2) && (plane_q == AW'(PLANES - 1));
  assign commit    = do_wr && last_word;

  pingpong_ctrl #(.CNT_W(AW)) u_pp (
    .clk, .rst_n, .wr_commit(commit), .wr_count(plane_q), .rd_release,
    .wr_sel, .wr_free(wr_ready), .rd_sel, .rd_avail, .rd_count(unused_cnt),
    .all_free(unused_all_free)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      plane_q <= '0;
      field_q <= '0;
    end else if (do_wr) begin
      if (field_q == 2'd2) begin
        field_q <= '0;
        plane_q <= last_word ? '0 : plane_q + AW'(1);
      end else begin
        field_q <= field_q + 2'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr && field_q == 2'd0) mem_a[{wr_sel, plane_q}]  <= wr_data;
    if (do_wr && field_q == 2'd1) mem_bx[{wr_sel, plane_q}] <= wr_data;
    if (do_wr && field_q == 2'd2) mem_by[{wr_sel, plane_q}] <= wr_data;
    if (rd_en)
      for (int p = 0; p < NRD; p++)
        rd_data[p] <= '{by: mem_by[{rd_sel, rd_addr[p]}], bx: mem_bx[{rd_sel, rd_addr[p]}],
                        a: mem_a[{rd_sel, rd_addr[p]}]};
  end
endmodule
