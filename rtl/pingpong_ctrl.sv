// pingpong_ctrl: bank bookkeeping of a double buffer.
//
// A double buffer has two banks. The producer fills bank wr_sel while the
// consumer drains bank rd_sel. When the producer has finished a bank it pulses
// wr_commit with the number of valid entries; the bank becomes "full" and the
// producer moves to the other bank, which it may use once wr_free is high.
// When the consumer has finished a full bank it pulses rd_release; the bank
// becomes free and the consumer moves on. Banks are therefore handed over in
// strict alternation, which keeps frames in order.
//
// Timing: flags change on the clock edge after the pulse. Reset empties both
// banks and points both sides at bank 0.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of the
// assertions below. Every flip-flop uses the asynchronous reset.
module pingpong_ctrl #(
  parameter int unsigned CNT_W = 11
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_commit,
  input  logic [CNT_W-1:0] wr_count,
  input  logic             rd_release,
  output logic             wr_sel,
  output logic             wr_free,
  output logic             rd_sel,
  output logic             rd_avail,
  output logic [CNT_W-1:0] rd_count,
  output logic             all_free
);
  logic [1:0]       full_q;
  logic [CNT_W-1:0] count_q [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q     <= '0;
      wr_sel     <= 1'b0;
      rd_sel     <= 1'b0;
      count_q[0] <= '0;
      count_q[1] <= '0;
    end else begin
      if (wr_commit) begin
        full_q[wr_sel]  <= 1'b1;
        count_q[wr_sel] <= wr_count;
        wr_sel          <= ~wr_sel;
      end
      if (rd_release) begin
        full_q[rd_sel] <= 1'b0;
        rd_sel         <= ~rd_sel;
      end
    end
  end

  assign wr_free  = ~full_q[wr_sel];
  assign rd_avail = full_q[rd_sel];
  assign rd_count = count_q[rd_sel];
  assign all_free = (full_q == 2'b00);

  // handshake rules of the double buffer
  a_commit_free : assert property (@(posedge clk) disable iff (!rst_n) wr_commit |-> wr_free);
  a_release_full: assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> rd_avail);
endmodule
