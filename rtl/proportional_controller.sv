// proportional_controller: finite-state machine of the proportional
// projection module.
//
// States:
//   IDLE  wait until a Buf_I bank (canonical results of a frame) and the
//         matching Buf_P bank are full; latch the event count and start the
//         Data Allocator; latch the frame's DSI base address (the Buf_I tag)
//         for the Vote Execute Unit.
//   RUN   the allocator streams (event, plane) pairs into the PE_Zi array.
//   DRAIN let the last pairs leave the PE_Zi pipelines (PE_LAT cycles that
//         are not stalled).
//   FLUSH commit the partly filled Buf_V banks and wait until every vote of
//         the frame has been written to DRAM (all Buf_V and the Vote Execute
//         Unit idle).
//   DONE  release Buf_I and Buf_P and pulse frame_done.
// idle tells the canonical controller that no frame is in progress here
// (used for the key-frame wait).
// The controller's role follows the paper; the states are this design's.
module proportional_controller
  import eventor_pkg::*;
#(
  parameter int unsigned DEPTH  = MAX_EVENTS,
  parameter int unsigned PE_LAT = 5,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          i_avail,
  input  logic [CW-1:0] i_count,
  input  logic [31:0]   i_tag,
  output logic [31:0]   dsi_base,
  input  logic          p_avail,
  output logic          i_release,
  output logic          p_release,
  output logic          alloc_start,
  output logic [CW-1:0] alloc_count,
  input  logic          alloc_busy,
  output logic          v_flush,
  input  logic          v_idle,
  input  logic          veu_idle,
  output logic          frame_done,
  output logic          idle
);
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DRAIN, S_FLUSH, S_DONE} state_e;
  state_e     state_q;
  logic [3:0] drain_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; drain_q <= '0; dsi_base <= '0;
    end else begin
      unique case (state_q)
        S_IDLE:  if (i_avail && p_avail) begin dsi_base <= i_tag; state_q <= S_RUN; end
        S_RUN:   if (!alloc_start && !alloc_busy) begin drain_q <= '0; state_q <= S_DRAIN; end
        S_DRAIN: if (en) begin
                   drain_q <= drain_q + 4'd1;
                   if (drain_q == 4'(PE_LAT)) state_q <= S_FLUSH;
                 end
        S_FLUSH: if (v_idle && veu_idle) state_q <= S_DONE;
        S_DONE:  state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // the allocator is started in the first RUN cycle
  logic run_first_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) run_first_q <= 1'b0;
    else        run_first_q <= (state_q == S_IDLE) && i_avail && p_avail;
  end

  assign alloc_start = run_first_q;
  assign alloc_count = i_count;
  assign v_flush     = (state_q == S_FLUSH);
  assign i_release   = (state_q == S_DONE);
  assign p_release   = (state_q == S_DONE);
  assign frame_done  = (state_q == S_DONE);
  assign idle        = (state_q == S_IDLE);
endmodule
