// canonical_controller: finite-state machine of the canonical projection
// module.
//
// States:
//   IDLE  wait for a start instruction (cmd_valid, with cmd_key set for a key
//         frame and cmd_base the DRAM byte address of the DSI to vote into;
//         the base is stored with the frame's Buf_I bank).
//   SYNC  synchronisation state: wait until Buf_E and Buf_H hold the next
//         frame and a Buf_I bank is free for its results. For a key frame it
//         additionally waits until the proportional side has finished every
//         earlier frame (ppm_idle and both Buf_I banks empty), because the
//         key frame starts a new DSI. key_wait is high while a key frame
//         waits here.
//   LOAD  PE_Z0 copies H from Buf_H; the Buf_H bank is released.
//   RUN   read one event per cycle from Buf_E into PE_Z0 (RAM latency 1, so
//         pe_valid follows e_rd_en by one cycle).
//   DRAIN wait until every PE_Z0 result has been written to Buf_I.
//   DONE  commit the Buf_I bank to the proportional side, release Buf_E.
// A normal frame thus runs as soon as a Buf_I bank is free and overlaps the
// previous frame's proportional work; a key frame does not overlap.
// The FSM, its synchronisation state and the key-frame rule follow the paper
// and its pipeline figure; the state encoding and handshakes are this
// design's.
module canonical_controller
  import eventor_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_EVENTS,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  input  logic          cmd_key,
  input  logic [31:0]   cmd_base,
  output logic          cmd_ready,
  input  logic          h_avail,
  output logic          h_release,
  output logic          pe_h_load,
  input  logic          e_avail,
  input  logic [CW-1:0] e_count,
  output logic          e_rd_en,
  output logic [AW-1:0] e_rd_addr,
  output logic          e_release,
  output logic          pe_valid,
  input  logic          pe_out_valid,
  input  logic          i_wr_free,
  input  logic          i_all_free,
  output logic          i_commit,
  output logic [31:0]   i_tag,
  input  logic          ppm_idle,
  output logic          key_wait,
  output logic          busy
);
  typedef enum logic [2:0] {S_IDLE, S_SYNC, S_LOAD, S_RUN, S_DRAIN, S_DONE} state_e;
  state_e        state_q;
  logic          key_q;
  logic [31:0]   base_q;
  logic [CW-1:0] rd_q, out_q, count_q;
  logic          go;

  assign go = e_avail && h_avail && i_wr_free && (!key_q || (i_all_free && ppm_idle));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; key_q <= 1'b0; base_q <= '0; rd_q <= '0; out_q <= '0; count_q <= '0;
      pe_valid <= 1'b0;
    end else begin
      pe_valid <= e_rd_en;
      if (pe_out_valid) out_q <= out_q + CW'(1);
      unique case (state_q)
        S_IDLE:  if (cmd_valid) begin key_q <= cmd_key; base_q <= cmd_base; state_q <= S_SYNC; end
        S_SYNC:  if (go) begin count_q <= e_count; state_q <= S_LOAD; end
        S_LOAD:  begin rd_q <= '0; out_q <= '0; state_q <= S_RUN; end
        S_RUN:   begin
                   rd_q <= rd_q + CW'(1);
                   if (rd_q == count_q - CW'(1)) state_q <= S_DRAIN;
                 end
        S_DRAIN: if (out_q == count_q) state_q <= S_DONE;
        S_DONE:  state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign cmd_ready = (state_q == S_IDLE);
  assign pe_h_load = (state_q == S_LOAD);
  assign h_release = (state_q == S_LOAD);
  assign e_rd_en   = (state_q == S_RUN);
  assign e_rd_addr = rd_q[AW-1:0];
  assign i_commit  = (state_q == S_DONE);
  assign i_tag     = base_q;
  assign e_release = (state_q == S_DONE);
  assign key_wait  = (state_q == S_SYNC) && key_q && !go;
  assign busy      = (state_q != S_IDLE);
endmodule
