// axi_interface: AXI4-Stream slave that receives DMA data for one event frame
// and routes it to the input buffers of the canonical projection module.
//
// Every 32-bit beat carries TDEST (eventor_pkg::dest_e): DEST_H beats go to
// Buf_H (nine Q11.21 homography words), DEST_E beats to Buf_E (one event per
// word, TLAST on the last event of the frame), DEST_P beats to Buf_P (phi
// words). The interface holds one beat in a register slice: TREADY is high
// when the slice is empty or its beat is being taken by its buffer, so the
// stream stalls while the destination bank is still in use (double
// buffering back-pressure) and a beat is accepted every cycle otherwise.
// Beats with an unknown TDEST are dropped and counted in bad_beats.
// The paper says only that the AXI interface lets the DMA fill the buffers;
// the AXI-Stream form, TDEST routing and register slice are this design's.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of the
// assertions below. Every flip-flop uses the asynchronous reset.
module axi_interface
  import eventor_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Stream slave
  input  logic [31:0] s_tdata,
  input  logic [1:0]  s_tdest,
  input  logic        s_tlast,
  input  logic        s_tvalid,
  output logic        s_tready,
  // to Buf_H
  output logic        h_wr_en,
  output param_t      h_wr_data,
  input  logic        h_wr_ready,
  // to Buf_E
  output logic        e_wr_en,
  output point_t      e_wr_data,
  output logic        e_wr_last,
  input  logic        e_wr_ready,
  // to Buf_P
  output logic        p_wr_en,
  output param_t      p_wr_data,
  input  logic        p_wr_ready,
  // status
  output logic [15:0] bad_beats
);
  logic        v_q, last_q;
  logic [31:0] data_q;
  logic [1:0]  dest_q;
  logic        sink_ready, take;

  always_comb begin
    unique case (dest_q)
      DEST_H:  sink_ready = h_wr_ready;
      DEST_E:  sink_ready = e_wr_ready;
      DEST_P:  sink_ready = p_wr_ready;
      default: sink_ready = 1'b1;          // dropped
    endcase
  end

  assign take     = v_q && sink_ready;
  assign s_tready = !v_q || take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; last_q <= 1'b0; data_q <= '0; dest_q <= '0; bad_beats <= '0;
    end else begin
      if (s_tvalid && s_tready) begin
        v_q    <= 1'b1;
        data_q <= s_tdata;
        dest_q <= s_tdest;
        last_q <= s_tlast;
      end else if (take) begin
        v_q <= 1'b0;
      end
      if (take && dest_q == 2'd3) bad_beats <= bad_beats + 16'd1;
    end
  end

  assign h_wr_en   = take && (dest_q == DEST_H);
  assign e_wr_en   = take && (dest_q == DEST_E);
  assign p_wr_en   = take && (dest_q == DEST_P);
  assign h_wr_data = param_t'(data_q);
  assign p_wr_data = param_t'(data_q);
  assign e_wr_data = point_t'(data_q);
  assign e_wr_last = last_q;

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             s_tvalid && !s_tready |=> s_tvalid && $stable(s_tdata));
endmodule
