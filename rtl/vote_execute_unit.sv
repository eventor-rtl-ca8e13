// vote_execute_unit: casts the DSI votes held in Buf_V into DRAM.
//
// One lane per PE_Zi / Buf_V, each with its own AXI4 master port (the
// AXI-HP ports of the processing system). A lane takes a full Buf_V bank and,
// for each vote address a (a linear voxel index), performs a read-modify-
// write of the 16-bit score at byte address dsi_base + 2*a: a single-beat
// read of the aligned 32-bit word, add VOTE to the selected half-word
// (saturating at 65535), and a write back with WSTRB enabling only that
// half-word, so the neighbouring score is never touched.
// The read-modify-writes are pipelined. Each lane keeps a table of up to
// OUTS votes in flight, handled strictly in order by six pointers:
//   alloc  a vote address read from Buf_V enters the table (one per cycle)
//   ar     its read request is issued
//   r      its read data has returned and the new word is computed
//   aw, w  its write address / write data are issued (independently)
//   b      its write response has returned: the entry is free again
// A vote whose score is already in the table waits before entering it, so
// a read never overtakes the write of an earlier vote to the same score.
// With one read and one write per cycle the unit reaches one vote per cycle
// per lane when the memory keeps up. AXI responses of one port return in
// order (single ID). The bank is released after its last write response.
// Lanes never touch the same voxel because each lane only handles its own
// depth planes, so the lanes need no coherence between them.
// All AXI transactions are one beat of 32 bits (ARLEN/AWLEN = 0, size 4
// bytes, INCR); those constant fields are left to the port adaptor.
// Direct DRAM access through AXI-HP ports and the vote increment of 1 follow
// the paper; the transaction pipeline, hazard check and saturation are this
// design's.
// Lint note: bit 0 of a score's byte address is always 0 (scores are
// half-word aligned), so it is not used.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of the
// assertions below. Every flip-flop uses the asynchronous reset.
module vote_execute_unit
  import eventor_pkg::*;
#(
  parameter int unsigned LANES  = NPE,
  parameter int unsigned DEPTH  = VBUF_DEPTH,
  parameter int unsigned ADDR_W = $clog2(IMG_W * IMG_H * NZ),
  parameter int unsigned VOTE   = 1,
  parameter int unsigned OUTS   = 8,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [31:0]       dsi_base,
  // Buf_V read side, per lane
  input  logic              v_avail   [LANES],
  input  logic [CW-1:0]     v_count   [LANES],
  output logic              v_rd_en   [LANES],
  output logic [AW-1:0]     v_rd_addr [LANES],
  input  logic [ADDR_W-1:0] v_rd_data [LANES],
  output logic              v_release [LANES],
  // AXI4 master, per lane
  output logic [31:0]       m_araddr  [LANES],
  output logic              m_arvalid [LANES],
  input  logic              m_arready [LANES],
  input  logic [31:0]       m_rdata   [LANES],
  input  logic              m_rvalid  [LANES],
  output logic              m_rready  [LANES],
  output logic [31:0]       m_awaddr  [LANES],
  output logic              m_awvalid [LANES],
  input  logic              m_awready [LANES],
  output logic [31:0]       m_wdata   [LANES],
  output logic [3:0]        m_wstrb   [LANES],
  output logic              m_wvalid  [LANES],
  input  logic              m_wready  [LANES],
  input  logic              m_bvalid  [LANES],
  output logic              m_bready  [LANES],
  // status
  output logic              vote_done [LANES],
  output logic              idle
);
  localparam int unsigned PW = $clog2(OUTS) + 1;   // pointer width with wrap bit
  logic [LANES-1:0] lane_idle;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic          act_q, pend_q;
    logic [CW-1:0] cnt_q, fidx_q, done_q;
    logic [PW-1:0] al_q, ar_q, r_q, aw_q, w_q, b_q, occ;
    logic [31:0]   ea_q [OUTS];        // byte address of each entry
    logic [31:0]   ed_q [OUTS];        // write-back word of each entry
    logic [31:0]   nb;                 // byte address of the vote read from Buf_V
    logic          hazard, alloc, rd, last_b;
    logic [31:0]   ra;
    logic [16:0]   sum;
    score_t        old_s, new_s;

    assign occ = al_q - b_q;
    assign nb  = dsi_base + 32'({v_rd_data[l], 1'b0});
    always_comb begin
      hazard = 1'b0;
      for (int i = 0; i < OUTS; i++)
        if (PW'(PW'(i) - b_q) % PW'(OUTS) < occ && ea_q[i][31:1] == nb[31:1]) hazard = 1'b1;
    end
    assign alloc  = pend_q && !hazard && (occ < PW'(OUTS));
    assign rd     = act_q && (fidx_q != cnt_q) && (!pend_q || alloc);
    assign last_b = act_q && m_bvalid[l] && (b_q != aw_q) && (b_q != w_q) && (done_q == cnt_q - CW'(1));

    assign ra    = ea_q[r_q[PW-2:0]];
    assign old_s = ra[1] ? m_rdata[l][31:16] : m_rdata[l][15:0];
    assign sum   = 17'(old_s) + 17'(VOTE);
    assign new_s = sum[16] ? 16'hFFFF : sum[15:0];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        act_q <= 1'b0; pend_q <= 1'b0; cnt_q <= '0; fidx_q <= '0; done_q <= '0;
        al_q <= '0; ar_q <= '0; r_q <= '0; aw_q <= '0; w_q <= '0; b_q <= '0;
        for (int i = 0; i < OUTS; i++) begin ea_q[i] <= '0; ed_q[i] <= '0; end
      end else begin
        if (!act_q) begin
          if (v_avail[l]) begin act_q <= 1'b1; cnt_q <= v_count[l]; fidx_q <= '0; done_q <= '0; end
        end else begin
          if (rd) fidx_q <= fidx_q + CW'(1);
          if (rd) pend_q <= 1'b1; else if (alloc) pend_q <= 1'b0;
          if (alloc) begin ea_q[al_q[PW-2:0]] <= nb; al_q <= al_q + PW'(1); end
          if (m_arvalid[l] && m_arready[l]) ar_q <= ar_q + PW'(1);
          if (m_rvalid[l] && m_rready[l]) begin
            ed_q[r_q[PW-2:0]] <= ra[1] ? {new_s, 16'h0} : {16'h0, new_s};
            r_q <= r_q + PW'(1);
          end
          if (m_awvalid[l] && m_awready[l]) aw_q <= aw_q + PW'(1);
          if (m_wvalid[l] && m_wready[l])   w_q  <= w_q + PW'(1);
          if (m_bvalid[l] && m_bready[l]) begin b_q <= b_q + PW'(1); done_q <= done_q + CW'(1); end
          if (last_b) act_q <= 1'b0;
        end
      end
    end

    assign v_rd_en[l]   = rd;
    assign v_rd_addr[l] = fidx_q[AW-1:0];
    assign v_release[l] = last_b;
    assign m_araddr[l]  = {ea_q[ar_q[PW-2:0]][31:2], 2'b00};
    assign m_arvalid[l] = (ar_q != al_q);
    assign m_rready[l]  = (r_q != ar_q);
    assign m_awaddr[l]  = {ea_q[aw_q[PW-2:0]][31:2], 2'b00};
    assign m_awvalid[l] = (aw_q != r_q);
    assign m_wdata[l]   = ed_q[w_q[PW-2:0]];
    assign m_wstrb[l]   = ea_q[w_q[PW-2:0]][1] ? 4'b1100 : 4'b0011;
    assign m_wvalid[l]  = (w_q != r_q);
    assign m_bready[l]  = (b_q != aw_q) && (b_q != w_q);
    assign vote_done[l] = m_bvalid[l] && m_bready[l];
    assign lane_idle[l] = !act_q;

    a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                m_arvalid[l] && !m_arready[l] |=> m_arvalid[l] && $stable(m_araddr[l]));
    a_occ: assert property (@(posedge clk) disable iff (!rst_n) occ <= PW'(OUTS));
  end

  assign idle = &lane_idle;
endmodule
