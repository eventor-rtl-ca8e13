// eventor_top: programmable-logic part of the event-based multi-view stereo
// accelerator (event back-projection and volumetric ray counting).
//
// Two modules form a two-stage frame pipeline:
//   canonical_projection_module     DMA input, Buf_H/E/P/I, PE_Z0: maps
//                                   every event of a frame onto the canonical
//                                   plane Z0 of the reference view.
//   proportional_projection_module  Data Allocator, NPE x PE_Zi, Buf_V, Vote
//                                   Execute Unit: maps each canonical point
//                                   onto all NZ depth planes and adds one vote
//                                   per hit voxel to the DSI in DRAM.
// While the second stage votes frame N, the first stage already projects
// frame N+1 into the other Buf_I bank; a key frame (cmd_key) instead waits
// until frame N is completely voted, because the host resets or moves the
// DSI at a key frame.
// Interface: the AXI4-Stream slave is driven by the host DMA (TDEST selects
// H, events or phi), cmd_* carries the host's start instruction (key-frame
// flag and the DRAM byte address of the DSI the frame votes into), and each lane has a single-beat AXI4
// master port towards the DRAM controller (AXI-HP). frame_done pulses once per
// finished frame. key_wait, vbuf_stall, miss and vote_cast are status
// strobes for performance counters.
// The partition and data flow follow the paper's architecture figure and
// pipeline figure; the port protocols are this design's.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of assertions
// in the instantiated blocks. Every flip-flop uses the asynchronous reset.
module eventor_top
  import eventor_pkg::*;
#(
  parameter int unsigned DEPTH  = MAX_EVENTS,
  parameter int unsigned PLANES = NZ,
  parameter int unsigned LANES  = NPE,
  parameter int unsigned W      = IMG_W,
  parameter int unsigned H      = IMG_H,
  parameter int unsigned VDEPTH = VBUF_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  // DMA stream
  input  logic [31:0] s_axis_tdata,
  input  logic [1:0]  s_axis_tdest,
  input  logic        s_axis_tlast,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  // host instruction and configuration
  input  logic        cmd_valid,
  input  logic        cmd_key,
  input  logic [31:0] cmd_base,
  output logic        cmd_ready,
  // AXI-HP masters
  output logic [31:0] m_araddr  [LANES],
  output logic        m_arvalid [LANES],
  input  logic        m_arready [LANES],
  input  logic [31:0] m_rdata   [LANES],
  input  logic        m_rvalid  [LANES],
  output logic        m_rready  [LANES],
  output logic [31:0] m_awaddr  [LANES],
  output logic        m_awvalid [LANES],
  input  logic        m_awready [LANES],
  output logic [31:0] m_wdata   [LANES],
  output logic [3:0]  m_wstrb   [LANES],
  output logic        m_wvalid  [LANES],
  input  logic        m_wready  [LANES],
  input  logic        m_bvalid  [LANES],
  output logic        m_bready  [LANES],
  // status
  output logic        frame_done,
  output logic        busy,
  output logic        key_wait,
  output logic        vbuf_stall,
  output logic [LANES-1:0] miss,
  output logic [LANES-1:0] vote_cast,
  output logic [15:0] bad_beats
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  localparam int unsigned ZW = (PLANES > 1) ? $clog2(PLANES) : 1;

  logic          i_rd_en, i_avail, i_release, p_rd_en, p_avail, p_release;
  logic [AW-1:0] i_rd_addr;
  logic [CW-1:0] i_count;
  logic [31:0]   i_tag;
  point_t        i_rd_data;
  logic [ZW-1:0] p_rd_addr [LANES];
  phi_t          p_rd_data [LANES];
  logic          ppm_idle, cpm_busy;

  canonical_projection_module #(.DEPTH(DEPTH), .PLANES(PLANES), .LANES(LANES)) u_cpm (
    .clk, .rst_n,
    .s_tdata(s_axis_tdata), .s_tdest(s_axis_tdest), .s_tlast(s_axis_tlast),
    .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready),
    .cmd_valid, .cmd_key, .cmd_base, .cmd_ready,
    .i_rd_en, .i_rd_addr, .i_rd_data, .i_avail, .i_count, .i_tag, .i_release,
    .p_rd_en, .p_rd_addr, .p_rd_data, .p_avail, .p_release,
    .ppm_idle, .key_wait, .busy(cpm_busy), .bad_beats
  );

  proportional_projection_module #(.DEPTH(DEPTH), .PLANES(PLANES), .LANES(LANES),
                                   .W(W), .H(H), .VDEPTH(VDEPTH)) u_ppm (
    .clk, .rst_n,
    .i_rd_en, .i_rd_addr, .i_rd_data, .i_avail, .i_count, .i_tag, .i_release,
    .p_rd_en, .p_rd_addr, .p_rd_data, .p_avail, .p_release,
    .m_araddr, .m_arvalid, .m_arready, .m_rdata, .m_rvalid, .m_rready,
    .m_awaddr, .m_awvalid, .m_awready, .m_wdata, .m_wstrb, .m_wvalid, .m_wready,
    .m_bvalid, .m_bready,
    .frame_done, .idle(ppm_idle), .vbuf_stall, .miss, .vote_cast
  );

  assign busy = cpm_busy || !ppm_idle;
endmodule
