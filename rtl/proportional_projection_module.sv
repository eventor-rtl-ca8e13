// proportional_projection_module: second pipeline stage of the accelerator,
// proportional back-projection P(Z0 ~> Zi) and volumetric ray counting R.
//
// The Data Allocator reads each canonical point from Buf_I and the phi
// records from Buf_P and hands the point to LANES PE_Zi instances, each on
// its own depth plane. Every PE_Zi turns (point, plane) into a DSI vote
// address (or a miss) and appends it to its own double-buffered Buf_V; the
// Vote Execute Unit drains full Buf_V banks into DRAM through one AXI master
// port per lane by read-modify-write of the 16-bit scores. If any Buf_V has
// no free bank, en falls and allocator and PEs freeze (vbuf_stall).
// Throughput with no stall: LANES (event, plane) pairs per cycle, i.e.
// ceil(NZ/LANES) cycles per event.
// Block content and connections follow the paper's architecture figure.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of assertions
// in the instantiated blocks. Every flip-flop uses the asynchronous reset.
module proportional_projection_module
  import eventor_pkg::*;
#(
  parameter int unsigned DEPTH  = MAX_EVENTS,
  parameter int unsigned PLANES = NZ,
  parameter int unsigned LANES  = NPE,
  parameter int unsigned W      = IMG_W,
  parameter int unsigned H      = IMG_H,
  parameter int unsigned VDEPTH = VBUF_DEPTH,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1),
  localparam int unsigned ZW = (PLANES > 1) ? $clog2(PLANES) : 1,
  localparam int unsigned ADDR_W = $clog2(W * H * PLANES),
  localparam int unsigned VAW = $clog2(VDEPTH),
  localparam int unsigned VCW = $clog2(VDEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // Buf_I / Buf_P read sides
  output logic          i_rd_en,
  output logic [AW-1:0] i_rd_addr,
  input  point_t        i_rd_data,
  input  logic          i_avail,
  input  logic [CW-1:0] i_count,
  input  logic [31:0]   i_tag,
  output logic          i_release,
  output logic          p_rd_en,
  output logic [ZW-1:0] p_rd_addr [LANES],
  input  phi_t          p_rd_data [LANES],
  input  logic          p_avail,
  output logic          p_release,
  // AXI4 masters (AXI-HP), one per lane
  output logic [31:0]   m_araddr  [LANES],
  output logic          m_arvalid [LANES],
  input  logic          m_arready [LANES],
  input  logic [31:0]   m_rdata   [LANES],
  input  logic          m_rvalid  [LANES],
  output logic          m_rready  [LANES],
  output logic [31:0]   m_awaddr  [LANES],
  output logic          m_awvalid [LANES],
  input  logic          m_awready [LANES],
  output logic [31:0]   m_wdata   [LANES],
  output logic [3:0]    m_wstrb   [LANES],
  output logic          m_wvalid  [LANES],
  input  logic          m_wready  [LANES],
  input  logic          m_bvalid  [LANES],
  output logic          m_bready  [LANES],
  // status
  output logic          frame_done,
  output logic          idle,
  output logic          vbuf_stall,
  output logic [LANES-1:0] miss,
  output logic [LANES-1:0] vote_cast
);
  logic          en, alloc_start, alloc_busy, v_flush, veu_idle;
  logic [CW-1:0] alloc_count;
  logic [31:0]   dsi_base;
  logic          pe_valid [LANES];
  point_t        pe_pt;
  phi_t          pe_phi [LANES];
  logic [ZW-1:0] pe_z [LANES];
  logic [LANES-1:0] v_ready, v_idle;
  logic              vv_valid [LANES];
  logic [ADDR_W-1:0] vv_addr  [LANES];
  logic              v_avail [LANES], v_rd_en [LANES], v_release [LANES], vote_done [LANES];
  logic [VCW-1:0]    v_count [LANES];
  logic [VAW-1:0]    v_rd_addr [LANES];
  logic [ADDR_W-1:0] v_rd_data [LANES];

  assign en = &v_ready;

  data_allocator #(.PLANES(PLANES), .LANES(LANES), .DEPTH(DEPTH)) u_alloc (
    .clk, .rst_n, .en, .start(alloc_start), .count(alloc_count), .busy(alloc_busy),
    .i_rd_en, .i_rd_addr, .i_rd_data, .p_rd_en, .p_rd_addr, .p_rd_data,
    .pe_valid, .pe_pt, .pe_phi, .pe_z
  );

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    pe_zi #(.W(W), .H(H), .Z_W(ZW), .ADDR_W(ADDR_W)) u_pe (
      .clk, .rst_n, .en, .in_valid(pe_valid[l]), .p0(pe_pt), .phi(pe_phi[l]), .z(pe_z[l]),
      .vote_valid(vv_valid[l]), .vote_addr(vv_addr[l]), .miss(miss[l])
    );
    buf_v #(.DEPTH(VDEPTH), .ADDR_W(ADDR_W)) u_buf_v (
      .clk, .rst_n, .wr_en(vv_valid[l] && en), .wr_data(vv_addr[l]), .wr_ready(v_ready[l]),
      .flush(v_flush), .rd_en(v_rd_en[l]), .rd_addr(v_rd_addr[l]), .rd_data(v_rd_data[l]),
      .rd_avail(v_avail[l]), .rd_count(v_count[l]), .rd_release(v_release[l]), .idle(v_idle[l])
    );
    assign vote_cast[l] = vote_done[l];
  end

  vote_execute_unit #(.LANES(LANES), .DEPTH(VDEPTH), .ADDR_W(ADDR_W)) u_veu (
    .clk, .rst_n, .dsi_base,
    .v_avail, .v_count, .v_rd_en, .v_rd_addr, .v_rd_data, .v_release,
    .m_araddr, .m_arvalid, .m_arready, .m_rdata, .m_rvalid, .m_rready,
    .m_awaddr, .m_awvalid, .m_awready, .m_wdata, .m_wstrb, .m_wvalid, .m_wready,
    .m_bvalid, .m_bready, .vote_done, .idle(veu_idle)
  );

  proportional_controller #(.DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .en, .i_avail, .i_count, .i_tag, .dsi_base, .p_avail, .i_release, .p_release,
    .alloc_start, .alloc_count, .alloc_busy, .v_flush, .v_idle(&v_idle), .veu_idle,
    .frame_done, .idle
  );

  assign vbuf_stall = !en && alloc_busy;
endmodule
