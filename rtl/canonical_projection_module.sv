// canonical_projection_module: first pipeline stage of the accelerator,
// canonical back-projection P(Z0).
//
// Contains the AXI interface, the four input/intermediate buffers (Buf_H
// registers, Buf_E, Buf_P and Buf_I block RAMs, all double-buffered), the
// processing element PE_Z0 and the canonical controller. The DMA fills
// Buf_H/Buf_E/Buf_P through the AXI-Stream slave; a start instruction
// (cmd_valid, cmd_key) runs PE_Z0 over the frame, one event per cycle, and
// leaves x(Z0), y(Z0) in a Buf_I bank. Buf_I and Buf_P are read by the
// proportional projection module through the exported read ports, and their
// banks are released by it (i_release, p_release), which is the
// synchronisation between the two modules.
// Block content and connections follow the paper's architecture figure.
// Lint note: the linter reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable iff of assertions
// in the instantiated blocks. Every flip-flop uses the asynchronous reset.
module canonical_projection_module
  import eventor_pkg::*;
#(
  parameter int unsigned DEPTH  = MAX_EVENTS,
  parameter int unsigned PLANES = NZ,
  parameter int unsigned LANES  = NPE,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1),
  localparam int unsigned ZW = (PLANES > 1) ? $clog2(PLANES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // DMA stream
  input  logic [31:0]   s_tdata,
  input  logic [1:0]    s_tdest,
  input  logic          s_tlast,
  input  logic          s_tvalid,
  output logic          s_tready,
  // start instruction
  input  logic          cmd_valid,
  input  logic          cmd_key,
  input  logic [31:0]   cmd_base,
  output logic          cmd_ready,
  // Buf_I read side (to the proportional module)
  input  logic          i_rd_en,
  input  logic [AW-1:0] i_rd_addr,
  output point_t        i_rd_data,
  output logic          i_avail,
  output logic [CW-1:0] i_count,
  output logic [31:0]   i_tag,
  input  logic          i_release,
  // Buf_P read side (to the proportional module)
  input  logic          p_rd_en,
  input  logic [ZW-1:0] p_rd_addr [LANES],
  output phi_t          p_rd_data [LANES],
  output logic          p_avail,
  input  logic          p_release,
  // synchronisation and status
  input  logic          ppm_idle,
  output logic          key_wait,
  output logic          busy,
  output logic [15:0]   bad_beats
);
  logic   h_wr_en, h_wr_ready, e_wr_en, e_wr_last, e_wr_ready, p_wr_en, p_wr_ready;
  param_t h_wr_data, p_wr_data;
  point_t e_wr_data;
  param_t h_mat [9];
  logic   h_avail, h_release, pe_h_load;
  logic   e_avail, e_rd_en, e_release;
  logic [AW-1:0] e_rd_addr;
  logic [CW-1:0] e_count;
  point_t e_rd_data, pe_out;
  logic   pe_in_valid, pe_out_valid, i_commit, i_wr_free, i_all_free;
  logic [31:0] i_wr_tag;

  axi_interface u_axi (
    .clk, .rst_n, .s_tdata, .s_tdest, .s_tlast, .s_tvalid, .s_tready,
    .h_wr_en, .h_wr_data, .h_wr_ready,
    .e_wr_en, .e_wr_data, .e_wr_last, .e_wr_ready,
    .p_wr_en, .p_wr_data, .p_wr_ready, .bad_beats
  );

  buf_h u_buf_h (
    .clk, .rst_n, .wr_en(h_wr_en), .wr_data(h_wr_data), .wr_ready(h_wr_ready),
    .rd_h(h_mat), .rd_avail(h_avail), .rd_release(h_release)
  );

  buf_e #(.DEPTH(DEPTH)) u_buf_e (
    .clk, .rst_n, .wr_en(e_wr_en), .wr_data(e_wr_data), .wr_last(e_wr_last),
    .wr_ready(e_wr_ready), .rd_en(e_rd_en), .rd_addr(e_rd_addr), .rd_data(e_rd_data),
    .rd_avail(e_avail), .rd_count(e_count), .rd_release(e_release)
  );

  buf_p #(.PLANES(PLANES), .NRD(LANES)) u_buf_p (
    .clk, .rst_n, .wr_en(p_wr_en), .wr_data(p_wr_data), .wr_ready(p_wr_ready),
    .rd_en(p_rd_en), .rd_addr(p_rd_addr), .rd_data(p_rd_data),
    .rd_avail(p_avail), .rd_release(p_release)
  );

  pe_z0 u_pe_z0 (
    .clk, .rst_n, .h_load(pe_h_load), .h(h_mat),
    .in_valid(pe_in_valid), .in_pt(e_rd_data), .out_valid(pe_out_valid), .out_pt(pe_out)
  );

  buf_i #(.DEPTH(DEPTH)) u_buf_i (
    .clk, .rst_n, .wr_en(pe_out_valid), .wr_data(pe_out), .wr_commit(i_commit), .wr_tag(i_wr_tag),
    .wr_free(i_wr_free), .rd_en(i_rd_en), .rd_addr(i_rd_addr), .rd_data(i_rd_data),
    .rd_avail(i_avail), .rd_count(i_count), .rd_tag(i_tag), .rd_release(i_release), .all_free(i_all_free)
  );

  canonical_controller #(.DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_key, .cmd_base, .cmd_ready,
    .h_avail, .h_release, .pe_h_load,
    .e_avail, .e_count, .e_rd_en, .e_rd_addr, .e_release,
    .pe_valid(pe_in_valid), .pe_out_valid,
    .i_wr_free, .i_all_free, .i_commit, .i_tag(i_wr_tag), .ppm_idle, .key_wait, .busy
  );
endmodule
