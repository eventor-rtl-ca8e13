// data_allocator: feeds the PE_Zi array from Buf_I and Buf_P.
//
// For each event k of the frame (k = 0 .. count-1) it reads x(Z0), y(Z0)
// from Buf_I once and sends it to all NPE processing elements for
// GROUPS = ceil(NZ / NPE) consecutive cycles. In group g, PE p receives the
// phi record and index of depth plane z = g*NPE + p, read from its own Buf_P
// port, so the PEs share the event while working on different planes (the
// last group may leave some PEs idle when NPE does not divide NZ).
// Both buffers are synchronous RAMs with read enable; the allocator issues
// addresses in one cycle and presents the data with pe_valid in the next.
// Everything advances only when en is high (no Buf_V is full), so a stall
// freezes addresses and data together. start begins a frame of count
// events; busy is high until the last pair has been handed out.
// Sharing one event between PEs that need different parameters follows the
// paper; the plane-interleaved assignment is this design's.
module data_allocator
  import eventor_pkg::*;
#(
  parameter int unsigned PLANES = NZ,
  parameter int unsigned LANES  = NPE,
  parameter int unsigned DEPTH  = MAX_EVENTS,
  localparam int unsigned AW  = $clog2(DEPTH),
  localparam int unsigned CW  = $clog2(DEPTH + 1),
  localparam int unsigned ZW  = (PLANES > 1) ? $clog2(PLANES) : 1,
  localparam int unsigned GROUPS = (PLANES + LANES - 1) / LANES,
  localparam int unsigned GW  = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          start,
  input  logic [CW-1:0] count,
  output logic          busy,
  // Buf_I read port
  output logic          i_rd_en,
  output logic [AW-1:0] i_rd_addr,
  input  point_t        i_rd_data,
  // Buf_P read ports
  output logic          p_rd_en,
  output logic [ZW-1:0] p_rd_addr [LANES],
  input  phi_t          p_rd_data [LANES],
  // to the PEs
  output logic          pe_valid [LANES],
  output point_t        pe_pt,
  output phi_t          pe_phi [LANES],
  output logic [ZW-1:0] pe_z [LANES]
);
  logic          active_q, s1_q;
  logic [CW-1:0] k_q, count_q;
  logic [GW-1:0] g_q;
  logic [ZW-1:0] z1_q [LANES];
  logic [LANES-1:0] zok1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0; s1_q <= 1'b0; k_q <= '0; g_q <= '0; count_q <= '0;
      zok1_q <= '0;
      for (int p = 0; p < LANES; p++) z1_q[p] <= '0;
    end else begin
      if (start && !active_q) begin
        active_q <= (count != '0);
        count_q  <= count;
        k_q      <= '0;
        g_q      <= '0;
      end else if (en) begin
        s1_q <= active_q;
        for (int p = 0; p < LANES; p++) begin
          z1_q[p]   <= ZW'(g_q * LANES + p);
          zok1_q[p] <= (g_q * LANES + p) < PLANES;
        end
        if (active_q) begin
          if (g_q == GW'(GROUPS - 1)) begin
            g_q <= '0;
            k_q <= k_q + CW'(1);
            if (k_q == count_q - CW'(1)) active_q <= 1'b0;
          end else begin
            g_q <= g_q + GW'(1);
          end
        end
      end
    end
  end

  assign i_rd_en   = en && active_q;
  assign p_rd_en   = en && active_q;
  assign i_rd_addr = k_q[AW-1:0];
  always_comb
    for (int p = 0; p < LANES; p++) begin
      p_rd_addr[p] = ZW'(g_q * LANES + p);
      pe_valid[p]  = s1_q && zok1_q[p];
      pe_phi[p]    = p_rd_data[p];
      pe_z[p]      = z1_q[p];
    end
  assign pe_pt = i_rd_data;
  assign busy  = active_q || s1_q;
endmodule
