// axi_rd_arb: shares one AXI4 read channel between two read managers.
//
// Address requests are granted round-robin; a request that has been
// presented keeps its grant until accepted, as AXI requires. The outgoing
// ARID is the manager's number, and read data are routed back by RID, so
// both managers may have bursts outstanding at once and their data may
// arrive in any order the memory chooses.
// The read data bus is wired through to both managers unchanged (only the
// valid is steered), and the managers' own ARIDs are replaced, so most
// output bits are plain wires: this is intended, the block is a router.
// The round-robin policy and the ID scheme are this design's own; the
// published design shows a single memory path.
module axi_rd_arb
  import recon_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // managers
  input  logic    s_arvalid [2],
  output logic    s_arready [2],
  input  axi_ax_t s_ar      [2],
  output logic    s_rvalid  [2],
  input  logic    s_rready  [2],
  output axi_r_t  s_r       [2],
  // to memory
  output logic    m_arvalid,
  input  logic    m_arready,
  output axi_ax_t m_ar,
  input  logic    m_rvalid,
  output logic    m_rready,
  input  axi_r_t  m_r
);
  logic gnt, last_gnt, hold;

  always_comb begin
    if (hold)                           gnt = last_gnt;
    else if (s_arvalid[0] && s_arvalid[1]) gnt = !last_gnt;
    else                                gnt = s_arvalid[1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_gnt <= 1'b1;
      hold     <= 1'b0;
    end else begin
      if (m_arvalid) last_gnt <= gnt;
      hold <= m_arvalid && !m_arready;
    end
  end

  always_comb begin
    m_arvalid  = s_arvalid[gnt];
    m_ar       = s_ar[gnt];
    m_ar.id    = ID_W'(gnt);
    for (int k = 0; k < 2; k++) begin
      s_arready[k] = m_arready && (gnt == 1'(k));
      s_rvalid[k]  = m_rvalid && (m_r.id == ID_W'(k));
      s_r[k]       = m_r;
    end
    m_rready = s_rready[m_r.id == ID_W'(1) ? 1 : 0];
  end

  a_rid: assert property (@(posedge clk) disable iff (!rst_n) m_rvalid |-> m_r.id < 2)
    else $error("read data with unknown ID");
endmodule
