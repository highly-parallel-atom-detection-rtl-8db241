// boundary_extraction: turns the atom position grid into per-atom windows.
//
// The coordinate table in memory holds one 32-bit word per atom site, column
// in bits 15:0 and row in bits 31:16 (integer pixel position of the site
// centre), packed 16 per 512-bit beat. The block reads one beat at a time
// (single-beat bursts on its own AXI read ID) and, for each of its atoms,
// emits a descriptor: the image row/column of kernel element (0,0), the
// first and last image column inside the image, and the masks of kernel rows
// and columns that lie inside the image - the u(i,j) of the output equation,
// which the paper uses to normalise sites at the image edge.
// Timing: after start, one descriptor per cycle while desc_ready is high,
// plus one read round trip per 16 atoms. done pulses after the last
// descriptor. The table must start on a 64-byte boundary.
// Following the paper: one window per atom around its predefined coordinate.
// This design's own: the coordinate word format and the descriptor layout.
module boundary_extraction
  import recon_pkg::*;
#(
  parameter int N = KS,
  parameter logic [ID_W-1:0] RD_ID = ID_W'(1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  cfg_t        cfg,
  output logic        done,
  // AXI4 read channel
  output logic        m_arvalid,
  input  logic        m_arready,
  output axi_ax_t     m_ar,
  input  logic        m_rvalid,
  output logic        m_rready,
  input  axi_r_t      m_r,
  // descriptor stream
  output logic        desc_valid,
  input  logic        desc_ready,
  output atom_desc_t  desc
);
  localparam int HW = (N - 1) / 2;

  typedef enum logic [1:0] {S_IDLE, S_AR, S_R, S_EMIT} state_e;
  state_e state;

  logic [31:0]    idx;
  logic [BUS_W-1:0] beat;

  // descriptor of atom idx from the captured beat
  logic [DATA_W-1:0] word;
  int cx, cy, r0, c0, clo, chi, w, h;
  always_comb begin
    word = beat[idx[$clog2(LANES)-1:0] * DATA_W +: DATA_W];
    cx   = int'(word[15:0]);
    cy   = int'(word[31:16]);
    w    = int'(cfg.img_w);
    h    = int'(cfg.img_h);
    r0   = cy - HW;
    c0   = cx - HW;
    clo  = (c0 < 0) ? 0 : c0;
    chi  = (cx + HW > w - 1) ? w - 1 : cx + HW;
    desc = '0;
    desc.idx    = idx;
    desc.row0   = (DIM_W+2)'(r0);
    desc.col0   = (DIM_W+2)'(c0);
    desc.col_lo = DIM_W'(clo);
    desc.col_hi = DIM_W'(chi);
    for (int i = 0; i < N; i++) begin
      desc.row_use[i] = (r0 + i >= 0) && (r0 + i < h);
      desc.col_use[i] = (c0 + i >= 0) && (c0 + i < w);
    end
  end

  assign m_arvalid  = (state == S_AR);
  assign m_ar.id    = RD_ID;
  assign m_ar.addr  = cfg.coord_base + (ADDR_W'(idx >> $clog2(LANES)) << BEAT_B);
  assign m_ar.len   = 8'd0;
  assign m_rready   = (state == S_R);
  assign desc_valid = (state == S_EMIT);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
      done  <= 1'b0;
      beat  <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          idx <= '0;
          if (cfg.num_atoms == 0) done  <= 1'b1;
          else                    state <= S_AR;
        end
        S_AR: if (m_arready) state <= S_R;
        S_R:  if (m_rvalid) begin
          beat  <= m_r.data;
          state <= S_EMIT;
        end
        S_EMIT: if (desc_ready) begin
          idx <= idx + 1;
          if (idx + 1 == cfg.num_atoms) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (idx[$clog2(LANES)-1:0] == 4'(LANES - 1)) begin
            state <= S_AR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
