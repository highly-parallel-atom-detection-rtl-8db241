// image_extraction: fetches the projector and each atom's image detail.
//
// At the start of a run it reads the projector with one burst of
// KS * KROW_BEATS beats: in memory each kernel row is padded to two 512-bit
// beats (elements 0..15 and 16..30 plus one pad word). Every beat is split
// into 16 32-bit elements and written into the data cache; the elements are
// also summed to the kernel sum S of the output equation.
// Then, per atom descriptor, it clears a free data-cache bank and issues one
// read burst per kernel row that lies inside the image, back to back without
// waiting for data. A burst starts at the 64-byte beat holding the window's
// first column and covers 2 or 3 beats; each returning beat is split into 16
// pixels, and the pixels that belong to the window are written into their
// kernel column (a 16-to-31 scatter). Pixels outside the image stay zero.
// After the last beat the bank is committed with the atom's masks, and the
// block takes the next descriptor as soon as the other bank is free, so the
// next atom is fetched while the current one is convolved.
// Image rows must start on a beat boundary (width a multiple of 16 pixels).
// The kernel write data are the read-data lanes themselves (a wire), and
// ARID, the low address bits and the high ARLEN bits are constant; read
// response codes are not examined.
// Following the paper: 512-bit bursts decoded to 32-bit elements, the padded
// two-beat kernel rows, the double-buffered prefetch. This design's own: the
// projector is loaded once per run (one kernel serves every site), unaligned
// windows are read from aligned beats, all rows are requested back to back.
module image_extraction
  import recon_pkg::*;
#(
  parameter int N = KS,
  parameter logic [ID_W-1:0] RD_ID = ID_W'(0)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cfg_t          cfg,
  output logic          ker_loaded,
  output logic signed [DATA_W+2*$clog2(N)-1:0] ker_sum,
  // AXI4 read channel
  output logic          m_arvalid,
  input  logic          m_arready,
  output axi_ax_t       m_ar,
  input  logic          m_rvalid,
  output logic          m_rready,
  input  axi_r_t        m_r,
  // descriptors
  input  logic          desc_valid,
  output logic          desc_ready,
  input  atom_desc_t    desc,
  // data cache write side
  output logic          ker_wr,
  output logic [$clog2(N)-1:0] ker_wr_row,
  output logic [$clog2((N+LANES-1)/LANES)-1:0] ker_wr_half,
  output ker_t          ker_wr_data [LANES],
  output logic          img_clr,
  output logic          img_wr,
  output logic [$clog2(N)-1:0] img_wr_row,
  output pix_t          img_wr_data [N],
  output logic [N-1:0]  img_wr_mask,
  output logic          commit,
  output logic [N-1:0]  commit_row_use,
  output logic [N-1:0]  commit_col_use,
  output logic [31:0]   commit_tag,
  input  logic          wr_free
);
  localparam int RB   = (N + LANES - 1) / LANES;   // beats per kernel row
  localparam int KB   = N * RB;                     // beats of the projector
  localparam int LG   = $clog2(LANES);
  localparam int SW   = DATA_W + 2 * $clog2(N);
  localparam int IW   = $clog2(N);

  typedef enum logic [2:0] {S_IDLE, S_KAR, S_KR, S_DESC, S_ROWS} state_e;
  state_e state;

  atom_desc_t      d;
  logic [$clog2(KB)-1:0] kbeat;
  logic            ar_pend;
  logic [IW-1:0]   ar_i, r_i;
  logic [1:0]      rb;                   // beat within the current row burst

  // next kernel row after 'from' that lies inside the image
  function automatic logic [IW:0] next_row(input logic [N-1:0] m, input int from);
    for (int k = 0; k < N; k++)
      if (k > from && m[k]) return {1'b1, IW'(k)};
    return '0;
  endfunction

  logic [IW:0] ar_nxt, r_nxt, first;
  assign ar_nxt = next_row(d.row_use, int'(ar_i));
  assign r_nxt  = next_row(d.row_use, int'(r_i));
  assign first  = next_row(desc.row_use, -1);

  // beat-aligned start column and beats per row of the current window
  logic [DIM_W-1:0] col_al;
  logic [1:0]       nbeats;
  assign col_al = {d.col_lo[DIM_W-1:LG], LG'(0)};
  assign nbeats = 2'(d.col_hi[DIM_W-1:LG] - d.col_lo[DIM_W-1:LG]) + 2'd1;

  // read address of window row ar_i
  logic [ADDR_W-1:0] pix_off;
  int img_row;
  assign img_row = int'(d.row0) + int'(ar_i);
  assign pix_off = ADDR_W'(img_row) * ADDR_W'(cfg.img_w) + ADDR_W'(col_al);

  always_comb begin
    m_ar.id   = RD_ID;
    m_arvalid = 1'b0;
    m_ar.addr = '0;
    m_ar.len  = '0;
    if (state == S_KAR) begin
      m_arvalid = 1'b1;
      m_ar.addr = cfg.ker_base;
      m_ar.len  = 8'(KB - 1);
    end else if (state == S_ROWS && ar_pend) begin
      m_arvalid = 1'b1;
      m_ar.addr = cfg.img_base + (pix_off << $clog2(DATA_W / 8));
      m_ar.len  = 8'(nbeats - 2'd1);
    end
  end
  assign m_rready = (state == S_KR) || (state == S_ROWS);

  // projector beat to the cache
  logic signed [SW-1:0] beat_sum;
  always_comb begin
    ker_wr      = (state == S_KR) && m_rvalid;
    ker_wr_row  = IW'(kbeat / RB);
    ker_wr_half = ($bits(ker_wr_half))'(kbeat % RB);
    beat_sum    = '0;
    for (int k = 0; k < LANES; k++) begin
      ker_wr_data[k] = m_r.data[k*DATA_W +: DATA_W];
      if (int'(ker_wr_half) * LANES + k < N) beat_sum += SW'(ker_wr_data[k]);
    end
  end

  // image beat scatter into kernel columns
  logic signed [DIM_W+2:0] beat_col;
  always_comb begin
    img_wr     = (state == S_ROWS) && m_rvalid;
    img_wr_row = r_i;
    beat_col   = $signed({3'b0, col_al}) + $signed((DIM_W+3)'({rb, LG'(0)}));
    for (int j = 0; j < N; j++) begin
      int lane;
      lane = int'(d.col0) + j - int'(beat_col);
      img_wr_mask[j] = d.col_use[j] && lane >= 0 && lane < LANES;
      img_wr_data[j] = m_r.data[(lane & (LANES - 1)) * DATA_W +: DATA_W];
    end
  end

  assign desc_ready     = (state == S_DESC) && wr_free && !commit && !start;
  assign img_clr        = desc_valid && desc_ready;
  assign commit_row_use = d.row_use;
  assign commit_col_use = d.col_use;
  assign commit_tag     = d.idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ker_loaded <= 1'b0;
      ker_sum    <= '0;
      kbeat      <= '0;
      commit     <= 1'b0;
      ar_pend    <= 1'b0;
      ar_i       <= '0;
      r_i        <= '0;
      rb         <= '0;
      d          <= '0;
    end else begin
      commit <= 1'b0;
      case (state)
        S_IDLE, S_DESC: begin
          if (start) begin
            ker_loaded <= 1'b0;
            ker_sum    <= '0;
            kbeat      <= '0;
            state      <= S_KAR;
          end else if (state == S_DESC && desc_valid && desc_ready) begin
            d       <= desc;
            ar_i    <= first[IW-1:0];
            r_i     <= first[IW-1:0];
            rb      <= '0;
            ar_pend <= first[IW] && (desc.col_use != '0);
            state   <= S_ROWS;
            if (!first[IW] || desc.col_use == '0) begin
              // window entirely outside the image: commit the cleared bank
              commit <= 1'b1;
              state  <= S_DESC;
            end
          end
        end
        S_KAR: if (m_arready) state <= S_KR;
        S_KR: if (m_rvalid) begin
          ker_sum <= ker_sum + beat_sum;
          kbeat   <= kbeat + 1'b1;
          if (m_r.last) begin
            ker_loaded <= 1'b1;
            state      <= S_DESC;
          end
        end
        S_ROWS: begin
          if (ar_pend && m_arready) begin
            ar_i    <= ar_nxt[IW-1:0];
            ar_pend <= ar_nxt[IW];
          end
          if (m_rvalid) begin
            if (m_r.last) begin
              rb  <= '0;
              r_i <= r_nxt[IW-1:0];
              if (!r_nxt[IW]) begin
                commit <= 1'b1;
                state  <= S_DESC;
              end
            end else begin
              rb <= rb + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
