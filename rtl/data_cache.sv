// data_cache: register storage between image extraction and image convolution.
//
// It holds the projector (KS x KS, written once per run, one half-row beat at
// a time) and NBANK = 2 banks of one atom's image detail with the atom's
// row/column use masks and number. The banks form a ping-pong buffer: image
// extraction fills the bank at wr_ptr while the convolution reads the bank at
// rd_ptr, so the next atom is prefetched while the current one is processed.
// Every element is a register, so the whole window is read in one cycle.
// Interface (all synchronous):
//   img_clr     - zero the write bank (start of an atom)
//   img_wr      - write the elements selected by img_wr_mask of row img_wr_row
//   commit      - mark the write bank full, store its masks/tag, advance wr_ptr
//   wr_free     - the write bank may be filled
//   rd_valid    - the read bank holds a complete atom; take frees it
// The double buffer and register partitioning follow the paper; the flag
// handshake is this design's own.
module data_cache
  import recon_pkg::*;
#(
  parameter int N     = KS,
  parameter int NBANK = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  // projector writes: lanes 0..LANES-1 go to columns half*LANES + k
  input  logic               ker_wr,
  input  logic [$clog2(N)-1:0] ker_wr_row,
  input  logic [$clog2((N+LANES-1)/LANES)-1:0] ker_wr_half,
  input  ker_t               ker_wr_data [LANES],
  // image detail writes
  input  logic               img_clr,
  input  logic               img_wr,
  input  logic [$clog2(N)-1:0] img_wr_row,
  input  pix_t               img_wr_data [N],
  input  logic [N-1:0]       img_wr_mask,
  input  logic               commit,
  input  logic [N-1:0]       commit_row_use,
  input  logic [N-1:0]       commit_col_use,
  input  logic [31:0]        commit_tag,
  output logic               wr_free,
  output logic               both_full,
  // read side
  output logic               rd_valid,
  input  logic               take,
  output ker_t               ker [N][N],
  output pix_t               img [N][N],
  output logic [N-1:0]       row_use,
  output logic [N-1:0]       col_use,
  output logic [31:0]        tag
);
  localparam int BW = (NBANK > 1) ? $clog2(NBANK) : 1;

  pix_t               bank     [NBANK][N][N];
  logic [N-1:0]       bank_ru  [NBANK];
  logic [N-1:0]       bank_cu  [NBANK];
  logic [31:0]        bank_tag [NBANK];
  logic [NBANK-1:0]   full;
  logic [BW-1:0]      wr_ptr, rd_ptr;

  function automatic logic [BW-1:0] nxt(input logic [BW-1:0] p);
    return (int'(p) == NBANK - 1) ? '0 : p + 1'b1;
  endfunction

  // projector registers
  always_ff @(posedge clk)
    if (ker_wr)
      for (int k = 0; k < LANES; k++)
        if (int'(ker_wr_half) * LANES + k < N)
          ker[ker_wr_row][int'(ker_wr_half) * LANES + k] <= ker_wr_data[k];

  // image banks
  always_ff @(posedge clk) begin
    if (img_clr) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) bank[wr_ptr][i][j] <= '0;
    end else if (img_wr) begin
      for (int j = 0; j < N; j++)
        if (img_wr_mask[j]) bank[wr_ptr][img_wr_row][j] <= img_wr_data[j];
    end
    if (commit) begin
      bank_ru[wr_ptr]  <= commit_row_use;
      bank_cu[wr_ptr]  <= commit_col_use;
      bank_tag[wr_ptr] <= commit_tag;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full   <= '0;
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (commit) begin
        full[wr_ptr] <= 1'b1;
        wr_ptr       <= nxt(wr_ptr);
      end
      if (take) begin
        full[rd_ptr] <= 1'b0;
        rd_ptr       <= nxt(rd_ptr);
      end
    end
  end

  assign wr_free   = !full[wr_ptr];
  assign both_full = &full;
  assign rd_valid  = full[rd_ptr];
  assign img       = bank[rd_ptr];
  assign row_use   = bank_ru[rd_ptr];
  assign col_use   = bank_cu[rd_ptr];
  assign tag       = bank_tag[rd_ptr];

  a_commit: assert property (@(posedge clk) disable iff (!rst_n) !(commit && full[wr_ptr]))
    else $error("commit into a full bank");
  a_take: assert property (@(posedge clk) disable iff (!rst_n) !(take && !full[rd_ptr]))
    else $error("take from an empty bank");
  a_write: assert property (@(posedge clk) disable iff (!rst_n) !((img_clr || img_wr) && full[wr_ptr]))
    else $error("write into a full bank");
endmodule
