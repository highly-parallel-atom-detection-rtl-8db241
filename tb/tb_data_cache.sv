// tb_data_cache: projector writes by half-row beats (pad lane dropped), and
// the two-bank ping-pong: a bank is cleared, partly written through masks,
// committed with masks and tag; the second bank is filled while the first is
// still full; every element read back is compared with a shadow copy, and
// the wr_free / rd_valid / both_full flags are checked at each step.
module tb_data_cache;
  import recon_pkg::*;
  localparam int N = KS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ker_wr = 0, img_clr = 0, img_wr = 0, commit = 0, take = 0;
  logic [4:0] ker_wr_row, img_wr_row;
  logic [0:0] ker_wr_half;
  ker_t ker_wr_data [LANES];
  pix_t img_wr_data [N];
  logic [N-1:0] img_wr_mask, commit_row_use, commit_col_use, row_use, col_use;
  logic [31:0] commit_tag, tag;
  logic wr_free, both_full, rd_valid;
  ker_t ker [N][N];
  pix_t img [N][N];
  data_cache dut (.*);

  ker_t sk [N][N];
  pix_t si [2][N][N];
  logic [N-1:0] sru [2], scu [2];

  task automatic check_flags(input bit f, input bit rv, input bit bf);
    checks += 3;
    if (wr_free !== f)    begin failures++; $display("wr_free %0b", wr_free); end
    if (rd_valid !== rv)  begin failures++; $display("rd_valid %0b", rd_valid); end
    if (both_full !== bf) begin failures++; $display("both_full %0b", both_full); end
  endtask

  task automatic fill_bank(input int b, input int tg);
    @(posedge clk) img_clr <= 1;
    @(posedge clk) img_clr <= 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) si[b][i][j] = 0;
    for (int i = 0; i < N; i++) begin
      logic [N-1:0] m;
      m = N'({$urandom, $urandom});
      for (int j = 0; j < N; j++) begin
        img_wr_data[j] <= 32'(tg * 100000 + i * 100 + j);
        if (m[j]) si[b][i][j] = 32'(tg * 100000 + i * 100 + j);
      end
      img_wr_mask <= m; img_wr_row <= 5'(i); img_wr <= 1;
      @(posedge clk);
    end
    img_wr <= 0;
    sru[b] = N'({$urandom, $urandom}); scu[b] = N'({$urandom, $urandom});
    commit_row_use <= sru[b]; commit_col_use <= scu[b]; commit_tag <= 32'(tg); commit <= 1;
    @(posedge clk) commit <= 0;
  endtask

  task automatic check_read(input int b, input int tg);
    @(negedge clk);
    checks += 4;
    if (tag != 32'(tg)) begin failures++; $display("tag %0d exp %0d", tag, tg); end
    if (row_use !== sru[b] || col_use !== scu[b]) begin failures++; $display("masks"); end
    begin
      int bad = 0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        if (img[i][j] !== si[b][i][j]) bad++;
        if (ker[i][j] !== sk[i][j]) bad++;
      end
      if (bad != 0) begin failures += 2; $display("%0d elements wrong", bad); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // projector: row i, half h, lanes k -> column h*16+k (< 31)
    for (int beat = 0; beat < N * 2; beat++) begin
      @(posedge clk);
      for (int k = 0; k < LANES; k++) ker_wr_data[k] <= $signed(32'(beat * 1000 + k - 500));
      for (int k = 0; k < LANES; k++) if ((beat % 2) * 16 + k < N) sk[beat / 2][(beat % 2) * 16 + k] = $signed(32'(beat * 1000 + k - 500));
      ker_wr_row <= 5'(beat / 2); ker_wr_half <= 1'(beat % 2); ker_wr <= 1;
    end
    @(posedge clk) ker_wr <= 0;
    @(negedge clk) check_flags(1, 0, 0);
    fill_bank(0, 1);
    @(negedge clk) check_flags(1, 1, 0);
    fill_bank(1, 2);                   // prefetch into the second bank
    @(negedge clk) check_flags(0, 1, 1);
    check_read(0, 1);
    @(posedge clk) take <= 1;
    @(posedge clk) take <= 0;
    @(negedge clk) check_flags(1, 1, 0);
    check_read(1, 2);
    fill_bank(0, 3);
    @(posedge clk) take <= 1;
    @(posedge clk) take <= 0;
    check_read(0, 3);
    @(posedge clk) take <= 1;
    @(posedge clk) take <= 0;
    @(negedge clk) check_flags(1, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
