// tb_image_extraction: projector load and window fetch into the data cache.
// A random 80 x 64 image and projector sit in a stalling memory model; 30
// descriptors (sites at random positions, on edges and fully outside) are
// offered with random gaps. Each window that reaches the read side of the
// data cache is compared element by element with the image (zero outside),
// the projector and its sum are compared with memory, the number of beats
// read must be what the windows need, and the consumer is sometimes slow so
// that both banks fill (prefetch).
module tb_image_extraction;
  import recon_pkg::*;
  localparam int W = 80, H = 64, NA = 30, KB0 = 400, N = KS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, ker_loaded;
  cfg_t cfg;
  logic signed [MS_W-1:0] ker_sum;
  logic m_arvalid, m_arready, m_rvalid, m_rready;
  axi_ax_t m_ar;
  axi_r_t m_r;
  logic desc_valid = 0, desc_ready;
  atom_desc_t desc;
  logic ker_wr, img_clr, img_wr, commit, wr_free, both_full, rd_valid, take = 0;
  logic [4:0] ker_wr_row, img_wr_row;
  logic [0:0] ker_wr_half;
  ker_t ker_wr_data [LANES];
  pix_t img_wr_data [N];
  logic [N-1:0] img_wr_mask, commit_row_use, commit_col_use, row_use, col_use;
  logic [31:0] commit_tag, tag;
  ker_t ker [N][N];
  pix_t img [N][N];
  logic awv = 0, awr, wv = 0, wr_, bv, br = 1;
  axi_ax_t aw = '0;
  axi_w_t  w = '0;
  axi_b_t  b;

  image_extraction dut (.clk, .rst_n, .start, .cfg, .ker_loaded, .ker_sum,
    .m_arvalid, .m_arready, .m_ar, .m_rvalid, .m_rready, .m_r,
    .desc_valid, .desc_ready, .desc,
    .ker_wr, .ker_wr_row, .ker_wr_half, .ker_wr_data,
    .img_clr, .img_wr, .img_wr_row, .img_wr_data, .img_wr_mask,
    .commit, .commit_row_use, .commit_col_use, .commit_tag, .wr_free);
  data_cache u_cache (.clk, .rst_n, .ker_wr, .ker_wr_row, .ker_wr_half, .ker_wr_data,
    .img_clr, .img_wr, .img_wr_row, .img_wr_data, .img_wr_mask,
    .commit, .commit_row_use, .commit_col_use, .commit_tag, .wr_free, .both_full,
    .rd_valid, .take, .ker, .img, .row_use, .col_use, .tag);
  axi_mem_model #(.DEPTH(512), .STALL(3)) u_mem (.clk, .rst_n,
    .arvalid(m_arvalid), .arready(m_arready), .ar(m_ar), .rvalid(m_rvalid), .rready(m_rready), .r(m_r),
    .awvalid(awv), .awready(awr), .aw, .wvalid(wv), .wready(wr_), .w, .bvalid(bv), .bready(br), .b);

  int xs [NA], ys [NA];
  int kv [N][N];
  longint ksum_ref = 0;
  int n_win = 0, n_both = 0, beats = 0, beats_ref = 0;

  function automatic logic [31:0] pix(input int y, input int x);
    return u_mem.mem[(y * W + x) / 16][((y * W + x) % 16) * 32 +: 32];
  endfunction

  always @(posedge clk) begin
    if (rst_n && both_full) n_both++;
    if (rst_n && m_rvalid && m_rready) beats++;
  end

  // consumer: check the window at the read side, then take it
  initial begin
    forever begin
      @(posedge clk);
      take <= 0;
      if (rst_n && rd_valid && !take) begin
        int n, bad;
        repeat ((n_win % 4 == 1) ? 150 : 0) @(posedge clk);   // sometimes slow
        n = int'(tag);
        bad = 0;
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++) begin
            int y, x;
            logic [31:0] e;
            y = ys[n] - 15 + i; x = xs[n] - 15 + j;
            e = (y >= 0 && y < H && x >= 0 && x < W) ? pix(y, x) : 0;
            if (img[i][j] !== e) bad++;
            if (ker[i][j] !== kv[i][j]) bad++;
          end
        checks += 2;
        if (bad != 0) begin failures++; $display("window %0d: %0d elements wrong", n, bad); end
        if (n != n_win) begin failures++; $display("window %0d out of order", n); end
        n_win++;
        take <= 1;
      end
    end
  end

  initial begin
    for (int wd = 0; wd < 512; wd++) u_mem.mem[wd] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                                                     $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        kv[i][j] = int'($urandom) >>> 8;
        u_mem.mem[KB0 + i * 2 + j / 16][(j % 16) * 32 +: 32] = kv[i][j];
        ksum_ref += kv[i][j];
      end
    for (int n = 0; n < NA; n++) begin
      xs[n] = (n == 0) ? 0 : (n == 1) ? W - 1 : (n == 2) ? W + 20 : $urandom % (W + 10);
      ys[n] = (n == 0) ? 0 : (n == 1) ? H - 1 : (n == 2) ? 5 : $urandom % (H + 10);
    end
    cfg = '0;
    cfg.img_base = 0; cfg.ker_base = KB0 * 64; cfg.img_w = W; cfg.img_h = H; cfg.num_atoms = NA;
    beats_ref = N * 2;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    for (int n = 0; n < NA; n++) begin
      atom_desc_t d;
      int lo, hi, nr;
      d = '0;
      d.idx = n; d.row0 = 18'(ys[n] - 15); d.col0 = 18'(xs[n] - 15);
      lo = (xs[n] - 15 < 0) ? 0 : xs[n] - 15;
      hi = (xs[n] + 15 > W - 1) ? W - 1 : xs[n] + 15;
      d.col_lo = 16'(lo); d.col_hi = 16'(hi);
      nr = 0;
      for (int i = 0; i < N; i++) begin
        d.row_use[i] = (ys[n] - 15 + i >= 0) && (ys[n] - 15 + i < H);
        d.col_use[i] = (xs[n] - 15 + i >= 0) && (xs[n] - 15 + i < W);
        nr += int'(d.row_use[i]);
      end
      if (d.col_use != 0) beats_ref += nr * (hi / 16 - lo / 16 + 1);
      if ($urandom % 2 == 1) begin
        desc_valid <= 0;
        repeat ($urandom % 20 + 1) @(posedge clk);
      end
      desc <= d; desc_valid <= 1;
      do @(posedge clk); while (!desc_ready);
    end
    desc_valid <= 0;
    repeat (600) @(posedge clk);
    checks += 5;
    if (!ker_loaded) begin failures++; $display("projector not loaded"); end
    if (ker_sum != MS_W'(ksum_ref)) begin failures++; $display("ker_sum %0d expected %0d", ker_sum, ksum_ref); end
    if (n_win != NA) begin failures++; $display("%0d windows, expected %0d", n_win, NA); end
    if (beats != beats_ref) begin failures++; $display("%0d beats read, expected %0d", beats, beats_ref); end
    if (n_both == 0) begin failures++; $display("both banks never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
