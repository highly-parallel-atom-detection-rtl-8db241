// tb_boundary_extraction: window descriptors from the coordinate table.
// 40 atoms (three table beats, the last one partial) at random positions on
// a 64 x 48 image, including sites on and beyond every edge. For each atom
// the descriptor's origin, clipped column range and row/column masks are
// compared with values computed here pixel by pixel; the descriptor stream
// is stalled at random and done must pulse once after the last descriptor.
module tb_boundary_extraction;
  import recon_pkg::*;
  localparam int W = 64, H = 48, NA = 40, CB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, done, desc_valid, desc_ready = 0;
  cfg_t cfg;
  atom_desc_t desc;
  logic m_arvalid, m_arready, m_rvalid, m_rready;
  axi_ax_t m_ar;
  axi_r_t  m_r;
  logic awv = 0, awr, wv = 0, wr_, bv, br = 1;
  axi_ax_t aw = '0;
  axi_w_t  w = '0;
  axi_b_t  b;

  boundary_extraction dut (.clk, .rst_n, .start, .cfg, .done, .m_arvalid, .m_arready, .m_ar,
                           .m_rvalid, .m_rready, .m_r, .desc_valid, .desc_ready, .desc);
  axi_mem_model #(.DEPTH(64), .STALL(4)) u_mem (.clk, .rst_n,
    .arvalid(m_arvalid), .arready(m_arready), .ar(m_ar), .rvalid(m_rvalid), .rready(m_rready), .r(m_r),
    .awvalid(awv), .awready(awr), .aw, .wvalid(wv), .wready(wr_), .w, .bvalid(bv), .bready(br), .b);

  int xs [NA], ys [NA];
  int n_got = 0, n_done = 0;
  always @(posedge clk) begin
    desc_ready <= ($urandom % 3) != 0;
    if (rst_n && done) n_done++;
    if (rst_n && desc_valid && desc_ready) begin
      int n, lo, hi;
      logic [KS-1:0] ru, cu;
      n = n_got;
      lo = W; hi = -1;
      for (int i = 0; i < KS; i++) begin
        ru[i] = (ys[n] - 15 + i >= 0) && (ys[n] - 15 + i < H);
        cu[i] = (xs[n] - 15 + i >= 0) && (xs[n] - 15 + i < W);
        if (cu[i] && xs[n] - 15 + i < lo) lo = xs[n] - 15 + i;
        if (cu[i] && xs[n] - 15 + i > hi) hi = xs[n] - 15 + i;
      end
      checks += 5;
      if (desc.idx != 32'(n)) begin failures++; $display("idx %0d exp %0d", desc.idx, n); end
      if (int'(desc.row0) != ys[n] - 15 || int'(desc.col0) != xs[n] - 15) begin failures++; $display("atom %0d origin", n); end
      if (desc.row_use !== ru) begin failures++; $display("atom %0d row_use %h exp %h", n, desc.row_use, ru); end
      if (desc.col_use !== cu) begin failures++; $display("atom %0d col_use", n); end
      if (cu != 0 && (int'(desc.col_lo) != lo || int'(desc.col_hi) != hi)) begin
        failures++; $display("atom %0d cols %0d..%0d exp %0d..%0d", n, desc.col_lo, desc.col_hi, lo, hi);
      end
      n_got <= n_got + 1;
    end
  end

  initial begin
    for (int n = 0; n < NA; n++) begin
      xs[n] = (n < 4) ? (n * 22) : $urandom % (W + 40);
      ys[n] = (n < 4) ? (47 - n) : $urandom % (H + 40);
      if (n == 4) begin xs[n] = W - 1; ys[n] = 0; end
      if (n == 5) begin xs[n] = W + 15; ys[n] = H + 14; end
      u_mem.mem[CB + n / 16][(n % 16) * 32 +: 32] = {16'(ys[n]), 16'(xs[n])};
    end
    cfg = '0;
    cfg.coord_base = CB * 64; cfg.num_atoms = NA; cfg.img_w = W; cfg.img_h = H;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    repeat (2000) @(posedge clk);
    checks += 2;
    if (n_got != NA) begin failures++; $display("%0d descriptors, expected %0d", n_got, NA); end
    if (n_done != 1) begin failures++; $display("done pulses %0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
