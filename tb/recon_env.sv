// recon_env: end-to-end test bench environment for reconstruction_ip.
//
// It builds a synthetic tweezer-array scene in the memory model: a
// Gaussian point-spread function of width SIGMA, a grid of NA_X x NA_Y
// sites spaced SP pixels apart starting at (OFS, OFS), each site occupied at
// random and then lit with amplitude AMP on a background BG plus noise.
// The projector is the pseudo-inverse of the PSF seen as a vector,
// K = PSF / sum(PSF^2) in Q16, so an occupied site reconstructs to about
// AMP + 2*BG. N_OUT extra sites lie outside the image. The host side
// programs the registers over AXI4-Lite, starts the core, polls DONE, and
// then compares every emission and state in memory with
//   - a bit-exact model of the output equation in this file, and
//   - the real-valued equation (difference must stay below 1.5 LSB), and
//   - the true occupancy of the site.
// It repeats this RUNS times and counts how often each mechanism of the
// design occurred; a mechanism that never occurs is a failure. If
// MAX_CYCLES > 0 the run time is checked against it.
module recon_env
  import recon_pkg::*;
#(
  parameter int IMG_W  = 64,
  parameter int IMG_H  = 64,
  parameter int NA_X   = 3,
  parameter int NA_Y   = 3,
  parameter int SP     = 25,
  parameter int OFS    = 3,
  parameter int N_OUT  = 0,
  parameter int STALL  = 0,
  parameter int RUNS   = 1,
  parameter int MAX_CYCLES = 0,
  parameter bit NEED_ALL_MECH = 1'b1,
  parameter int WATCHDOG = 2_000_000
) ();
  localparam int NATOM     = NA_X * NA_Y + N_OUT;
  localparam int IMG_BEATS = IMG_W * IMG_H / LANES;
  localparam int KER_BEAT0 = IMG_BEATS;
  localparam int CRD_BEAT0 = KER_BEAT0 + KS * KROW_BEATS;
  localparam int OUT_BEAT0 = CRD_BEAT0 + (NATOM + LANES - 1) / LANES;
  localparam int ST_BEAT0  = OUT_BEAT0 + (NATOM + LANES - 1) / LANES;
  localparam int DEPTH     = ST_BEAT0 + (NATOM + BUS_W - 1) / BUS_W + 1;
  localparam real SIGMA = 2.5;
  localparam real AMP   = 400.0;
  localparam int  BG    = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  // ---------------- DUT and memory ----------------
  logic [7:0]  awaddr, araddr;
  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        arvalid = 0, arready, rvalid, rready = 1;

  logic    m_arvalid, m_arready, m_rvalid, m_rready, m_awvalid, m_awready, m_wvalid, m_wready, m_bvalid, m_bready;
  axi_ax_t m_ar, m_aw;
  axi_r_t  m_r;
  axi_w_t  m_w;
  axi_b_t  m_b;

  reconstruction_ip dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .m_axi_arvalid(m_arvalid), .m_axi_arready(m_arready), .m_axi_ar(m_ar),
    .m_axi_rvalid(m_rvalid), .m_axi_rready(m_rready), .m_axi_r(m_r),
    .m_axi_awvalid(m_awvalid), .m_axi_awready(m_awready), .m_axi_aw(m_aw),
    .m_axi_wvalid(m_wvalid), .m_axi_wready(m_wready), .m_axi_w(m_w),
    .m_axi_bvalid(m_bvalid), .m_axi_bready(m_bready), .m_axi_b(m_b));

  axi_mem_model #(.DEPTH(DEPTH), .STALL(STALL)) u_mem (
    .clk, .rst_n,
    .arvalid(m_arvalid), .arready(m_arready), .ar(m_ar),
    .rvalid(m_rvalid), .rready(m_rready), .r(m_r),
    .awvalid(m_awvalid), .awready(m_awready), .aw(m_aw),
    .wvalid(m_wvalid), .wready(m_wready), .w(m_w),
    .bvalid(m_bvalid), .bready(m_bready), .b(m_b));

  // ---------------- mechanism counters ----------------
  int n_prefetch = 0, n_edge = 0, n_row3 = 0, n_row2 = 0, n_outside = 0;
  int n_credit_stall = 0, n_wr_stall = 0, n_arb_conflict = 0, n_partial_wr = 0, n_mem_stall = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (dut.img_wr && dut.inflight != 0)                    n_prefetch     <= n_prefetch + 1;
    if (dut.fifo_pop && dut.fifo_out.ms != dut.ker_sum)     n_edge         <= n_edge + 1;
    if (m_arvalid && m_arready && m_ar.id == 0 && m_ar.len == 8'd2) n_row3 <= n_row3 + 1;
    if (m_arvalid && m_arready && m_ar.id == 0 && m_ar.len == 8'd1) n_row2 <= n_row2 + 1;
    if (dut.desc_valid && dut.desc_ready && (dut.desc.row_use == '0 || dut.desc.col_use == '0)) n_outside <= n_outside + 1;
    if (dut.rd_valid && dut.ker_loaded && !dut.take)        n_credit_stall <= n_credit_stall + 1;
    if (dut.res_valid && !dut.res_ready)                    n_wr_stall     <= n_wr_stall + 1;
    if (dut.arb_arvalid[0] && dut.arb_arvalid[1])           n_arb_conflict <= n_arb_conflict + 1;
    if (m_wvalid && m_wready && m_w.strb != '1)             n_partial_wr   <= n_partial_wr + 1;
    if (m_rvalid && !m_rready || (STALL > 0 && !m_rvalid && u_mem.rq.size() > 0)) n_mem_stall <= n_mem_stall + 1;
  end

  // ---------------- host bus tasks ----------------
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(posedge clk);
    awaddr <= a; wdata <= d; wstrb <= 4'hf; awvalid <= 1; wvalid <= 1;
    do @(posedge clk); while (!awready);
    awvalid <= 0; wvalid <= 0;
    while (!bvalid) @(posedge clk);
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(posedge clk);
    araddr <= a; arvalid <= 1;
    do @(posedge clk); while (!arready);
    arvalid <= 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
  endtask

  // ---------------- scene ----------------
  int  kq [KS][KS];
  bit  occ [NATOM];
  int  ax [NATOM], ay [NATOM];
  longint ksum;

  function automatic void put32(input int word_idx, input logic [31:0] v);
    u_mem.mem[word_idx / LANES][(word_idx % LANES) * 32 +: 32] = v;
  endfunction
  function automatic logic [31:0] get32(input int word_idx);
    return u_mem.mem[word_idx / LANES][(word_idx % LANES) * 32 +: 32];
  endfunction

  task automatic build_scene(input int run);
    real psf [KS][KS];
    real s2;
    s2 = 0.0;
    for (int i = 0; i < KS; i++)
      for (int j = 0; j < KS; j++) begin
        psf[i][j] = $exp(-((i - KS/2) ** 2 + (j - KS/2) ** 2) / (2.0 * SIGMA * SIGMA));
        s2 += psf[i][j] * psf[i][j];
      end
    ksum = 0;
    for (int w = 0; w < DEPTH; w++) u_mem.mem[w] = '0;
    for (int i = 0; i < KS; i++)
      for (int j = 0; j < KS; j++) begin
        kq[i][j] = int'($rtoi(psf[i][j] / s2 * 65536.0 + 0.5));
        ksum += kq[i][j];
        put32(KER_BEAT0 * LANES + i * KROW_BEATS * LANES + j, kq[i][j]);
      end
    for (int n = 0; n < NATOM; n++) begin
      if (n < NA_X * NA_Y) begin
        ax[n]  = OFS + (n % NA_X) * SP;
        ay[n]  = OFS + (n / NA_X) * SP + (run % 2);
        occ[n] = ($urandom % 2) == 1;
      end else begin
        ax[n]  = (n % 2) ? IMG_W + 40 : 100 + n;      // far outside the image
        ay[n]  = (n % 2) ? 7 : IMG_H + 50;
        occ[n] = 1'b0;
      end
      put32(CRD_BEAT0 * LANES + n, {16'(ay[n]), 16'(ax[n])});
    end
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++)
        put32(y * IMG_W + x, 32'(BG + int'($urandom % 5) - 2));
    for (int n = 0; n < NA_X * NA_Y; n++)
      if (occ[n])
        for (int y = ay[n] - 19; y <= ay[n] + 19; y++)
          for (int x = ax[n] - 19; x <= ax[n] + 19; x++)
            if (y >= 0 && y < IMG_H && x >= 0 && x < IMG_W && (x - ax[n]) ** 2 + (y - ay[n]) ** 2 < 400)
              put32(y * IMG_W + x, get32(y * IMG_W + x) + 32'($rtoi(
                    AMP * $exp(-((x - ax[n]) ** 2 + (y - ay[n]) ** 2) / (2.0 * SIGMA * SIGMA)) + 0.5)));
  endtask

  // bit-exact model of the output equation, written directly from its
  // definition: P = sum K*I, M = sum K*u, S = sum K, ratio = trunc(|M|*2^RF/|S|)
  // (saturated below 4), emission = floor(P*ratio / 2^(KFRAC+RF-OUT_FRAC))
  task automatic reference(input int n, output logic signed [31:0] emis, output real exact);
    longint p, m, q;
    logic signed [127:0] t;
    p = 0; m = 0;
    for (int i = 0; i < KS; i++)
      for (int j = 0; j < KS; j++) begin
        int yy, xx;
        yy = ay[n] - KS/2 + i;
        xx = ax[n] - KS/2 + j;
        if (yy >= 0 && yy < IMG_H && xx >= 0 && xx < IMG_W) begin
          p += longint'(kq[i][j]) * longint'(get32(yy * IMG_W + xx));
          m += kq[i][j];
        end
      end
    q = (m << RF) / ksum;
    if (q > (1 << (RF + 2)) - 1) q = (1 << (RF + 2)) - 1;
    t = (128'(p) * 128'(q)) >>> (KFRAC + RF - OUT_FRAC);
    emis  = 32'(t);
    exact = real'(p) * real'(m) / real'(ksum) / 65536.0 * 256.0;
  endtask

  logic signed [31:0] threshold;
  assign threshold = 32'((int'(AMP) / 2 + 2 * BG) * (1 << OUT_FRAC));

  initial begin
    logic [31:0] v;
    int t0, t1, n_occ, n_det;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < RUNS; run++) begin
      build_scene(run);
      wr(8'h10, 32'(0));                    wr(8'h14, 0);
      wr(8'h18, 32'(KER_BEAT0 * 64));       wr(8'h1C, 0);
      wr(8'h20, 32'(CRD_BEAT0 * 64));       wr(8'h24, 0);
      wr(8'h28, 32'(OUT_BEAT0 * 64));       wr(8'h2C, 0);
      wr(8'h30, 32'(ST_BEAT0 * 64));        wr(8'h34, 0);
      wr(8'h38, 32'(NATOM));
      wr(8'h3C, 32'(IMG_W));
      wr(8'h40, 32'(IMG_H));
      wr(8'h44, threshold);
      rd(8'h38, v);
      checks++;
      if (v != 32'(NATOM)) begin failures++; $display("register readback %0d", v); end
      wr(8'h00, 32'h1);
      t0 = cycle;
      do rd(8'h00, v); while (!v[1]);
      t1 = cycle;
      $display("run %0d: %0d atoms on %0dx%0d, %0d cycles (%0d per atom)", run, NATOM, IMG_W, IMG_H,
               t1 - t0, (t1 - t0) / NATOM);
      if (MAX_CYCLES > 0) begin
        checks++;
        if (t1 - t0 > MAX_CYCLES) begin
          failures++;
          $display("FAIL run took %0d cycles, limit %0d", t1 - t0, MAX_CYCLES);
        end
      end
      n_occ = 0; n_det = 0;
      for (int n = 0; n < NATOM; n++) begin
        logic signed [31:0] e, got;
        logic st;
        real ex;
        reference(n, e, ex);
        got = get32(OUT_BEAT0 * LANES + n);
        st  = u_mem.mem[ST_BEAT0 + n / BUS_W][n % BUS_W];
        checks += 4;
        if (got !== e) begin
          failures++;
          if (failures < 10) $display("FAIL atom %0d emission %0d expected %0d", n, got, e);
        end
        if (st !== (e >= threshold)) begin
          failures++;
          if (failures < 10) $display("FAIL atom %0d state %0d", n, st);
        end
        if ((real'(got) - ex) > 1.5 || (ex - real'(got)) > 1.5 + ex * 1e-6) begin
          failures++;
          if (failures < 10) $display("FAIL atom %0d emission %0d real %f", n, got, ex);
        end
        if (st !== occ[n]) begin
          failures++;
          if (failures < 10) $display("FAIL atom %0d detected %0d occupied %0d", n, st, occ[n]);
        end
        n_occ += int'(occ[n]);
        n_det += int'(st);
      end
      $display("run %0d: %0d occupied, %0d detected", run, n_occ, n_det);
    end
    $display("mechanisms: prefetch=%0d edge_norm=%0d row3=%0d row2=%0d outside=%0d credit_stall=%0d wr_stall=%0d arb_conflict=%0d partial_wr=%0d mem_stall=%0d",
             n_prefetch, n_edge, n_row3, n_row2, n_outside, n_credit_stall, n_wr_stall, n_arb_conflict, n_partial_wr, n_mem_stall);
    checks += 3;
    if (n_prefetch == 0) begin failures++; $display("FAIL no prefetch overlap"); end
    if (n_row2 == 0)     begin failures++; $display("FAIL no 2-beat row"); end
    if (n_row3 == 0)     begin failures++; $display("FAIL no 3-beat row"); end
    if (NEED_ALL_MECH) begin
      checks += 7;
      if (n_wr_stall == 0) begin failures++; $display("FAIL writer never stalled aggregation"); end
      if (n_edge == 0)         begin failures++; $display("FAIL no edge normalisation"); end
      if (n_outside == 0)      begin failures++; $display("FAIL no window outside image"); end
      if (n_credit_stall == 0) begin failures++; $display("FAIL no credit stall"); end
      if (n_arb_conflict == 0) begin failures++; $display("FAIL no read arbitration conflict"); end
      if (n_partial_wr == 0)   begin failures++; $display("FAIL no partial beat write"); end
      if (n_mem_stall == 0)    begin failures++; $display("FAIL memory never stalled"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog after %0d cycles", WATCHDOG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
