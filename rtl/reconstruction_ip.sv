// reconstruction_ip: atom-detection accelerator for tweezer-array images.
//
// For every atom site of a fluorescence image the core projects the KS x KS
// projector (pseudo-inverse of the point-spread function, computed offline)
// onto the image detail centred on the site, normalises sites at the image
// edge, and thresholds the result into an occupied/empty state.
// Dataflow, one stage per module, all stages working on different atoms:
//   boundary_extraction  coordinate table -> per-atom window descriptors
//   image_extraction     512-bit bursts -> projector and image detail
//   data_cache           registers, two image banks (prefetch of next atom)
//   image_convolution    31 vector units + adder trees -> product/matrix sum
//   output_aggregation   d = P * M / S, state = d >= threshold
//   output_writer        emissions and state bitmap back to memory
// Boundary and image extraction share the AXI4 read channel (axi_rd_arb,
// ARID 1 and 0); the writer owns the write channel. The host programs the
// registers of ctrl_regs over AXI4-Lite, sets START and polls DONE.
// Flow control: the convolution takes a full cache bank only when the
// aggregation FIFO has room for every window already inside the 11-cycle
// convolution pipeline, so no result can be lost.
// Timing: one atom costs about one AXI beat per image beat it reads (2-3 per
// window row, up to 93), all other stages are shorter and overlap with it.
// The stage split, the 512-bit bus, the 31 vector units with 5-cycle adder
// trees, the register cache with prefetch and the output equation follow
// the paper; the arbiter, the credit scheme, the memory layouts and the
// fixed-point formats are this design's own.
module reconstruction_ip
  import recon_pkg::*;
#(
  parameter int AGG_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite control
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4 memory manager, 512-bit
  output logic        m_axi_arvalid,
  input  logic        m_axi_arready,
  output axi_ax_t     m_axi_ar,
  input  logic        m_axi_rvalid,
  output logic        m_axi_rready,
  input  axi_r_t      m_axi_r,
  output logic        m_axi_awvalid,
  input  logic        m_axi_awready,
  output axi_ax_t     m_axi_aw,
  output logic        m_axi_wvalid,
  input  logic        m_axi_wready,
  output axi_w_t      m_axi_w,
  input  logic        m_axi_bvalid,
  output logic        m_axi_bready,
  input  axi_b_t      m_axi_b
);
  localparam int LN = $clog2(KS);

  cfg_t cfg;
  logic start, busy, run_done;

  ctrl_regs u_ctrl (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready),
    .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .cfg, .start, .busy, .done(run_done));

  always_ff @(posedge clk) begin
    if (!rst_n)        busy <= 1'b0;
    else if (start)    busy <= 1'b1;
    else if (run_done) busy <= 1'b0;
  end

  // ---------------- read channel sharing ----------------
  logic    arb_arvalid [2], arb_arready [2], arb_rvalid [2], arb_rready [2];
  axi_ax_t arb_ar [2];
  axi_r_t  arb_r  [2];

  axi_rd_arb u_arb (
    .clk, .rst_n,
    .s_arvalid(arb_arvalid), .s_arready(arb_arready), .s_ar(arb_ar),
    .s_rvalid(arb_rvalid), .s_rready(arb_rready), .s_r(arb_r),
    .m_arvalid(m_axi_arvalid), .m_arready(m_axi_arready), .m_ar(m_axi_ar),
    .m_rvalid(m_axi_rvalid), .m_rready(m_axi_rready), .m_r(m_axi_r));

  // ---------------- boundary extraction ----------------
  logic       desc_valid, desc_ready, be_done;
  atom_desc_t desc;

  boundary_extraction u_bound (
    .clk, .rst_n, .start, .cfg, .done(be_done),
    .m_arvalid(arb_arvalid[1]), .m_arready(arb_arready[1]), .m_ar(arb_ar[1]),
    .m_rvalid(arb_rvalid[1]), .m_rready(arb_rready[1]), .m_r(arb_r[1]),
    .desc_valid, .desc_ready, .desc);

  // ---------------- image extraction + data cache ----------------
  logic ker_loaded;
  logic signed [MS_W-1:0] ker_sum;
  logic ker_wr, img_clr, img_wr, commit, wr_free, both_full;
  logic [LN-1:0] ker_wr_row, img_wr_row;
  logic [$clog2(KROW_BEATS)-1:0] ker_wr_half;
  ker_t ker_wr_data [LANES];
  pix_t img_wr_data [KS];
  logic [KS-1:0] img_wr_mask, commit_row_use, commit_col_use;
  logic [31:0]   commit_tag;

  image_extraction u_extract (
    .clk, .rst_n, .start, .cfg, .ker_loaded, .ker_sum,
    .m_arvalid(arb_arvalid[0]), .m_arready(arb_arready[0]), .m_ar(arb_ar[0]),
    .m_rvalid(arb_rvalid[0]), .m_rready(arb_rready[0]), .m_r(arb_r[0]),
    .desc_valid, .desc_ready, .desc,
    .ker_wr, .ker_wr_row, .ker_wr_half, .ker_wr_data,
    .img_clr, .img_wr, .img_wr_row, .img_wr_data, .img_wr_mask,
    .commit, .commit_row_use, .commit_col_use, .commit_tag, .wr_free);

  logic          rd_valid, take;
  ker_t          c_ker [KS][KS];
  pix_t          c_img [KS][KS];
  logic [KS-1:0] c_row_use, c_col_use;
  logic [31:0]   c_tag;

  data_cache u_cache (
    .clk, .rst_n,
    .ker_wr, .ker_wr_row, .ker_wr_half, .ker_wr_data,
    .img_clr, .img_wr, .img_wr_row, .img_wr_data, .img_wr_mask,
    .commit, .commit_row_use, .commit_col_use, .commit_tag,
    .wr_free, .both_full,
    .rd_valid, .take, .ker(c_ker), .img(c_img),
    .row_use(c_row_use), .col_use(c_col_use), .tag(c_tag));

  // ---------------- convolution with credit-based flow control ----------------
  logic [$clog2(AGG_DEPTH+1)-1:0] inflight;
  logic                conv_valid;
  logic [31:0]         conv_tag;
  logic signed [PS_W-1:0] prod_sum;
  logic signed [MS_W-1:0] mat_sum;
  logic                fifo_pop, fifo_empty, fifo_full;
  logic [$clog2(AGG_DEPTH+1)-1:0] fifo_count;

  assign take = rd_valid && ker_loaded && (int'(inflight) < AGG_DEPTH);

  image_convolution u_conv (
    .clk, .rst_n, .in_valid(take),
    .ker(c_ker), .img(c_img), .row_use(c_row_use), .col_use(c_col_use), .in_tag(c_tag),
    .out_valid(conv_valid), .out_tag(conv_tag), .prod_sum, .mat_sum);

  always_ff @(posedge clk) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + ($bits(inflight))'(take) - ($bits(inflight))'(fifo_pop);
  end

  typedef struct packed {
    logic [31:0]            tag;
    logic signed [PS_W-1:0] ps;
    logic signed [MS_W-1:0] ms;
  } conv_res_t;
  conv_res_t fifo_in, fifo_out;
  assign fifo_in = '{tag: conv_tag, ps: prod_sum, ms: mat_sum};

  sync_fifo #(.WIDTH($bits(conv_res_t)), .DEPTH(AGG_DEPTH)) u_fifo (
    .clk, .rst_n, .push(conv_valid), .din(fifo_in), .full(fifo_full),
    .pop(fifo_pop), .dout(fifo_out), .empty(fifo_empty), .count(fifo_count));

  // ---------------- output aggregation + writer ----------------
  logic         agg_ready, res_valid, res_ready;
  atom_result_t result;

  assign fifo_pop = !fifo_empty && agg_ready;

  output_aggregation u_agg (
    .clk, .rst_n, .in_valid(!fifo_empty), .in_ready(agg_ready),
    .prod_sum(fifo_out.ps), .mat_sum(fifo_out.ms), .in_tag(fifo_out.tag),
    .ker_sum, .threshold(cfg.threshold),
    .out_valid(res_valid), .out_ready(res_ready), .result);

  output_writer u_writer (
    .clk, .rst_n, .start, .cfg, .done(run_done),
    .in_valid(res_valid), .in_ready(res_ready), .result,
    .m_awvalid(m_axi_awvalid), .m_awready(m_axi_awready), .m_aw(m_axi_aw),
    .m_wvalid(m_axi_wvalid), .m_wready(m_axi_wready), .m_w(m_axi_w),
    .m_bvalid(m_axi_bvalid), .m_bready(m_axi_bready), .m_b(m_axi_b));

  a_credit: assert property (@(posedge clk) disable iff (!rst_n) conv_valid |-> !fifo_full)
    else $error("aggregation fifo overrun");
  logic unused;
  assign unused = be_done ^ both_full ^ (^fifo_count);
endmodule
