// image_convolution: projection of one atom's image detail onto the projector.
//
// KS vector units work on the KS rows of the window in parallel; each yields
// its row's product sum sum_j K[i,j]*I[i,j] and matrix sum sum_j K[i,j]*u(i,j).
// A second pair of KS-input adder trees adds the row results, giving the
// window's product sum and matrix sum, the two quantities of the paper's
// output equation. u(i,j) is row_use[i] & col_use[j]: the kernel pixel lies
// inside the image.
// Timing: fully pipelined, a new window every cycle, results LAT = 1 +
// 2*ceil(log2 KS) cycles (11 for KS = 31) after in_valid. The tag (atom
// number) travels with the data.
// The KS parallel vector units with adder trees follow the paper; the second
// tree level over the row results is this design's own way of combining them.
module image_convolution
  import recon_pkg::*;
#(
  parameter int N = KS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  ker_t                         ker [N][N],
  input  pix_t                         img [N][N],
  input  logic [N-1:0]                 row_use,
  input  logic [N-1:0]                 col_use,
  input  logic [31:0]                  in_tag,
  output logic                         out_valid,
  output logic [31:0]                  out_tag,
  output logic signed [PROD_W+2*$clog2(N)-1:0] prod_sum,
  output logic signed [DATA_W+2*$clog2(N)-1:0] mat_sum
);
  localparam int LN    = $clog2(N);
  localparam int LAT   = 1 + 2 * LN;
  localparam int RPW   = PROD_W + LN;
  localparam int RMW   = DATA_W + LN;

  logic signed [RPW-1:0] row_ps [N];
  logic signed [RMW-1:0] row_ms [N];
  logic [N-1:0]          row_v;

  for (genvar i = 0; i < N; i++) begin : g_vec
    vector_unit #(.N(N)) u_vec (
      .clk, .rst_n, .in_valid,
      .ker_row (ker[i]),
      .img_row (img[i]),
      .use_mask(row_use[i] ? col_use : '0),
      .out_valid(row_v[i]),
      .prod_sum(row_ps[i]),
      .mat_sum (row_ms[i]));
  end

  logic ms_v;
  adder_tree #(.N(N), .IN_W(RPW)) u_ps_tree (
    .clk, .rst_n, .in_valid(row_v[0]), .din(row_ps), .out_valid(out_valid), .sum(prod_sum));
  adder_tree #(.N(N), .IN_W(RMW)) u_ms_tree (
    .clk, .rst_n, .in_valid(row_v[0]), .din(row_ms), .out_valid(ms_v), .sum(mat_sum));

  // Tag delay line, LAT stages.
  logic [31:0] tag_q [LAT];
  always_ff @(posedge clk) begin
    tag_q[0] <= in_tag;
    for (int k = 1; k < LAT; k++) tag_q[k] <= tag_q[k-1];
  end
  assign out_tag = tag_q[LAT-1];

  // All vector units run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) row_v == '0 || row_v == '1)
    else $error("vector units out of step");
  logic unused;
  assign unused = ms_v;
endmodule
