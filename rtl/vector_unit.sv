// vector_unit: one of the KS vector processing units of the image convolution.
//
// It takes one projector row (mat1) and the matching image-detail row (mat2),
// multiplies them element by element in KS parallel multipliers (one register
// stage) and reduces the products in an adder tree: the row's product sum.
// A second tree, in parallel, adds the projector elements whose pixel lies
// inside the image (use_mask = u(i,j) of the row): the row's matrix sum.
// Timing: fully pipelined, one row pair per cycle, results 1 + ceil(log2 KS)
// cycles (6 for KS = 31) after in_valid.
// The split into KS units and the KS-input adder tree follow the paper; the
// separate multiplier register stage and the integer formats are this
// design's own.
module vector_unit
  import recon_pkg::*;
#(
  parameter int N = KS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  ker_t                    ker_row  [N],
  input  pix_t                    img_row  [N],
  input  logic [N-1:0]            use_mask,
  output logic                    out_valid,
  output logic signed [PROD_W+$clog2(N)-1:0] prod_sum,
  output logic signed [DATA_W+$clog2(N)-1:0] mat_sum
);
  logic signed [PROD_W-1:0] prod [N];
  logic signed [DATA_W-1:0] kuse [N];
  logic                     p_valid;

  always_ff @(posedge clk) begin
    for (int j = 0; j < N; j++) begin
      prod[j] <= $signed({1'b0, img_row[j]}) * ker_row[j];
      kuse[j] <= use_mask[j] ? ker_row[j] : '0;
    end
  end
  always_ff @(posedge clk)
    if (!rst_n) p_valid <= 1'b0;
    else        p_valid <= in_valid;

  adder_tree #(.N(N), .IN_W(PROD_W)) u_prod_tree (
    .clk, .rst_n, .in_valid(p_valid), .din(prod), .out_valid(out_valid), .sum(prod_sum));

  logic unused_v;
  adder_tree #(.N(N), .IN_W(DATA_W)) u_mat_tree (
    .clk, .rst_n, .in_valid(p_valid), .din(kuse), .out_valid(unused_v), .sum(mat_sum));
endmodule
