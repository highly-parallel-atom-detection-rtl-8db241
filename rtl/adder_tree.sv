// adder_tree: pipelined logarithmic reduction of N signed values.
//
// Level l adds neighbouring pairs of level l-1 (an odd element passes on
// unchanged) and registers the result, so N values are reduced in
// ceil(log2 N) clock cycles: 31 inputs take 5 cycles, as the paper states for
// its adder tree. A new vector can enter every cycle. in_valid travels beside
// the data; out_valid rises exactly LAT cycles after in_valid.
// The operands are sign-extended to OUT_W at the leaves, so no level can
// overflow as long as OUT_W >= IN_W + ceil(log2 N).
module adder_tree #(
  parameter int N     = 31,
  parameter int IN_W  = 65,
  parameter int OUT_W = IN_W + $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  din [N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] sum
);
  localparam int LAT = (N > 1) ? $clog2(N) : 1;

  // Number of live elements at a level.
  function automatic int cnt(input int lvl);
    int c = N;
    for (int k = 0; k < lvl; k++) c = (c + 1) / 2;
    return c;
  endfunction

  logic signed [OUT_W-1:0] t [LAT+1][N];
  logic [LAT:0]            v;

  for (genvar i = 0; i < N; i++) begin : g_leaf
    assign t[0][i] = OUT_W'(din[i]);
  end
  assign v[0] = in_valid;

  for (genvar l = 1; l <= LAT; l++) begin : g_lvl
    for (genvar i = 0; i < N; i++) begin : g_node
      if (i < cnt(l)) begin : g_live
        if (2 * i + 1 < cnt(l - 1)) begin : g_pair
          always_ff @(posedge clk) t[l][i] <= t[l-1][2*i] + t[l-1][2*i+1];
        end else begin : g_pass
          always_ff @(posedge clk) t[l][i] <= t[l-1][2*i];
        end
      end else begin : g_dead
        assign t[l][i] = '0;
      end
    end
    always_ff @(posedge clk)
      if (!rst_n) v[l] <= 1'b0;
      else        v[l] <= v[l-1];
  end

  assign sum       = t[LAT][0];
  assign out_valid = v[LAT];
endmodule
