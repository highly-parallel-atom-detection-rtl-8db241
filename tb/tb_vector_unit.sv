// tb_vector_unit: one vector processing unit with 31 lanes. Random full-range
// pixels (unsigned) and projector elements (signed) and random use masks;
// the product sum and the masked kernel sum are checked against plain loops,
// and the result must appear 6 cycles after the input.
module tb_vector_unit;
  import recon_pkg::*;
  localparam int N = KS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0, out_valid;
  ker_t ker_row [N];
  pix_t img_row [N];
  logic [N-1:0] use_mask;
  logic signed [PROD_W+4:0] prod_sum;
  logic signed [DATA_W+4:0] mat_sum;
  vector_unit dut (.clk, .rst_n, .in_valid, .ker_row, .img_row, .use_mask, .out_valid, .prod_sum, .mat_sum);

  logic signed [PROD_W+4:0] ep [$];
  logic signed [DATA_W+4:0] em [$];
  int t_q [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (prod_sum !== ep[0]) begin failures++; $display("prod %0d exp %0d", prod_sum, ep[0]); end
    if (mat_sum !== em[0])  begin failures++; $display("mat %0d exp %0d", mat_sum, em[0]); end
    if (cyc - t_q[0] != 6)  begin failures++; $display("latency %0d", cyc - t_q[0]); end
    void'(ep.pop_front()); void'(em.pop_front()); void'(t_q.pop_front());
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int v = 0; v < 100; v++) begin
      logic signed [PROD_W+4:0] p;
      logic signed [DATA_W+4:0] m;
      logic [N-1:0] u;
      @(posedge clk);
      p = 0; m = 0;
      u = (v < 3) ? '1 : N'({$urandom, $urandom});
      for (int j = 0; j < N; j++) begin
        logic [31:0] a, k;
        a = (v == 0) ? 32'hffff_ffff : $urandom;
        k = (v == 0) ? 32'h8000_0000 : (v == 1) ? 32'h7fff_ffff : $urandom;
        img_row[j] <= a;
        ker_row[j] <= k;
        p += (PROD_W+5)'($signed({1'b0, a}) * $signed({{33{k[31]}}, k}));
        if (u[j]) m += (DATA_W+5)'($signed(k));
      end
      use_mask <= u;
      in_valid <= 1;
      ep.push_back(p); em.push_back(m); t_q.push_back(cyc + 1);
    end
    @(posedge clk) in_valid <= 0;
    repeat (12) @(posedge clk);
    checks++;
    if (ep.size() != 0) begin failures++; $display("%0d results missing", ep.size()); end
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
