// tb_image_convolution: the full 31 x 31 convolution. Random windows (some
// with all pixels at full scale, some with rows/columns outside the image)
// enter back to back; product sum, matrix sum and tag are checked against
// double loops over the window, and the latency must be 11 cycles.
module tb_image_convolution;
  import recon_pkg::*;
  localparam int N = KS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0, out_valid;
  ker_t ker [N][N];
  pix_t img [N][N];
  logic [N-1:0] row_use, col_use;
  logic [31:0] in_tag, out_tag;
  logic signed [PS_W-1:0] prod_sum;
  logic signed [MS_W-1:0] mat_sum;
  image_convolution dut (.clk, .rst_n, .in_valid, .ker, .img, .row_use, .col_use, .in_tag,
                         .out_valid, .out_tag, .prod_sum, .mat_sum);

  logic signed [PS_W-1:0] ep [$];
  logic signed [MS_W-1:0] em [$];
  int tg [$], t_q [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 4;
    if (prod_sum !== ep[0]) begin failures++; $display("prod %0d exp %0d", prod_sum, ep[0]); end
    if (mat_sum !== em[0])  begin failures++; $display("mat %0d exp %0d", mat_sum, em[0]); end
    if (out_tag != 32'(tg[0])) begin failures++; $display("tag %0d exp %0d", out_tag, tg[0]); end
    if (cyc - t_q[0] != 11) begin failures++; $display("latency %0d", cyc - t_q[0]); end
    void'(ep.pop_front()); void'(em.pop_front()); void'(tg.pop_front()); void'(t_q.pop_front());
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int v = 0; v < 40; v++) begin
      logic signed [PS_W-1:0] p;
      logic signed [MS_W-1:0] m;
      logic [N-1:0] ru, cu;
      @(posedge clk);
      if (v % 7 == 3) begin in_valid <= 0; continue; end
      p = 0; m = 0;
      ru = (v < 4) ? '1 : (v % 3 == 0) ? N'({$urandom, $urandom}) : ~(N'(1) << (v % N));
      cu = (v < 4) ? '1 : (v % 2 == 0) ? N'({$urandom, $urandom}) : '1;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          logic [31:0] a, k;
          a = (v < 2) ? 32'hffff_ffff : $urandom;
          k = (v == 0) ? 32'h8000_0000 : (v == 1) ? 32'h7fff_ffff : $urandom;
          if (!(ru[i] && cu[j])) a = 0;   // outside the image the cache holds 0
          img[i][j] <= a;
          ker[i][j] <= k;
          p += PS_W'($signed({1'b0, a}) * $signed({{33{k[31]}}, k}));
          if (ru[i] && cu[j]) m += MS_W'($signed(k));
        end
      row_use <= ru; col_use <= cu; in_tag <= 32'(v);
      in_valid <= 1;
      ep.push_back(p); em.push_back(m); tg.push_back(v); t_q.push_back(cyc + 1);
    end
    @(posedge clk) in_valid <= 0;
    repeat (15) @(posedge clk);
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
