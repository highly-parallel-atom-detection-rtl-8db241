// tb_output_aggregation: normalisation d = P * M / S and thresholding.
// Random product sums, matrix sums and kernel sums of both signs, plus the
// corner cases M = S (no scaling), M = 0, S = 0 (ratio 1), |M/S| >= 4
// (ratio saturates) and emissions beyond 32 bits (saturation). Results are
// compared with a model written with wide integer arithmetic, the output is
// stalled at random, and the latency from acceptance must be 26 cycles (3 when the
// divider is skipped).
module tb_output_aggregation;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic signed [PS_W-1:0] prod_sum;
  logic signed [MS_W-1:0] mat_sum, ker_sum;
  logic [31:0] in_tag;
  logic signed [31:0] threshold;
  atom_result_t result;
  output_aggregation dut (.clk, .rst_n, .in_valid, .in_ready, .prod_sum, .mat_sum, .in_tag,
                          .ker_sum, .threshold, .out_valid, .out_ready, .result);

  function automatic logic signed [31:0] model(input logic signed [PS_W-1:0] p,
                                               input logic signed [MS_W-1:0] m,
                                               input logic signed [MS_W-1:0] s);
    logic signed [255:0] am, as, q, t;
    am = (m < 0) ? -256'(m) : 256'(m);
    as = (s < 0) ? -256'(s) : 256'(s);
    if (as == 0) q = 256'(1) << RF;
    else begin
      q = (am << RF) / as;
      if (q > (256'(1) << (RF + 2)) - 1) q = (256'(1) << (RF + 2)) - 1;
      if ((m < 0) != (s < 0)) q = -q;
    end
    t = (256'(p) * q) >>> (KFRAC + RF - OUT_FRAC);
    if (t > 256'sh7fff_ffff) return 32'sh7fff_ffff;
    if (t < -256'sh8000_0000) return 32'sh8000_0000;
    return 32'(t);
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int v = 0; v < 300; v++) begin
      logic signed [PS_W-1:0] p;
      logic signed [MS_W-1:0] m, s;
      logic signed [31:0] e;
      int t0;
      p = $signed({$urandom, $urandom, $urandom}) >>> (10 + $urandom % 60);
      s = $signed(MS_W'({$urandom, $urandom})) >>> ($urandom % 30);
      m = (v % 5 == 0) ? s : $signed(MS_W'({$urandom, $urandom})) >>> ($urandom % 30);
      if (v == 1) m = 0;
      if (v == 2) s = 0;
      if (v == 3) begin s = 1000; m = 5000; end
      if (v == 4) begin s = -1000; m = 4000; end
      if (v == 6) begin p = PS_W'(64'sh7fff_ffff_ffff); m = 10; s = 10; end
      if (v == 7) begin p = -PS_W'(64'sh7fff_ffff_ffff); m = 10; s = 10; end
      e = model(p, m, s);
      threshold = (v % 2) ? e : e + 1;   // exactly at and just above the emission
      if (v == 6 || v == 7) threshold = 0;
      @(posedge clk);
      prod_sum <= p; mat_sum <= m; ker_sum <= s; in_tag <= 32'(v); in_valid <= 1;
      do @(posedge clk); while (!in_ready);
      t0 = cyc;
      in_valid <= 0;
      while (!out_valid) @(posedge clk);
      checks += 4;
      begin
        logic signed [255:0] am, as;
        int lat;
        am = (m < 0) ? -256'(m) : 256'(m);
        as = (s < 0) ? -256'(s) : 256'(s);
        lat = (as == 0 || am >= (as << 2)) ? 3 : 26;
        if (cyc - t0 != lat) begin failures++; $display("latency %0d expected %0d", cyc - t0, lat); end
      end
      repeat ($urandom % 3) begin
        @(posedge clk);
        checks++;
        if (!out_valid) begin failures++; $display("result dropped while stalled"); end
      end
      if (result.emission !== e) begin failures++; $display("v%0d emission %0d expected %0d (p=%0d m=%0d s=%0d)", v, result.emission, e, p, m, s); end
      if (result.state !== (e >= threshold)) begin failures++; $display("v%0d state", v); end
      if (result.idx != 32'(v)) begin failures++; $display("tag"); end
      out_ready <= 1;
      @(posedge clk);
      out_ready <= 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
