// tb_adder_tree: 31-input pipelined adder tree. Random signed vectors enter
// on consecutive cycles (with gaps); each sum is compared with a plain loop
// sum, and the latency must be exactly 5 cycles.
module tb_adder_tree;
  localparam int N = 31, IW = 65, OW = IW + 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0, out_valid;
  logic signed [IW-1:0] din [N];
  logic signed [OW-1:0] sum;
  adder_tree #(.N(N), .IN_W(IW)) dut (.clk, .rst_n, .in_valid, .din, .out_valid, .sum);

  logic signed [OW-1:0] exp_q [$];
  int t_q [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      if (sum !== exp_q[0]) begin failures++; $display("sum %0d expected %0d", sum, exp_q[0]); end
      if (cyc - t_q[0] != 5) begin failures++; $display("latency %0d", cyc - t_q[0]); end
      void'(exp_q.pop_front()); void'(t_q.pop_front());
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int v = 0; v < 200; v++) begin
      logic signed [OW-1:0] e;
      @(posedge clk);
      if ($urandom % 4 == 0) begin in_valid <= 0; continue; end
      e = 0;
      for (int i = 0; i < N; i++) begin
        logic signed [IW-1:0] x;
        x = (v < 5) ? {1'b0, {(IW-1){1'b1}}} : $signed({$urandom, $urandom, $urandom}) >>> ($urandom % 60);
        if (v == 5) x = {1'b1, {(IW-1){1'b0}}};
        din[i] <= x;
        e += OW'(x);
      end
      in_valid <= 1;
      exp_q.push_back(e);
      t_q.push_back(cyc + 1);
    end
    @(posedge clk) in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d sums missing", exp_q.size()); end
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
