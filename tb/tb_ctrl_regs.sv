// tb_ctrl_regs: AXI4-Lite register file. Writes every configuration
// register (one with partial byte strobes), reads each back and compares it
// with the cfg output; START must give exactly one start pulse (delayed while
// busy), IDLE must follow busy, and DONE must read 1 once after a done pulse
// and 0 after that read.
module tb_ctrl_regs;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] s_awaddr, s_araddr;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 1;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 1;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  cfg_t cfg;
  logic start, busy = 0, done = 0;
  ctrl_regs dut (.*);

  int n_start = 0;
  always @(posedge clk) if (rst_n && start) n_start++;

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input logic [3:0] st = 4'hf);
    @(posedge clk);
    s_awaddr <= a; s_wdata <= d; s_wstrb <= st; s_awvalid <= 1; s_wvalid <= 1;
    do @(posedge clk); while (!s_awready);
    s_awvalid <= 0; s_wvalid <= 0;
    while (!s_bvalid) @(posedge clk);
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(posedge clk);
    s_araddr <= a; s_arvalid <= 1;
    do @(posedge clk); while (!s_arready);
    s_arvalid <= 0;
    while (!s_rvalid) @(posedge clk);
    d = s_rdata;
  endtask
  task automatic expect_eq(input logic [31:0] got, input logic [31:0] e, input string what);
    checks++;
    if (got !== e) begin failures++; $display("%s: 0x%0h expected 0x%0h", what, got, e); end
  endtask

  initial begin
    logic [31:0] v;
    logic [31:0] vals [15];
    logic [7:0]  addr [15] = '{8'h10, 8'h14, 8'h18, 8'h1C, 8'h20, 8'h24, 8'h28, 8'h2C, 8'h30, 8'h34,
                               8'h38, 8'h3C, 8'h40, 8'h44, 8'h48};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 14; k++) begin
      vals[k] = $urandom;
      if (k == 11 || k == 12) vals[k] = {16'h0, vals[k][15:0]};
      wr(addr[k], vals[k]);
    end
    wr(8'h44, 32'hAABBCCDD, 4'b0101);          // bytes 0 and 2 only
    vals[13] = {vals[13][31:24], 8'hBB, vals[13][15:8], 8'hDD};
    for (int k = 0; k < 14; k++) begin
      rd(addr[k], v);
      expect_eq(v, vals[k], $sformatf("reg 0x%0h", addr[k]));
    end
    rd(8'h48, v); expect_eq(v, 0, "unmapped");
    expect_eq(cfg.img_base,   {vals[1], vals[0]}, "cfg.img_base");
    expect_eq(cfg.ker_base[63:32], vals[3], "cfg.ker_base");
    expect_eq(cfg.coord_base[31:0], vals[4], "cfg.coord_base");
    expect_eq(cfg.out_base[31:0], vals[6], "cfg.out_base");
    expect_eq(cfg.state_base[63:32], vals[9], "cfg.state_base");
    expect_eq(cfg.num_atoms, vals[10], "cfg.num_atoms");
    expect_eq(32'(cfg.img_w), vals[11], "cfg.img_w");
    expect_eq(32'(cfg.img_h), vals[12], "cfg.img_h");
    expect_eq(cfg.threshold, vals[13], "cfg.threshold");
    // idle, then start while idle
    rd(8'h00, v); expect_eq(v, 32'hC, "ctrl idle");
    wr(8'h00, 1);
    repeat (3) @(posedge clk);
    expect_eq(n_start, 1, "one start pulse");
    busy <= 1;
    rd(8'h00, v); expect_eq(v, 32'h0, "ctrl busy");
    // start while busy waits
    wr(8'h00, 1);
    repeat (5) @(posedge clk);
    expect_eq(n_start, 1, "no start while busy");
    rd(8'h00, v); expect_eq(v, 32'h1, "start pending");
    @(posedge clk) done <= 1;
    @(posedge clk) begin done <= 0; busy <= 0; end
    repeat (3) @(posedge clk);
    expect_eq(n_start, 2, "pending start issued");
    busy <= 1;
    rd(8'h00, v); expect_eq(v, 32'h2, "done set");
    rd(8'h00, v); expect_eq(v, 32'h0, "done cleared by read");
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
