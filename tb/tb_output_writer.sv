// tb_output_writer: packing of results into memory. Two runs (37 and 530
// atoms, so both partial and full emission and bitmap beats occur) with
// random result timing and a stalling memory model. Afterwards every
// emission word and state bit in memory is compared with what was sent, the
// words just past the end must be untouched, and done must pulse once.
module tb_output_writer;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, done, in_valid = 0, in_ready;
  cfg_t cfg;
  atom_result_t result;
  logic m_awvalid, m_awready, m_wvalid, m_wready, m_bvalid, m_bready;
  axi_ax_t m_aw;
  axi_w_t  m_w;
  axi_b_t  m_b;
  logic arv = 0, arr, rv, rr = 1;
  axi_ax_t ar = '0;
  axi_r_t  r;

  output_writer dut (.clk, .rst_n, .start, .cfg, .done, .in_valid, .in_ready, .result,
                     .m_awvalid, .m_awready, .m_aw, .m_wvalid, .m_wready, .m_w, .m_bvalid, .m_bready, .m_b);
  axi_mem_model #(.DEPTH(256), .STALL(4)) u_mem (.clk, .rst_n,
    .arvalid(arv), .arready(arr), .ar, .rvalid(rv), .rready(rr), .r,
    .awvalid(m_awvalid), .awready(m_awready), .aw(m_aw), .wvalid(m_wvalid), .wready(m_wready), .w(m_w),
    .bvalid(m_bvalid), .bready(m_bready), .b(m_b));

  int n_done = 0;
  always @(posedge clk) if (rst_n && done) n_done++;

  localparam int OUTB = 16, STB = 200;
  initial begin
    int na [2] = '{37, 530};
    logic [31:0] em [600];
    logic st [600];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 2; run++) begin
      for (int w = 0; w < 256; w++) u_mem.mem[w] = {16{32'hDEADBEEF}};
      cfg = '0;
      cfg.out_base = OUTB * 64; cfg.state_base = STB * 64; cfg.num_atoms = na[run];
      @(posedge clk) start <= 1;
      @(posedge clk) start <= 0;
      for (int n = 0; n < na[run]; n++) begin
        em[n] = $urandom; st[n] = 1'($urandom);
        begin
          int gap;
          gap = $urandom % 3;
          if (gap > 0) begin
            in_valid <= 0;
            repeat (gap) @(posedge clk);
          end
        end
        result.idx <= n; result.emission <= em[n]; result.state <= st[n]; in_valid <= 1;
        do @(posedge clk); while (!in_ready);
      end
      in_valid <= 0;
      repeat (300) @(posedge clk);
      checks++;
      if (n_done != run + 1) begin failures++; $display("done pulses %0d", n_done); end
      for (int n = 0; n < na[run]; n++) begin
        checks += 2;
        if (u_mem.mem[OUTB + n / 16][(n % 16) * 32 +: 32] !== em[n]) begin failures++; $display("emission %0d", n); end
        if (u_mem.mem[STB + n / 512][n % 512] !== st[n]) begin failures++; $display("state %0d", n); end
      end
      checks += 2;
      if (u_mem.mem[OUTB + na[run] / 16][(na[run] % 16) * 32 +: 32] !== 32'hDEADBEEF) begin failures++; $display("word past end written"); end
      if (u_mem.mem[STB + na[run] / 512][(na[run] % 512) / 8 * 8 + 8 +: 8] !== 8'hDE && u_mem.mem[STB + na[run] / 512][(na[run] % 512) / 8 * 8 + 8 +: 8] !== 8'hAD
          && u_mem.mem[STB + na[run] / 512][(na[run] % 512) / 8 * 8 + 8 +: 8] !== 8'hBE && u_mem.mem[STB + na[run] / 512][(na[run] % 512) / 8 * 8 + 8 +: 8] !== 8'hEF)
        begin failures++; $display("bitmap byte past end written"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
