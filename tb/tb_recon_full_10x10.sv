// tb_recon_full_10x10: the accelerator at its default parameters on the
// smallest evaluated workload: a 10 x 10 site array on a 256 x 256 image,
// memory without stalls (4-cycle read latency). Besides checking every
// emission and state, it requires the run to finish within 11,500 cycles,
// the 115 us reported for this size on a 100 MHz device.
module tb_recon_full_10x10;
  recon_env #(.IMG_W(256), .IMG_H(256), .NA_X(10), .NA_Y(10), .SP(23), .OFS(20),
              .N_OUT(0), .STALL(0), .RUNS(1), .MAX_CYCLES(11500),
              .NEED_ALL_MECH(1'b0), .WATCHDOG(200_000)) env ();
  // backstop in case the environment's own watchdog never fires
  initial begin
    repeat (250_000) @(posedge env.clk);
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
