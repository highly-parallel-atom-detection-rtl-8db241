// tb_recon_full_40x40: the accelerator at its default parameters on the
// largest evaluated workload: a 40 x 40 site array on a 1024 x 1024 image,
// memory without stalls (4-cycle read latency). Besides checking every
// emission and state, it requires the run to finish within 182,500 cycles,
// the 1.825 ms reported for this size on a 100 MHz device.
module tb_recon_full_40x40;
  recon_env #(.IMG_W(1024), .IMG_H(1024), .NA_X(40), .NA_Y(40), .SP(25), .OFS(20),
              .N_OUT(0), .STALL(0), .RUNS(1), .MAX_CYCLES(182500),
              .NEED_ALL_MECH(1'b0), .WATCHDOG(1_000_000)) env ();
  // backstop in case the environment's own watchdog never fires
  initial begin
    repeat (1_200_000) @(posedge env.clk);
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
