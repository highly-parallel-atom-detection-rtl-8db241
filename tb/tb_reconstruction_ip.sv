// tb_reconstruction_ip: end-to-end test of the accelerator at small size.
//
// A 96 x 80 image with a 4 x 3 site grid whose first column and row sit 3
// pixels from the image edge (windows clipped, edge normalisation active),
// plus 21 sites outside the image, with random memory stalls, run twice.
// Every mechanism of the design must occur: prefetch, 2- and 3-beat row
// bursts, edge normalisation, empty windows, convolution credit stall,
// writer back-pressure, read arbitration, partial-beat writes, memory stalls.
module tb_reconstruction_ip;
  recon_env #(.IMG_W(96), .IMG_H(80), .NA_X(4), .NA_Y(3), .SP(25), .OFS(3),
              .N_OUT(21), .STALL(4), .RUNS(2), .WATCHDOG(400_000)) env ();
  // backstop in case the environment's own watchdog never fires
  initial begin
    repeat (500_000) @(posedge env.clk);
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
