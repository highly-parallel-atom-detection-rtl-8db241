// recon_pkg: sizes, number formats and bus types shared by the atom-detection
// reconstruction accelerator.
//
// The accelerator projects a fixed KS x KS kernel (the "projector", the
// pseudo-inverse of the optical point-spread function) onto the image detail
// around every atom site and thresholds the normalised result.
//
// From the paper: the 31x31 kernel, 32-bit data elements, the 512-bit memory
// bus carrying 16 elements per beat. This design's own choices: pixels are
// 32-bit unsigned integers, projector elements 32-bit signed fixed point with
// KFRAC fraction bits (the original used floating point), emissions are
// signed 32-bit with OUT_FRAC fraction bits, and the AXI4 channels are
// carried as the structs below (size is always 64 bytes, bursts are INCR).
package recon_pkg;

  // Kernel (projector) edge length and half width.
  parameter int KS      = 31;
  parameter int KR      = (KS - 1) / 2;
  // Element width and bus width: 16 elements per 512-bit beat.
  parameter int DATA_W  = 32;
  parameter int BUS_W   = 512;
  parameter int LANES   = BUS_W / DATA_W;
  parameter int STRB_W  = BUS_W / 8;
  parameter int BEAT_B  = $clog2(STRB_W);          // 6: byte offset of a beat
  // Beats per projector row in memory (row padded to whole beats).
  parameter int KROW_BEATS = (KS + LANES - 1) / LANES;
  parameter int ADDR_W  = 64;
  parameter int ID_W    = 4;
  parameter int DIM_W   = 16;                       // image width/height, coordinates

  // Number formats.
  parameter int KFRAC    = 16;                      // projector fraction bits
  parameter int RF       = 20;                      // fraction bits of the edge-normalisation ratio
  parameter int OUT_FRAC = 8;                       // emission fraction bits
  parameter int LOG_KS   = $clog2(KS);
  parameter int PROD_W   = 2 * DATA_W + 1;          // unsigned pixel x signed kernel
  parameter int RPS_W    = PROD_W + LOG_KS;         // product sum of one row
  parameter int PS_W     = RPS_W + LOG_KS;          // product sum of the window
  parameter int RMS_W    = DATA_W + LOG_KS;         // matrix sum of one row
  parameter int MS_W     = RMS_W + LOG_KS;          // matrix sum of the window

  typedef logic [DATA_W-1:0]        pix_t;
  typedef logic signed [DATA_W-1:0] ker_t;

  // AXI4 channel payloads (valid/ready travel beside them).
  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [ADDR_W-1:0] addr;
    logic [7:0]        len;     // beats - 1
  } axi_ax_t;

  typedef struct packed {
    logic [ID_W-1:0]  id;
    logic [BUS_W-1:0] data;
    logic [1:0]       resp;
    logic             last;
  } axi_r_t;

  typedef struct packed {
    logic [BUS_W-1:0]  data;
    logic [STRB_W-1:0] strb;
    logic              last;
  } axi_w_t;

  typedef struct packed {
    logic [ID_W-1:0] id;
    logic [1:0]      resp;
  } axi_b_t;

  // Run configuration written by the host.
  typedef struct packed {
    logic [ADDR_W-1:0]  img_base;    // image, row-major, one 32-bit word per pixel
    logic [ADDR_W-1:0]  ker_base;    // projector, KS rows of KROW_BEATS beats
    logic [ADDR_W-1:0]  coord_base;  // one 32-bit word per atom: {row, col}
    logic [ADDR_W-1:0]  out_base;    // emissions, one 32-bit word per atom
    logic [ADDR_W-1:0]  state_base;  // detection bitmap, one bit per atom
    logic [31:0]        num_atoms;
    logic [DIM_W-1:0]   img_w;       // multiple of LANES
    logic [DIM_W-1:0]   img_h;
    logic signed [31:0] threshold;   // same format as the emission
  } cfg_t;

  // Window of one atom, produced by boundary extraction.
  typedef struct packed {
    logic [31:0]               idx;      // atom number
    logic signed [DIM_W+1:0]   row0;     // image row of kernel row 0 (centre - KR)
    logic signed [DIM_W+1:0]   col0;     // image column of kernel column 0
    logic [DIM_W-1:0]          col_lo;   // first image column inside the window
    logic [DIM_W-1:0]          col_hi;   // last image column inside the window
    logic [KS-1:0]             row_use;  // kernel row i lies inside the image
    logic [KS-1:0]             col_use;  // kernel column j lies inside the image
  } atom_desc_t;

  // Result of one atom.
  typedef struct packed {
    logic [31:0]        idx;
    logic signed [31:0] emission;
    logic               state;
  } atom_result_t;

endpackage
