// ctrl_regs: AXI4-Lite control and configuration registers of the accelerator.
//
// The host writes the run configuration, sets START and polls DONE. The map
// follows the usual HLS control-word layout (this design's own choice):
//   0x00 CTRL  bit0 START (write 1 to start; reads 1 until the run begins)
//              bit1 DONE  (set at the end of a run, cleared when CTRL is read)
//              bit2 IDLE  bit3 READY (same as IDLE)
//   0x10/0x14 image base (low/high)      0x18/0x1C projector base
//   0x20/0x24 coordinate table base      0x28/0x2C emission output base
//   0x30/0x34 state bitmap base          0x38 number of atoms
//   0x3C image width (pixels, multiple of 16)   0x40 image height
//   0x44 threshold (signed, emission format)
// AXI4-Lite: a write is accepted when address and data are both valid, one
// transfer at a time; a read answers one cycle after the address. Responses
// are always OKAY; unmapped addresses read 0. The START pulse is issued the
// cycle after the write when the core is idle, otherwise as soon as it is.
module ctrl_regs
  import recon_pkg::*;
#(
  parameter int AW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite subordinate
  input  logic [AW-1:0] s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic [3:0]    s_wstrb,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [AW-1:0] s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  // core side
  output cfg_t          cfg,
  output logic          start,
  input  logic          busy,
  input  logic          done
);
  logic start_req, done_q;
  logic wr_go, rd_go;
  logic [31:0] wmask;

  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign rd_go     = s_arvalid && !s_rvalid;
  assign s_arready = rd_go;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign wmask     = {{8{s_wstrb[3]}}, {8{s_wstrb[2]}}, {8{s_wstrb[1]}}, {8{s_wstrb[0]}}};

  function automatic logic [31:0] upd(input logic [31:0] old, input logic [31:0] d, input logic [31:0] m);
    return (old & ~m) | (d & m);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg       <= '0;
      start_req <= 1'b0;
      start     <= 1'b0;
      done_q    <= 1'b0;
      s_bvalid  <= 1'b0;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
    end else begin
      start <= 1'b0;
      if (start_req && !busy && !start) begin
        start     <= 1'b1;
        start_req <= 1'b0;
      end
      if (done) done_q <= 1'b1;

      if (wr_go) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr)
          AW'('h00): if (s_wstrb[0] && s_wdata[0]) start_req <= 1'b1;
          AW'('h10): cfg.img_base[31:0]    <= upd(cfg.img_base[31:0],    s_wdata, wmask);
          AW'('h14): cfg.img_base[63:32]   <= upd(cfg.img_base[63:32],   s_wdata, wmask);
          AW'('h18): cfg.ker_base[31:0]    <= upd(cfg.ker_base[31:0],    s_wdata, wmask);
          AW'('h1C): cfg.ker_base[63:32]   <= upd(cfg.ker_base[63:32],   s_wdata, wmask);
          AW'('h20): cfg.coord_base[31:0]  <= upd(cfg.coord_base[31:0],  s_wdata, wmask);
          AW'('h24): cfg.coord_base[63:32] <= upd(cfg.coord_base[63:32], s_wdata, wmask);
          AW'('h28): cfg.out_base[31:0]    <= upd(cfg.out_base[31:0],    s_wdata, wmask);
          AW'('h2C): cfg.out_base[63:32]   <= upd(cfg.out_base[63:32],   s_wdata, wmask);
          AW'('h30): cfg.state_base[31:0]  <= upd(cfg.state_base[31:0],  s_wdata, wmask);
          AW'('h34): cfg.state_base[63:32] <= upd(cfg.state_base[63:32], s_wdata, wmask);
          AW'('h38): cfg.num_atoms         <= upd(cfg.num_atoms,         s_wdata, wmask);
          AW'('h3C): cfg.img_w             <= DIM_W'(upd(32'(cfg.img_w), s_wdata, wmask));
          AW'('h40): cfg.img_h             <= DIM_W'(upd(32'(cfg.img_h), s_wdata, wmask));
          AW'('h44): cfg.threshold         <= upd(cfg.threshold,         s_wdata, wmask);
          default: ;
        endcase
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end

      if (rd_go) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr)
          AW'('h00): begin
            s_rdata <= {28'b0, !busy && !start_req, !busy && !start_req, done_q || done, start_req};
            done_q  <= 1'b0;
          end
          AW'('h10): s_rdata <= cfg.img_base[31:0];
          AW'('h14): s_rdata <= cfg.img_base[63:32];
          AW'('h18): s_rdata <= cfg.ker_base[31:0];
          AW'('h1C): s_rdata <= cfg.ker_base[63:32];
          AW'('h20): s_rdata <= cfg.coord_base[31:0];
          AW'('h24): s_rdata <= cfg.coord_base[63:32];
          AW'('h28): s_rdata <= cfg.out_base[31:0];
          AW'('h2C): s_rdata <= cfg.out_base[63:32];
          AW'('h30): s_rdata <= cfg.state_base[31:0];
          AW'('h34): s_rdata <= cfg.state_base[63:32];
          AW'('h38): s_rdata <= cfg.num_atoms;
          AW'('h3C): s_rdata <= 32'(cfg.img_w);
          AW'('h40): s_rdata <= 32'(cfg.img_h);
          AW'('h44): s_rdata <= cfg.threshold;
          default:   s_rdata <= '0;
        endcase
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end
endmodule
