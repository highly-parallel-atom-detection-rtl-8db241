// output_writer: writes the reconstructed image back to memory.
//
// Results arrive in atom order. The emissions are packed 16 per 512-bit beat
// and the detection states one bit per atom, 512 per beat. A beat is written
// (one single-beat AXI4 write burst, strobes covering only the filled bytes)
// when it is full or when the run's last atom has arrived; the emission
// array goes to out_base, the bitmap (bit k of byte k/8 = atom k) to
// state_base. One write is outstanding at a time; while it is in flight
// in_ready is low, which stalls the output aggregation.
// done pulses after the response to the run's last write.
// Following the paper: the 512-bit bus and the reconstructed image and 0/1
// matrix as outputs. This design's own: the memory layout and write policy.
module output_writer
  import recon_pkg::*;
#(
  parameter logic [ID_W-1:0] WR_ID = ID_W'(0)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cfg_t          cfg,
  output logic          done,
  // results
  input  logic          in_valid,
  output logic          in_ready,
  input  atom_result_t  result,
  // AXI4 write channels
  output logic          m_awvalid,
  input  logic          m_awready,
  output axi_ax_t       m_aw,
  output logic          m_wvalid,
  input  logic          m_wready,
  output axi_w_t        m_w,
  input  logic          m_bvalid,
  output logic          m_bready,
  input  axi_b_t        m_b
);
  localparam int LG = $clog2(LANES);
  localparam int SG = $clog2(BUS_W);

  typedef enum logic [2:0] {S_IDLE, S_COLLECT, S_EW, S_EB, S_SW, S_SB} state_e;
  state_e state;

  logic [BUS_W-1:0]  ebuf, sbuf;
  logic [STRB_W-1:0] estrb, sstrb;
  logic [31:0]       cnt;          // atoms accepted
  logic [31:0]       last_idx;     // index of the atom that closed the beat
  logic              aw_ok, w_ok, flush_s, fin;

  assign in_ready = (state == S_COLLECT);
  assign m_bready = (state == S_EB) || (state == S_SB);

  always_comb begin
    m_aw.id  = WR_ID;
    m_aw.len = '0;
    m_w.last = 1'b1;
    if (state == S_SW) begin
      m_aw.addr = cfg.state_base + (ADDR_W'(last_idx >> SG) << BEAT_B);
      m_w.data  = sbuf;
      m_w.strb  = sstrb;
    end else begin
      m_aw.addr = cfg.out_base + (ADDR_W'(last_idx >> LG) << BEAT_B);
      m_w.data  = ebuf;
      m_w.strb  = estrb;
    end
    m_awvalid = ((state == S_EW) || (state == S_SW)) && !aw_ok;
    m_wvalid  = ((state == S_EW) || (state == S_SW)) && !w_ok;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      cnt   <= '0;
      ebuf  <= '0;  estrb <= '0;
      sbuf  <= '0;  sstrb <= '0;
      aw_ok <= 1'b0; w_ok <= 1'b0;
      flush_s <= 1'b0; fin <= 1'b0;
      last_idx <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE, S_COLLECT: begin
          if (start) begin
            cnt   <= '0;
            ebuf  <= '0;  estrb <= '0;
            sbuf  <= '0;  sstrb <= '0;
            if (cfg.num_atoms == 0) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              state <= S_COLLECT;
            end
          end else if (state == S_COLLECT && in_valid) begin
            ebuf[cnt[LG-1:0] * DATA_W +: DATA_W] <= result.emission;
            estrb[cnt[LG-1:0] * (DATA_W/8) +: DATA_W/8] <= '1;
            sbuf[cnt[SG-1:0]]       <= result.state;
            sstrb[cnt[SG-1:3]]      <= 1'b1;
            cnt      <= cnt + 1;
            last_idx <= cnt;
            fin      <= (cnt + 1 == cfg.num_atoms);
            flush_s  <= (cnt + 1 == cfg.num_atoms) || (cnt[SG-1:0] == SG'(BUS_W - 1));
            if ((cnt + 1 == cfg.num_atoms) || (cnt[LG-1:0] == LG'(LANES - 1))) begin
              aw_ok <= 1'b0;
              w_ok  <= 1'b0;
              state <= S_EW;
            end
          end
        end
        S_EW, S_SW: begin
          if (m_awvalid && m_awready) aw_ok <= 1'b1;
          if (m_wvalid && m_wready)   w_ok  <= 1'b1;
          if ((aw_ok || m_awready) && (w_ok || m_wready))
            state <= (state == S_EW) ? S_EB : S_SB;
        end
        S_EB: if (m_bvalid) begin
          ebuf  <= '0;
          estrb <= '0;
          aw_ok <= 1'b0;
          w_ok  <= 1'b0;
          if (flush_s)  state <= S_SW;
          else if (fin) begin state <= S_IDLE; done <= 1'b1; end
          else          state <= S_COLLECT;
        end
        S_SB: if (m_bvalid) begin
          sbuf  <= '0;
          sstrb <= '0;
          if (fin) begin state <= S_IDLE; done <= 1'b1; end
          else           state <= S_COLLECT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // results must arrive in atom order
  always @(posedge clk)
    if (rst_n && state == S_COLLECT && in_valid && !start)
      a_order: assert (result.idx == cnt) else $error("result %0d out of order, expected %0d", result.idx, cnt);
  logic unused;
  assign unused = ^m_b;
endmodule
