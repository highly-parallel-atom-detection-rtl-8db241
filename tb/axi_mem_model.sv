// axi_mem_model: behavioural model of the external DDR memory behind a
// 512-bit AXI4 subordinate port (not synthesizable as a memory controller;
// for simulation only).
//
// Storage is an array of DEPTH 512-bit words addressed by addr >> 6.
// Reads: up to 8 address requests are queued; each burst starts no earlier than LAT
// cycles after its address was accepted and after the previous burst and returns len+1 consecutive
// words with its own ID. Writes: one single-beat burst at a time is applied
// with its byte strobes and answered with OKAY after a write latency
// (random up to 64 cycles when STALL > 0). With STALL > 0 every ready
// and valid the model drives is randomly withheld with probability
// STALL/16, to exercise the design's flow control.
module axi_mem_model
  import recon_pkg::*;
#(
  parameter int DEPTH = 8192,
  parameter int LAT   = 4,
  parameter int STALL = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    arvalid,
  output logic    arready,
  input  axi_ax_t ar,
  output logic    rvalid,
  input  logic    rready,
  output axi_r_t  r,
  input  logic    awvalid,
  output logic    awready,
  input  axi_ax_t aw,
  input  logic    wvalid,
  output logic    wready,
  input  axi_w_t  w,
  output logic    bvalid,
  input  logic    bready,
  output axi_b_t  b
);
  logic [BUS_W-1:0] mem [DEPTH];

  axi_ax_t rq [$];
  longint  rt [$];          // cycle at which each queued burst may start
  longint  now;
  int      r_beat, b_wait;
  int      n_stall_r;
  logic    rnd_ar, rnd_r, rnd_w;

  function automatic int widx(input logic [ADDR_W-1:0] a);
    return int'(a >> BEAT_B);
  endfunction

  always_ff @(posedge clk) begin
    rnd_ar <= (STALL == 0) || (($urandom % 16) >= STALL);
    rnd_r  <= (STALL == 0) || (($urandom % 16) >= STALL);
    rnd_w  <= (STALL == 0) || (($urandom % 16) >= STALL);
  end

  assign arready = rst_n && rq.size() < 8 && rnd_ar;

  always_comb begin
    r        = '0;
    rvalid   = 1'b0;
    if (rq.size() > 0 && now >= rt[0] && rnd_r) begin
      rvalid = 1'b1;
      r.id   = rq[0].id;
      r.data = mem[(widx(rq[0].addr) + r_beat) % DEPTH];
      r.last = (r_beat == int'(rq[0].len));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rq.delete();
      rt.delete();
      now       <= 0;
      r_beat    <= 0;
      n_stall_r <= 0;
    end else begin
      now <= now + 1;
      if (rvalid && !rready) n_stall_r <= n_stall_r + 1;
      if (rvalid && rready) begin
        if (r.last) begin
          void'(rq.pop_front());
          void'(rt.pop_front());
          r_beat <= 0;
        end else begin
          r_beat <= r_beat + 1;
        end
      end
      if (arvalid && arready) begin
        assert (ar.addr[BEAT_B-1:0] == '0) else $error("unaligned read 0x%0h", ar.addr);
        assert (widx(ar.addr) + int'(ar.len) < DEPTH) else $error("read outside model 0x%0h", ar.addr);
        rq.push_back(ar);
        rt.push_back(now + LAT);
      end
    end
  end

  // writes: take AW and W together, then answer
  assign awready = rst_n && !bvalid && b_wait == 0 && awvalid && wvalid && rnd_w;
  assign wready  = awready;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bvalid <= 1'b0;
      b      <= '0;
      b_wait <= 0;
    end else begin
      if (b_wait > 0) begin
        b_wait <= b_wait - 1;
        if (b_wait == 1) bvalid <= 1'b1;
      end
      if (awvalid && awready) begin
        assert (aw.len == 0) else $error("model accepts single-beat writes only");
        assert (widx(aw.addr) < DEPTH) else $error("write outside model 0x%0h", aw.addr);
        for (int k = 0; k < STRB_W; k++)
          if (w.strb[k]) mem[widx(aw.addr) % DEPTH][k*8 +: 8] <= w.data[k*8 +: 8];
        b_wait <= (STALL > 0) ? 1 + int'($urandom % 64) : 1;
        b.id   <= aw.id;
        b.resp <= 2'b00;
      end else if (bvalid && bready) begin
        bvalid <= 1'b0;
      end
    end
  end
endmodule
