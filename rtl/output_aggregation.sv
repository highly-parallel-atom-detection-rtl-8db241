// output_aggregation: edge normalisation and thresholding of one atom.
//
// Implements the paper's output equation
//     d_out = P * (M / S)
// with P the product sum sum(K*I), M the matrix sum sum(K*u) (kernel weight
// that fell inside the image) and S the sum of the whole projector. For sites
// far from the edge M = S and d_out = P. The atom's state is d_out >= threshold.
// How: the ratio M/S is formed by a restoring divider that produces one
// quotient bit per cycle, RF fraction and 2 integer bits (|M/S| is saturated
// just below 4; S = 0 gives ratio 1). Then P * ratio is scaled from
// KFRAC+RF fraction bits to OUT_FRAC bits (arithmetic shift, rounding towards
// minus infinity) and saturated to 32 bits.
// Timing: in_ready is high when idle; a result appears QB + 4 = RF + 6 cycles
// (26) after acceptance, or 3 cycles when the divider is skipped (S = 0 or
// saturated ratio), and is held until out_ready.
// The equation and the threshold follow the paper; the divider, the fixed-
// point formats and the saturation are this design's own.
module output_aggregation
  import recon_pkg::*;
#(
  parameter int P_W = PS_W,
  parameter int M_W = MS_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [P_W-1:0] prod_sum,
  input  logic signed [M_W-1:0] mat_sum,
  input  logic [31:0]           in_tag,
  input  logic signed [M_W-1:0] ker_sum,
  input  logic signed [31:0]    threshold,
  output logic                  out_valid,
  input  logic                  out_ready,
  output atom_result_t          result
);
  localparam int QB   = RF + 2;                 // quotient bits
  localparam int DW   = M_W + QB + 1;           // divider datapath width
  localparam int MULW = P_W + QB + 1;
  localparam int SH   = KFRAC + RF - OUT_FRAC;

  typedef enum logic [2:0] {S_IDLE, S_DIV, S_MUL, S_SCALE, S_OUT} state_e;
  state_e state;

  logic signed [P_W-1:0]  p_q;
  logic [31:0]            tag_q;
  logic                   neg_q;
  logic [DW-1:0]          rem, den;
  logic [QB-1:0]          quo;
  logic [$clog2(QB+1)-1:0] bit_i;
  logic signed [QB:0]     ratio;
  logic signed [MULW-1:0] prod;
  logic signed [MULW-1:0] scaled;

  // magnitudes of the incoming matrix sum and of the kernel sum
  logic [M_W-1:0] m_abs, s_abs;
  assign m_abs = mat_sum[M_W-1] ? M_W'(-mat_sum) : M_W'(mat_sum);
  assign s_abs = ker_sum[M_W-1] ? M_W'(-ker_sum) : M_W'(ker_sum);

  localparam logic signed [MULW-1:0] EMAX = MULW'(64'sh0000_0000_7fff_ffff);
  localparam logic signed [MULW-1:0] EMIN = MULW'(-64'sh0000_0000_8000_0000);
  logic signed [31:0] emis;

  assign scaled = prod >>> SH;
  assign emis   = (scaled > EMAX) ? 32'sh7fff_ffff :
                  (scaled < EMIN) ? 32'sh8000_0000 : 32'(scaled);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          p_q   <= prod_sum;
          tag_q <= in_tag;
          neg_q <= mat_sum[M_W-1] ^ ker_sum[M_W-1];
          quo   <= '0;
          bit_i <= ($clog2(QB+1))'(QB);
          if (s_abs == '0) begin
            // no projector weight at all: leave P unscaled
            ratio <= (QB+1)'(1 << RF);
            state <= S_MUL;
          end else if ((DW'(m_abs) << RF) >= (DW'(s_abs) << QB)) begin
            ratio <= (mat_sum[M_W-1] ^ ker_sum[M_W-1]) ? -$signed({1'b0, {QB{1'b1}}})
                                                       :  $signed({1'b0, {QB{1'b1}}});
            state <= S_MUL;
          end else begin
            rem   <= DW'(m_abs) << RF;
            den   <= DW'(s_abs);
            state <= S_DIV;
          end
        end
        S_DIV: begin
          // quotient bit bit_i-1
          if (rem >= (den << (bit_i - 1'b1))) begin
            rem <= rem - (den << (bit_i - 1'b1));
            quo[bit_i - 1'b1] <= 1'b1;
          end
          bit_i <= bit_i - 1'b1;
          if (bit_i == 1) state <= S_SCALE;
        end
        S_SCALE: begin
          ratio <= neg_q ? -$signed({1'b0, quo}) : $signed({1'b0, quo});
          state <= S_MUL;
        end
        S_MUL: begin
          prod  <= MULW'(p_q) * MULW'(ratio);
          state <= S_OUT;
        end
        S_OUT: begin
          if (!out_valid) begin
            out_valid       <= 1'b1;
            result.idx      <= tag_q;
            result.emission <= emis;
            result.state    <= (emis >= threshold);
          end else if (out_ready) begin
            out_valid <= 1'b0;
            state     <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign in_ready = (state == S_IDLE);
endmodule
