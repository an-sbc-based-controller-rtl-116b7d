// fft2_parallel: the 2-point FFT that joins the two N-point FFTs of one ADC
// into one 2N-point spectrum, followed by requantisation for the X-engine.
//
// Per cycle it receives E[k] and W^k O[k] (from twiddle_mult) and produces
// the two output channels of that cycle:
//   lo = X[k]   = E[k] + W^k O[k]   (channel k,     0 <= k < N)
//   hi = X[k+N] = E[k] - W^k O[k]   (channel k + N)
// so two spectral channels leave per clock, the "parallel paths" of the
// spectrometer. The butterfly is the paper's (a 2-point parallel FFT after
// the twiddle multipliers). The requantisation is this design's choice: the
// paper says only that bit precision is chosen per stage from the ADC input
// power. Each component is shifted right by XQ_SHIFT with rounding and
// saturated to XIN_W (18) bits, so that the 18x18 products of the X-engine
// summed over 2048 frames fit the 48-bit accumulators. sat_flag reports a
// saturated component (useful for setting input levels).
//
// Latency 1 cycle.
module fft2_parallel
  import dcs_pkg::*;
#(
  parameter int XQ_SHIFT = 6
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_sop,
  input  logic signed [TWD_W-1:0]   e_re, e_im,
  input  logic signed [TWD_W-1:0]   t_re, t_im,
  output logic                      out_valid,
  output logic                      out_sop,
  output logic signed [XIN_W-1:0]   lo_re, lo_im,
  output logic signed [XIN_W-1:0]   hi_re, hi_im,
  output logic                      sat_flag
);

  function automatic logic signed [XIN_W-1:0] requant(input logic signed [BF_W-1:0] v,
                                                      output logic sat);
    logic signed [BF_W:0] r;
    localparam logic signed [BF_W:0] MAXV = (BF_W+1)'((1 <<< (XIN_W - 1)) - 1);
    localparam logic signed [BF_W:0] MINV = -(BF_W+1)'(1 <<< (XIN_W - 1));
    if (XQ_SHIFT > 0)
      r = ((BF_W+1)'(v) + ((BF_W+1)'(1) <<< (XQ_SHIFT - 1))) >>> XQ_SHIFT;
    else
      r = (BF_W+1)'(v);
    sat = 1'b0;
    if (r > MAXV)      begin r = MAXV; sat = 1'b1; end
    else if (r < MINV) begin r = MINV; sat = 1'b1; end
    return XIN_W'(r);
  endfunction

  logic signed [BF_W-1:0] s_re, s_im, d_re, d_im;
  assign s_re = BF_W'(e_re) + BF_W'(t_re);
  assign s_im = BF_W'(e_im) + BF_W'(t_im);
  assign d_re = BF_W'(e_re) - BF_W'(t_re);
  assign d_im = BF_W'(e_im) - BF_W'(t_im);

  logic [3:0] sat;
  logic signed [XIN_W-1:0] q_lo_re, q_lo_im, q_hi_re, q_hi_im;
  always_comb begin
    q_lo_re = requant(s_re, sat[0]);
    q_lo_im = requant(s_im, sat[1]);
    q_hi_re = requant(d_re, sat[2]);
    q_hi_im = requant(d_im, sat[3]);
  end

  always_ff @(posedge clk) begin
    lo_re <= q_lo_re; lo_im <= q_lo_im;
    hi_re <= q_hi_re; hi_im <= q_hi_im;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_sop <= 1'b0; sat_flag <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_sop   <= in_valid & in_sop;
      sat_flag  <= in_valid & (|sat);
    end
  end

endmodule
