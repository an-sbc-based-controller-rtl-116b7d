// twiddle_mult: twiddle-factor LUT and complex multiplier between the two
// N-point FFTs of one ADC and the 2-point FFT.
//
// The 2N-point spectrum is built by decimation in time: the FFT of the
// even samples E[k] and the FFT of the odd samples O[k] combine as
//   X[k] = E[k] + W^k O[k],  X[k+N] = E[k] - W^k O[k],  W = exp(-j 2 pi / 2N).
// This block applies W^k to O[k] and delays E[k] by the same latency so the
// pair reaches the 2-point FFT together. The paper's figure draws a
// multiplier after both FFTs, fed from one twiddle LUT; in this
// decimation-in-time split the even branch's factor is 1, so that branch is
// a plain delay here. The paper gives 18-bit twiddle factors; the LUT holds
// cos and -sin in Q1.17 (1.0 clipped to 131071), computed at elaboration.
//
// Products are rounded (add half, shift right 17) to TWD_W bits. The bin
// index k counts valid cycles from in_sop. Latency 2 cycles.
module twiddle_mult
  import dcs_pkg::*;
#(
  parameter int N = 8192   // length of each FFT; the twiddles are for 2N
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          in_sop,
  input  logic signed [FFT_OUT_W-1:0]   e_re, e_im,   // even-sample FFT bin k
  input  logic signed [FFT_OUT_W-1:0]   o_re, o_im,   // odd-sample FFT bin k
  output logic                          out_valid,
  output logic                          out_sop,
  output logic signed [TWD_W-1:0]       ed_re, ed_im, // E[k], delayed
  output logic signed [TWD_W-1:0]       t_re, t_im    // W^k O[k]
);

  localparam int AW = $clog2(N);
  localparam int PW = FFT_OUT_W + COEF_W;

  logic signed [COEF_W-1:0] rom_cos [N];
  logic signed [COEF_W-1:0] rom_nsin[N];

  function automatic logic signed [COEF_W-1:0] q17(input real v);
    real r;
    r = v * 131072.0;
    r = (r < 0.0) ? r - 0.5 : r + 0.5;
    if (r > 131071.0)  r = 131071.0;
    if (r < -131072.0) r = -131072.0;
    return COEF_W'($rtoi(r));
  endfunction

  initial begin
    for (int k = 0; k < N; k++) begin
      rom_cos[k]  = q17($cos(3.14159265358979323846 * real'(k) / real'(N)));
      rom_nsin[k] = q17(-$sin(3.14159265358979323846 * real'(k) / real'(N)));
    end
  end

  logic [AW-1:0] k_cnt, k_now;
  assign k_now = in_sop ? '0 : k_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        k_cnt <= '0;
    else if (in_valid) k_cnt <= k_now + 1'b1;
  end

  // Stage 1: LUT read, operands registered.
  logic signed [COEF_W-1:0]    c, s;
  logic signed [FFT_OUT_W-1:0] e1_re, e1_im, o1_re, o1_im;
  logic                        v1, sop1;

  always_ff @(posedge clk) begin
    c     <= rom_cos[k_now];
    s     <= rom_nsin[k_now];
    e1_re <= e_re;  e1_im <= e_im;
    o1_re <= o_re;  o1_im <= o_im;
  end

  // Stage 2: complex multiply, round, register.
  logic signed [PW:0] pr, pi;
  assign pr = (PW+1)'(o1_re * c) - (PW+1)'(o1_im * s) + (PW+1)'(65536);
  assign pi = (PW+1)'(o1_re * s) + (PW+1)'(o1_im * c) + (PW+1)'(65536);

  always_ff @(posedge clk) begin
    t_re  <= TWD_W'(pr >>> (COEF_W - 1));
    t_im  <= TWD_W'(pi >>> (COEF_W - 1));
    ed_re <= TWD_W'(e1_re);
    ed_im <= TWD_W'(e1_im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; sop1 <= 1'b0; out_valid <= 1'b0; out_sop <= 1'b0;
    end else begin
      v1 <= in_valid; sop1 <= in_valid & in_sop;
      out_valid <= v1; out_sop <= sop1;
    end
  end

endmodule
