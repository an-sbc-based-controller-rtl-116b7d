// nuttall_window: 4-term Nuttall window LUT and the two window multipliers
// of one ADC.
//
// Each ADC frame of 2N = 16384 samples arrives as N pairs (even sample
// x[2m], odd sample x[2m+1]). The window w[n] spans the whole 2N-sample
// frame, so the even lane is weighted by w[2m] and the odd lane by
// w[2m+1]; the two lanes then feed the two N-point FFTs. As in the paper,
// one LUT serves both multipliers of an ADC and the coefficients are 18 bits.
//
// Window (minimum 4-term Blackman-Nuttall, about -98 dB sidelobes, matching
// the suppression the paper quotes; coefficients are standard values, not
// printed in the paper), periodic form with L = 2N:
//   w[n] = 0.3635819 - 0.4891775 cos(2 pi n/L) + 0.1365995 cos(4 pi n/L)
//          - 0.0106411 cos(6 pi n/L)
// stored as unsigned-valued Q1.17 in an 18-bit signed word, w = 1.0 clipped
// to 131071. The LUT is computed at elaboration, as an FPGA ROM would be
// initialised.
//
// Output: y = (x * w) >>> 9, an 18-bit sample that keeps 8 fraction bits of
// the 10-bit input (truncation; this design's choice). Latency 2 cycles: the
// ROM read, then the multiplier register. valid and sop follow the data.
module nuttall_window
  import dcs_pkg::*;
#(
  parameter int N = 8192   // pairs per frame = length of each FFT
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        in_sop,
  input  logic [$clog2(N)-1:0]        in_idx,    // pair index m
  input  logic signed [ADC_W-1:0]     in_even,   // x[2m]
  input  logic signed [ADC_W-1:0]     in_odd,    // x[2m+1]
  output logic                        out_valid,
  output logic                        out_sop,
  output logic signed [WIN_W-1:0]     out_even,  // w[2m]   * x[2m]
  output logic signed [WIN_W-1:0]     out_odd    // w[2m+1] * x[2m+1]
);

  localparam int PW = ADC_W + COEF_W;          // full product width
  localparam int SH = PW - 1 - WIN_W;          // 9 with the default widths

  logic signed [COEF_W-1:0] rom_even [N];
  logic signed [COEF_W-1:0] rom_odd  [N];

  function automatic logic signed [COEF_W-1:0] nuttall_coef(input int n, input int len);
    real pi, a, v;
    pi = 3.14159265358979323846;
    a  = 2.0 * pi * real'(n) / real'(len);
    v  = 0.3635819 - 0.4891775 * $cos(a) + 0.1365995 * $cos(2.0 * a)
         - 0.0106411 * $cos(3.0 * a);
    v  = v * 131072.0 + 0.5;
    if (v > 131071.0) v = 131071.0;
    if (v < 0.0) v = 0.0;
    return COEF_W'($rtoi(v));
  endfunction

  initial begin
    for (int m = 0; m < N; m++) begin
      rom_even[m] = nuttall_coef(2 * m,     2 * N);
      rom_odd[m]  = nuttall_coef(2 * m + 1, 2 * N);
    end
  end

  logic signed [COEF_W-1:0] c_even, c_odd;
  logic signed [ADC_W-1:0]  d_even, d_odd;
  logic                     v1, s1;
  logic signed [PW-1:0]     p_even, p_odd;

  assign p_even = d_even * c_even;
  assign p_odd  = d_odd  * c_odd;

  always_ff @(posedge clk) begin
    c_even <= rom_even[in_idx];
    c_odd  <= rom_odd[in_idx];
    d_even <= in_even;
    d_odd  <= in_odd;
    out_even <= WIN_W'(p_even >>> SH);
    out_odd  <= WIN_W'(p_odd  >>> SH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; s1 <= 1'b0; out_valid <= 1'b0; out_sop <= 1'b0;
    end else begin
      v1 <= in_valid;  s1 <= in_valid & in_sop;
      out_valid <= v1; out_sop <= s1;
    end
  end

endmodule
