// tb_twiddle_mult: checks the twiddle multiplier. Frames of N random
// complex bin pairs (E[k], O[k]) are streamed with in_sop on bin 0. Two
// cycles later the block must return E[k] unchanged and W^k O[k],
// W = exp(-j pi / N), which is held against the exact complex product
// computed in floating point (error below 1 LSB plus the 18-bit
// coefficient error).
`timescale 1ns/1ps
module tb_twiddle_mult;
  import dcs_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sop = 0;
  logic signed [FFT_OUT_W-1:0] e_re = '0, e_im = '0, o_re = '0, o_im = '0;
  logic out_valid, out_sop;
  logic signed [TWD_W-1:0] ed_re, ed_im, t_re, t_im;
  int checks = 0, failures = 0;

  twiddle_mult #(.N(N)) dut (.*);
  always #4 clk = ~clk;

  typedef struct { longint er, ei; real tr, ti, mag; bit sop; int cyc; } exp_t;
  exp_t pipe [$];
  int k = 0, cyc = 0;

  function automatic real absr(real v); return v < 0 ? -v : v; endfunction

  always @(negedge clk) if (rst_n) begin
    exp_t x;
    real a, c, s;
    if (out_valid) begin
      x = pipe.pop_front();
      checks++;
      // tolerance: 1 LSB of rounding + 2^-17 relative per coefficient
      if (cyc != x.cyc + 2 || out_sop != x.sop || ed_re != x.er || ed_im != x.ei ||
          absr(real'(t_re) - x.tr) > 1.0 + x.mag * 2.0e-5 ||
          absr(real'(t_im) - x.ti) > 1.0 + x.mag * 2.0e-5) begin
        failures++;
        $display("FAIL cyc %0d: t=%0d,%0d expected %f,%f", cyc, t_re, t_im, x.tr, x.ti);
      end
    end
    // a gap now and then; bins continue across it
    in_valid = ($urandom_range(0, 5) != 0);
    if (in_valid) begin
      in_sop = (k == 0);
      e_re = FFT_OUT_W'($signed($urandom) >>> 4);  e_im = FFT_OUT_W'($signed($urandom) >>> 4);
      o_re = FFT_OUT_W'($signed($urandom) >>> 1);  o_im = FFT_OUT_W'($signed($urandom) >>> 1);
      a = 3.14159265358979323846 * k / N;
      c = $cos(a); s = -$sin(a);
      x.er = e_re; x.ei = e_im;
      x.tr = real'(o_re) * c - real'(o_im) * s;
      x.ti = real'(o_re) * s + real'(o_im) * c;
      x.mag = absr(real'(o_re)) + absr(real'(o_im));
      x.sop = in_sop;
      x.cyc = cyc;
      pipe.push_back(x);
      k = (k + 1) % N;
    end else begin
      in_sop = 0;
    end
    cyc++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (600) @(posedge clk);
    checks++;
    if (pipe.size() > 2) begin failures++; $display("FAIL: %0d results missing", pipe.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
