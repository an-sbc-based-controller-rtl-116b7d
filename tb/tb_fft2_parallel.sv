// tb_fft2_parallel: checks the 2-point FFT and its requantisation. Random
// (E, W O) pairs, some large enough to saturate, must give
// lo = sat(round((E + WO) / 2^XQ_SHIFT)) and hi = sat(round((E - WO) / 2^XQ_SHIFT))
// on 18 bits one cycle later, with sat_flag raised exactly when a component
// saturated.
`timescale 1ns/1ps
module tb_fft2_parallel;
  import dcs_pkg::*;
  localparam int SH = 6;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sop = 0;
  logic signed [TWD_W-1:0] e_re = '0, e_im = '0, t_re = '0, t_im = '0;
  logic out_valid, out_sop, sat_flag;
  logic signed [XIN_W-1:0] lo_re, lo_im, hi_re, hi_im;
  int checks = 0, failures = 0, nsat = 0;

  fft2_parallel #(.XQ_SHIFT(SH)) dut (.*);
  always #4 clk = ~clk;

  function automatic longint q(longint v, output bit sat);
    longint r = (v + (64'sd1 <<< (SH - 1))) >>> SH;   // round half up
    sat = 0;
    if (r > 131071)  begin r = 131071;  sat = 1; end
    if (r < -131072) begin r = -131072; sat = 1; end
    return r;
  endfunction

  typedef struct { longint lr, li, hr, hi; bit sat, sop; int cyc; } exp_t;
  exp_t pipe [$];
  int cyc = 0;

  function automatic longint rnd(int bits);
    return longint'($signed($urandom)) >>> (32 - bits);
  endfunction

  always @(negedge clk) if (rst_n) begin
    exp_t x;
    bit s0, s1, s2, s3;
    if (out_valid) begin
      x = pipe.pop_front();
      checks++;
      if (cyc != x.cyc + 1 || lo_re != x.lr || lo_im != x.li || hi_re != x.hr || hi_im != x.hi ||
          sat_flag != x.sat || out_sop != x.sop) begin
        failures++;
        $display("FAIL cyc %0d: lo %0d,%0d hi %0d,%0d sat %0d; expected %0d,%0d %0d,%0d sat %0d",
                 cyc, lo_re, lo_im, hi_re, hi_im, sat_flag, x.lr, x.li, x.hr, x.hi, x.sat);
      end
    end
    in_valid = ($urandom_range(0, 7) != 0);
    in_sop = in_valid && ($urandom_range(0, 15) == 0);
    if (in_valid) begin
      int bits = ($urandom_range(0, 3) == 0) ? 32 : 22;   // large values saturate
      e_re = TWD_W'(rnd(bits)); e_im = TWD_W'(rnd(bits));
      t_re = TWD_W'(rnd(bits)); t_im = TWD_W'(rnd(bits));
      x.lr = q(longint'(e_re) + longint'(t_re), s0);
      x.li = q(longint'(e_im) + longint'(t_im), s1);
      x.hr = q(longint'(e_re) - longint'(t_re), s2);
      x.hi = q(longint'(e_im) - longint'(t_im), s3);
      x.sat = s0 | s1 | s2 | s3;
      if (x.sat) nsat++;
      x.sop = in_sop; x.cyc = cyc;
      pipe.push_back(x);
    end
    cyc++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (800) @(posedge clk);
    checks++;
    if (nsat == 0 || pipe.size() > 1) begin failures++; $display("FAIL: no saturation or missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
