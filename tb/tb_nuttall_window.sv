// tb_nuttall_window: checks the window LUT and multipliers. For random pair
// indices and samples, each output must equal (x * w) >>> 9 where w is the
// 18-bit quantised 4-term Nuttall coefficient of sample 2m (even lane) or
// 2m+1 (odd lane) of a 2N-sample frame, computed here from the window
// formula. The coefficients are also held against the unquantised window,
// and the latency must be 2 cycles.
`timescale 1ns/1ps
module tb_nuttall_window;
  import dcs_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sop = 0;
  logic [$clog2(N)-1:0] in_idx = '0;
  logic signed [ADC_W-1:0] in_even = '0, in_odd = '0;
  logic out_valid, out_sop;
  logic signed [WIN_W-1:0] out_even, out_odd;
  int checks = 0, failures = 0;

  nuttall_window #(.N(N)) dut (.*);
  always #4 clk = ~clk;

  function automatic real wreal(int n);
    real a = 2.0 * 3.14159265358979323846 * n / (2.0 * N);
    return 0.3635819 - 0.4891775 * $cos(a) + 0.1365995 * $cos(2*a) - 0.0106411 * $cos(3*a);
  endfunction
  function automatic longint wq(int n);
    longint q = longint'($floor(wreal(n) * 131072.0 + 0.5));
    if (q > 131071) q = 131071;
    return q;
  endfunction
  function automatic longint floordiv512(longint v);
    return (v >= 0) ? v / 512 : -((-v + 511) / 512);
  endfunction

  typedef struct { longint e, o; bit sop; } exp_t;
  exp_t pipe [$];

  initial begin
    // coefficients against the exact window
    for (int n = 0; n < 2 * N; n++) begin
      checks++;
      if ((real'(wq(n)) / 131072.0 - wreal(n)) > 1.0e-5 || (wreal(n) - real'(wq(n)) / 131072.0) > 1.0e-5) begin
        failures++; $display("FAIL coef %0d", n);
      end
    end
    checks++;
    if (wq(N) != 131071 || wq(0) != 48) begin failures++; $display("FAIL window end points: w(0) = %0d", wq(0)); end
  end

  int cyc = 0;
  always @(negedge clk) if (rst_n) begin
    exp_t x;
    // check outputs for the sample driven two cycles ago
    if (pipe.size() == 2) begin
      x = pipe.pop_front();
      checks++;
      if (!out_valid || out_even != x.e || out_odd != x.o || out_sop != x.sop) begin
        failures++;
        $display("FAIL cyc %0d: got %0d %0d v%0d, expected %0d %0d", cyc, out_even, out_odd, out_valid, x.e, x.o);
      end
    end
    in_valid = 1;
    in_idx   = $urandom_range(0, N - 1);
    in_sop   = (in_idx == 0);
    in_even  = (cyc % 7 == 0) ? -512 : ADC_W'($urandom);
    in_odd   = (cyc % 11 == 0) ? 511 : ADC_W'($urandom);
    x.e = floordiv512(longint'(in_even) * wq(2 * in_idx));
    x.o = floordiv512(longint'(in_odd) * wq(2 * in_idx + 1));
    x.sop = in_sop;
    pipe.push_back(x);
    cyc++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (400) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
