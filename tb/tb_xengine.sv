// tb_xengine: checks the multiply-and-accumulate stage. Frames of random
// 18-bit channel values are streamed for both ADCs; the frame configuration
// runs integrations of several frames, with frames skipped in between. A
// reference model in 64-bit integers accumulates |X1|^2, |X2|^2 and
// X1 conj(X2) per channel; on each integration's last frame every
// output-buffer write must carry the reference sums for that channel and
// page, and dump_done must pulse once, after the last channel.
`timescale 1ns/1ps
module tb_xengine;
  import dcs_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sop = 0;
  logic signed [XIN_W-1:0] x1_lo_re, x1_lo_im, x1_hi_re, x1_hi_im;
  logic signed [XIN_W-1:0] x2_lo_re, x2_lo_im, x2_hi_re, x2_hi_im;
  frame_cfg_t cfg = '0;
  logic ob_we, ob_page, dump_done;
  logic [$clog2(N)-1:0] ob_addr;
  spec_word_t ob_lo, ob_hi;
  int checks = 0, failures = 0;

  xengine #(.N(N)) dut (.*);
  always #4 clk = ~clk;

  longint r_s1 [2*N], r_s2 [2*N], r_cr [2*N], r_ci [2*N];   // reference accumulators
  longint e_s1 [2][2*N], e_s2 [2][2*N], e_cr [2][2*N], e_ci [2][2*N]; // expected dump per page
  int writes = 0, dumps = 0, integrations = 0;

  function automatic longint rv(); return longint'($signed($urandom)) >>> 14; endfunction

  task automatic send_frame(input frame_cfg_t c);
    for (int k = 0; k < N; k++) begin
      longint a [8];
      @(negedge clk);
      // occasional gap inside the frame
      while ($urandom_range(0, 9) == 0) begin in_valid = 0; @(negedge clk); end
      foreach (a[i]) a[i] = rv();
      if (k % 5 == 0) begin a[0] = -131072; a[1] = -131072; a[4] = 131071; a[5] = -131072; end
      in_valid = 1; in_sop = (k == 0); cfg = (k == 0) ? c : frame_cfg_t'($urandom);
      {x1_lo_re, x1_lo_im, x1_hi_re, x1_hi_im} = {XIN_W'(a[0]), XIN_W'(a[1]), XIN_W'(a[2]), XIN_W'(a[3])};
      {x2_lo_re, x2_lo_im, x2_hi_re, x2_hi_im} = {XIN_W'(a[4]), XIN_W'(a[5]), XIN_W'(a[6]), XIN_W'(a[7])};
      if (c.acc) begin
        for (int h = 0; h < 2; h++) begin
          int ch = k + h * N;
          longint ar = a[2*h], ai = a[2*h+1], br = a[4+2*h], bi = a[5+2*h];
          if (c.first) begin r_s1[ch] = 0; r_s2[ch] = 0; r_cr[ch] = 0; r_ci[ch] = 0; end
          r_s1[ch] += ar*ar + ai*ai;  r_s2[ch] += br*br + bi*bi;
          r_cr[ch] += ar*br + ai*bi;  r_ci[ch] += ai*br - ar*bi;
          if (c.last) begin
            e_s1[c.page][ch] = r_s1[ch]; e_s2[c.page][ch] = r_s2[ch];
            e_cr[c.page][ch] = r_cr[ch]; e_ci[c.page][ch] = r_ci[ch];
          end
        end
      end
    end
    @(negedge clk); in_valid = 0; in_sop = 0;
  endtask

  function automatic bit same(spec_word_t w, int pg, int ch);
    return w.self1 == ACC_W'(e_s1[pg][ch]) && w.self2 == ACC_W'(e_s2[pg][ch]) &&
           w.crossr == ACC_W'(e_cr[pg][ch]) && w.crossi == ACC_W'(e_ci[pg][ch]);
  endfunction

  // writes are checked as they happen (the expected values are complete:
  // a channel's write follows its input by two cycles)
  always @(posedge clk) if (rst_n) begin
    if (ob_we) begin
      checks++;
      writes++;
      if (!same(ob_lo, ob_page, ob_addr) || !same(ob_hi, ob_page, ob_addr + N)) begin
        failures++;
        $display("FAIL write page %0d addr %0d: self1 %0d expected %0d", ob_page, ob_addr,
                 ob_lo.self1, e_s1[ob_page][ob_addr]);
      end
    end
    if (dump_done) begin
      dumps++;
      checks++;
      if (!(ob_we && ob_addr == N - 1)) begin failures++; $display("FAIL dump_done not on last write"); end
    end
  end

  initial begin
    frame_cfg_t c;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 6; it++) begin
      int nf = (it % 3) + 1;   // 1, 2 or 3 frames per integration
      for (int f = 0; f < nf; f++) begin
        c.acc = 1; c.first = (f == 0); c.last = (f == nf - 1); c.page = it[0];
        send_frame(c);
      end
      integrations++;
      c = '0;                  // a skipped frame: must not disturb anything
      send_frame(c);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (writes != 6 * N || dumps != 6) begin
      failures++; $display("FAIL: %0d writes, %0d dumps", writes, dumps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
