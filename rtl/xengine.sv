// xengine: multiply-and-accumulate stage of the correlation spectrometer.
//
// Two channels arrive per clock from each ADC's 2-point FFT: channel k
// ("lo" path) and channel k+N ("hi" path), for ADC 1 (X1) and ADC 2 (X2).
// For every channel the block forms the three products the paper lists,
//   self 1 = |X1|^2,  self 2 = |X2|^2,  cross = X1 * conj(X2)
// (the cross product is complex, so it has a real and an imaginary
// accumulator), and adds them into 48-bit accumulators, one per channel
// and product, held in two accumulator memories of N words (lo and hi
// paths). The paper integrates 2048 FFT frames (about 134 ms) this way.
//
// Frame control comes from the acquisition controller as a frame_cfg_t,
// sampled on the first sample of each frame (in_sop):
//   acc   - accumulate this frame at all;
//   first - the frame restarts the accumulators (sum = product), so no
//           separate clearing pass is needed;
//   last  - the frame's sums (accumulator + product) are also written to the
//           output buffer page cfg.page; dump_done pulses after the frame's
//           last channel is written.
// With 18-bit inputs each product is below 2^35 and 2048 frames below 2^46,
// so the 48-bit accumulators cannot overflow.
//
// Pipeline: products are registered (1 cycle), then the read-modify-write
// of the accumulator and the output-buffer write happen on the next edge.
// The same address is revisited only N cycles later, so the read-modify-write
// needs no forwarding as long as N >= 2.
module xengine
  import dcs_pkg::*;
#(
  parameter int N = 8192   // channels per path (half the spectrum)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_sop,
  input  logic signed [XIN_W-1:0]   x1_lo_re, x1_lo_im, x1_hi_re, x1_hi_im,
  input  logic signed [XIN_W-1:0]   x2_lo_re, x2_lo_im, x2_hi_re, x2_hi_im,
  input  frame_cfg_t                cfg,          // sampled when in_sop
  // output buffer write port (both paths written together)
  output logic                      ob_we,
  output logic                      ob_page,
  output logic [$clog2(N)-1:0]      ob_addr,
  output spec_word_t                ob_lo,
  output spec_word_t                ob_hi,
  output logic                      dump_done     // last channel of an integration written
);

  localparam int AW = $clog2(N);

  function automatic spec_word_t products(input logic signed [XIN_W-1:0] ar, ai, br, bi);
    spec_word_t p;
    p.self1  = ACC_W'(ar * ar) + ACC_W'(ai * ai);
    p.self2  = ACC_W'(br * br) + ACC_W'(bi * bi);
    p.crossr = ACC_W'(ar * br) + ACC_W'(ai * bi);
    p.crossi = ACC_W'(ai * br) - ACC_W'(ar * bi);
    return p;
  endfunction

  function automatic spec_word_t add(input spec_word_t a, input spec_word_t b);
    spec_word_t s;
    s.self1  = a.self1  + b.self1;
    s.self2  = a.self2  + b.self2;
    s.crossr = a.crossr + b.crossr;
    s.crossi = a.crossi + b.crossi;
    return s;
  endfunction

  spec_word_t acc_lo [N];
  spec_word_t acc_hi [N];

  // Frame configuration and channel counter.
  frame_cfg_t    cur_cfg, cfg_now;
  logic [AW-1:0] k_cnt, k_now;
  assign cfg_now = in_sop ? cfg : cur_cfg;
  assign k_now   = in_sop ? '0 : k_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_cfg <= '0;
      k_cnt   <= '0;
    end else if (in_valid) begin
      cur_cfg <= cfg_now;
      k_cnt   <= k_now + 1'b1;
    end
  end

  // Stage 1: products.
  spec_word_t    p_lo, p_hi;
  logic [AW-1:0] k1;
  logic          v1;
  frame_cfg_t    cfg1;

  always_ff @(posedge clk) begin
    p_lo <= products(x1_lo_re, x1_lo_im, x2_lo_re, x2_lo_im);
    p_hi <= products(x1_hi_re, x1_hi_im, x2_hi_re, x2_hi_im);
    k1   <= k_now;
    cfg1 <= cfg_now;
  end

  logic v1_raw;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1_raw <= 1'b0;
    else        v1_raw <= in_valid;
  end
  assign v1 = v1_raw & cfg1.acc;

  // Stage 2: accumulate, and on the last frame write the sums out.
  spec_word_t sum_lo, sum_hi;
  assign sum_lo = cfg1.first ? p_lo : add(acc_lo[k1], p_lo);
  assign sum_hi = cfg1.first ? p_hi : add(acc_hi[k1], p_hi);

  always_ff @(posedge clk) begin
    if (v1) begin
      acc_lo[k1] <= sum_lo;
      acc_hi[k1] <= sum_hi;
    end
    ob_lo   <= sum_lo;
    ob_hi   <= sum_hi;
    ob_addr <= k1;
    ob_page <= cfg1.page;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_we     <= 1'b0;
      dump_done <= 1'b0;
    end else begin
      ob_we     <= v1 & cfg1.last;
      dump_done <= v1 & cfg1.last & (k1 == AW'(N - 1));
    end
  end

endmodule
