// dcs_top_bench: end-to-end bench for pratush_dcs_top, used by
// tb_pratush_dcs_top (reduced sizes) and tb_pratush_dcs_top_full (the
// design's default sizes).
//
// The bench plays the parts outside the firmware: two ADCs (tone plus
// noise, with a noise component common to both inputs so that the cross
// spectrum is not empty), the four FFT cores (fft_model), and the SBC,
// which raises the start line and captures the UDP packets from the GMII
// port. Every received spectrum set is compared with a floating-point
// reference computed here from the ADC samples without the split-FFT
// structure: each 2N-sample frame is windowed (18-bit window, truncated to
// the firmware's 18-bit sample format), transformed by one 2N-point FFT,
// scaled to the X-engine input format and turned into self and cross
// powers, which are summed over the ACC_FRAMES frames of the integration.
// With random input (PERIODIC = 0) the bench finds which run of consecutive
// frames an integration covered; with an input that repeats every frame
// (PERIODIC = 1) every frame has the same spectrum.
//
// Mechanisms counted: acquisitions run, start edges ignored during a run,
// integrations checked, frames skipped because both output pages were busy
// (stall), saturation at the X-engine input, acq_done. Each one the
// configuration is meant to show must happen at least once.
`timescale 1ns/1ps
module dcs_top_bench
  import dcs_pkg::*;
  import tb_dsp_pkg::*;
#(
  parameter int N           = 8,
  parameter int ACC_FRAMES  = 4,
  parameter int NUM_SPECTRA = 3,
  parameter int CPP         = 8,
  parameter int XQ          = 6,
  parameter bit DEFAULTS    = 0,    // instantiate the top without overrides
  parameter bit PERIODIC    = 0,
  parameter int N_ACQ       = 2,    // acquisitions to run
  parameter int SETS        = 6,    // spectrum sets to check before finishing
  parameter bit EXPECT_STALL = 1,
  parameter bit EXPECT_SAT   = 1,
  parameter longint WATCHDOG_CYCLES = 400000,
  parameter real NOISE      = 8.0,  // half-range of each uniform noise term (LSB)
  parameter real TONE       = 6.0   // tone amplitude (LSB)
) ();

  localparam int L    = 2 * N;                 // samples per frame = channels
  localparam int NPKT = L / CPP;               // packets per product
  localparam int FRAME_BYTES = 66 + 8 * CPP + 4;

  logic clk_adc = 0, clk = 0, rst_n = 0;
  logic signed [ADC_W-1:0] adc1_data = '0, adc2_data = '0;
  logic start_acq = 0;
  logic fft_in_valid, fft_in_sop;
  logic signed [WIN_W-1:0] fft_in_re [4];
  logic fft_out_valid, fft_out_sop;
  logic signed [FFT_OUT_W-1:0] fft_out_re [4], fft_out_im [4];
  logic [7:0] gmii_txd;
  logic gmii_tx_en, running, acq_done, tx_busy, sat_flag;
  logic [31:0] stall_count;

  if (DEFAULTS) begin : g_full
    pratush_dcs_top dut (.*);
  end else begin : g_red
    pratush_dcs_top #(.N(N), .ACC_FRAMES(ACC_FRAMES), .NUM_SPECTRA(NUM_SPECTRA),
                      .XQ_SHIFT(XQ), .CH_PER_PKT(CPP)) dut (.*);
  end

  logic mv [4], ms [4];
  for (genvar i = 0; i < 4; i++) begin : g_fft
    fft_model #(.N(N)) u_fft (.clk, .in_valid(fft_in_valid), .in_sop(fft_in_sop),
      .in_re(fft_in_re[i]), .out_valid(mv[i]), .out_sop(ms[i]),
      .out_re(fft_out_re[i]), .out_im(fft_out_im[i]));
  end
  assign fft_out_valid = mv[0];
  assign fft_out_sop   = ms[0];

  // Clocks: 250 MHz and 125 MHz with aligned rising edges.
  always #2 clk_adc = ~clk_adc;
  initial begin
    #2;
    forever begin clk = 1; #4; clk = 0; #4; end
  end

  int checks = 0, failures = 0;
  `define CHK(c, msg) begin checks++; if (!(c)) begin failures++; $display("FAIL: %s", msg); end end

  // ------------------------------------------------------------ reference
  int  wq [];                       // 18-bit window
  real pref [$][4][];               // per-frame products [frame][prod][ch]
  real tref [$][];                  // per-frame tolerance [frame][ch]

  function automatic longint fdiv512(longint v);
    return (v >= 0) ? v / 512 : -((-v + 511) / 512);
  endfunction

  function automatic real clip(real v);
    if (v > 131071.0) return 131071.0;
    if (v < -131072.0) return -131072.0;
    return v;
  endfunction

  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction

  task automatic frame_reference(input int s1[], input int s2[]);
    real r1[], i1[], r2[], i2[];
    real p[4][];
    real t[];
    real sc = 1.0 / real'(longint'(1) << XQ);
    r1 = new[L]; i1 = new[L]; r2 = new[L]; i2 = new[L]; t = new[L];
    foreach (p[k]) p[k] = new[L];
    for (int n = 0; n < L; n++) begin
      r1[n] = real'(fdiv512(longint'(s1[n]) * wq[n])); i1[n] = 0.0;
      r2[n] = real'(fdiv512(longint'(s2[n]) * wq[n])); i2[n] = 0.0;
    end
    fft(r1, i1);
    fft(r2, i2);
    for (int k = 0; k < L; k++) begin
      real ar = clip(r1[k] * sc), ai = clip(i1[k] * sc), br = clip(r2[k] * sc), bi = clip(i2[k] * sc);
      real m = absr(ar) + absr(ai) + absr(br) + absr(bi);
      real e = 2.0 + 2.0e-5 * m;
      p[0][k] = ar * ar + ai * ai;
      p[1][k] = br * br + bi * bi;
      p[2][k] = ar * br + ai * bi;
      p[3][k] = ai * br - ar * bi;
      t[k] = 2.0 * m * e + 4.0 * e * e;
    end
    pref.push_back(p);
    tref.push_back(t);
  endtask

  // ------------------------------------------------------------ ADC stimulus
  int  s1buf[], s2buf[];
  int  pat1[], pat2[];
  longint nsamp = 0;
  bit  burst = 0;

  function automatic int noise();
    return int'($floor(($urandom_range(0, 1000000) / 1000000.0 * 2.0 - 1.0) * NOISE + 0.5));
  endfunction

  function automatic int sample(int which, longint n, bit big);
    real v;
    if (big) return (n % 2) ? 400 : -400;
    v = TONE * $cos(2.0 * PI * (which == 1 ? 3.0 : 5.0) * real'(n % L) / real'(L));
    return int'($floor(v + 0.5));
  endfunction

  initial begin
    wq = new[L];
    for (int n = 0; n < L; n++) begin
      real q;
      q = $floor(nuttall(n, L) * 131072.0 + 0.5);
      wq[n] = (q > 131071.0) ? 131071 : int'(q);
    end
    s1buf = new[L]; s2buf = new[L];
    if (PERIODIC) begin
      pat1 = new[L]; pat2 = new[L];
      for (int n = 0; n < L; n++) begin
        int c;
        c = noise();
        pat1[n] = sample(1, n, 0) + noise() + c;
        pat2[n] = sample(2, n, 0) + noise() + c;
      end
      frame_reference(pat1, pat2);
    end
  end

  always @(negedge clk_adc) begin
    if (rst_n) begin
      int a, b, c, pos;
      pos = int'(nsamp % L);
      if (PERIODIC) begin
        a = pat1[pos]; b = pat2[pos];
      end else begin
        c = noise();
        a = sample(1, nsamp, burst) + (burst ? 0 : noise() + c);
        b = sample(2, nsamp, burst) + (burst ? 0 : noise() + c);
      end
      adc1_data = ADC_W'(a);
      adc2_data = ADC_W'(b);
      if (!PERIODIC) begin
        s1buf[pos] = a; s2buf[pos] = b;
        if (pos == L - 1) frame_reference(s1buf, s2buf);
      end
      nsamp++;
    end
  end

  // ------------------------------------------------------------ packet capture
  byte unsigned fr [$];
  longint got [4][];
  longint cyc = 0, t_run = 0;
  bit first_pkt_pending = 0;
  int pk_in_set = 0, sets = 0, next_f = 0, packets = 0;
  int integrations_ok = 0;

  function automatic longint unsigned be(int off, int n);
    longint unsigned v = 0;
    for (int i = 0; i < n; i++) v = (v << 8) | fr[off + i];
    return v;
  endfunction

  task automatic check_set(int spec);
    int found = -1;
    string why = "no frames left to match";
    int last_f;
    `CHK(spec == sets % NUM_SPECTRA, "spectrum index in packet header")
    last_f = PERIODIC ? 0 : pref.size() - ACC_FRAMES;
    for (int f = (PERIODIC ? 0 : next_f); f <= last_f && found < 0; f++) begin
      bit ok = 1;
      for (int k = 0; k < L && ok; k++)
        for (int p = 0; p < 4 && ok; p++) begin
          real s = 0.0, t = 0.0;
          if (PERIODIC) begin
            s = pref[0][p][k] * ACC_FRAMES; t = tref[0][k] * ACC_FRAMES;
          end else
            for (int g = f; g < f + ACC_FRAMES; g++) begin s += pref[g][p][k]; t += tref[g][k]; end
          if (absr(real'(got[p][k]) - s) > t) begin
            ok = 0;
            if (f == next_f)
              why = $sformatf("set %0d ch %0d prod %0d: got %0d, frames from %0d give %f (tol %f)",
                              sets, k, p, got[p][k], f, s, t);
          end
        end
      if (ok) found = f;
    end
    if (found < 0) $display("%s", why);
    `CHK(found >= 0, "integrated spectra match the reference")
    if (found >= 0) begin
      integrations_ok++;
      next_f = found + ACC_FRAMES;
    end
    sets++;
  endtask

  always @(posedge clk) begin
    if (!rst_n) fr.delete();
    else if (gmii_tx_en) begin
      // First byte of the first packet of a run: the first integration has
      // just ended. It must take ACC_FRAMES frames of N cycles (134 ms at the
      // defaults), plus at most one frame of waiting for a frame boundary.
      if (fr.size() == 0 && first_pkt_pending) begin
        longint dt;
        dt = cyc - t_run;
        first_pkt_pending = 0;
        $display("first integration of the run: %0d cycles = %f ms at 125 MHz", dt, real'(dt) * 8.0e-6);
        `CHK(dt >= longint'(ACC_FRAMES) * N && dt <= longint'(ACC_FRAMES + 1) * N + 40,
             "integration time from start to first packet")
      end
      fr.push_back(gmii_txd);
    end
    else if (fr.size() > 0) begin
      packets++;
      `CHK(fr.size() == FRAME_BYTES && be(50, 4) == 32'hA5A55A5A, "packet length and marker")
      if (fr.size() == FRAME_BYTES) begin
        int prod, fc;
        prod = fr[56];
        fc   = int'(be(60, 2));
        for (int j = 0; j < CPP; j++) got[prod][fc + j] = longint'(be(66 + 8 * j, 8));
        pk_in_set++;
        if (pk_in_set == 4 * NPKT) begin
          pk_in_set = 0;
          check_set(int'(be(54, 2)));
        end
      end
      fr.delete();
    end
  end

  // ------------------------------------------------------------ mechanisms
  int runs = 0, dones = 0, sat_events = 0, ignored_starts = 0;
  logic running_q = 0;
  always @(posedge clk) begin
    cyc++;
    running_q <= rst_n && running;
    if (rst_n) begin
      if (running && !running_q) begin
        runs++;
        t_run = cyc;
        first_pkt_pending = 1;
      end
      if (acq_done) dones++;
      if (sat_flag) sat_events++;
    end
  end

  task automatic pulse_start();
    @(negedge clk); start_acq = 1;
    repeat (6) @(negedge clk); start_acq = 0;
  endtask

  task automatic finish();
    $display("mechanisms: runs=%0d ignored_starts=%0d integrations_checked=%0d stalls=%0d saturations=%0d acq_done=%0d packets=%0d",
             runs, ignored_starts, integrations_ok, stall_count, sat_events, dones, packets);
    `CHK(integrations_ok == SETS, "every expected set received and checked")
    `CHK(runs >= 1, "mechanism: acquisition started")
    if (N_ACQ > 1) begin
      `CHK(runs == N_ACQ, "mechanism: one run per start, start during a run ignored")
      `CHK(ignored_starts >= 1, "mechanism: start during a run")
      `CHK(dones == N_ACQ, "mechanism: acquisition stops after NUM_SPECTRA sets")
    end
    if (EXPECT_STALL) `CHK(stall_count > 0, "mechanism: frames skipped while output pages busy")
    if (EXPECT_SAT)   `CHK(sat_events > 0, "mechanism: X-engine input saturation reported")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    for (int p = 0; p < 4; p++) got[p] = new[L];
    #43 rst_n = 1;
    // let the frame pipeline (input memory and FFT) fill before starting
    repeat (3 * N + 20) @(negedge clk);
    for (int a = 0; a < N_ACQ; a++) begin
      pulse_start();
      if (N_ACQ > 1) begin
        repeat (200) @(negedge clk);
        if (running) ignored_starts++;
        pulse_start();
      end
      if (N_ACQ > 1) begin
        wait (acq_done);
        repeat (5) @(negedge clk);
        // out-of-range input between runs: saturates, never integrated
        burst = 1;
        repeat (3 * N) @(negedge clk);
        burst = 0;
        repeat (6 * N) @(negedge clk);
      end
    end
    wait (sets >= SETS);
    repeat (10) @(negedge clk);
    finish();
  end

  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog: %0d sets received", sets);
    finish();
  end
endmodule
