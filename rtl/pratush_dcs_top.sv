// pratush_dcs_top: signal-processing firmware of a two-input digital
// correlation spectrometer (FX architecture) with start-stop acquisition and
// UDP output.
//
// Data path, one copy per ADC unless noted:
//   ADC samples (10 bit, 250 Msps, clk_adc)
//   -> iserdes_1to2: pairs of samples on the 125 MHz fabric clock
//   -> input_memory x2: even and odd lanes framed into N-sample frames
//   -> nuttall_window: 18-bit 4-term Nuttall window over the 2N-sample frame
//   -> [two external N-point streaming FFT cores per ADC, fft_* ports]
//   -> twiddle_mult: W_2N^k applied to the odd-lane FFT
//   -> fft2_parallel: 2-point FFT giving channels k and k+N, requantised
//   -> xengine (shared): |X1|^2, |X2|^2, X1 conj(X2) accumulated over
//      ACC_FRAMES frames in 48-bit accumulators
//   -> output_buffer (shared, two pages)
//   -> udp_eth_tx (shared): UDP packets on a GMII byte stream
// acq_controller runs NUM_SPECTRA integrations per rising edge of start_acq.
//
// The four FFT cores are vendor IP in the original firmware and are not part
// of this RTL: the windowed lanes leave on fft_in_* and the FFT results come
// back on fft_out_*. Lane order: 0 = ADC 1 even, 1 = ADC 1 odd, 2 = ADC 2
// even, 3 = ADC 2 odd. The cores are expected to take a real input frame in
// natural order (fft_in_sop marks sample 0, imaginary part zero) and return
// the unscaled N-point transform in natural order, all four in lockstep,
// with fft_out_sop on bin 0. Their latency is free.
//
// Defaults follow the paper: N = 8192 (16384 channels), 2048 frames per
// integration, 16 integrations per start. XQ_SHIFT (X-engine input scaling)
// is this design's choice.
module pratush_dcs_top
  import dcs_pkg::*;
#(
  parameter int N           = 8192,
  parameter int ACC_FRAMES  = 2048,
  parameter int NUM_SPECTRA = 16,
  parameter int XQ_SHIFT    = 6,
  parameter int CH_PER_PKT  = 64
) (
  input  logic                          clk_adc,    // 250 MHz sample clock
  input  logic                          clk,        // 125 MHz fabric clock, edge-aligned
  input  logic                          rst_n,
  input  logic signed [ADC_W-1:0]       adc1_data,
  input  logic signed [ADC_W-1:0]       adc2_data,
  input  logic                          start_acq,  // start line from the SBC
  // to the four FFT cores
  output logic                          fft_in_valid,
  output logic                          fft_in_sop,
  output logic signed [WIN_W-1:0]       fft_in_re [4],
  // from the four FFT cores
  input  logic                          fft_out_valid,
  input  logic                          fft_out_sop,
  input  logic signed [FFT_OUT_W-1:0]   fft_out_re [4],
  input  logic signed [FFT_OUT_W-1:0]   fft_out_im [4],
  // Gigabit Ethernet (GMII transmit)
  output logic [7:0]                    gmii_txd,
  output logic                          gmii_tx_en,
  // status
  output logic                          running,
  output logic                          acq_done,
  output logic                          tx_busy,
  output logic                          sat_flag,
  output logic [31:0]                   stall_count
);

  localparam int AW = $clog2(N);

  // ---------------------------------------------------------------- ISERDES
  logic signed [ADC_W-1:0] pe [2], po [2];
  logic                    pv [2];

  iserdes_1to2 u_ser1 (.clk_fast(clk_adc), .clk_div(clk), .rst_n,
                       .adc_data(adc1_data), .even_sample(pe[0]), .odd_sample(po[0]),
                       .pair_valid(pv[0]));
  iserdes_1to2 u_ser2 (.clk_fast(clk_adc), .clk_div(clk), .rst_n,
                       .adc_data(adc2_data), .even_sample(pe[1]), .odd_sample(po[1]),
                       .pair_valid(pv[1]));

  // ----------------------------------------------------------- input memory
  logic                    mv [4], ms [4];
  logic [AW-1:0]           mi [4];
  logic signed [ADC_W-1:0] md [4];

  for (genvar a = 0; a < 2; a++) begin : g_mem
    input_memory #(.N(N)) u_even (.clk, .rst_n, .in_valid(pv[a]), .in_data(pe[a]),
      .out_valid(mv[2*a]), .out_sop(ms[2*a]), .out_idx(mi[2*a]), .out_data(md[2*a]));
    input_memory #(.N(N)) u_odd  (.clk, .rst_n, .in_valid(pv[a]), .in_data(po[a]),
      .out_valid(mv[2*a+1]), .out_sop(ms[2*a+1]), .out_idx(mi[2*a+1]), .out_data(md[2*a+1]));
  end

  // ------------------------------------------------------------------ window
  // All four lanes run in lockstep; lane 0 provides the frame timing.
  logic wv [2], ws [2];

  for (genvar a = 0; a < 2; a++) begin : g_win
    nuttall_window #(.N(N)) u_win (.clk, .rst_n,
      .in_valid(mv[0]), .in_sop(ms[0]), .in_idx(mi[0]),
      .in_even(md[2*a]), .in_odd(md[2*a+1]),
      .out_valid(wv[a]), .out_sop(ws[a]),
      .out_even(fft_in_re[2*a]), .out_odd(fft_in_re[2*a+1]));
  end

  assign fft_in_valid = wv[0];
  assign fft_in_sop   = ws[0];

  // -------------------------------------------------- twiddle + 2-point FFT
  logic                    tv [2], ts [2];
  logic signed [TWD_W-1:0] er [2], ei [2], tr [2], ti [2];
  logic                    bv [2], bs [2], bsat [2];
  logic signed [XIN_W-1:0] lo_re [2], lo_im [2], hi_re [2], hi_im [2];

  for (genvar a = 0; a < 2; a++) begin : g_tw
    twiddle_mult #(.N(N)) u_tw (.clk, .rst_n,
      .in_valid(fft_out_valid), .in_sop(fft_out_sop),
      .e_re(fft_out_re[2*a]), .e_im(fft_out_im[2*a]),
      .o_re(fft_out_re[2*a+1]), .o_im(fft_out_im[2*a+1]),
      .out_valid(tv[a]), .out_sop(ts[a]),
      .ed_re(er[a]), .ed_im(ei[a]), .t_re(tr[a]), .t_im(ti[a]));

    fft2_parallel #(.XQ_SHIFT(XQ_SHIFT)) u_bf (.clk, .rst_n,
      .in_valid(tv[a]), .in_sop(ts[a]),
      .e_re(er[a]), .e_im(ei[a]), .t_re(tr[a]), .t_im(ti[a]),
      .out_valid(bv[a]), .out_sop(bs[a]),
      .lo_re(lo_re[a]), .lo_im(lo_im[a]), .hi_re(hi_re[a]), .hi_im(hi_im[a]),
      .sat_flag(bsat[a]));
  end

  assign sat_flag = bsat[0] | bsat[1];

  // ---------------------------------------------------------------- control
  frame_cfg_t cfg;
  logic       dump_done;
  logic       tx_start, tx_page, tx_done;
  logic [15:0] tx_spec_idx;
  logic       ob_we, ob_page;
  logic [AW-1:0] ob_addr;
  spec_word_t ob_lo, ob_hi;

  acq_controller #(.ACC_FRAMES(ACC_FRAMES), .NUM_SPECTRA(NUM_SPECTRA)) u_ctl (
    .clk, .rst_n, .start_in(start_acq), .frame_sop(bv[0] & bs[0]), .cfg,
    .dump_done, .dump_page(ob_page),
    .tx_start, .tx_page, .tx_spec_idx, .tx_done,
    .running, .acq_done, .stall_count);

  // --------------------------------------------------------------- X-engine
  xengine #(.N(N)) u_x (.clk, .rst_n,
    .in_valid(bv[0]), .in_sop(bs[0]),
    .x1_lo_re(lo_re[0]), .x1_lo_im(lo_im[0]), .x1_hi_re(hi_re[0]), .x1_hi_im(hi_im[0]),
    .x2_lo_re(lo_re[1]), .x2_lo_im(lo_im[1]), .x2_hi_re(hi_re[1]), .x2_hi_im(hi_im[1]),
    .cfg, .ob_we, .ob_page, .ob_addr, .ob_lo, .ob_hi, .dump_done);

  // ------------------------------------------------- output buffer + Ethernet
  logic       rd_page;
  logic [AW:0] rd_chan;
  spec_word_t rd_data;

  output_buffer #(.N(N)) u_ob (.clk, .we(ob_we), .wr_page(ob_page), .wr_addr(ob_addr),
    .wr_lo(ob_lo), .wr_hi(ob_hi), .rd_page, .rd_chan, .rd_data);

  udp_eth_tx #(.N(N), .CH_PER_PKT(CH_PER_PKT)) u_eth (.clk, .rst_n,
    .start(tx_start), .page(tx_page), .spec_idx(tx_spec_idx),
    .rd_page, .rd_chan, .rd_data, .gmii_txd, .gmii_tx_en,
    .busy(tx_busy), .done(tx_done));

endmodule
