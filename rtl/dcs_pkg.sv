// dcs_pkg: types, widths and helper functions shared by the digital
// correlation spectrometer (DCS) firmware.
//
// The spectrometer digitises two analog inputs at 250 Msps with 10-bit
// ADCs, windows each 16384-sample frame with a 4-term Nuttall window,
// transforms it with two 8192-point FFTs joined by a 2-point FFT, and
// accumulates the two self-power spectra and the cross-power spectrum over
// 2048 frames in 48-bit accumulators. Widths that follow the paper:
// 10-bit samples, 18-bit window and twiddle coefficients, 48-bit
// accumulators. The intermediate widths (18-bit windowed sample, 32-bit FFT
// output, 18-bit X-engine input) are this design's choice, picked so that
// 18x18-bit products summed over 2048 frames can never overflow 48 bits.
// Each module uses only some of these constants, so a lint run on a single
// module reports the others as unused parameters; that is expected.
package dcs_pkg;

  localparam int ADC_W     = 10;  // ADC sample width (paper)
  localparam int COEF_W    = 18;  // window and twiddle coefficient width (paper)
  localparam int WIN_W     = 18;  // windowed sample width into the FFT (assumed)
  localparam int FFT_OUT_W = 32;  // FFT output width: 18 + log2(8192) + 1 (unscaled FFT)
  localparam int TWD_W     = 33;  // twiddled odd-branch width
  localparam int BF_W      = 34;  // 2-point FFT output width before requantisation
  localparam int XIN_W     = 18;  // X-engine input width (assumed, DSP48 18-bit port)
  localparam int ACC_W     = 48;  // accumulator width (paper)

  // Index of each accumulated product in the output buffer and packets.
  typedef enum logic [1:0] {
    PROD_SELF1  = 2'd0,
    PROD_SELF2  = 2'd1,
    PROD_CROSSR = 2'd2,
    PROD_CROSSI = 2'd3
  } prod_e;

  // One channel of integrated spectra.
  typedef struct packed {
    logic signed [ACC_W-1:0] crossi;
    logic signed [ACC_W-1:0] crossr;
    logic        [ACC_W-1:0] self2;
    logic        [ACC_W-1:0] self1;
  } spec_word_t;

  // Per-frame control handed from the acquisition controller to the X-engine.
  typedef struct packed {
    logic acc;    // accumulate this frame
    logic first;  // first frame of an integration: accumulators restart
    logic last;   // last frame: sums go to the output buffer
    logic page;   // output buffer page written on the last frame
  } frame_cfg_t;

  // Fixed patterns placed in every UDP payload header (assumed values).
  localparam logic [31:0] PKT_MARKER  = 32'hA5A5_5A5A;
  localparam logic [31:0] PKT_TRAILER = 32'h0F0F_F0F0;

  // Ethernet CRC-32 (IEEE 802.3, reflected, polynomial 0xEDB88320), one byte.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc ^ {24'd0, d};
    for (int i = 0; i < 8; i++)
      c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    return c;
  endfunction

endpackage
