// tb_pratush_dcs_top_full: the spectrometer firmware at its default sizes
// (two 8192-point FFTs per input, 16384 channels, 2048 frames per
// integration, 64 channels per packet), taken through its first two
// integrations after a start: 2 x 2048 accumulated frames (2 x 134 ms of
// signal) and the 2 x 1024 UDP packets of spectrum sets 0 and 1, every
// channel of every product compared with the reference, both output pages
// used, and the time from start to the first packet checked against 2048
// frames of 8192 cycles. The ADC input repeats every frame so that one
// reference spectrum serves all frames. The top is instantiated with no
// parameter overrides; all checking is in dcs_top_bench. The run stops
// after the second set; the remaining 14 sets of the acquisition repeat the
// same mechanism (the stop after NUM_SPECTRA sets is covered at reduced
// size by tb_pratush_dcs_top).
`timescale 1ns/1ps
module tb_pratush_dcs_top_full;
  dcs_top_bench #(.N(8192), .ACC_FRAMES(2048), .NUM_SPECTRA(16), .CPP(64), .XQ(6),
                  .DEFAULTS(1), .PERIODIC(1), .N_ACQ(1), .SETS(2),
                  .EXPECT_STALL(0), .EXPECT_SAT(0), .WATCHDOG_CYCLES(40000000),
                  .NOISE(4.0), .TONE(4.0)) bench ();
endmodule
