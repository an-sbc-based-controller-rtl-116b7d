// tb_pratush_dcs_top: end-to-end test of the spectrometer firmware at
// reduced sizes (16 channels, 4 frames per integration, 3 integrations per
// start, 8 channels per packet): two acquisitions with random input, a
// start edge during a run, saturating input between runs, and more Ethernet
// traffic than the short integrations allow, so frames must be skipped.
// All checking is in dcs_top_bench.
`timescale 1ns/1ps
module tb_pratush_dcs_top;
  dcs_top_bench #(.N(8), .ACC_FRAMES(4), .NUM_SPECTRA(3), .CPP(8), .XQ(2),
                  .DEFAULTS(0), .PERIODIC(0), .N_ACQ(2), .SETS(6),
                  .EXPECT_STALL(1), .EXPECT_SAT(1), .WATCHDOG_CYCLES(400000),
                  .NOISE(8.0), .TONE(6.0)) bench ();
endmodule
