// tb_acq_controller: checks start-stop acquisition control. Frame starts
// arrive every FRAME cycles. A model of the X-engine reports dump_done a
// frame after each integration's last frame, and a model of the Ethernet
// interface takes TX cycles per transfer, long enough that the two output
// pages fill and the controller must skip frames (stall). Checked: each
// integration is exactly ACC_FRAMES consecutive frames with first/last on
// its ends; pages alternate; transfers go out in order with spectrum
// indices 0..NUM_SPECTRA-1; the run stops with acq_done after NUM_SPECTRA
// transfers; a start edge during a run is ignored; a second start runs again.
`timescale 1ns/1ps
module tb_acq_controller;
  import dcs_pkg::*;
  localparam int ACC_FRAMES = 3, NUM_SPECTRA = 4, FRAME = 10, TX = 70;
  logic clk = 0, rst_n = 0;
  logic start_in = 0, frame_sop = 0, dump_done = 0, dump_page = 0, tx_done = 0;
  frame_cfg_t cfg;
  logic tx_start, tx_page, running, acq_done;
  logic [15:0] tx_spec_idx;
  logic [31:0] stall_count;
  int checks = 0, failures = 0;

  acq_controller #(.ACC_FRAMES(ACC_FRAMES), .NUM_SPECTRA(NUM_SPECTRA)) dut (.*);
  always #4 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // frame starts
  always @(negedge clk) frame_sop = rst_n && (cyc % FRAME == 0);

  // observe frame decisions; model the X-engine dump one frame later
  int fr_in_int = 0, ints = 0, last_page = 1, dump_at = -1, dump_pg = 0;
  int done_count = 0, tx_count = 0, tx_end = -1;
  int exp_idx = 0;
  always @(posedge clk) if (rst_n) begin
    dump_done <= 0; tx_done <= 0;
    if (frame_sop && cfg.acc) begin
      checks++;
      if (cfg.first != (fr_in_int == 0) || cfg.last != (fr_in_int == ACC_FRAMES - 1)) begin
        failures++; $display("FAIL frame flags at %0d: first %0d last %0d (frame %0d)", cyc, cfg.first, cfg.last, fr_in_int);
      end
      if (cfg.first) begin
        checks++;
        if (cfg.page == last_page[0]) begin failures++; $display("FAIL pages do not alternate"); end
        last_page = cfg.page;
      end
      fr_in_int = (fr_in_int + 1) % ACC_FRAMES;
      if (cfg.last) begin ints++; dump_at = cyc + FRAME; dump_pg = cfg.page; end
    end else if (frame_sop && fr_in_int != 0) begin
      checks++; failures++; $display("FAIL: integration interrupted");
    end
    if (cyc == dump_at) begin dump_done <= 1; dump_page <= dump_pg[0]; end
    if (tx_start) begin
      checks++;
      if (tx_spec_idx != 16'(exp_idx)) begin failures++; $display("FAIL spectrum index %0d", tx_spec_idx); end
      exp_idx++;
      tx_end = cyc + TX;
    end
    if (cyc == tx_end) begin tx_done <= 1; tx_count++; end
    if (acq_done) done_count++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    start_in = 1; repeat (4) @(negedge clk); start_in = 0;
    repeat (100) @(negedge clk);
    start_in = 1; repeat (4) @(negedge clk); start_in = 0;   // ignored: run in progress
    wait (acq_done);
    repeat (2) @(negedge clk);
    checks++;
    if (ints != NUM_SPECTRA || tx_count != NUM_SPECTRA || done_count != 1 || running) begin
      failures++; $display("FAIL run 1: %0d integrations, %0d transfers, done %0d", ints, tx_count, done_count);
    end
    checks++;
    if (stall_count == 0) begin failures++; $display("FAIL: no stall happened"); end
    repeat (50) @(negedge clk);
    checks++;
    if (ints != NUM_SPECTRA) begin failures++; $display("FAIL: integration after stop"); end
    // second acquisition
    exp_idx = 0;
    start_in = 1; repeat (4) @(negedge clk); start_in = 0;
    wait (acq_done);
    @(negedge clk);
    checks++;
    if (ints != 2 * NUM_SPECTRA || tx_count != 2 * NUM_SPECTRA) begin
      failures++; $display("FAIL run 2: %0d integrations, %0d transfers", ints, tx_count);
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
