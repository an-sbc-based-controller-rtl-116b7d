// tb_input_memory: checks the frame buffer of one lane. Random samples are
// written, first without gaps and then with random gaps; every sample must
// come out once, in order, in frames of exactly N consecutive valid cycles
// with out_sop on the first sample and out_idx counting 0..N-1. With a
// gap-free input a frame must start one cycle after its last sample is
// written.
`timescale 1ns/1ps
module tb_input_memory;
  import dcs_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [ADC_W-1:0] in_data = '0;
  logic out_valid, out_sop;
  logic [$clog2(N)-1:0] out_idx;
  logic signed [ADC_W-1:0] out_data;
  int checks = 0, failures = 0;

  input_memory #(.N(N)) dut (.*);

  always #4 clk = ~clk;

  logic signed [ADC_W-1:0] sent [$];
  int n_in = 0, n_out = 0, cyc = 0, last_write_cyc = -1, expect_start = -1;
  bit gaps = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // drive after the edge
  always @(negedge clk) if (rst_n) begin
    in_valid = gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
    in_data  = ADC_W'($urandom);
    if (in_valid) begin
      sent.push_back(in_data);
      n_in++;
      if (n_in % N == 0) last_write_cyc = cyc;
    end
  end

  int frame_pos = 0;
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (sent.size() == 0 || out_data !== sent[0] || out_idx != frame_pos[$clog2(N)-1:0] ||
          out_sop != (frame_pos == 0)) begin
        failures++;
        $display("FAIL out %0d: data %0d idx %0d sop %0d", n_out, out_data, out_idx, out_sop);
      end
      if (sent.size() > 0) void'(sent.pop_front());
      if (frame_pos == 0 && !gaps) begin
        checks++;
        // frame starts the cycle after its last write edge
        if (cyc != last_write_cyc + 2) begin
          failures++;
          $display("FAIL latency: frame at %0d, last write at %0d", cyc, last_write_cyc);
        end
      end
      frame_pos = (frame_pos + 1) % N;
      n_out++;
    end else if (frame_pos != 0) begin
      checks++; failures++;
      $display("FAIL: gap inside an output frame");
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (10 * N) @(posedge clk);
    gaps = 1;
    repeat (20 * N) @(posedge clk);
    checks++;
    if (n_out < 10 * N) begin failures++; $display("FAIL: only %0d outputs", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
