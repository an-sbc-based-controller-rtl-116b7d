// tb_iserdes_1to2: checks the 1:2 deserialiser. A random 10-bit sample
// stream is driven at the 250 MHz sample clock; every 125 MHz fabric cycle
// must then deliver the next two samples of the stream, earlier one on the
// even output, without gaps or repeats once pair_valid is high.
`timescale 1ns/1ps
module tb_iserdes_1to2;
  import dcs_pkg::*;
  logic clk_fast = 0, clk_div = 0, rst_n = 0;
  logic signed [ADC_W-1:0] adc_data = '0;
  logic signed [ADC_W-1:0] ev, od;
  logic pv;
  int checks = 0, failures = 0;

  iserdes_1to2 dut (.clk_fast, .clk_div, .rst_n, .adc_data,
                    .even_sample(ev), .odd_sample(od), .pair_valid(pv));

  always #2 clk_fast = ~clk_fast;
  always #4 clk_div  = ~clk_div;

  logic signed [ADC_W-1:0] hist [$];
  // new sample after every rising sample-clock edge
  always @(negedge clk_fast) begin
    adc_data = ADC_W'($urandom);
    hist.push_back(adc_data);
  end

  int pos = -1;   // history index expected for the next even sample
  int pairs = 0;
  always @(negedge clk_div) if (rst_n) begin
    if (pv) begin
      if (pos < 0) begin
        for (int i = 0; i + 1 < hist.size(); i++)
          if (hist[i] == ev && hist[i+1] == od) begin pos = i; break; end
        checks++;
        if (pos < 0) begin failures++; $display("FAIL: first pair not found in the stream"); end
        else pos += 2;
      end else begin
        checks++;
        if (ev !== hist[pos] || od !== hist[pos+1]) begin
          failures++;
          $display("FAIL pair %0d: got %0d,%0d expected %0d,%0d", pairs, ev, od, hist[pos], hist[pos+1]);
        end
        pos += 2;
      end
      pairs++;
    end
  end

  initial begin
    repeat (3) @(posedge clk_div);
    #1 rst_n = 1;
    repeat (200) @(posedge clk_div);
    // one pair per fabric cycle: 200 cycles give at least 195 pairs
    checks++;
    if (pairs < 195) begin failures++; $display("FAIL: only %0d pairs", pairs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
