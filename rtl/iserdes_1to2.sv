// iserdes_1to2: 1:2 input deserialiser for one ADC channel.
//
// The ADC delivers one 10-bit sample per 250 MHz sample clock; the
// processing fabric runs at 125 MHz. Each fabric cycle therefore carries a
// pair of consecutive samples, the even one (earlier in time) and the odd
// one. This is the job of the ISERDES block in the firmware: the paper names
// the block, the 250 MHz sampling rate and the 125 MHz fabric clock; the
// circuit below is this design's own.
//
// Timing: clk_fast is the 250 MHz sample clock, clk_div the 125 MHz fabric
// clock, rising edges aligned (clk_div rises on every second clk_fast edge,
// as a clock manager would produce). In the clk_fast domain a phase bit
// alternates; on the edge that closes a pair the pair register is loaded,
// and clk_div samples it half a fabric period later. pair_valid rises once
// the first full pair has been captured after reset and stays high: the ADC
// streams without gaps. Samples are two's complement.
module iserdes_1to2
  import dcs_pkg::*;
#(
  parameter int W = ADC_W
) (
  input  logic                clk_fast,
  input  logic                clk_div,
  input  logic                rst_n,
  input  logic signed [W-1:0] adc_data,     // one sample per clk_fast
  output logic signed [W-1:0] even_sample,  // earlier sample of the pair
  output logic signed [W-1:0] odd_sample,   // later sample of the pair
  output logic                pair_valid
);

  logic                phase;       // 0: next sample is even, 1: odd
  logic signed [W-1:0] even_hold;
  logic signed [W-1:0] pair_even, pair_odd;
  logic                pair_ready;

  always_ff @(posedge clk_fast or negedge rst_n) begin
    if (!rst_n) begin
      phase      <= 1'b0;
      even_hold  <= '0;
      pair_even  <= '0;
      pair_odd   <= '0;
      pair_ready <= 1'b0;
    end else begin
      phase <= ~phase;
      if (!phase) begin
        even_hold <= adc_data;
      end else begin
        pair_even  <= even_hold;
        pair_odd   <= adc_data;
        pair_ready <= 1'b1;
      end
    end
  end

  // Fabric-domain capture. The pair register changes once every two
  // clk_fast cycles, i.e. at most once per clk_div period, so each pair is
  // captured exactly once whichever clk_fast edge loads it.
  always_ff @(posedge clk_div or negedge rst_n) begin
    if (!rst_n) begin
      even_sample <= '0;
      odd_sample  <= '0;
      pair_valid  <= 1'b0;
    end else begin
      even_sample <= pair_even;
      odd_sample  <= pair_odd;
      pair_valid  <= pair_ready;
    end
  end

endmodule
