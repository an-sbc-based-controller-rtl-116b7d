// input_memory: frame buffer for one lane of one ADC.
//
// The firmware has two input memories per ADC, one for the even samples and
// one for the odd samples of the 1:2 deserialised stream; each feeds one of
// the two 8192-point FFTs through the window multiplier. This module is one
// such memory: a ping-pong buffer of two pages of N samples. Samples are
// written into one page in arrival order; when the page is full it is
// handed to the read side, which replays it as a gap-free frame of N samples
// while the other page fills. The read side marks the first sample of each
// frame (out_sop) and gives the sample's position in the frame (out_idx),
// which addresses the window LUT.
//
// The paper names the block and says the FFT works on buffered samples; the
// ping-pong organisation and the frame framing are this design's choice.
// Latency: a frame starts on out_valid one cycle after its last sample was
// written (synchronous-read memory). With one input sample per cycle at most,
// the read side always finishes a page before the next one completes.
module input_memory
  import dcs_pkg::*;
#(
  parameter int N = 8192,   // samples per frame (length of one FFT)
  parameter int W = ADC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [W-1:0]      in_data,
  output logic                     out_valid,
  output logic                     out_sop,
  output logic [$clog2(N)-1:0]     out_idx,
  output logic signed [W-1:0]      out_data
);

  localparam int AW = $clog2(N);

  logic signed [W-1:0] mem [2*N];

  logic          wr_page;
  logic [AW-1:0] wr_addr;
  logic          rd_page;
  logic [AW-1:0] rd_addr;
  logic          rd_busy;
  logic          page_full;   // a completed page waits for the read side

  // Write side.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_page <= 1'b0;
      wr_addr <= '0;
    end else if (in_valid) begin
      wr_addr <= wr_addr + 1'b1;
      if (wr_addr == AW'(N - 1)) begin
        wr_addr <= '0;
        wr_page <= ~wr_page;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) mem[{wr_page, wr_addr}] <= in_data;
  end

  // Read side: replays a full page as one frame.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      page_full <= 1'b0;
      rd_busy   <= 1'b0;
      rd_page   <= 1'b0;
      rd_addr   <= '0;
    end else begin
      if (in_valid && wr_addr == AW'(N - 1)) page_full <= 1'b1;
      if (rd_busy) begin
        rd_addr <= rd_addr + 1'b1;
        if (rd_addr == AW'(N - 1)) begin
          rd_addr <= '0;
          rd_busy <= 1'b0;
          rd_page <= ~rd_page;
        end
      end
      // Start the next frame as soon as the previous one ends (or now).
      if ((page_full || (in_valid && wr_addr == AW'(N - 1))) &&
          (!rd_busy || rd_addr == AW'(N - 1))) begin
        rd_busy   <= 1'b1;
        page_full <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sop   <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= rd_busy;
      out_sop   <= rd_busy && rd_addr == '0;
      out_idx   <= rd_addr;
      out_data  <= mem[{rd_page, rd_addr}];
    end
  end

endmodule
