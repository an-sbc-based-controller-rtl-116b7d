// output_buffer: on-chip memory holding integrated spectra for the Ethernet
// interface.
//
// The X-engine writes one finished integration into a page of this buffer
// during the integration's last frame, two channels per clock (channel k on
// the lo path, channel k+N on the hi path). The Ethernet interface then
// reads it one channel at a time, in channel order 0 .. 2N-1. The paper
// describes an on-chip memory for the integrated spectra with a shared
// Ethernet buffer; using two pages, so that one integration can be sent while
// the next one is written, is this design's choice.
//
// Organisation: two pages x two banks (lo, hi) x N words of spec_word_t.
// Read address = {page, channel}; channel bit log2(N) selects the bank.
// Synchronous read, 1 cycle latency.
module output_buffer
  import dcs_pkg::*;
#(
  parameter int N = 8192
) (
  input  logic                    clk,
  // write port (from the X-engine)
  input  logic                    we,
  input  logic                    wr_page,
  input  logic [$clog2(N)-1:0]    wr_addr,
  input  spec_word_t              wr_lo,
  input  spec_word_t              wr_hi,
  // read port (to the Ethernet interface)
  input  logic                    rd_page,
  input  logic [$clog2(N):0]      rd_chan,     // 0 .. 2N-1
  output spec_word_t              rd_data
);

  localparam int AW = $clog2(N);

  spec_word_t bank_lo [2*N];
  spec_word_t bank_hi [2*N];

  always_ff @(posedge clk) begin
    if (we) begin
      bank_lo[{wr_page, wr_addr}] <= wr_lo;
      bank_hi[{wr_page, wr_addr}] <= wr_hi;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_chan[AW]) rd_data <= bank_hi[{rd_page, rd_chan[AW-1:0]}];
    else             rd_data <= bank_lo[{rd_page, rd_chan[AW-1:0]}];
  end

endmodule
