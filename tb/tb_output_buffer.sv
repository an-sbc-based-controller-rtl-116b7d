// tb_output_buffer: checks the two-page spectrum buffer. Both pages are
// filled with random words through the two-channel write port, then every
// channel 0..2N-1 of both pages is read back in random order; each read must
// return, one cycle later, the word written for that page and channel
// (channel k from the lo write data, channel k+N from the hi write data).
`timescale 1ns/1ps
module tb_output_buffer;
  import dcs_pkg::*;
  localparam int N = 8;
  logic clk = 0;
  logic we = 0, wr_page = 0, rd_page = 0;
  logic [$clog2(N)-1:0] wr_addr = '0;
  logic [$clog2(N):0] rd_chan = '0;
  spec_word_t wr_lo, wr_hi, rd_data;
  int checks = 0, failures = 0;

  output_buffer #(.N(N)) dut (.*);
  always #4 clk = ~clk;

  spec_word_t ref_mem [2][2*N];

  function automatic spec_word_t rw();
    spec_word_t w;
    w.self1 = {$urandom, $urandom}; w.self2 = {$urandom, $urandom};
    w.crossr = {$urandom, $urandom}; w.crossi = {$urandom, $urandom};
    return w;
  endfunction

  initial begin
    for (int rep = 0; rep < 2; rep++) begin
      for (int p = 0; p < 2; p++)
        for (int k = 0; k < N; k++) begin
          @(negedge clk);
          we = 1; wr_page = p[0]; wr_addr = k[$clog2(N)-1:0];
          wr_lo = rw(); wr_hi = rw();
          ref_mem[p][k] = wr_lo; ref_mem[p][k+N] = wr_hi;
        end
      @(negedge clk); we = 0;
      for (int i = 0; i < 8 * N; i++) begin
        int p = $urandom_range(0, 1), c = $urandom_range(0, 2 * N - 1);
        rd_page = p[0]; rd_chan = c[$clog2(N):0];
        // a write to the other page during reads must not disturb them
        we = 1; wr_page = ~p[0]; wr_addr = '0; wr_lo = ref_mem[~p[0]][0]; wr_hi = ref_mem[~p[0]][N];
        @(negedge clk);
        we = 0;
        checks++;
        if (rd_data !== ref_mem[p][c]) begin
          failures++; $display("FAIL read page %0d channel %0d", p, c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
