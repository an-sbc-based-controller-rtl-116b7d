// fft_model: behavioural model of a streaming N-point FFT core (the
// spectrometer uses vendor FFT IP here). Not synthesizable.
//
// Takes a real input frame in natural order, one sample per valid cycle,
// with in_sop on sample 0. When a frame is complete its unscaled transform
// X[k] = sum x[n] exp(-j 2 pi n k / N), rounded to integers, is queued and
// then streamed out in natural order, one bin per clock without gaps, with
// out_sop on bin 0. The first bin leaves the cycle after the frame's last
// sample arrived. Instances fed the same timing run in lockstep.
module fft_model
  import dcs_pkg::*;
  import tb_dsp_pkg::*;
#(
  parameter int N = 8192
) (
  input  logic                          clk,
  input  logic                          in_valid,
  input  logic                          in_sop,
  input  logic signed [WIN_W-1:0]       in_re,
  output logic                          out_valid,
  output logic                          out_sop,
  output logic signed [FFT_OUT_W-1:0]   out_re,
  output logic signed [FFT_OUT_W-1:0]   out_im
);

  real    fre[], fim[];
  int     idx = 0;
  longint q_re [$], q_im [$];
  int     out_pos = 0;

  function automatic longint rnd(real v);
    return (v >= 0.0) ? longint'($floor(v + 0.5)) : -longint'($floor(-v + 0.5));
  endfunction

  initial begin
    fre = new[N]; fim = new[N];
    out_valid = 0; out_sop = 0; out_re = '0; out_im = '0;
  end

  always @(posedge clk) begin
    // output side
    if (out_pos > 0 || q_re.size() >= N) begin
      out_valid <= 1'b1;
      out_sop   <= (out_pos == 0);
      out_re    <= FFT_OUT_W'(q_re.pop_front());
      out_im    <= FFT_OUT_W'(q_im.pop_front());
      out_pos    = (out_pos + 1) % N;
    end else begin
      out_valid <= 1'b0;
      out_sop   <= 1'b0;
    end
    // input side
    if (in_valid) begin
      if (in_sop) idx = 0;
      fre[idx] = real'(in_re);
      fim[idx] = 0.0;
      idx++;
      if (idx == N) begin
        fft(fre, fim);
        for (int k = 0; k < N; k++) begin
          q_re.push_back(rnd(fre[k]));
          q_im.push_back(rnd(fim[k]));
        end
        idx = 0;
      end
    end
  end

endmodule
