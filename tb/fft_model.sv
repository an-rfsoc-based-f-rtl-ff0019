// fft_model: behavioural stand-in for the vendor streaming FFT (not
// synthesizable). Takes NSTREAM streams of real samples, LANES per clock,
// framed by in_sof, and returns for each frame the M-point forward DFT
//     X[l] = sum_n x[n] exp(-j 2 pi l n / M)
// as 27-bit complex bins, LANES per clock, bin 0 first (out_sof). The
// output integer is round(X / 4): the unscaled transform of the 16-bit input
// read as a fraction, in a 27-bit format with 13 fractional bits.
// Frame k comes out while frame k+1 goes in (latency one frame plus one
// clock), so the output rate equals the input rate.
module fft_model
  import fengine_pkg::*;
#(
  parameter int M = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_sof,
  input  sample_word_t [NSTREAM-1:0] in_data,
  output logic        out_valid,
  output logic        out_sof,
  output fft_word_t   [NSTREAM-1:0] out_data
);
  localparam int W = M / LANES;
  real xr [NSTREAM][M];
  real br [NSTREAM][M], bi [NSTREAM][M];   // spectrum being sent
  int  w = 0;
  bit  have = 0;

  function automatic int rnd27(real v);
    automatic real q = v / 4.0;
    automatic longint r = (q >= 0) ? longint'($floor(q + 0.5)) : -longint'($floor(-q + 0.5));
    if (r > 67108863) r = 67108863;
    if (r < -67108864) r = -67108864;
    return int'(r);
  endfunction

  // in-place radix-2 FFT
  task automatic fft(inout real re [M], inout real im [M]);
    automatic int j = 0;
    for (int i = 0; i < M - 1; i++) begin
      int k;
      if (i < j) begin real t; t = re[i]; re[i] = re[j]; re[j] = t; t = im[i]; im[i] = im[j]; im[j] = t; end
      k = M / 2;
      while (k <= j) begin j -= k; k /= 2; end
      j += k;
    end
    for (int len = 2; len <= M; len *= 2) begin
      automatic real ang = -2.0 * 3.14159265358979323846 / len;
      for (int i = 0; i < M; i += len)
        for (int k = 0; k < len / 2; k++) begin
          automatic real wr = $cos(ang * k), wi = $sin(ang * k);
          automatic real ur = re[i+k], ui = im[i+k];
          automatic real vr = re[i+k+len/2] * wr - im[i+k+len/2] * wi;
          automatic real vi = re[i+k+len/2] * wi + im[i+k+len/2] * wr;
          re[i+k] = ur + vr; im[i+k] = ui + vi;
          re[i+k+len/2] = ur - vr; im[i+k+len/2] = ui - vi;
        end
    end
  endtask

  always @(posedge clk) begin
    if (!rst_n) begin
      w <= 0; have <= 0; out_valid <= 0; out_sof <= 0;
    end else begin
      out_valid <= 0; out_sof <= 0;
      if (in_valid) begin
        automatic int wi = in_sof ? 0 : w;
        for (int s = 0; s < NSTREAM; s++)
          for (int l = 0; l < LANES; l++) xr[s][wi*LANES + l] = real'($signed(in_data[s][l]));
        if (have) begin
          out_valid <= 1; out_sof <= (wi == 0);
          for (int s = 0; s < NSTREAM; s++)
            for (int l = 0; l < LANES; l++) begin
              out_data[s][l].re <= 27'(rnd27(br[s][wi*LANES + l]));
              out_data[s][l].im <= 27'(rnd27(bi[s][wi*LANES + l]));
            end
        end
        if (wi == W - 1) begin
          for (int s = 0; s < NSTREAM; s++) begin
            real re [M], im [M];
            for (int n = 0; n < M; n++) begin re[n] = xr[s][n]; im[n] = 0.0; end
            fft(re, im);
            for (int n = 0; n < M; n++) begin br[s][n] = re[n]; bi[s][n] = im[n]; end
          end
          have <= 1;
        end
        w <= (wi + 1) % W;
      end
    end
  end
endmodule
