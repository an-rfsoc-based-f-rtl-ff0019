// fine_delay: fine delay corrector, complex gain and output rescaling.
//
// For every FFT bin l of a spectrum (LANES bins per clock) the corrector
//   1. reads the complex gain of channel l (16-bit amplitude, 16-bit phase)
//      from a dual-port RAM: port A is written by the host, port B is read
//      by the datapath, one bank per lane;
//   2. forms the phase  phi = gain_phase - l * tau / M  (turns, 2^16 = 1),
//      tau being the fractional delay in 2^-16 samples latched at the start
//      of the spectrum; -l*tau/M turns is the phase ramp exp(-j 2 pi l tau/M)
//      that delays channel l by tau samples, continuing the integer delay
//      applied before the FFT;
//   3. rotates the 27-bit bin by phi with a 16-stage CORDIC;
//   4. multiplies by amp / 2^16 (with the CORDIC gain divided out) and rounds
//      and saturates the result to signed 8-bit real and imaginary parts.
// Only the first NCHAN bins of each M-point spectrum are kept: a real input
// gives M/2 independent channels; the upper half of the FFT is dropped.
//
// Interface: in_valid/in_sof/in_data carry one FFT word per clock, in_sof on
// bin 0. Outputs follow 20 clocks later; out_valid is high for the NCHAN/LANES
// kept words of each spectrum, out_sof on channel 0. gain_we/gain_addr/
// gain_data write the gain of one channel; gains survive reset.
//
// From the paper: per-channel phase correction from a fractional delay given
// by the delay predictor, complex gains in dual-port block RAM written from
// the processing system, 16-bit amplitude and 16-bit phase, rescaling to
// signed 8 bit after the gain. Own choices: the CORDIC, the number formats,
// the sign convention of the ramp and keeping bins 0..NCHAN-1.
module fine_delay
  import fengine_pkg::*;
#(
  parameter int M     = 2048,
  parameter int NCHAN = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_sof,
  input  fft_word_t   in_data,
  input  logic [15:0] delay_frac,
  input  logic        gain_we,
  input  logic [$clog2(NCHAN)-1:0] gain_addr,
  input  gain_t       gain_data,
  output logic        out_valid,
  output logic        out_sof,
  output chan_word_t  out_data
);
  localparam int W     = M / LANES;           // FFT words per spectrum
  localparam int WK    = NCHAN / LANES;       // kept words
  localparam int BW    = $clog2(W);
  localparam int GW    = $clog2(WK);
  localparam int LOGM  = $clog2(M);
  localparam int CSTG  = 16;                  // CORDIC stages
  localparam int CLAT  = CSTG + 1;
  localparam logic [15:0] INV_K = 16'd39797;  // round(2^16 / 1.6467602581)

  // ---------------- gain RAM, one bank per lane -------------------------------
  gain_t gain_ram [LANES][WK];
  always_ff @(posedge clk)
    if (gain_we) gain_ram[gain_addr % LANES][GW'(gain_addr / LANES)] <= gain_data;

  // ---------------- bin counter and fractional delay ---------------------------
  logic [BW-1:0] bin_w;       // word index of the current input word
  logic [15:0]   tau;
  logic [BW-1:0] b_now;
  logic [15:0]   tau_now;
  always_comb begin
    b_now   = in_sof ? '0 : bin_w;
    tau_now = in_sof ? delay_frac : tau;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bin_w <= '0; tau <= '0;
    end else if (in_valid) begin
      bin_w <= b_now + 1'b1;
      tau   <= tau_now;
    end
  end

  // ---------------- stage A: gain read, delay phase ---------------------------
  gain_t       g_a   [LANES];
  logic [15:0] dph_a [LANES];
  fft_word_t   d_a;
  logic        v_a, sof_a;

  always_ff @(posedge clk) begin
    for (int j = 0; j < LANES; j++) begin
      logic [LOGM+15:0] prod;
      g_a[j]   <= gain_ram[j][GW'(b_now)];
      prod      = (LOGM+16)'((int'(b_now) * LANES + j)) * (LOGM+16)'(tau_now);
      dph_a[j] <= 16'(prod >> LOGM);
    end
    d_a <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin v_a <= 1'b0; sof_a <= 1'b0; end
    else begin
      v_a   <= in_valid && (int'(b_now) < WK);
      sof_a <= in_valid && in_sof;
    end
  end

  // ---------------- stage B: CORDIC, amplitude delay line ---------------------
  logic signed [FFT_W+1:0] rx [LANES];
  logic signed [FFT_W+1:0] ry [LANES];
  logic [15:0] amp_line [CLAT][LANES];
  logic        v_line   [CLAT];
  logic        sof_line [CLAT];

  for (genvar j = 0; j < LANES; j++) begin : g_lane
    cordic_rotate #(.IN_W(FFT_W), .STAGES(CSTG)) u_cordic (
      .clk  (clk),
      .x_in (d_a[j].re),
      .y_in (d_a[j].im),
      .phase(g_a[j].phase - dph_a[j]),
      .x_out(rx[j]),
      .y_out(ry[j])
    );
  end

  always_ff @(posedge clk) begin
    for (int j = 0; j < LANES; j++)
      amp_line[0][j] <= 16'((32'(g_a[j].amp) * 32'(INV_K)) >> 16);
    for (int s = 1; s < CLAT; s++) amp_line[s] <= amp_line[s-1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < CLAT; s++) begin v_line[s] <= 1'b0; sof_line[s] <= 1'b0; end
    end else begin
      v_line[0] <= v_a; sof_line[0] <= sof_a;
      for (int s = 1; s < CLAT; s++) begin v_line[s] <= v_line[s-1]; sof_line[s] <= sof_line[s-1]; end
    end
  end

  // ---------------- stage C: amplitude, stage D: round and saturate -----------
  logic signed [FFT_W+18:0] px [LANES];
  logic signed [FFT_W+18:0] py [LANES];
  logic v_c, sof_c;

  always_ff @(posedge clk) begin
    for (int j = 0; j < LANES; j++) begin
      px[j] <= rx[j] * $signed({1'b0, amp_line[CLAT-1][j]});
      py[j] <= ry[j] * $signed({1'b0, amp_line[CLAT-1][j]});
    end
  end

  always_ff @(posedge clk) begin
    for (int j = 0; j < LANES; j++) begin
      out_data[j].re <= OUT_W'(sat(round_shift(64'(px[j]), 16), OUT_W));
      out_data[j].im <= OUT_W'(sat(round_shift(64'(py[j]), 16), OUT_W));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin v_c <= 1'b0; sof_c <= 1'b0; out_valid <= 1'b0; out_sof <= 1'b0; end
    else begin
      v_c <= v_line[CLAT-1]; sof_c <= sof_line[CLAT-1];
      out_valid <= v_c; out_sof <= sof_c;
    end
  end
endmodule
