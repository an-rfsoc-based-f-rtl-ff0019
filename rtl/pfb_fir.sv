// pfb_fir: polyphase FIR front end of the critically sampled PFB.
//
// The input stream is cut into frames of M samples, arriving LANES (8) per
// clock. For every frame the filter forms one M-sample output frame
//     s[m] = sum_{p=0}^{P-1} x_{k-p}[m] * h[p*M + M-1-m]
// where x_{k-p}[m] is sample m (arrival order) of the frame p frames back.
// This is the P*M-tap FIR y[n] = sum_i x[n-i] h[i] evaluated at the last
// sample of each frame, i.e. the paper's s[k,m] with the in-frame index
// counted in arrival order instead of backwards from the newest sample.
//
// Structure: the previous P-1 frames are kept in P-1 frame slots (one RAM
// per slot and lane, M/LANES words deep) used as a ring; each clock reads
// word w of every slot and overwrites the oldest slot with the new word.
// Coefficients sit in one RAM per tap and lane (P*LANES = 64 multipliers,
// one per tap and lane). Products are 16 x 27 bits, the sum is rounded by
// COEF_FRAC bits and saturated to 16 bits.
//
// Frames from before the start of the run are taken as zero (frames_seen
// masks the taps), so the output after a restart does not depend on
// stale buffer contents.
//
// Interface: in_data is one word per clock whenever rst_n is high (the ADC
// never stalls); the first word after reset is sample 0 of frame 0.
// out_valid/out_sof/out_data follow with a fixed latency of 4 clocks.
// Coefficients are written through coef_we/coef_addr/coef_data, address i
// holding h[i]; they are not cleared by reset.
//
// From the paper: 8 taps, M = 2048, 16-bit input/output, 27-bit
// coefficients with 2 integer bits kept in block RAM, 8 samples per clock.
// Own choices: the pipeline depth, rounding and saturation, the zero
// history after reset, and the coefficient write port.
module pfb_fir
  import fengine_pkg::*;
#(
  parameter int M = 2048,   // FFT length / frame size
  parameter int P = 8       // taps
) (
  input  logic          clk,
  input  logic          rst_n,
  input  sample_word_t  in_data,
  input  logic          coef_we,
  input  logic [$clog2(P*M)-1:0] coef_addr,
  input  coef_t         coef_data,
  output logic          out_valid,
  output logic          out_sof,
  output sample_word_t  out_data
);
  localparam int W  = M / LANES;          // words per frame
  localparam int AW = $clog2(W);
  localparam int SL = P - 1;              // history slots
  localparam int SW = (SL > 1) ? $clog2(SL) : 1;

  // ---------------- coefficient RAMs: coef_ram[p][lane][word] ---------------
  coef_t coef_ram [P][LANES][W];

  // address i = p*M + (M-1-m), m = word*LANES + lane
  logic [$clog2(P*M)-1:0] ci;
  int unsigned            cw_p, cw_m;  // tap and in-frame position
  always_comb begin
    ci   = coef_addr;
    cw_p = 32'(ci) / M;
    cw_m = M - 1 - (32'(ci) % M);
  end

  always_ff @(posedge clk) begin
    if (coef_we)
      coef_ram[cw_p][cw_m % LANES][AW'(cw_m / LANES)] <= coef_data;
  end

  // ---------------- history slots --------------------------------------------
  sample_t hist [SL][LANES][W];

  logic [AW-1:0] wptr;         // word within frame
  logic [SW-1:0] slot;         // slot holding the oldest frame (k-(P-1))
  logic [3:0]    frames_seen;  // saturates at P-1

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0; slot <= '0; frames_seen <= '0;
    end else begin
      wptr  <= wptr + 1'b1;
      if (wptr == AW'(W - 1)) begin
        slot <= (slot == SW'(SL - 1)) ? '0 : slot + 1'b1;
        if (frames_seen != 4'(SL)) frames_seen <= frames_seen + 1'b1;
      end
    end
  end

  // stage 1: read history and coefficients, register the new word
  sample_t      h_rd   [SL][LANES];
  coef_t        c_rd   [P][LANES];
  sample_word_t x1;
  logic [SW-1:0] slot1;
  logic [3:0]   seen1;
  logic         v1, sof1;

  always_ff @(posedge clk) begin
    for (int s = 0; s < SL; s++)
      for (int l = 0; l < LANES; l++)
        h_rd[s][l] <= hist[s][l][wptr];
    for (int p = 0; p < P; p++)
      for (int l = 0; l < LANES; l++)
        c_rd[p][l] <= coef_ram[p][l][wptr];
    for (int l = 0; l < LANES; l++)
      hist[slot][l][wptr] <= in_data[l];   // oldest frame slot, read first above
    x1    <= in_data;
    slot1 <= slot;
    seen1 <= frames_seen;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin v1 <= 1'b0; sof1 <= 1'b0; end
    else begin v1 <= 1'b1; sof1 <= (wptr == '0); end
  end

  // stage 2: products. Tap p (frames back) lives in slot (slot1 + SL - p) mod SL.
  logic signed [SAMPLE_W+COEF_W-1:0] prod [P][LANES];
  logic v2, sof2;

  function automatic int slot_of(input int s0, input int p);
    return (s0 + SL - p) % SL;
  endfunction

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      prod[0][l] <= x1[l] * c_rd[0][l];
      for (int p = 1; p < P; p++)
        if (int'(seen1) >= p) prod[p][l] <= h_rd[slot_of(int'(slot1), p)][l] * c_rd[p][l];
        else                  prod[p][l] <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin v2 <= 1'b0; sof2 <= 1'b0; end
    else begin v2 <= v1; sof2 <= sof1; end
  end

  // stage 3: sum over taps
  localparam int ACC_W = SAMPLE_W + COEF_W + $clog2(P) + 1;
  logic signed [ACC_W-1:0] acc [LANES];
  logic v3, sof3;
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACC_W-1:0] a;
      a = '0;
      for (int p = 0; p < P; p++) a += ACC_W'(prod[p][l]);
      acc[l] <= a;
    end
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin v3 <= 1'b0; sof3 <= 1'b0; end
    else begin v3 <= v2; sof3 <= sof2; end
  end

  // stage 4: round and saturate to 16 bits
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      out_data[l] <= SAMPLE_W'(sat(round_shift(64'(acc[l]), COEF_FRAC), SAMPLE_W));
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin out_valid <= 1'b0; out_sof <= 1'b0; end
    else begin out_valid <= v3; out_sof <= sof3; end
  end

endmodule
