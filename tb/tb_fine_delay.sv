// tb_fine_delay: self-checking test of the fine delay / gain / rescale stage.
// Loads random complex gains, feeds spectra of random 27-bit bins with a
// different fractional delay per spectrum and compares each 8-bit output
// with x * amp/2^16 * exp(j 2 pi (gain_phase - l*tau/M)/2^16), computed in
// floating point (allowed error: 1 LSB from the CORDIC). Also checks that
// saturation clips, that only NCHAN channels come out per spectrum, and the
// 20-clock latency.
module tb_fine_delay;
  import fengine_pkg::*;
  localparam int M = 64, NCHAN = 32, W = M / LANES, WK = NCHAN / LANES, NSPEC = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_sof; fft_word_t in_data; logic [15:0] delay_frac;
  logic gain_we; logic [$clog2(NCHAN)-1:0] gain_addr; gain_t gain_data;
  logic out_valid, out_sof; chan_word_t out_data;
  int checks = 0, failures = 0, exact = 0;
  fine_delay #(.M(M), .NCHAN(NCHAN)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int g_amp [NCHAN], g_ph [NCHAN];
  int xr [NSPEC][M], xi [NSPEC][M], tau [NSPEC];
  int cyc = 0, first_in = -1, first_out = -1;
  always @(posedge clk) cyc++;

  function automatic int ref8(real v);
    automatic int r = $rtoi(v + ((v >= 0) ? 0.5 : -0.5));
    if (r > 127) r = 127; if (r < -128) r = -128;
    return r;
  endfunction

  initial begin
    in_valid = 0; in_sof = 0; in_data = '0; delay_frac = '0; gain_we = 0; gain_addr = '0; gain_data = '0;
    for (int c = 0; c < NCHAN; c++) begin
      g_amp[c] = (c == 3) ? 65535 : $urandom_range(4000, 100);
      g_ph[c]  = $urandom_range(65535, 0);
      gain_we <= 1; gain_addr <= 5'(c); gain_data <= '{amp: 16'(g_amp[c]), phase: 16'(g_ph[c])};
      @(posedge clk);
    end
    gain_we <= 0;
    for (int s = 0; s < NSPEC; s++) begin
      tau[s] = $urandom_range(65535, 0);
      for (int b = 0; b < M; b++) begin
        xr[s][b] = $signed($urandom_range(200000, 0)) - 100000;
        xi[s][b] = $signed($urandom_range(200000, 0)) - 100000;
      end
    end
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int s = 0; s < NSPEC; s++)
      for (int w = 0; w < W; w++) begin
        in_valid <= 1; in_sof <= (w == 0);
        delay_frac <= (w == 0) ? 16'(tau[s]) : 16'($urandom);
        for (int l = 0; l < LANES; l++) begin
          in_data[l].re <= 27'(xr[s][w*LANES+l]);
          in_data[l].im <= 27'(xi[s][w*LANES+l]);
        end
        if (first_in < 0) first_in = cyc + 1;
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (40) @(posedge clk);
    checks++;
    if (nout != NSPEC*WK) begin failures++; $display("words out %0d", nout); end
    checks++;
    if (first_out - first_in != 20) begin failures++; $display("latency %0d", first_out - first_in); end
    $display("exact %0d of %0d", exact, NSPEC*NCHAN*2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nout = 0;
  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      automatic int s = nout / WK, w = nout % WK;
      if (first_out < 0) first_out = cyc;
      checks++;
      if (out_sof != (w == 0)) begin failures++; $display("sof"); end
      for (int j = 0; j < LANES; j++) begin
        automatic int c = w*LANES + j;
        automatic real ph = 2.0 * 3.14159265358979 * (real'(g_ph[c]) - real'(c) * real'(tau[s]) / M) / 65536.0;
        automatic real a = real'(g_amp[c]) / 65536.0;
        automatic real er = a * (xr[s][c] * $cos(ph) - xi[s][c] * $sin(ph));
        automatic real ei = a * (xr[s][c] * $sin(ph) + xi[s][c] * $cos(ph));
        automatic int gr = int'($signed(out_data[j].re)), gi = int'($signed(out_data[j].im));
        automatic int dr = gr - ref8(er), di = gi - ref8(ei);
        checks++;
        if (dr > 1 || dr < -1 || di > 1 || di < -1) begin
          failures++;
          if (failures < 10) $display("spec %0d ch %0d got %0d,%0d exp %f,%f", s, c, gr, gi, er, ei);
        end
        if (dr == 0) exact++;
        if (di == 0) exact++;
      end
      nout++;
    end
  end
endmodule
