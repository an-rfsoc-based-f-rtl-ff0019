// tb_fengine_full: the F-engine at its full size, with every parameter of
// fengine_top left at its default (2048-point FFT, 8 taps, 1024 kept
// channels, 65536-sample delay line, blocks of 512 spectra, 128-channel
// groups).
//
// Stream 0 (band 1, X) carries a tone exactly on FFT bin 100; the other
// three streams are silent. The FIR is loaded with a Hamming-windowed sinc,
// every complex gain is 256/65536 at phase 0, and a coarse delay of 1000
// samples is applied. The test runs one complete block of 512 spectra
// through the DDR4 corner turn (ddr_model) and checks all 4096 SPEAD packets
// of that block: the header (magic, antenna, heap counter, timestamp), the
// channel-major/stream-minor order, and the payload: channel 100 of stream 0
// must hold a steady amplitude close to the predicted 95, and every other
// channel and stream must stay within two LSB of zero. The first nine
// spectra are excluded from the payload check while the filter history and
// the delay line fill.
module tb_fengine_full;
  import fengine_pkg::*;
  localparam int M = 2048, P = 8, NCHAN = 1024, T = 512, F0 = 128;
  localparam int W = M / LANES, NU = T / 32, BIN = 100, DELAY = 1000;
  localparam int NPKT = NCHAN * NSTREAM;

  logic clk = 0, rst_n = 0, pps = 0;
  logic reg_wr = 0, reg_rd = 0, reg_rvalid, running;
  logic [15:0] reg_addr = '0; logic [31:0] reg_wdata = '0, reg_rdata;
  sample_word_t [NSTREAM-1:0] adc_data;
  logic fft_rst_n, fft_in_valid, fft_in_sof, fft_out_valid, fft_out_sof;
  sample_word_t [NSTREAM-1:0] fft_in_data; fft_word_t [NSTREAM-1:0] fft_out_data;
  logic ddr_wr_valid, ddr_wr_ready, ddr_rd_req_valid, ddr_rd_req_ready, ddr_rd_resp_valid;
  logic [31:0] ddr_wr_addr, ddr_rd_req_addr; wide_word_t ddr_wr_data, ddr_rd_resp_data;
  logic net_valid, net_ready, net_last, net_pol; logic [511:0] net_data; logic [15:0] net_chan;
  logic stall_en = 0;
  int checks = 0, failures = 0;

  fengine_top dut (.*);
  fft_model #(.M(M)) u_fft (.clk, .rst_n(fft_rst_n), .in_valid(fft_in_valid), .in_sof(fft_in_sof),
    .in_data(fft_in_data), .out_valid(fft_out_valid), .out_sof(fft_out_sof), .out_data(fft_out_data));
  ddr_model #(.WORDS(2 * T * NCHAN / LANES), .LATENCY(20), .STALL_PCT(0)) u_ddr (.clk,
    .wr_valid(ddr_wr_valid), .wr_ready(ddr_wr_ready), .wr_addr(ddr_wr_addr), .wr_data(ddr_wr_data),
    .rd_req_valid(ddr_rd_req_valid), .rd_req_ready(ddr_rd_req_ready), .rd_req_addr(ddr_rd_req_addr),
    .rd_resp_valid(ddr_rd_resp_valid), .rd_resp_data(ddr_rd_resp_data), .stall_en);

  always #5 clk = ~clk;
  initial begin
    repeat (600000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ADC: tone on stream 0 only, sample index counted from the run start
  int tone [M];
  int widx = 0;
  always @(posedge clk) widx <= fft_rst_n ? widx + 1 : 0;
  always_comb
    for (int s = 0; s < NSTREAM; s++)
      for (int l = 0; l < LANES; l++)
        adc_data[s][l] = (s == 0) ? 16'(tone[(widx * LANES + l) % M]) : 16'h0;

  // PPS every 1000 clocks; network always ready
  int pps_cnt = 0;
  always @(posedge clk) begin
    pps_cnt <= (pps_cnt + 1) % 1000;
    pps <= (pps_cnt < 20);
  end
  assign net_ready = 1'b1;

  task automatic wr(logic [15:0] a, logic [31:0] d);
    reg_wr <= 1; reg_addr <= a; reg_wdata <= d; @(posedge clk);
    reg_wr <= 0; @(posedge clk);
  endtask

  // packet checker
  int pk_word = 0, pkts = 0, pk_s = 0, pk_c = 0, pk_blk = 0, peak_min = 1 << 30, peak_max = 0, quiet_max = 0;
  always @(posedge clk) begin
    #1;
    if (net_valid && net_ready && fft_rst_n && pkts < NPKT) begin
      if (pk_word == 0) begin
        automatic logic [63:0] hc = net_data[511-64 -: 64], ts = net_data[511-5*64 -: 64], ord = net_data[511-6*64 -: 64];
        automatic int exp_s = pkts % NSTREAM, exp_c = pkts / NSTREAM;
        pk_s = int'(ord[31:16]) / NCHAN * 2 + int'(ord[15:0]);
        pk_c = int'(ord[31:16]) % NCHAN;
        pk_blk = int'(ts[47:0] / (T * W));
        checks++;
        if (net_data[511 -: 64] != 64'h5304020600000007 || ord[47:32] != 16'h0042 || int'(hc[47:0]) != pkts
            || ts[47:0] != 0 || pk_s != exp_s || pk_c != exp_c
            || net_data[511-2*64 -: 64] != {16'h8002, 48'(2 * T)}) begin
          failures++;
          if (failures < 10) $display("packet %0d: bad header %h", pkts, net_data[511 -: 448]);
        end
      end else begin
        for (int i = 0; i < 32; i++) begin
          automatic int t = (pk_word - 1) * 32 + i;
          automatic int re = int'($signed(net_data[511 - 16*i -: 8]));
          automatic int im = int'($signed(net_data[503 - 16*i -: 8]));
          automatic int mag2 = re * re + im * im;
          if (t >= 9) begin
            checks++;
            if (pk_s == 0 && pk_c == BIN) begin
              if (mag2 < peak_min) peak_min = mag2;
              if (mag2 > peak_max) peak_max = mag2;
              if (mag2 < 85 * 85 || mag2 > 105 * 105) begin
                failures++; if (failures < 10) $display("tone spectrum %0d: %0d,%0d", t, re, im);
              end
            end else begin
              if (mag2 > quiet_max) quiet_max = mag2;
              if (re > 2 || re < -2 || im > 2 || im < -2) begin
                failures++; if (failures < 10) $display("stream %0d chan %0d spectrum %0d: %0d,%0d", pk_s, pk_c, t, re, im);
              end
            end
          end
        end
      end
      checks++;
      if (net_last != (pk_word == NU)) begin failures++; $display("packet length wrong at %0d", pkts); end
      if (net_last) begin pk_word = 0; pkts++; end else pk_word++;
    end
  end

  initial begin
    for (int n = 0; n < M; n++) tone[n] = $rtoi(100.0 * $cos(2.0 * 3.14159265358979 * BIN * n / M));
    repeat (5) @(posedge clk); rst_n <= 1; repeat (2) @(posedge clk);
    for (int i = 0; i < P*M; i++) begin
      automatic real u = (i - (P*M - 1) / 2.0) / M;
      automatic real sinc = (u == 0.0) ? 1.0 : $sin(3.14159265358979 * u) / (3.14159265358979 * u);
      automatic real win = 0.54 - 0.46 * $cos(2.0 * 3.14159265358979 * i / (P*M - 1));
      wr(REG_COEF_BASE + 16'(i), 32'($rtoi(sinc * win * 33554432.0 * 0.95)));
    end
    for (int s = 0; s < NSTREAM; s++)
      for (int c = 0; c < NCHAN; c++) wr(REG_GAIN_BASE + 16'(s * 2048 + c), {16'd256, 16'd0});
    wr(REG_ANT_ID, 32'h42);
    wr(REG_DELAY0, {16'(DELAY), 16'h0});
    wr(REG_DELAY_RATE, 0);
    wr(REG_CTRL, 32'h1);
    while (!running) @(posedge clk);
    $display("running; streaming one block of %0d spectra", T);
    while (pkts < NPKT) @(posedge clk);
    checks++;
    if (peak_max == 0) begin failures++; $display("no tone seen"); end
    $display("packets=%0d tone |v|^2 %0d..%0d, largest other |v|^2 %0d, ddr writes=%0d reads=%0d",
             pkts, peak_min, peak_max, quiet_max, u_ddr.writes, u_ddr.reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
