// tb_fengine_top: end-to-end test of the F-engine at reduced size
// (64-point FFT, 32 kept channels, blocks of 64 spectra, 16-channel groups).
//
// The testbench plays the processing system (register bus), the ADCs (a tone
// plus pseudo-noise per stream), the FFT (fft_model), the DDR4 (ddr_model,
// with random stalls) and the network (random back-pressure). It parses every
// SPEAD packet and compares each payload sample with a reference computed
// here from the input: FIR equation, integer delay, DFT, gain and phase
// ramp, rounding to 8 bits (1 LSB tolerance for the CORDIC).
// Phases: A) start on PPS with an integer delay; B) stop, restart with a new
// delay that has a fractional part; C) delay model reloaded on the fly with a
// non-zero rate; D) snapshot of an ADC frame read back over the bus;
// E) network held off until the corner turner overflows.
// Each mechanism is counted and a mechanism that never happened is a failure.
module tb_fengine_top;
  import fengine_pkg::*;
  localparam int M = 64, P = 8, MAXD = 256, NCHAN = 32, T = 64, F0 = 16;
  localparam int W = M / LANES, NU = T / 32, NBLK_CHK = 2, NFR = NBLK_CHK * T;
  localparam int NS = (NBLK_CHK + 2) * T * M;     // samples per stream per phase

  logic clk = 0, rst_n = 0, pps = 0;
  logic reg_wr = 0, reg_rd = 0, reg_rvalid, running;
  logic [15:0] reg_addr = '0; logic [31:0] reg_wdata = '0, reg_rdata;
  sample_word_t [NSTREAM-1:0] adc_data;
  logic fft_rst_n, fft_in_valid, fft_in_sof, fft_out_valid, fft_out_sof;
  sample_word_t [NSTREAM-1:0] fft_in_data; fft_word_t [NSTREAM-1:0] fft_out_data;
  logic ddr_wr_valid, ddr_wr_ready, ddr_rd_req_valid, ddr_rd_req_ready, ddr_rd_resp_valid;
  logic [31:0] ddr_wr_addr, ddr_rd_req_addr; wide_word_t ddr_wr_data, ddr_rd_resp_data;
  logic net_valid, net_ready, net_last, net_pol; logic [511:0] net_data; logic [15:0] net_chan;
  logic stall_en = 1;
  int checks = 0, failures = 0;

  fengine_top #(.M(M), .P(P), .MAX_DELAY(MAXD), .NCHAN(NCHAN), .T(T), .F0(F0)) dut (.*);
  fft_model #(.M(M)) u_fft (.clk, .rst_n(fft_rst_n), .in_valid(fft_in_valid), .in_sof(fft_in_sof),
    .in_data(fft_in_data), .out_valid(fft_out_valid), .out_sof(fft_out_sof), .out_data(fft_out_data));
  ddr_model #(.WORDS(2 * T * NCHAN / LANES), .LATENCY(10), .STALL_PCT(10)) u_ddr (.clk,
    .wr_valid(ddr_wr_valid), .wr_ready(ddr_wr_ready), .wr_addr(ddr_wr_addr), .wr_data(ddr_wr_data),
    .rd_req_valid(ddr_rd_req_valid), .rd_req_ready(ddr_rd_req_ready), .rd_req_addr(ddr_rd_req_addr),
    .rd_resp_valid(ddr_rd_resp_valid), .rd_resp_data(ddr_rd_resp_data), .stall_en);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- stimulus ----------------------------------------------------
  int x [NSTREAM][NS];
  int h [P*M];
  int g_amp [NSTREAM][NCHAN], g_ph [NSTREAM][NCHAN];
  int seed_phase = 0;

  function automatic int noise(int n, int s, int ph);
    automatic int v = n * 1103515245 + s * 12345 + ph * 777 + 99;
    v = v ^ (v >>> 13); v = v * 69069 + 1;
    return (v >>> 8) % 200;
  endfunction

  task automatic make_input(int ph);
    for (int s = 0; s < NSTREAM; s++)
      for (int n = 0; n < NS; n++)
        x[s][n] = $rtoi(1500.0 * $cos(2.0 * 3.14159265358979 * (3 + 5 * s + ph) * n / M + s)) + noise(n, s, ph);
  endtask

  // ADC: sample index counts from the first clock the pipeline runs
  int widx = 0;
  always @(posedge clk) widx <= fft_rst_n ? widx + 1 : 0;
  always_comb
    for (int s = 0; s < NSTREAM; s++)
      for (int l = 0; l < LANES; l++)
        adc_data[s][l] = 16'(x[s][(widx * LANES + l) % NS]);

  // PPS: a pulse every 700 clocks
  int pps_cnt = 0, pps_edges = 0;
  always @(posedge clk) begin
    pps_cnt <= (pps_cnt + 1) % 700;
    pps <= (pps_cnt < 20);
    if (pps_cnt == 0) pps_edges++;
  end

  // network back-pressure
  int net_stalls = 0, hold_net = 0;
  always @(posedge clk) begin
    net_ready <= !hold_net && ($urandom_range(9, 0) != 0);
    if (net_valid && !net_ready) net_stalls++;
  end

  // ---------------- register bus ------------------------------------------------
  task automatic wr(logic [15:0] a, logic [31:0] d);
    reg_wr <= 1; reg_addr <= a; reg_wdata <= d; @(posedge clk);
    reg_wr <= 0; @(posedge clk);
  endtask
  task automatic rd(logic [15:0] a, output logic [31:0] d);
    reg_rd <= 1; reg_addr <= a; @(posedge clk);
    reg_rd <= 0;
    while (!reg_rvalid) @(posedge clk);
    d = reg_rdata; @(posedge clk);
  endtask

  // ---------------- reference -----------------------------------------------------
  int yre [NSTREAM][NFR][NCHAN], yim [NSTREAM][NFR][NCHAN];

  function automatic int ref8(real v);
    automatic int r = (v >= 0) ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
    if (r > 127) r = 127; if (r < -128) r = -128;
    return r;
  endfunction

  task automatic make_reference(int dint, int tau);
    for (int s = 0; s < NSTREAM; s++) begin
      int f [NFR*M];
      int g [NFR*M];
      for (int n = 0; n < NFR*M; n++) begin
        automatic longint acc = 0; automatic int k = n / M, m = n % M;
        for (int p = 0; p < P; p++)
          if (k - p >= 0) acc += longint'(x[s][(k-p)*M + m]) * h[p*M + M-1-m];
        acc = (acc + (64'sd1 <<< 24)) >>> 25;
        if (acc > 32767) acc = 32767; if (acc < -32768) acc = -32768;
        f[n] = int'(acc);
      end
      for (int n = 0; n < NFR*M; n++) g[n] = (n - dint - LANES >= 0) ? f[n - dint - LANES] : 0;
      for (int k = 0; k < NFR; k++)
        for (int c = 0; c < NCHAN; c++) begin
          automatic real xr = 0, xi = 0, br, bi, ph, a;
          for (int n = 0; n < M; n++) begin
            xr += g[k*M + n] * $cos(-2.0 * 3.14159265358979 * c * n / M);
            xi += g[k*M + n] * $sin(-2.0 * 3.14159265358979 * c * n / M);
          end
          br = (xr >= 0) ? $floor(xr / 4.0 + 0.5) : -$floor(-xr / 4.0 + 0.5);
          bi = (xi >= 0) ? $floor(xi / 4.0 + 0.5) : -$floor(-xi / 4.0 + 0.5);
          ph = 2.0 * 3.14159265358979 * (g_ph[s][c] - real'(c) * tau / M) / 65536.0;
          a  = g_amp[s][c] / 65536.0;
          yre[s][k][c] = ref8(a * (br * $cos(ph) - bi * $sin(ph)));
          yim[s][k][c] = ref8(a * (br * $sin(ph) + bi * $cos(ph)));
        end
    end
  endtask

  // ---------------- packet checker ------------------------------------------------
  int pk_word = 0, pk_chan, pk_pol, pk_blk, pkts_ok = 0, pkts_checked = 0, pkts_total = 0;
  longint last_heap = -1;
  bit check_en = 0;
  int heap_errs = 0;
  always @(posedge clk) begin
    #1;
    if (!fft_rst_n) begin pk_word = 0; last_heap = -1; end   // pipeline stopped
    if (net_valid && net_ready && fft_rst_n) begin
      if (pk_word == 0) begin
        logic [63:0] ts, ord, hc;
        hc  = net_data[511-64 -: 64];
        ts  = net_data[511-5*64 -: 64];
        ord = net_data[511-6*64 -: 64];
        pk_blk  = int'(ts[47:0] / (T * W));
        pk_chan = int'(ord[31:16]);
        pk_pol  = int'(ord[15:0]);
        checks++;
        if (net_data[511 -: 64] != 64'h5304020600000007 || int'(ord[47:32]) != 16'h0042
            || longint'(hc[47:0]) != last_heap + 1 || ts[47:0] % (T * W) != 0) begin
          failures++; heap_errs++;
          if (heap_errs < 5) $display("bad header %h", net_data[511 -: 128]);
        end
        last_heap = longint'(hc[47:0]);
        pkts_total++;
      end else if (check_en && pk_blk < NBLK_CHK) begin
        automatic int s = (pk_chan / NCHAN) * 2 + pk_pol, c = pk_chan % NCHAN;
        automatic bit ok = 1;
        for (int i = 0; i < 32; i++) begin
          automatic int k = pk_blk * T + (pk_word - 1) * 32 + i;
          automatic int gr = int'($signed(net_data[511 - 16*i -: 8]));
          automatic int gi = int'($signed(net_data[503 - 16*i -: 8]));
          automatic int dr = gr - yre[s][k][c], di = gi - yim[s][k][c];
          checks++;
          if (dr > 1 || dr < -1 || di > 1 || di < -1) begin
            failures++; ok = 0;
            if (failures < 10) $display("blk %0d s %0d c %0d k %0d: got %0d,%0d exp %0d,%0d", pk_blk, s, c, k, gr, gi, yre[s][k][c], yim[s][k][c]);
          end
        end
        if (pk_word == NU) begin pkts_checked++; if (ok) pkts_ok++; end
      end
      pk_word = net_last ? 0 : pk_word + 1;
    end
  end

  // ---------------- sequence ------------------------------------------------------
  int m_pps_start = 0, m_restart = 0, m_frac_delay = 0, m_delay_update = 0, m_snapshot = 0;
  int m_overflow = 0, m_int_delay = 0;

  task automatic run_phase(int ph, int dint, int tau);
    logic [31:0] d;
    make_input(ph);
    wr(REG_DELAY0, {16'(dint), 16'(tau)});
    wr(REG_DELAY_RATE, 0);
    make_reference(dint, tau);
    pkts_checked = 0; pkts_ok = 0; last_heap = -1; check_en = 1;
    wr(REG_CTRL, 32'h1);                                // arm
    rd(REG_STATUS, d);
    checks++;
    if (d[1:0] != 2'b10) begin failures++; $display("not armed %h", d); end
    begin
      automatic int e0 = pps_edges;
      while (!running) @(posedge clk);
      // running must start within a few clocks of a PPS rising edge
      checks++;
      if (pps_cnt > 5 || pps_edges == e0 && pps_cnt > 5) begin failures++; $display("start not on PPS (%0d)", pps_cnt); end
      else m_pps_start++;
    end
    while (pkts_checked < NBLK_CHK * NCHAN * NSTREAM) @(posedge clk);
    checks++;
    if (pkts_ok != pkts_checked) begin failures++; $display("phase %0d: %0d of %0d packets correct", ph, pkts_ok, pkts_checked); end
    if (dint != 0) m_int_delay++;
    if (tau != 0 && pkts_ok == pkts_checked) m_frac_delay++;
    check_en = 0;
  endtask

  initial begin
    logic [31:0] d;
    for (int i = 0; i < P*M; i++) begin
      automatic real u = (i - (P*M - 1) / 2.0) / M;
      automatic real sinc = (u == 0.0) ? 1.0 : $sin(3.14159265358979 * u) / (3.14159265358979 * u);
      automatic real win = 0.54 - 0.46 * $cos(2.0 * 3.14159265358979 * i / (P*M - 1));
      h[i] = $rtoi(sinc * win * 33554432.0 * 0.95);
    end
    for (int s = 0; s < NSTREAM; s++)
      for (int c = 0; c < NCHAN; c++) begin
        g_amp[s][c] = $urandom_range(900, 300); g_ph[s][c] = $urandom_range(65535, 0);
      end
    repeat (5) @(posedge clk); rst_n <= 1; repeat (2) @(posedge clk);
    for (int i = 0; i < P*M; i++) wr(REG_COEF_BASE + 16'(i), 32'(h[i]));
    for (int s = 0; s < NSTREAM; s++)
      for (int c = 0; c < NCHAN; c++) wr(REG_GAIN_BASE + 16'(s * 2048 + c), {16'(g_amp[s][c]), 16'(g_ph[s][c])});
    wr(REG_ANT_ID, 32'h42);

    $display("phase A");
    // A: integer delay
    run_phase(0, 37, 0);
    // B: stop, restart with integer and fractional delay
    wr(REG_CTRL, 32'h2);
    repeat (3) @(posedge clk);
    checks++;
    if (running) begin failures++; $display("stop failed"); end
    run_phase(1, 101, 16384);
    if (pkts_ok == pkts_checked) m_restart++;

    $display("phase C");
    // C: reload the delay model on the fly
    wr(REG_DELAY0, 32'h0005_0000);
    wr(REG_DELAY_RATE, 32'sd1073741824);         // +0.25 samples per spectrum
    wr(REG_DELAY_LOAD, 0);
    begin
      automatic int seen = 0, prev = -1, ticks = 0;
      while (ticks < 12) begin
        @(posedge clk); #1;
        if (dut.u_pred.tick) begin
          @(posedge clk); #1;
          ticks++;
          if (seen == 0) begin
            checks++;
            // the load lands on the first tick after the write (which may precede this one)
            if ({dut.delay_int, dut.delay_frac} != 32'h0005_0000 && {dut.delay_int, dut.delay_frac} != 32'h0005_4000) begin
              failures++; $display("load on tick %h", {dut.delay_int, dut.delay_frac});
            end
            seen = 1;
          end else begin
            checks++;
            if ({dut.delay_int, dut.delay_frac} != 32'(prev + 32'h4000)) begin failures++; $display("rate step"); end
          end
          prev = {dut.delay_int, dut.delay_frac};
          // the coarse delay picks it up at its next frame start
        end
      end
      if (prev == 32'h0005_0000 + 11 * 32'h4000 || prev == 32'h0005_0000 + 12 * 32'h4000) m_delay_update++;
      checks++;
      if (int'(dut.g_front[2].u_cd.delay_used) < 5) begin failures++; $display("coarse delay not updated"); end
    end

    $display("phase D");
    // D: snapshot of ADC stream 2
    wr(REG_SNAP_CTRL, {27'h0, 2'd2, 2'd0, 1'b1});
    do rd(REG_STATUS, d); while (!d[2]);
    begin
      int cap [M];
      automatic int found = 0;
      for (int n = 0; n < M; n++) begin rd(REG_SNAP_BASE + 16'(n), d); cap[n] = int'($signed(d[15:0])); end
      for (int k = 0; k < NS / M && !found; k++) begin
        automatic bit eq = 1;
        for (int n = 0; n < M; n++) if (16'(cap[n]) != 16'(x[2][k*M + n])) eq = 0;
        if (eq) found = 1;
      end
      checks++;
      if (!found) begin failures++; $display("snapshot frame not found in the input"); end
      else m_snapshot++;
    end

    $display("phase E");
    // E: network held off until the corner turner overflows
    hold_net = 1;
    repeat (8 * T * W) @(posedge clk);
    rd(REG_STATUS, d);
    checks++;
    if (!d[3]) begin failures++; $display("no overflow reported"); end
    else m_overflow++;
    hold_net = 0;

    $display("mechanisms: pps_start=%0d restart=%0d int_delay=%0d frac_delay=%0d delay_update=%0d snapshot=%0d overflow=%0d net_stalls=%0d ddr_stalls=%0d packets=%0d",
             m_pps_start, m_restart, m_int_delay, m_frac_delay, m_delay_update, m_snapshot, m_overflow, net_stalls, u_ddr.stalls, pkts_total);
    if (m_pps_start == 0) begin failures++; $display("never: pps start"); end
    if (m_restart == 0) begin failures++; $display("never: restart"); end
    if (m_int_delay == 0) begin failures++; $display("never: integer delay"); end
    if (m_frac_delay == 0) begin failures++; $display("never: fractional delay"); end
    if (m_delay_update == 0) begin failures++; $display("never: delay update"); end
    if (m_snapshot == 0) begin failures++; $display("never: snapshot"); end
    if (m_overflow == 0) begin failures++; $display("never: overflow"); end
    if (net_stalls == 0) begin failures++; $display("never: network stall"); end
    if (u_ddr.stalls == 0) begin failures++; $display("never: ddr stall"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
