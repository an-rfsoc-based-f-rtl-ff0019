// tb_pfb_fir: self-checking test of the polyphase FIR.
// Loads random coefficients, streams random samples, and compares every
// output sample with the FIR equation evaluated on a copy of the input
// history (zero before the start). Also checks the 4-clock latency, the
// frame-start flag, and that a reset clears the history.
module tb_pfb_fir;
  import fengine_pkg::*;
  localparam int M = 32, P = 8, W = M / LANES, NFR = 14;
  logic clk = 0, rst_n = 0;
  sample_word_t in_data;
  logic coef_we; logic [$clog2(P*M)-1:0] coef_addr; coef_t coef_data;
  logic out_valid, out_sof; sample_word_t out_data;
  int checks = 0, failures = 0;

  pfb_fir #(.M(M), .P(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int h [P*M];
  int x [NFR*M];
  int cyc;  // cycles since reset release

  function automatic int expected(int n);   // output sample n (arrival index)
    automatic longint acc = 0; automatic int k = n / M, m = n % M;
    for (int p = 0; p < P; p++)
      if (k - p >= 0) acc += longint'(x[(k-p)*M + m]) * h[p*M + M-1-m];
    acc = (acc + (64'sd1 <<< 24)) >>> 25;
    if (acc > 32767) acc = 32767; if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  task automatic run(input int nfr, input int amp);
    for (int i = 0; i < nfr*M; i++) x[i] = $signed($urandom_range(2*amp, 0)) - amp;
    rst_n = 0; in_data = '0; repeat (3) @(posedge clk);
    rst_n <= 1; cyc = 0;
    fork
      for (int w = 0; w < nfr*W; w++) begin
        for (int l = 0; l < LANES; l++) in_data[l] <= 16'(x[w*LANES+l]);
        @(posedge clk);
      end
      begin : chk
        automatic int got = 0;
        while (got < nfr*W) begin
          @(posedge clk); #1; cyc++;
          if (out_valid) begin
            checks++;
            if (got == 0 && cyc != 4) begin failures++; $display("latency %0d", cyc); end
            if (out_sof != (got % W == 0)) begin failures++; $display("sof wrong at %0d", got); end
            for (int l = 0; l < LANES; l++) begin
              automatic int e = expected(got*LANES + l);
              automatic sample_t g = out_data[l];
              checks++;
              if (int'(g) != e) begin
                failures++;
                if (failures < 10) $display("word %0d lane %0d got %0d exp %0d", got, l, g, e);
              end
            end
            got++;
          end
        end
      end
    join
  endtask

  initial begin
    coef_we = 0; coef_addr = '0; coef_data = '0; in_data = '0;
    @(posedge clk);
    for (int i = 0; i < P*M; i++) begin
      h[i] = $signed($urandom_range(1 << 24, 0)) - (1 << 23);
      coef_we <= 1; coef_addr <= i[$clog2(P*M)-1:0]; coef_data <= 27'(h[i]);
      @(posedge clk);
    end
    coef_we <= 0;
    run(NFR, 20000);
    run(10, 8000);   // after a reset the history must read as zero again
    // saturation: large coefficients
    for (int i = 0; i < P*M; i++) begin
      h[i] = (i % 3 == 0) ? 27'sd33554431 : 0;
      coef_we <= 1; coef_addr <= i[$clog2(P*M)-1:0]; coef_data <= 27'(h[i]);
      @(posedge clk);
    end
    coef_we <= 0;
    run(10, 30000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
