// tb_coarse_delay: self-checking test of the integer delay corrector.
// Streams a ramp (sample n carries n), changes the delay at frame starts
// (including values that are not multiples of 8, zero and the maximum) and
// checks every output sample against n - D - 8 (zero before the start),
// the 2-clock latency and that the new delay takes effect at a frame start.
module tb_coarse_delay;
  import fengine_pkg::*;
  localparam int MAXD = 512, W = 4;   // frame = 4 words = 32 samples
  logic clk = 0, rst_n = 0;
  logic in_valid, in_sof; sample_word_t in_data;
  logic [$clog2(MAXD)-1:0] delay_in, delay_used;
  logic out_valid, out_sof; sample_word_t out_data;
  int checks = 0, failures = 0;

  coarse_delay #(.MAX_DELAY(MAXD)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // delay for input word t (changes only at frame starts)
  int dsched [8] = '{0, 13, 8, 511, 200, 7, 1, 0};
  int in_word = 0, out_word = 0;
  int dq [$];      // delay applied per input word
  int vq [$];      // input word index per valid input
  int outs = 0;

  initial begin
    in_valid = 0; in_sof = 0; in_data = '0; delay_in = '0;
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int ph = 0; ph < 8; ph++) begin
      for (int f = 0; f < 40; f++) begin
        for (int w = 0; w < W; w++) begin
          // random gaps in the stream
          while ($urandom_range(3, 0) == 0) begin in_valid <= 0; @(posedge clk); end
          in_valid <= 1; in_sof <= (w == 0);
          delay_in <= (w == 0) ? 9'(dsched[ph]) : 9'($urandom);  // only sof samples it
          for (int l = 0; l < LANES; l++) in_data[l] <= 16'(in_word*LANES + l);
          dq.push_back((w == 0 && f == 0) ? dsched[ph] : (dq.size() ? dq[$] : 0));
          in_word++;
          @(posedge clk);
        end
      end
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    if (outs != in_word) begin failures++; $display("output count %0d vs %0d", outs, in_word); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency check: output valid exactly 2 clocks after an input valid
  logic [1:0] vpipe;
  always_ff @(posedge clk) vpipe <= {vpipe[0], in_valid & rst_n};
  always @(posedge clk) if (rst_n && vpipe[1] !== out_valid) begin failures++; $display("latency"); end

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      automatic int d = dq[outs];
      checks++;
      if (out_sof != (outs % W == 0)) begin failures++; $display("sof at %0d", outs); end
      for (int j = 0; j < LANES; j++) begin
        automatic int src = (outs - 1) * LANES + j - d;
        automatic int e = (src >= 0) ? (src & 16'hffff) : 0;
        automatic logic [15:0] g = out_data[j];
        checks++;
        if (int'(g) != e) begin
          failures++;
          if (failures < 10) $display("word %0d lane %0d d=%0d got %0d exp %0d", outs, j, d, g, e);
        end
      end
      outs++;
    end
  end
endmodule
