// tb_ct_stage2: self-checking test of the on-chip transpose stage.
// Sends groups of T spectra x F0 channels x 4 streams with pattern values
// that encode (group, time, channel, stream), with random gaps on the input
// and random back-pressure on the output, and checks that every packet holds
// the T time samples of one channel and stream in time order, in the order
// channel-major then stream, with correct first/last/channel/block tags.
module tb_ct_stage2;
  import fengine_pkg::*;
  localparam int T = 64, F0 = 16, GW = F0 / LANES, NU = T / 32, NGRP = 5;
  logic clk = 0, rst_n = 0;
  logic grp_free, grp_start, in_valid, out_valid, out_ready, out_first, out_last;
  logic [15:0] grp_f1, out_chan; logic [31:0] grp_block, out_block; logic [1:0] out_stream;
  wide_word_t in_data, out_data;
  int checks = 0, failures = 0;
  ct_stage2 #(.T(T), .F0(F0)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic cplx8_t pat(int g, int t, int c, int s);
    automatic logic [15:0] v = 16'(g * 4099 + t * 37 + c * 5 + s * 1031);
    return v;
  endfunction

  initial begin
    grp_start = 0; in_valid = 0; in_data = '0; grp_f1 = '0; grp_block = '0;
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int g = 0; g < NGRP; g++) begin
      while (!grp_free) @(posedge clk);
      grp_start <= 1; grp_f1 <= 16'(g % 3); grp_block <= 32'(g / 3);
      @(posedge clk);
      grp_start <= 0;
      for (int n = 0; n < T * GW; n++) begin
        automatic int t = n / GW, cg = n % GW;
        while ($urandom_range(4, 0) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        for (int k = 0; k < 32; k++) in_data[k] <= pat(g, t, cg * LANES + k % LANES, k / LANES);
        @(posedge clk);
      end
      in_valid <= 0;
    end
  end

  int nword = 0;
  always @(posedge clk) out_ready <= ($urandom_range(3, 0) != 0);
  always @(posedge clk) begin
    #1;
    if (out_valid && out_ready) begin
      automatic int g = nword / (F0 * NSTREAM * NU);
      automatic int r = nword % (F0 * NSTREAM * NU);
      automatic int c = r / (NSTREAM * NU), s = (r / NU) % NSTREAM, u = r % NU;
      checks++;
      if (out_first != (u == 0) || out_last != (u == NU - 1) || int'(out_chan) != (g % 3) * F0 + c
          || int'(out_stream) != s || int'(out_block) != g / 3) begin
        failures++; $display("tags wrong at word %0d", nword);
      end
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (out_data[i] != pat(g, u * 32 + i, c, s)) begin
          failures++;
          if (failures < 8) $display("g %0d c %0d s %0d t %0d: %h vs %h", g, c, s, u*32+i, out_data[i], pat(g, u*32+i, c, s));
        end
      end
      nword++;
      if (nword == NGRP * F0 * NSTREAM * NU) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
