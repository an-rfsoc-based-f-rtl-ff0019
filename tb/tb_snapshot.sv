// tb_snapshot: self-checking test of the snapshot kernel.
// Drives three sources with distinct counting patterns, triggers a capture
// of each source on different streams, checks that the capture begins at a
// frame start, holds exactly one frame (M samples, or NCHAN channels for the
// fine-delay tap) and that done stays low until the frame is complete.
module tb_snapshot;
  import fengine_pkg::*;
  localparam int M = 64, NCHAN = 32, W = M / LANES;
  logic clk = 0, rst_n = 0;
  logic snap_trig = 0, snap_done, snap_busy; logic [1:0] snap_src = 0, snap_stream = 0;
  logic adc_sof, cd_valid, cd_sof, fd_valid, fd_sof;
  sample_word_t [NSTREAM-1:0] adc_data, cd_data; chan_word_t [NSTREAM-1:0] fd_data;
  logic [$clog2(M)-1:0] rd_addr = '0; logic [15:0] rd_data;
  int checks = 0, failures = 0;
  snapshot #(.M(M), .NCHAN(NCHAN)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // sources: frame counters; value = src<<14 | stream<<12 | (frame%4)<<10 | sample index
  int cyc = 0, fcnt = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb begin
    automatic int w = cyc % (2 * W);                      // cd/fd run at half duty here
    adc_sof  = (cyc % W) == 0;
    cd_valid = (w < W);
    cd_sof   = (w == 0);
    fd_valid = (w < NCHAN / LANES);
    fd_sof   = (w == 0);
    for (int s = 0; s < NSTREAM; s++)
      for (int l = 0; l < LANES; l++) begin
        adc_data[s][l] = 16'((0 << 14) | (s << 12) | (((cyc / W) % 4) << 10) | ((cyc % W) * LANES + l));
        cd_data[s][l]  = 16'((1 << 14) | (s << 12) | (((cyc / (2*W)) % 4) << 10) | (w * LANES + l));
        fd_data[s][l]  = 16'((2 << 14) | (s << 12) | (((cyc / (2*W)) % 4) << 10) | (w * LANES + l));
      end
  end

  task automatic capture(int src, int strm);
    automatic int n = (src == 2) ? NCHAN : M;
    automatic int fr = 0;
    snap_trig <= 1; snap_src <= 2'(src); snap_stream <= 2'(strm); @(posedge clk);
    snap_trig <= 0; @(posedge clk); #1;
    checks++;
    if (snap_done || !snap_busy) begin failures++; $display("done/busy after trigger"); end
    while (!snap_done) @(posedge clk);
    for (int i = 0; i < n; i++) begin
      rd_addr <= 6'(i); @(posedge clk); @(posedge clk); #1;
      if (i == 0) fr = (rd_data >> 10) & 3;
      checks++;
      if (rd_data != 16'((src << 14) | (strm << 12) | (fr << 10) | i)) begin
        failures++; if (failures < 10) $display("src %0d sample %0d: %h", src, i, rd_data);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; repeat (5) @(posedge clk);
    capture(0, 1);
    capture(1, 3);
    capture(2, 2);
    capture(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
