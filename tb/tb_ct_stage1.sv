// tb_ct_stage1: self-checking test of the DDR corner-turner stage.
// Streams blocks of T spectra (pattern values that encode block, time,
// word and lane) at half rate, with a DDR model that randomly stalls and a
// stage-2 stand-in that grants groups at random times. Checks that every
// group arrives in (F1, T, F0) order with the right group/block tags, that
// each group has exactly T*F0/8 words, and that the overflow flag stays low
// while the reader keeps up and is raised once the reader is held off.
module tb_ct_stage1;
  import fengine_pkg::*;
  localparam int T = 8, NCHAN = 64, F0 = 16, CW = NCHAN / LANES, GW = F0 / LANES, NF1 = NCHAN / F0;
  localparam int NBLK = 6;
  logic clk = 0, rst_n = 0;
  logic in_valid; chan_word_t [NSTREAM-1:0] in_data;
  logic wr_valid, wr_ready, rd_req_valid, rd_req_ready, rd_resp_valid;
  logic [31:0] wr_addr, rd_req_addr; wide_word_t wr_data, rd_resp_data;
  logic grp_free, grp_start, out_valid, overflow; logic [15:0] grp_f1; logic [31:0] grp_block;
  wide_word_t out_data;
  logic stall_en = 1;
  int checks = 0, failures = 0;

  ct_stage1 #(.T(T), .NCHAN(NCHAN), .F0(F0)) dut (.*);
  ddr_model #(.WORDS(2*T*CW), .LATENCY(7), .STALL_PCT(20)) u_ddr (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [15:0] pat(int b, int t, int cw, int k);
    return 16'(b * 7919 + t * 131 + cw * 17 + k * 3);
  endfunction

  int hold_reader = 0;
  // stage-2 stand-in: free again a random time after a group has fully arrived
  int words_in_grp = 0, grp_seen = 0, cur_f1 = 0, cur_blk = 0, busy = 0;
  always @(posedge clk) begin
    grp_free <= !busy && !hold_reader && ($urandom_range(3, 0) != 0);
  end
  always @(posedge clk) begin
    #1;
    if (grp_start) begin
      checks++;
      if (busy) begin failures++; $display("group started while busy"); end
      if (int'(grp_f1) != grp_seen % NF1 || int'(grp_block) != grp_seen / NF1) begin
        failures++; $display("group tag %0d/%0d expected %0d/%0d", grp_block, grp_f1, grp_seen / NF1, grp_seen % NF1);
      end
      cur_f1 = grp_seen % NF1; cur_blk = grp_seen / NF1;
      busy = 1; words_in_grp = 0;
    end
    if (out_valid) begin
      automatic int t = words_in_grp / GW, c = words_in_grp % GW;
      checks++;
      for (int k = 0; k < 32; k++) begin
        automatic int s = k / LANES, l = k % LANES;
        if (out_data[k] != pat(cur_blk, t, cur_f1 * GW + c, k)) begin
          failures++;
          if (failures < 4) $display("blk %0d f1 %0d t %0d c %0d k %0d got %h exp %h", cur_blk, cur_f1, t, c, k, out_data[k], pat(cur_blk, t, cur_f1 * GW + c, k));
          break;
        end
      end
      words_in_grp++;
      if (words_in_grp == T * GW) begin busy = 0; grp_seen++; end
    end
  end

  task automatic send_block(int b);
    for (int t = 0; t < T; t++)
      for (int cw = 0; cw < 2 * CW; cw++) begin   // half duty: CW valid words per 2*CW clocks
        in_valid <= (cw < CW);
        for (int s = 0; s < NSTREAM; s++)
          for (int l = 0; l < LANES; l++)
            in_data[s][l] <= pat(b, t, cw, s * LANES + l);
        @(posedge clk);
      end
  endtask

  initial begin
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int b = 0; b < NBLK; b++) send_block(b);
    in_valid <= 0;
    repeat (400) @(posedge clk);
    checks++;
    if (grp_seen != NBLK * NF1) begin failures++; $display("groups %0d", grp_seen); end
    checks++;
    if (overflow) begin failures++; $display("unexpected overflow"); end
    // hold the reader: the third block after this point cannot be stored
    hold_reader = 1;
    for (int b = 0; b < 3; b++) send_block(NBLK + b);
    in_valid <= 0;
    checks++;
    if (!overflow) begin failures++; $display("overflow not flagged"); end
    $display("ddr stalls %0d", u_ddr.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
