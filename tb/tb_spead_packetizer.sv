// tb_spead_packetizer: self-checking test of the SPEAD framing.
// Feeds packets with random payloads and tags under random back-pressure and
// checks each header item (magic, heap counter, sizes, timestamp, ordering
// vector), that payload words pass unchanged, the word count per packet and
// out_last, and the channel/polarisation sideband.
module tb_spead_packetizer;
  import fengine_pkg::*;
  localparam int T = 128, NCHAN = 64, M = 256, NU = T / 32, NPKT = 30;
  logic clk = 0, rst_n = 0;
  logic [15:0] ant_id = 16'h00a5;
  logic in_valid, in_ready, in_first, in_last, out_valid, out_ready, out_last, out_pol;
  wide_word_t in_data; logic [15:0] in_chan, out_chan; logic [1:0] in_stream; logic [31:0] in_block;
  logic [511:0] out_data;
  int checks = 0, failures = 0;
  spead_packetizer #(.T(T), .NCHAN(NCHAN), .M(M)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  wide_word_t pay [NPKT][NU];
  int chan [NPKT], strm [NPKT], blk [NPKT];

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_data = '0; in_chan = '0; in_stream = '0; in_block = '0;
    for (int p = 0; p < NPKT; p++) begin
      chan[p] = $urandom_range(NCHAN - 1, 0); strm[p] = $urandom_range(3, 0); blk[p] = $urandom_range(1000, 0);
      for (int u = 0; u < NU; u++) for (int i = 0; i < 32; i++) pay[p][u][i] = 16'($urandom);
    end
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int p = 0; p < NPKT; p++)
      for (int u = 0; u < NU; u++) begin
        in_valid <= 1; in_first <= (u == 0); in_last <= (u == NU - 1); in_data <= pay[p][u];
        in_chan <= 16'(chan[p]); in_stream <= 2'(strm[p]); in_block <= 32'(blk[p]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
  end

  int pk = 0, wd = 0;
  always @(posedge clk) out_ready <= ($urandom_range(2, 0) != 0);
  always @(posedge clk) begin
    #1;
    if (out_valid && out_ready) begin
      checks++;
      if (int'(out_chan) != (strm[pk] / 2) * NCHAN + chan[pk] || out_pol != strm[pk][0]) begin failures++; $display("sideband"); end
      if (wd == 0) begin
        logic [63:0] it [8];
        for (int i = 0; i < 8; i++) it[i] = out_data[511 - 64*i -: 64];
        checks++;
        if (it[0] != 64'h5304020600000007) begin failures++; $display("magic %h", it[0]); end
        checks++;
        if (it[1] != {16'h8001, 48'(pk)}) begin failures++; $display("heap cnt %h", it[1]); end
        checks++;
        if (it[2] != {16'h8002, 48'(2*T)} || it[3] != {16'h8003, 48'd0} || it[4] != {16'h8004, 48'(2*T)}) begin failures++; $display("sizes"); end
        checks++;
        if (it[5] != {16'h9600, 48'(longint'(blk[pk]) * T * (M / 8))}) begin failures++; $display("timestamp %h", it[5]); end
        checks++;
        if (it[6] != {16'hC101, 16'h00a5, 16'((strm[pk] / 2) * NCHAN + chan[pk]), 16'(strm[pk] % 2)}) begin failures++; $display("order %h", it[6]); end
        checks++;
        if (it[7] != {16'h4300, 48'd0} || out_last) begin failures++; $display("raw item"); end
      end else begin
        checks++;
        if (out_data != pay[pk][wd-1]) begin failures++; $display("payload %0d/%0d", pk, wd); end
        checks++;
        if (out_last != (wd == NU)) begin failures++; $display("last"); end
      end
      wd++;
      if (wd == NU + 1) begin wd = 0; pk++; end
      if (pk == NPKT) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
