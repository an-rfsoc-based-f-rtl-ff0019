// ct_stage2: second corner-turner stage, on-chip (UltraRAM in the target).
//
// Receives one channel group (F0 channels of all NSTREAM streams, T spectra)
// from ct_stage1 in (T, F0) order, 32 samples per word (LANES channels of
// the four streams), and sends it out in (F0, T) order: for each channel c
// and stream s, T time samples of that channel, 32 per word, i.e. one packet
// payload of T complex 8-bit samples.
//
// Transposing at a full word per clock on both sides uses 32 single-port-
// per-side banks with a skewed (diagonal) mapping: sample k of the word
// written at time t goes to bank (t + k) mod 32, address t*GW + cg (cg =
// channel group of 8). Every write then hits 32 different banks, and so
// does every read of 32 consecutive times of one (channel, stream), whose
// samples are rotated back into time order after the read.
// Two buffers (ping-pong) let one group drain while the next fills.
//
// Interface: grp_free is high when a buffer can take a new group;
// grp_start (one clock) claims it and carries the group's F1 index and block
// number; exactly T*F0/8 in_valid words follow and are never refused.
// Output: valid/ready stream with out_first/out_last marking the T/32 words
// of one packet and out_chan/out_stream/out_block naming it. One clock of
// latency from ready to data.
//
// From the paper: a second, smaller transposition stage in on-chip memory
// completing the time/frequency corner turn for the channels stage 1 kept
// together, giving contiguous time samples of one channel ("x4 times" in the
// figure read as: one pass per group). Own choices: F0, the bank skew, the
// double buffer and the packet order (channel, then stream).
module ct_stage2
  import fengine_pkg::*;
#(
  parameter int T  = 512,
  parameter int F0 = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        grp_free,
  input  logic        grp_start,
  input  logic [15:0] grp_f1,
  input  logic [31:0] grp_block,
  input  logic        in_valid,
  input  wide_word_t  in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output wide_word_t  out_data,
  output logic        out_first,
  output logic        out_last,
  output logic [15:0] out_chan,      // channel within the stream: f1*F0 + c
  output logic [1:0]  out_stream,
  output logic [31:0] out_block
);
  localparam int NB    = WIDE_N;          // 32 banks
  localparam int GW    = F0 / LANES;      // channel groups of 8
  localparam int BUFW  = T * GW;          // words per buffer per bank
  localparam int AW    = $clog2(2 * BUFW);
  localparam int NU    = T / NB;          // words per packet
  localparam int GROUP_WORDS = T * GW;

  cplx8_t bank [NB][2 * BUFW];

  // ---------------- fill side ---------------------------------------------------
  logic        filling, fill_buf;
  logic [$clog2(GROUP_WORDS)-1:0] fill_n;
  logic [1:0]  full;
  logic [15:0] meta_f1  [2];
  logic [31:0] meta_blk [2];
  logic        drain_buf;
  logic        drain_done;                 // last word of drain_buf read this clock

  assign grp_free = !filling && !full[fill_buf];

  logic [$clog2(T)-1:0]  ft;
  logic [$clog2(GW > 1 ? GW : 2)-1:0] fcg;
  always_comb begin
    ft  = $clog2(T)'(int'(fill_n) / GW);
    fcg = ($clog2(GW > 1 ? GW : 2))'(int'(fill_n) % GW);
  end

  always_ff @(posedge clk) begin
    if (in_valid && filling)
      for (int k = 0; k < NB; k++)
        bank[(int'(ft) + k) % NB][AW'(int'(fill_buf) * BUFW + int'(ft) * GW + int'(fcg))] <= in_data[k];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      filling <= 1'b0; fill_buf <= 1'b0; fill_n <= '0; full <= '0;
    end else begin
      if (grp_start) begin
        filling <= 1'b1;
        meta_f1[fill_buf]  <= grp_f1;
        meta_blk[fill_buf] <= grp_block;
      end
      if (in_valid && filling) begin
        if (int'(fill_n) == GROUP_WORDS - 1) begin
          fill_n         <= '0;
          filling        <= 1'b0;
          full[fill_buf] <= 1'b1;
          fill_buf       <= !fill_buf;
        end else fill_n <= fill_n + 1'b1;
      end
      if (drain_done) full[drain_buf] <= 1'b0;
    end
  end

  // ---------------- drain side --------------------------------------------------
  logic [$clog2(F0)-1:0]          dc;
  logic [1:0]                     ds;
  logic [$clog2(NU > 1 ? NU : 2)-1:0] du;
  logic advance;
  assign advance = full[drain_buf] && (!out_valid || out_ready);

  int k_now;
  always_comb k_now = int'(ds) * LANES + int'(dc) % LANES;

  cplx8_t rd_q [NB];
  int     k_q;

  always_ff @(posedge clk) begin
    if (advance) begin
      for (int b = 0; b < NB; b++) begin
        int i;
        i = (b - k_now + NB) % NB;        // time offset held by bank b
        rd_q[b] <= bank[b][AW'(int'(drain_buf) * BUFW + (int'(du) * NB + i) * GW + int'(dc) / LANES)];
      end
      k_q <= k_now;
    end
  end

  always_comb begin
    for (int i = 0; i < NB; i++) out_data[i] = rd_q[(i + k_q) % NB];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dc <= '0; ds <= '0; du <= '0; drain_buf <= 1'b0; out_valid <= 1'b0;
      out_first <= 1'b0; out_last <= 1'b0; out_chan <= '0; out_stream <= '0; out_block <= '0;
    end else begin
      if (advance) begin
        out_valid  <= 1'b1;
        out_first  <= (du == '0);
        out_last   <= (int'(du) == NU - 1);
        out_chan   <= 16'(int'(meta_f1[drain_buf]) * F0 + int'(dc));
        out_stream <= ds;
        out_block  <= meta_blk[drain_buf];
        if (int'(du) == NU - 1) begin
          du <= '0;
          if (ds == 2'(NSTREAM - 1)) begin
            ds <= '0;
            if (int'(dc) == F0 - 1) begin
              dc        <= '0;
              drain_buf <= !drain_buf;
            end else dc <= dc + 1'b1;
          end else ds <= ds + 1'b1;
        end else du <= du + 1'b1;
      end else if (out_ready) out_valid <= 1'b0;
    end
  end

  assign drain_done = advance && int'(du) == NU - 1 && ds == 2'(NSTREAM - 1) && int'(dc) == F0 - 1;

  // a group must not be announced while no buffer is free
  assert property (@(posedge clk) disable iff (!rst_n) grp_start |-> grp_free);
endmodule
