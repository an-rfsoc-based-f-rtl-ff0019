// coarse_delay: integer-sample delay corrector.
//
// A ring buffer is written sequentially, one word of LANES samples per clock,
// and read at an offset set by the integer delay D (in samples), so that
//     out sample n = in sample (n - D)   (plus a fixed latency of 2 clocks
//                                         and one word, i.e. LANES samples)
// D need not be a multiple of LANES: with D = q*LANES + r, output lane j
// takes lane (j-r) mod LANES of word t-1-q (j >= r) or of word t-2-q (j < r).
// Each of the LANES lane RAMs is therefore read at exactly one address per
// clock and the lanes are rotated by r after the read.
//
// D is sampled from delay_in on every frame start (in_sof), so an update made
// on the fly takes effect at a frame boundary and never tears a frame.
// Samples whose source lies before the start of the run are output as zero.
//
// Interface: in_valid/in_sof/in_data (the stream may pause; the delay counts
// valid words). out_valid/out_sof/out_data follow with 2 clocks of latency.
// delay_in is 16 bits: 0 .. MAX_DELAY-1 samples.
//
// From the paper: an indexed ring buffer in block RAM, written sequentially
// and read at an offset given by the integer delay, up to 65536 samples,
// updatable on the fly. Own choices: the frame-boundary update, the
// extra one-word latency and the zero fill after reset.
module coarse_delay
  import fengine_pkg::*;
#(
  parameter int MAX_DELAY = 65536          // samples; delay_in < MAX_DELAY
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_sof,
  input  sample_word_t  in_data,
  input  logic [$clog2(MAX_DELAY)-1:0] delay_in,
  output logic          out_valid,
  output logic          out_sof,
  output sample_word_t  out_data,
  output logic [$clog2(MAX_DELAY)-1:0] delay_used
);
  localparam int DW    = $clog2(MAX_DELAY);
  localparam int LW    = $clog2(LANES);
  localparam int DEPTH = MAX_DELAY / LANES + 2;   // words
  localparam int AW    = $clog2(DEPTH);

  sample_t ram [LANES][DEPTH];

  logic [AW-1:0] wp;        // address written this clock
  logic [AW:0]   filled;    // words written since reset, saturating at DEPTH
  logic [DW-1:0] dly;

  // delay in effect for this word (a frame start loads the new value)
  logic [DW-1:0] d_now;
  always_comb d_now = (in_valid && in_sof) ? delay_in : dly;

  logic [DW-LW-1:0] q;
  logic [LW-1:0]    r;
  always_comb begin
    q = d_now[DW-1:LW];
    r = d_now[LW-1:0];
  end

  // per-lane read address and source validity
  logic [AW-1:0] ra [LANES];
  logic          rok [LANES];
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      int unsigned off;
      off = (i + int'(r) < LANES) ? int'(q) + 1 : int'(q) + 2;
      ra[i]  = (int'(wp) >= off) ? AW'(int'(wp) - off) : AW'(int'(wp) + DEPTH - off);
      rok[i] = int'(filled) >= off;
    end
  end

  sample_t rd [LANES];
  logic    rdok [LANES];
  logic [LW-1:0] r1;
  logic    v1, sof1;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < LANES; i++) begin
        rd[i]   <= ram[i][ra[i]];
        rdok[i] <= rok[i];
        ram[i][wp] <= in_data[i];
      end
      r1 <= r;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; filled <= '0; dly <= '0; v1 <= 1'b0; sof1 <= 1'b0;
    end else begin
      v1   <= in_valid;
      sof1 <= in_valid && in_sof;
      if (in_valid) begin
        dly    <= d_now;
        wp     <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
        if (filled != (AW+1)'(DEPTH)) filled <= filled + 1'b1;
      end
    end
  end

  // lane rotation: output lane j <- read lane (j - r) mod LANES
  always_ff @(posedge clk) begin
    for (int j = 0; j < LANES; j++) begin
      int src;
      src = (j - int'(r1) + LANES) % LANES;
      out_data[j] <= rdok[src] ? rd[src] : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin out_valid <= 1'b0; out_sof <= 1'b0; end
    else begin out_valid <= v1; out_sof <= sof1; end
  end

  assign delay_used = dly;
endmodule
