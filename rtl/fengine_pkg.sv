// fengine_pkg: types and constants shared by the F-engine modules.
//
// The F-engine channelises four real sample streams (two RF bands times two
// polarisations) with 8 samples per clock per stream. Sample, FFT-bin and
// output widths are the ones the design is built around: 16-bit ADC and FIR
// samples, 27-bit FFT bins, 27-bit FIR coefficients with 2 integer bits and
// (8,8)-bit complex output samples. The 32-bit control word layouts, the
// 512-bit memory/network word and the SPEAD item identifiers are choices of
// this implementation.
package fengine_pkg;

  localparam int LANES   = 8;   // samples per clock per stream (SSR 8)
  localparam int NSTREAM = 4;   // band 1-2 GHz X, Y; band 2-3 GHz X, Y

  localparam int SAMPLE_W  = 16;
  localparam int COEF_W    = 27;
  localparam int COEF_FRAC = 25; // 27-bit coefficient, 2 integer bits
  localparam int FFT_W     = 27; // unscaled FFT output width
  localparam int OUT_W     = 8;  // output rescaled to signed 8 bit

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef sample_t [LANES-1:0]        sample_word_t;   // one clock of one stream

  typedef logic signed [COEF_W-1:0]   coef_t;

  typedef struct packed {
    logic signed [FFT_W-1:0] re;
    logic signed [FFT_W-1:0] im;
  } fft_bin_t;
  typedef fft_bin_t [LANES-1:0] fft_word_t;

  typedef struct packed {
    logic signed [OUT_W-1:0] re;
    logic signed [OUT_W-1:0] im;
  } cplx8_t;
  typedef cplx8_t [LANES-1:0] chan_word_t;

  // 512-bit word of the corner turner and of the network stream:
  // 32 complex 8-bit samples, element 0 in the most significant bits.
  localparam int WIDE_N = 32;
  typedef cplx8_t [0:WIDE_N-1] wide_word_t;

  // Complex gain word: amplitude (unsigned, 16 fractional bits) and phase
  // (unsigned turns, 2^16 = one turn).
  typedef struct packed {
    logic [15:0] amp;
    logic [15:0] phase;
  } gain_t;

  // SPEAD item identifiers (immediate items carry bit 15 set in the header).
  localparam logic [15:0] SPEAD_HEAP_CNT   = 16'h8001;
  localparam logic [15:0] SPEAD_HEAP_SIZE  = 16'h8002;
  localparam logic [15:0] SPEAD_HEAP_OFF   = 16'h8003;
  localparam logic [15:0] SPEAD_PAY_LEN    = 16'h8004;
  localparam logic [15:0] SPEAD_TIMESTAMP  = 16'h9600;
  localparam logic [15:0] SPEAD_ORDER      = 16'hC101;
  localparam logic [15:0] SPEAD_RAW_DATA   = 16'h4300;
  localparam logic [63:0] SPEAD_HEADER     = 64'h5304_0206_0000_0007;

  // Control register map (word addresses on the PS-PL register bus)
  localparam logic [15:0] REG_CTRL       = 16'h0000; // w: bit0 start, bit1 stop
  localparam logic [15:0] REG_STATUS     = 16'h0001; // r: running, armed, snap done, overflow
  localparam logic [15:0] REG_ANT_ID     = 16'h0002;
  localparam logic [15:0] REG_DELAY0     = 16'h0003; // 16.16 samples
  localparam logic [15:0] REG_DELAY_RATE = 16'h0004; // signed, 2^-32 samples per spectrum
  localparam logic [15:0] REG_DELAY_LOAD = 16'h0005; // w: load DELAY0 at next spectrum
  localparam logic [15:0] REG_SNAP_CTRL  = 16'h0006; // w: bit0 trigger, [2:1] source, [4:3] stream
  localparam logic [15:0] REG_SNAP_BASE  = 16'h1000; // r: 0x1000..0x17FF captured samples
  localparam logic [15:0] REG_COEF_BASE  = 16'h4000; // w: 0x4000..0x7FFF FIR coefficients h[i]
  localparam logic [15:0] REG_GAIN_BASE  = 16'h8000; // w: 0x8000 + stream*2048 + channel

  // Arithmetic shift right by sh with round-half-up, then saturate to w bits.
  function automatic logic signed [63:0] round_shift(input logic signed [63:0] v, input int sh);
    if (sh == 0) return v;
    return (v + (64'sd1 <<< (sh - 1))) >>> sh;
  endfunction

  function automatic logic signed [63:0] sat(input logic signed [63:0] v, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

endpackage
