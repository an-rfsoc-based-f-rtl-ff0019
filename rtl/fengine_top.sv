// fengine_top: the F-engine of one dual-band, dual-polarisation antenna.
//
// Four streams (band 1-2 GHz X and Y, band 2-3 GHz X and Y), each 8 samples
// per clock from the RF-ADCs, pass through
//   pfb_fir (8-tap polyphase FIR) -> coarse_delay -> [FFT, external]
//   -> fine_delay (fractional delay, complex gain, 8-bit rescale)
// and meet in the corner turner: ct_stage1 (through external DDR4) and
// ct_stage2 (on chip) reorder blocks of T = 512 spectra so that each packet
// carries 512 time samples of one channel and polarisation; spead_packetizer
// adds the SPEAD header and hands the packets to the network layer.
// fengine_ctrl holds the registers and the PPS-synchronised run control,
// delay_predictor turns the linear delay model into integer and fractional
// delays once per spectrum, snapshot captures frames for the host.
//
// The FFT (vendor IP), the DDR4 memory and controller, the 100 GbE network
// layer and the ADCs are outside this module and connect through its ports.
// The FFT must be an M-point streaming FFT with a fixed latency, taking
// fft_in_* and returning fft_out_* (out_sof on bin 0), reset by fft_rst_n.
//
// While the engine is not running every pipeline block is held in reset.
// Everything runs on one clock; at 2 GS/s and 8 samples per clock that is
// 250 MHz, at which the corner-turner and network side has twice the
// throughput it needs (1024 of 2048 FFT bins are kept).
//
// The order FIR -> coarse delay -> FFT follows the dataflow figure of the
// design; the text lists the coarse delay before the whole filter bank.
module fengine_top
  import fengine_pkg::*;
#(
  parameter int M         = 2048,   // FFT points
  parameter int P         = 8,      // FIR taps
  parameter int MAX_DELAY = 65536,  // coarse delay range, samples
  parameter int NCHAN     = 1024,   // channels kept per stream
  parameter int T         = 512,    // spectra per corner-turn block
  parameter int F0        = 128     // channels per stage-2 group
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pps,
  // register bus from the processing system
  input  logic         reg_wr,
  input  logic         reg_rd,
  input  logic [15:0]  reg_addr,
  input  logic [31:0]  reg_wdata,
  output logic [31:0]  reg_rdata,
  output logic         reg_rvalid,
  output logic         running,
  // RF-ADC samples
  input  sample_word_t [NSTREAM-1:0] adc_data,
  // external FFT
  output logic         fft_rst_n,
  output logic         fft_in_valid,
  output logic         fft_in_sof,
  output sample_word_t [NSTREAM-1:0] fft_in_data,
  input  logic         fft_out_valid,
  input  logic         fft_out_sof,
  input  fft_word_t    [NSTREAM-1:0] fft_out_data,
  // DDR4 controller
  output logic         ddr_wr_valid,
  input  logic         ddr_wr_ready,
  output logic [31:0]  ddr_wr_addr,
  output wide_word_t   ddr_wr_data,
  output logic         ddr_rd_req_valid,
  input  logic         ddr_rd_req_ready,
  output logic [31:0]  ddr_rd_req_addr,
  input  logic         ddr_rd_resp_valid,
  input  wide_word_t   ddr_rd_resp_data,
  // packet stream to the network layer
  output logic         net_valid,
  input  logic         net_ready,
  output logic [511:0] net_data,
  output logic         net_last,
  output logic [15:0]  net_chan,
  output logic         net_pol
);
  localparam int W  = M / LANES;
  localparam int DW = $clog2(MAX_DELAY);

  // ---------------- control ----------------------------------------------------
  logic        armed, delay_load, coef_we, gain_we, snap_trig, snap_done, snap_busy, overflow;
  logic [15:0] ant_id, snap_rdata, delay_int, delay_frac;
  logic [31:0] delay0;
  logic signed [31:0] delay_rate;
  logic [$clog2(P*M)-1:0] coef_addr;
  coef_t       coef_data;
  logic [1:0]  gain_stream, snap_src, snap_stream;
  logic [$clog2(NCHAN)-1:0] gain_addr;
  gain_t       gain_data;
  logic [$clog2(M)-1:0] snap_rd_addr;

  fengine_ctrl #(.M(M), .P(P), .NCHAN(NCHAN)) u_ctrl (
    .clk, .rst_n, .pps, .reg_wr, .reg_rd, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .running, .armed, .ant_id, .delay0, .delay_rate, .delay_load,
    .coef_we, .coef_addr, .coef_data, .gain_we, .gain_stream, .gain_addr, .gain_data,
    .snap_trig, .snap_src, .snap_stream, .snap_rd_addr, .snap_rdata, .snap_done, .overflow
  );

  logic prst_n;                  // pipeline reset: low while not running
  always_ff @(posedge clk) prst_n <= rst_n && running;
  assign fft_rst_n = prst_n;

  // ADC frame position (frame start of the filter bank input)
  logic [$clog2(W)-1:0] adc_w;
  logic adc_sof;
  always_ff @(posedge clk) begin
    if (!prst_n) adc_w <= '0;
    else         adc_w <= adc_w + 1'b1;
  end
  assign adc_sof = (adc_w == '0);

  // ---------------- per-stream FIR and coarse delay ----------------------------
  logic         fir_valid [NSTREAM];
  logic         fir_sof   [NSTREAM];
  sample_word_t fir_data  [NSTREAM];
  logic         cd_valid  [NSTREAM];
  logic         cd_sof    [NSTREAM];
  sample_word_t [NSTREAM-1:0] cd_data;
  logic [DW-1:0] cd_delay, cd_used [NSTREAM];

  always_comb cd_delay = (int'(delay_int) >= MAX_DELAY) ? DW'(MAX_DELAY - 1) : DW'(delay_int);

  for (genvar s = 0; s < NSTREAM; s++) begin : g_front
    pfb_fir #(.M(M), .P(P)) u_fir (
      .clk, .rst_n(prst_n), .in_data(adc_data[s]),
      .coef_we, .coef_addr, .coef_data,
      .out_valid(fir_valid[s]), .out_sof(fir_sof[s]), .out_data(fir_data[s])
    );
    coarse_delay #(.MAX_DELAY(MAX_DELAY)) u_cd (
      .clk, .rst_n(prst_n), .in_valid(fir_valid[s]), .in_sof(fir_sof[s]), .in_data(fir_data[s]),
      .delay_in(cd_delay), .out_valid(cd_valid[s]), .out_sof(cd_sof[s]), .out_data(cd_data[s]),
      .delay_used(cd_used[s])
    );
  end

  // the delay model restarts from DELAY0 whenever the engine starts
  logic run_start;
  assign run_start = running && !prst_n && rst_n;

  delay_predictor u_pred (
    .clk, .rst_n, .tick(fir_valid[0] && fir_sof[0]), .load_req(delay_load), .load_now(run_start),
    .delay0, .rate(delay_rate), .delay_int, .delay_frac
  );

  assign fft_in_valid = cd_valid[0];
  assign fft_in_sof   = cd_sof[0];
  assign fft_in_data  = cd_data;

  // ---------------- fine delay ----------------------------------------------
  logic        fd_valid [NSTREAM];
  logic        fd_sof   [NSTREAM];
  chan_word_t  [NSTREAM-1:0] fd_data;

  for (genvar s = 0; s < NSTREAM; s++) begin : g_fine
    fine_delay #(.M(M), .NCHAN(NCHAN)) u_fd (
      .clk, .rst_n(prst_n), .in_valid(fft_out_valid), .in_sof(fft_out_sof), .in_data(fft_out_data[s]),
      .delay_frac, .gain_we(gain_we && gain_stream == 2'(s)), .gain_addr, .gain_data,
      .out_valid(fd_valid[s]), .out_sof(fd_sof[s]), .out_data(fd_data[s])
    );
  end

  // ---------------- corner turner -------------------------------------------
  logic        grp_free, grp_start, ct1_valid;
  logic [15:0] grp_f1;
  logic [31:0] grp_block;
  wide_word_t  ct1_data;

  ct_stage1 #(.T(T), .NCHAN(NCHAN), .F0(F0)) u_ct1 (
    .clk, .rst_n(prst_n), .in_valid(fd_valid[0]), .in_data(fd_data),
    .wr_valid(ddr_wr_valid), .wr_ready(ddr_wr_ready), .wr_addr(ddr_wr_addr), .wr_data(ddr_wr_data),
    .rd_req_valid(ddr_rd_req_valid), .rd_req_ready(ddr_rd_req_ready), .rd_req_addr(ddr_rd_req_addr),
    .rd_resp_valid(ddr_rd_resp_valid), .rd_resp_data(ddr_rd_resp_data),
    .grp_free, .grp_start, .grp_f1, .grp_block, .out_valid(ct1_valid), .out_data(ct1_data),
    .overflow
  );

  logic        ct2_valid, ct2_ready, ct2_first, ct2_last;
  wide_word_t  ct2_data;
  logic [15:0] ct2_chan;
  logic [1:0]  ct2_stream;
  logic [31:0] ct2_block;

  ct_stage2 #(.T(T), .F0(F0)) u_ct2 (
    .clk, .rst_n(prst_n), .grp_free, .grp_start, .grp_f1, .grp_block,
    .in_valid(ct1_valid), .in_data(ct1_data),
    .out_valid(ct2_valid), .out_ready(ct2_ready), .out_data(ct2_data), .out_first(ct2_first),
    .out_last(ct2_last), .out_chan(ct2_chan), .out_stream(ct2_stream), .out_block(ct2_block)
  );

  // ---------------- packetizer ----------------------------------------------
  spead_packetizer #(.T(T), .NCHAN(NCHAN), .M(M)) u_pkt (
    .clk, .rst_n(prst_n), .ant_id,
    .in_valid(ct2_valid), .in_ready(ct2_ready), .in_data(ct2_data), .in_first(ct2_first),
    .in_last(ct2_last), .in_chan(ct2_chan), .in_stream(ct2_stream), .in_block(ct2_block),
    .out_valid(net_valid), .out_ready(net_ready), .out_data(net_data), .out_last(net_last),
    .out_chan(net_chan), .out_pol(net_pol)
  );

  // ---------------- snapshot -------------------------------------------------
  logic fd_sof0, cd_sof0, cd_valid0, fd_valid0;
  assign cd_valid0 = cd_valid[0];
  assign cd_sof0   = cd_sof[0];
  assign fd_valid0 = fd_valid[0];
  assign fd_sof0   = fd_sof[0];

  snapshot #(.M(M), .NCHAN(NCHAN)) u_snap (
    .clk, .rst_n, .snap_trig, .snap_src, .snap_stream, .snap_done, .snap_busy,
    .adc_sof(adc_sof && prst_n), .adc_data,
    .cd_valid(cd_valid0), .cd_sof(cd_sof0), .cd_data,
    .fd_valid(fd_valid0), .fd_sof(fd_sof0), .fd_data,
    .rd_addr(snap_rd_addr), .rd_data(snap_rdata)
  );
endmodule
