// snapshot: captures one frame of a chosen stream for inspection by the host.
//
// On snap_trig the source (0: ADC samples, 1: coarse delay output, 2: fine
// delay output) and stream (0..3) are latched and the kernel arms. Capture
// starts at the next frame start of that source and takes one frame: M real
// samples for the ADC and coarse-delay taps, NCHAN complex 8-bit channels
// ({re, im} in 16 bits) for the fine-delay tap. snap_done rises when the frame
// is complete and stays high until the next trigger. The host reads sample n
// at rd_addr = n; rd_data is registered (one clock).
//
// From the paper: a snapshot kernel that captures one frame of the ADC,
// coarse delay corrector or fine delay corrector output on a trigger from
// the processing system. Own choices: frame alignment, the source/stream
// select and the read port.
module snapshot
  import fengine_pkg::*;
#(
  parameter int M     = 2048,
  parameter int NCHAN = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        snap_trig,
  input  logic [1:0]  snap_src,
  input  logic [1:0]  snap_stream,
  output logic        snap_done,
  output logic        snap_busy,
  input  logic        adc_sof,
  input  sample_word_t [NSTREAM-1:0] adc_data,
  input  logic        cd_valid,
  input  logic        cd_sof,
  input  sample_word_t [NSTREAM-1:0] cd_data,
  input  logic        fd_valid,
  input  logic        fd_sof,
  input  chan_word_t  [NSTREAM-1:0] fd_data,
  input  logic [$clog2(M)-1:0] rd_addr,
  output logic [15:0] rd_data
);
  localparam int W  = M / LANES;
  localparam int AW = $clog2(W);

  logic [15:0] mem [LANES][W];

  logic [1:0] src, strm;
  logic       armed, capturing;
  logic [AW-1:0] wa;

  logic        s_valid, s_sof;
  logic [15:0] s_word [LANES];
  int          s_len;
  always_comb begin
    case (src)
      2'd0: begin s_valid = 1'b1;     s_sof = adc_sof; s_len = W; end
      2'd1: begin s_valid = cd_valid; s_sof = cd_sof;  s_len = W; end
      default: begin s_valid = fd_valid; s_sof = fd_sof; s_len = NCHAN / LANES; end
    endcase
    for (int l = 0; l < LANES; l++)
      case (src)
        2'd0:    s_word[l] = adc_data[strm][l];
        2'd1:    s_word[l] = cd_data[strm][l];
        default: s_word[l] = fd_data[strm][l];
      endcase
  end

  logic take, first;
  assign first = armed && s_valid && s_sof;
  assign take  = first || (capturing && s_valid);

  always_ff @(posedge clk)
    if (take)
      for (int l = 0; l < LANES; l++) mem[l][first ? '0 : wa] <= s_word[l];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      src <= '0; strm <= '0; armed <= 1'b0; capturing <= 1'b0; wa <= '0; snap_done <= 1'b0;
    end else if (snap_trig) begin
      src <= snap_src; strm <= snap_stream; armed <= 1'b1; capturing <= 1'b0; snap_done <= 1'b0;
    end else if (take) begin
      armed <= 1'b0;
      if (int'(first ? '0 : wa) == s_len - 1) begin
        capturing <= 1'b0; snap_done <= 1'b1; wa <= '0;
      end else begin
        capturing <= 1'b1; wa <= (first ? '0 : wa) + 1'b1;
      end
    end
  end

  assign snap_busy = armed || capturing;

  always_ff @(posedge clk) rd_data <= mem[rd_addr % LANES][AW'(rd_addr / LANES)];
endmodule
