// delay_predictor: first-order (linear) geometric delay model.
//
// Holds the delay as a 48-bit fixed-point number of samples, 16 integer and
// 32 fractional bits. On every spectrum tick the accumulator either loads
// the host's starting delay (if a load was requested since the last tick)
// or adds the signed rate, so delay(k) = d0 + k * rate, k counting spectra.
// The integer part drives the coarse delay corrector, the top 16 fraction
// bits the fine delay corrector. The accumulator saturates at 0 and at the
// largest representable delay instead of wrapping.
//
// Interface: load_req (one clock) marks delay0 (16.16 samples) for loading
// at the next tick; load_now loads it at once (used when the engine starts,
// so the first spectrum already sees the model's starting delay); rate is in units of 2^-32 samples per spectrum; tick is
// one clock per spectrum. Outputs change the clock after a tick.
//
// From the paper: a first-order polynomial delay model whose coefficients
// the CPU updates, evaluated by a linear interpolation predictor, split into
// an integer and a fractional part. Own choices: the fixed-point formats,
// the per-spectrum update and the saturation.
module delay_predictor (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               tick,
  input  logic               load_req,
  input  logic               load_now,
  input  logic [31:0]        delay0,
  input  logic signed [31:0] rate,
  output logic [15:0]        delay_int,
  output logic [15:0]        delay_frac
);
  logic [47:0] acc;
  logic        pending;
  logic [31:0] d0_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0; pending <= 1'b0; d0_q <= '0;
    end else begin
      if (load_req) begin pending <= 1'b1; d0_q <= delay0; end
      if (load_now) begin
        acc     <= {delay0, 16'h0};
        pending <= 1'b0;
      end else if (tick) begin
        if (pending || load_req) begin
          acc     <= {(load_req ? delay0 : d0_q), 16'h0};
          pending <= 1'b0;
        end else begin
          logic signed [49:0] nxt;
          nxt = $signed({2'b00, acc}) + 50'(rate);
          if (nxt < 0)                          acc <= '0;
          else if (nxt > 50'sh0_FFFF_FFFF_FFFF) acc <= '1;
          else                                  acc <= nxt[47:0];
        end
      end
    end
  end

  assign delay_int  = acc[47:32];
  assign delay_frac = acc[31:16];
endmodule
