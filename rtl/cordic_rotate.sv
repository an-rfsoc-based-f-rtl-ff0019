// cordic_rotate: pipelined CORDIC that rotates a complex sample by a phase.
//
// The phase is in turns (2^16 = one turn). A first stage folds the rotation
// into [-1/4, +1/4) turn by negating the input when needed; STAGES
// micro-rotations by +-atan(2^-i) follow, one per clock, on an angle kept
// with 20 fractional bits of a turn. The output is the rotated vector times
// the CORDIC gain K = 1.6467602581 (16 stages); the caller compensates K.
// Output width is IN_W + 2 bits so the gain cannot overflow.
// Latency: STAGES + 1 clocks; the pipeline never stalls.
//
// This is a helper of the fine delay corrector; the CORDIC itself is a
// choice of this implementation.
module cordic_rotate #(
  parameter int IN_W   = 27,
  parameter int STAGES = 16
) (
  input  logic                   clk,
  input  logic signed [IN_W-1:0] x_in,
  input  logic signed [IN_W-1:0] y_in,
  input  logic [15:0]            phase,
  output logic signed [IN_W+1:0] x_out,
  output logic signed [IN_W+1:0] y_out
);
  localparam int XW = IN_W + 2;
  localparam int AW = 21;  // signed angle, 2^20 = one turn

  // atan(2^-i) in 2^-20 turns
  function automatic logic signed [AW-1:0] atan_tab(input int i);
    case (i)
      0: return 21'sd131072;  1: return 21'sd77376;  2: return 21'sd40884;
      3: return 21'sd20753;   4: return 21'sd10417;  5: return 21'sd5213;
      6: return 21'sd2607;    7: return 21'sd1304;   8: return 21'sd652;
      9: return 21'sd326;    10: return 21'sd163;   11: return 21'sd81;
     12: return 21'sd41;     13: return 21'sd20;    14: return 21'sd10;
     15: return 21'sd5;      16: return 21'sd3;     17: return 21'sd1;
      default: return 21'sd0;
    endcase
  endfunction

  logic signed [XW-1:0] xs [STAGES+1];
  logic signed [XW-1:0] ys [STAGES+1];
  logic signed [AW-1:0] zs [STAGES+1];

  // pre-rotation: phases in [1/4, 3/4) turn are handled as 180 deg + rest
  always_ff @(posedge clk) begin
    logic [15:0] ph;
    ph = phase;
    if (ph[15] != ph[14]) begin
      xs[0] <= -XW'(x_in);
      ys[0] <= -XW'(y_in);
      ph    = ph + 16'h8000;
    end else begin
      xs[0] <= XW'(x_in);
      ys[0] <= XW'(y_in);
    end
    zs[0] <= AW'($signed({ph, 4'b0000}));
  end

  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (zs[i] >= 0) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - atan_tab(i);
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + atan_tab(i);
      end
    end
  end

  assign x_out = xs[STAGES];
  assign y_out = ys[STAGES];
endmodule
