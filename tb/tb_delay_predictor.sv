// tb_delay_predictor: self-checking test of the linear delay model.
// Loads a start delay, runs spectra ticks with positive and negative rates
// and compares integer and fractional outputs with d0 + k*rate computed in
// 64-bit arithmetic, including saturation at zero and at the top.
module tb_delay_predictor;
  logic clk = 0, rst_n = 0, tick = 0, load_req = 0, load_now = 0;
  logic [31:0] delay0 = 0; logic signed [31:0] rate = 0;
  logic [15:0] delay_int, delay_frac;
  int checks = 0, failures = 0;
  delay_predictor dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint model;   // 16.32 fixed point
  task automatic step(int gap);
    tick <= 1; @(posedge clk); tick <= 0;
    model = model + longint'(rate);
    if (model < 0) model = 0;
    if (model > 64'h0000_FFFF_FFFF_FFFF) model = 64'h0000_FFFF_FFFF_FFFF;
    repeat (gap) @(posedge clk);
    #1;
    checks++;
    if (delay_int != 16'(model >> 32) || delay_frac != 16'(model >> 16)) begin
      failures++;
      if (failures < 10) $display("int %0d frac %0d exp %0d %0d", delay_int, delay_frac, model >> 32, 16'(model >> 16));
    end
  endtask

  task automatic load(logic [31:0] d0, logic signed [31:0] r);
    delay0 <= d0; rate <= r; load_req <= 1; @(posedge clk); load_req <= 0;
    repeat (3) @(posedge clk);
    checks++;   // nothing changes before the tick
    if ({delay_int, delay_frac} != 32'(model >> 16)) begin failures++; $display("load applied early"); end
    tick <= 1; @(posedge clk); tick <= 0; #1;
    model = longint'(d0) << 16;
    checks++;
    if ({delay_int, delay_frac} != d0) begin failures++; $display("load failed"); end
  endtask

  initial begin
    model = 0;
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    load(32'h0010_8000, 32'sd429497);                 // ~1e-4 samples per spectrum
    repeat (2000) step($urandom_range(3, 0));
    load(32'h0001_0000, -32'sd2000000000);             // ramps down, saturates at 0
    repeat (200) step(1);
    load(32'hFFFF_0000, 32'sd2000000000);              // ramps up, saturates at top
    repeat (200) step(0);
    // immediate load
    delay0 <= 32'h0123_4567; load_now <= 1; @(posedge clk); load_now <= 0; #1;
    model = longint'(32'h0123_4567) << 16;
    checks++;
    if ({delay_int, delay_frac} != 32'h0123_4567) begin failures++; $display("load_now failed"); end
    rate <= 32'sd65536;
    repeat (20) step(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
