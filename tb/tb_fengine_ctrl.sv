// tb_fengine_ctrl: self-checking test of the control registers.
// Checks that start only arms the engine and that running begins on the
// next PPS rising edge (not on a level that is already high), that stop
// ends it at once, the decoding of coefficient, gain, delay and snapshot
// writes into their strobes, and register read-back with its latency.
module tb_fengine_ctrl;
  import fengine_pkg::*;
  localparam int M = 64, P = 8, NCHAN = 32;
  logic clk = 0, rst_n = 0, pps = 0;
  logic reg_wr = 0, reg_rd = 0, reg_rvalid; logic [15:0] reg_addr = '0; logic [31:0] reg_wdata = '0, reg_rdata;
  logic running, armed, delay_load, coef_we, gain_we, snap_trig, snap_done = 0, overflow = 0;
  logic [15:0] ant_id, snap_rdata; logic [31:0] delay0; logic signed [31:0] delay_rate;
  logic [$clog2(P*M)-1:0] coef_addr; coef_t coef_data; logic [1:0] gain_stream, snap_src, snap_stream;
  logic [$clog2(NCHAN)-1:0] gain_addr; gain_t gain_data; logic [$clog2(M)-1:0] snap_rd_addr;
  int checks = 0, failures = 0;
  fengine_ctrl #(.M(M), .P(P), .NCHAN(NCHAN)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  assign snap_rdata = 16'(snap_rd_addr) ^ 16'hbeef;

  task automatic chk(bit c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(logic [15:0] a, logic [31:0] d);
    reg_wr <= 1; reg_addr <= a; reg_wdata <= d; @(posedge clk);
    reg_wr <= 0; @(posedge clk); #1;
  endtask
  task automatic rd(logic [15:0] a, output logic [31:0] d, output int lat);
    lat = 0;
    reg_rd <= 1; reg_addr <= a; @(posedge clk); reg_rd <= 0;
    forever begin #1; lat++; if (reg_rvalid) break; @(posedge clk); end
    d = reg_rdata; @(posedge clk);
  endtask

  // strobe monitors
  int n_coef = 0, n_gain = 0, n_load = 0, n_trig = 0;
  logic [$clog2(P*M)-1:0] last_caddr; coef_t last_cdata; logic [1:0] last_gs; logic [$clog2(NCHAN)-1:0] last_ga; gain_t last_gd;
  always @(posedge clk) if (rst_n) begin
    if (coef_we) begin n_coef++; last_caddr = coef_addr; last_cdata = coef_data; end
    if (gain_we) begin n_gain++; last_gs = gain_stream; last_ga = gain_addr; last_gd = gain_data; end
    if (delay_load) n_load++;
    if (snap_trig) n_trig++;
  end

  initial begin
    logic [31:0] d; int lat;
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    // PPS already high before arming: no start until the next rising edge
    pps <= 1; repeat (4) @(posedge clk);
    wr(REG_CTRL, 1);
    chk(armed && !running, "armed after start");
    repeat (10) @(posedge clk);
    chk(!running, "no start on a high PPS level");
    pps <= 0; repeat (5) @(posedge clk);
    chk(!running, "no start on falling edge");
    pps <= 1; repeat (3) @(posedge clk); #1;
    chk(running, "start on PPS rising edge (2-flop synchroniser)");
    pps <= 0;
    rd(REG_STATUS, d, lat);
    chk(d[1:0] == 2'b01, "status running");
    chk(lat == 2, "read latency 2");
    wr(REG_CTRL, 2);
    chk(!running && !armed, "stop");
    pps <= 1; repeat (5) @(posedge clk); pps <= 0;
    chk(!running, "stays stopped");
    // settings
    wr(REG_ANT_ID, 32'h1234);  chk(ant_id == 16'h1234, "ant id");
    wr(REG_DELAY0, 32'h00ab_cdef); chk(delay0 == 32'h00ab_cdef, "delay0");
    wr(REG_DELAY_RATE, -32'sd77); chk(delay_rate == -32'sd77, "rate");
    wr(REG_DELAY_LOAD, 0); chk(n_load == 1, "delay load strobe");
    rd(REG_DELAY0, d, lat); chk(d == 32'h00ab_cdef, "delay0 readback");
    rd(REG_ANT_ID, d, lat); chk(d == 32'h1234, "ant readback");
    wr(REG_COEF_BASE + 16'd300, 32'h2ab_cdef);
    chk(n_coef == 1 && last_caddr == 9'd300 && last_cdata == 27'h2ab_cdef, "coef write");
    wr(REG_GAIN_BASE + 16'(2 * 2048 + 17), 32'h1111_2222);
    chk(n_gain == 1 && last_gs == 2 && last_ga == 17 && last_gd == 32'h1111_2222, "gain write");
    wr(REG_GAIN_BASE + 16'(1 * 2048 + 40), 32'h1);   // channel beyond NCHAN: ignored
    chk(n_gain == 1, "gain out of range ignored");
    wr(REG_SNAP_CTRL, {27'h0, 2'd3, 2'd2, 1'b1});
    chk(n_trig == 1 && snap_src == 2 && snap_stream == 3, "snapshot trigger");
    snap_done = 1; overflow = 1;
    rd(REG_STATUS, d, lat); chk(d[3:2] == 2'b11, "status flags");
    rd(REG_SNAP_BASE + 16'd45, d, lat); chk(d == (32'd45 ^ 32'hbeef), "snapshot read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
