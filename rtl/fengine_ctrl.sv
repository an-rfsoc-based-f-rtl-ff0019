// fengine_ctrl: control and monitoring registers of the F-engine.
//
// A simple word-addressed register bus from the processing system (reg_wr
// or reg_rd for one clock; read data returns with reg_rvalid two clocks
// after reg_rd) is decoded into the settings of the pipeline (map in
// fengine_pkg): run control, antenna id, delay-model coefficients, FIR
// coefficients (broadcast to all four filters), per-stream channel gains and
// the snapshot kernel.
//
// Run control: writing CTRL.start arms the engine; it starts running on the
// next rising edge of the one-pulse-per-second input (synchronised by two
// flip-flops), so every board starts on the same second. Writing CTRL.stop
// stops it at once; while not running the pipeline is held in reset, which
// clears all its registers, pointers and buffer state. Coefficients and gains
// are kept, so the engine restarts without reloading anything.
//
// From the paper: start/stop through registers on the PS-PL interface, start
// synchronised to the PPS, reset of registers and buffers on stop, restart
// without reloading the firmware, a snapshot trigger from the PS. Own
// choices: the bus, the register map and the read latency.
module fengine_ctrl
  import fengine_pkg::*;
#(
  parameter int M     = 2048,
  parameter int P     = 8,
  parameter int NCHAN = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pps,
  // register bus
  input  logic        reg_wr,
  input  logic        reg_rd,
  input  logic [15:0] reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        reg_rvalid,
  // run control
  output logic        running,
  output logic        armed,
  // settings
  output logic [15:0] ant_id,
  output logic [31:0] delay0,
  output logic signed [31:0] delay_rate,
  output logic        delay_load,
  output logic        coef_we,
  output logic [$clog2(P*M)-1:0] coef_addr,
  output coef_t       coef_data,
  output logic        gain_we,
  output logic [1:0]  gain_stream,
  output logic [$clog2(NCHAN)-1:0] gain_addr,
  output gain_t       gain_data,
  // snapshot
  output logic        snap_trig,
  output logic [1:0]  snap_src,
  output logic [1:0]  snap_stream,
  output logic [$clog2(M)-1:0] snap_rd_addr,
  input  logic [15:0] snap_rdata,
  input  logic        snap_done,
  // status
  input  logic        overflow
);
  typedef enum logic [1:0] {S_IDLE, S_ARMED, S_RUN} run_e;
  run_e state;

  logic [2:0] pps_sync;
  logic       pps_edge;
  always_ff @(posedge clk) begin
    if (!rst_n) pps_sync <= '0;
    else        pps_sync <= {pps_sync[1:0], pps};
  end
  assign pps_edge = pps_sync[1] && !pps_sync[2];

  logic wr_ctrl;
  assign wr_ctrl = reg_wr && reg_addr == REG_CTRL;

  always_ff @(posedge clk) begin
    if (!rst_n) state <= S_IDLE;
    else if (wr_ctrl && reg_wdata[1]) state <= S_IDLE;
    else case (state)
      S_IDLE:  if (wr_ctrl && reg_wdata[0]) state <= S_ARMED;
      S_ARMED: if (pps_edge) state <= S_RUN;
      default: ;
    endcase
  end
  assign running = (state == S_RUN);
  assign armed   = (state == S_ARMED);

  // settings and one-clock strobes
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ant_id <= '0; delay0 <= '0; delay_rate <= '0; delay_load <= 1'b0;
      coef_we <= 1'b0; gain_we <= 1'b0; snap_trig <= 1'b0; snap_src <= '0; snap_stream <= '0;
      coef_addr <= '0; coef_data <= '0; gain_stream <= '0; gain_addr <= '0; gain_data <= '0;
    end else begin
      delay_load <= 1'b0; coef_we <= 1'b0; gain_we <= 1'b0; snap_trig <= 1'b0;
      if (reg_wr) begin
        unique case (1'b1)
          reg_addr == REG_ANT_ID:     ant_id     <= reg_wdata[15:0];
          reg_addr == REG_DELAY0:     delay0     <= reg_wdata;
          reg_addr == REG_DELAY_RATE: delay_rate <= reg_wdata;
          reg_addr == REG_DELAY_LOAD: delay_load <= 1'b1;
          reg_addr == REG_SNAP_CTRL: begin
            snap_trig   <= reg_wdata[0];
            snap_src    <= reg_wdata[2:1];
            snap_stream <= reg_wdata[4:3];
          end
          reg_addr >= REG_COEF_BASE && reg_addr < REG_COEF_BASE + 16'(P*M): begin
            coef_we   <= 1'b1;
            coef_addr <= ($clog2(P*M))'(reg_addr - REG_COEF_BASE);
            coef_data <= reg_wdata[COEF_W-1:0];
          end
          reg_addr >= REG_GAIN_BASE && reg_addr < REG_GAIN_BASE + 16'(4*2048): begin
            gain_we     <= (int'(reg_addr[10:0]) < NCHAN);
            gain_stream <= reg_addr[12:11];
            gain_addr   <= ($clog2(NCHAN))'(reg_addr[10:0]);
            gain_data   <= reg_wdata;
          end
          default: ;
        endcase
      end
    end
  end

  // reads: two clocks of latency (the snapshot memory is registered)
  assign snap_rd_addr = ($clog2(M))'(reg_addr - REG_SNAP_BASE);
  logic        rd1;
  logic [15:0] a1;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd1 <= 1'b0; a1 <= '0; reg_rvalid <= 1'b0; reg_rdata <= '0;
    end else begin
      rd1 <= reg_rd;
      a1  <= reg_addr;
      reg_rvalid <= rd1;
      if (rd1) begin
        if (a1 >= REG_SNAP_BASE && a1 < REG_SNAP_BASE + 16'(M)) reg_rdata <= {16'h0, snap_rdata};
        else case (a1)
          REG_STATUS:     reg_rdata <= {28'h0, overflow, snap_done, armed, running};
          REG_ANT_ID:     reg_rdata <= {16'h0, ant_id};
          REG_DELAY0:     reg_rdata <= delay0;
          REG_DELAY_RATE: reg_rdata <= delay_rate;
          default:        reg_rdata <= 32'h0;
        endcase
      end
    end
  end
endmodule
