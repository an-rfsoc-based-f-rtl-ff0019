// ddr_model: behavioural model of the external DDR4 memory and its
// controller, as seen by the corner turner: 512-bit words, a write channel
// and a read-request channel with valid/ready, in-order read data after a
// fixed latency. STALL_PCT percent of clocks refuse writes and read requests
// (random), standing in for refresh and page misses. Not synthesizable.
module ddr_model
  import fengine_pkg::*;
#(
  parameter int WORDS     = 1024,
  parameter int LATENCY   = 12,
  parameter int STALL_PCT = 0
) (
  input  logic        clk,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  wide_word_t  wr_data,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_req_addr,
  output logic        rd_resp_valid,
  output wide_word_t  rd_resp_data,
  input  logic        stall_en
);
  wide_word_t mem [WORDS];
  logic       v_pipe [LATENCY];
  wide_word_t d_pipe [LATENCY];
  int writes = 0, reads = 0, stalls = 0;

  initial begin
    wr_ready = 1; rd_req_ready = 1;
    for (int i = 0; i < LATENCY; i++) v_pipe[i] = 0;
  end

  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      mem[wr_addr % WORDS] <= wr_data;   // addresses wrap (out-of-range only before reset)
      writes++;
    end
    for (int i = LATENCY - 1; i > 0; i--) begin v_pipe[i] <= v_pipe[i-1]; d_pipe[i] <= d_pipe[i-1]; end
    v_pipe[0] <= rd_req_valid && rd_req_ready;
    if (rd_req_valid && rd_req_ready) begin
      d_pipe[0] <= mem[rd_req_addr % WORDS];
      reads++;
    end
    wr_ready     <= !(stall_en && $urandom_range(99, 0) < STALL_PCT);
    rd_req_ready <= !(stall_en && $urandom_range(99, 0) < STALL_PCT);
    if (stall_en && (!wr_ready || !rd_req_ready)) stalls++;
  end

  assign rd_resp_valid = v_pipe[LATENCY-1];
  assign rd_resp_data  = d_pipe[LATENCY-1];
endmodule
