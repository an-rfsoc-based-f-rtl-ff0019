// spead_packetizer: frames each corner-turned payload as one SPEAD heap.
//
// Every packet from the corner turner (T complex 8-bit samples of one channel
// and one polarisation, T/32 words of 512 bits) is sent as a single-packet
// SPEAD heap: one 64-byte header word, then the payload words unchanged.
// The header is the SPEAD-64-48 header (magic 0x53, version 4, 8-byte item
// pointers, 48-bit addresses) with seven item pointers:
//   0x0001 heap counter (increments per packet from 0 at start)
//   0x0002 heap size = 0x0004 payload length = 2*T bytes, 0x0003 offset 0
//   0x1600 timestamp: clock cycles from the start of acquisition to the
//          first sample of the block, block * T * (M/LANES)
//   0x4101 ordering vector: [47:32] antenna id, [31:16] frequency channel
//          (band * NCHAN + channel), [15:0] polarisation
//   0x4300 raw data, address 0 in the heap (the payload)
// Stream s of the corner turner is band s/2, polarisation s%2.
// Bytes leave most significant first (bits 511:504 of a word first).
//
// Interface: valid/ready on both sides; the header is inserted when a
// first word is waiting, so the output carries T/32 + 1 words per packet and
// out_last marks the last payload word. out_chan/out_pol name the packet for
// the network layer, which routes channels to their destinations.
//
// From the paper: SPEAD, one packet per heap, a timestamp counting clock
// cycles since the start of acquisition, an ordering vector holding antenna,
// frequency channel and polarisation, payload of 512 complex 8-bit samples
// (1 kB). Own choices: the item identifiers, the ordering-vector layout and
// the timestamp reference point.
module spead_packetizer
  import fengine_pkg::*;
#(
  parameter int T     = 512,
  parameter int NCHAN = 1024,
  parameter int M     = 2048
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [15:0]  ant_id,
  input  logic         in_valid,
  output logic         in_ready,
  input  wide_word_t   in_data,
  input  logic         in_first,
  input  logic         in_last,
  input  logic [15:0]  in_chan,
  input  logic [1:0]   in_stream,
  input  logic [31:0]  in_block,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [511:0] out_data,
  output logic         out_last,
  output logic [15:0]  out_chan,
  output logic         out_pol
);
  localparam logic [47:0] PAYLOAD_BYTES = 48'(T * 2);
  localparam int          SPEC_CYCLES   = M / LANES;

  logic        in_hdr;        // next word to send is a header
  logic [47:0] heap_cnt;

  logic [47:0] timestamp, order;
  always_comb begin
    timestamp = 48'(in_block) * 48'(T) * 48'(SPEC_CYCLES);
    order     = {ant_id, 16'(int'(in_stream[1]) * NCHAN + int'(in_chan)), 15'd0, in_stream[0]};
  end

  always_comb begin
    out_chan = 16'(int'(in_stream[1]) * NCHAN + int'(in_chan));
    out_pol  = in_stream[0];
    if (in_hdr) begin
      out_valid = in_valid && in_first;
      out_last  = 1'b0;
      in_ready  = 1'b0;
      out_data  = {SPEAD_HEADER,
                   SPEAD_HEAP_CNT,  heap_cnt,
                   SPEAD_HEAP_SIZE, PAYLOAD_BYTES,
                   SPEAD_HEAP_OFF,  48'd0,
                   SPEAD_PAY_LEN,   PAYLOAD_BYTES,
                   SPEAD_TIMESTAMP, timestamp,
                   SPEAD_ORDER,     order,
                   SPEAD_RAW_DATA,  48'd0};
    end else begin
      out_valid = in_valid;
      out_last  = in_last;
      in_ready  = out_ready;
      out_data  = in_data;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_hdr <= 1'b1; heap_cnt <= '0;
    end else if (out_valid && out_ready) begin
      if (in_hdr) in_hdr <= 1'b0;
      else if (in_last) begin
        in_hdr   <= 1'b1;
        heap_cnt <= heap_cnt + 1'b1;
      end
    end
  end

  // a packet must begin with a first word
  assert property (@(posedge clk) disable iff (!rst_n) (in_hdr && in_valid) |-> in_first);
endmodule
