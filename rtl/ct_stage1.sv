// ct_stage1: first corner-turner stage, through external DDR4.
//
// Input: every valid clock carries LANES channels of all NSTREAM streams at
// one time (spectrum) t, i.e. one 512-bit word; a spectrum is NCHAN/LANES
// words. Blocks of T spectra are written row-first (in arrival order) to one
// of two DDR regions (ping-pong), at word address
//     region*T*CW + t*CW + cw        (CW = NCHAN/LANES words per spectrum).
// A full region is read column-first in the order (F1, T, F0): for each
// group f1 of F0 channels, for each t, the F0/LANES consecutive words of
// that group, i.e. short sequential bursts at a stride of one spectrum.
// Each group is handed to stage 2 (ct_stage2) as one unit: a read pass for
// group f1 starts only when stage 2 reports a free buffer (grp_free), and is
// announced with grp_start together with the group and block numbers.
//
// Writes pass through a small FIFO so that the memory may refuse writes for
// a while (wr_ready low). If the FIFO fills, or a new block arrives while
// both regions still hold unread blocks, input words are dropped and the
// sticky overflow flag is set.
//
// Memory ports: write address/data with valid/ready; read requests with
// valid/ready; read data returns in order on rd_resp_valid and goes straight
// to stage 2 (ct_stage2 never refuses data of an announced group), so
// out_valid/out_data are the read responses unregistered. The address ports
// are ADDR_W = 32 bits wide and the group/block fields 16/32 bits; at the
// default size only the low 18 address bits and 3 group bits vary, the rest
// are constant zero.
//
// From the paper: blocks of 512 spectra, DDR4 as first stage, row-first
// write and column-first read of a subset of channels, the rest transposed in
// stage 2. Own choices: F0 = 128 (F1 = 8 groups), double buffering in DDR,
// the word layout, the FIFO and the overflow handling.
module ct_stage1
  import fengine_pkg::*;
#(
  parameter int T     = 512,     // spectra per block
  parameter int NCHAN = 1024,    // channels per stream
  parameter int F0    = 128,     // channels per group (transposed in stage 2)
  parameter int FIFO_DEPTH = 16,
  parameter int ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the four fine delay correctors
  input  logic              in_valid,
  input  chan_word_t [NSTREAM-1:0] in_data,
  // DDR write channel
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output wide_word_t        wr_data,
  // DDR read channel
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_resp_valid,
  input  wide_word_t        rd_resp_data,
  // to stage 2
  input  logic              grp_free,
  output logic              grp_start,
  output logic [15:0]       grp_f1,
  output logic [31:0]       grp_block,
  output logic              out_valid,
  output wide_word_t        out_data,
  output logic              overflow
);
  localparam int CW   = NCHAN / LANES;       // words per spectrum
  localparam int GW   = F0 / LANES;          // words per group per spectrum
  localparam int NF1  = NCHAN / F0;
  localparam int BLKW = T * CW;              // words per block
  localparam int FAW  = $clog2(FIFO_DEPTH);

  typedef enum logic [1:0] {R_IDLE, R_WAIT, R_REQ, R_DONE} rstate_e;
  rstate_e rst_q;              // read-side state
  logic    r_reg;              // region being read

  // ---------------- write side --------------------------------------------------
  wide_word_t       fifo_d [FIFO_DEPTH];
  logic [ADDR_W-1:0] fifo_a [FIFO_DEPTH];
  logic [FAW:0]     fifo_cnt;
  logic [FAW-1:0]   fifo_rp, fifo_wp;

  logic [$clog2(BLKW)-1:0] w_off;          // word within block
  logic             w_reg;                 // region being written
  logic             w_drop;                // dropping until the next block start
  logic [1:0]       full;                  // region holds a complete, unread block
  logic [31:0]      w_block;               // blocks written
  logic [31:0]      r_block_of [2];

  wide_word_t in_wide;
  always_comb begin
    for (int s = 0; s < NSTREAM; s++)
      for (int l = 0; l < LANES; l++)
        in_wide[s*LANES + l] = in_data[s][l];
  end

  logic push, pop;
  assign pop  = wr_valid && wr_ready;
  assign wr_valid = (fifo_cnt != 0);
  assign wr_addr  = fifo_a[fifo_rp];
  assign wr_data  = fifo_d[fifo_rp];

  logic blk_start, region_busy, fifo_full;
  assign blk_start   = in_valid && (w_off == 0);
  assign region_busy = full[w_reg] || (rst_q != R_IDLE && r_reg == w_reg);
  assign fifo_full   = (fifo_cnt == (FAW+1)'(FIFO_DEPTH));
  // a block is taken only if its region is free; a word only if the fifo has room
  logic take;
  assign take = in_valid && !(blk_start ? region_busy : w_drop);
  assign push = take && !fifo_full;

  logic release_r;      // read side finished a region
  logic release_reg;

  always_ff @(posedge clk) begin
    if (push) begin
      fifo_d[fifo_wp] <= in_wide;
      fifo_a[fifo_wp] <= ADDR_W'(int'(w_reg) * BLKW + int'(w_off));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fifo_cnt <= '0; fifo_rp <= '0; fifo_wp <= '0;
      w_off <= '0; w_reg <= 1'b0; w_drop <= 1'b0; full <= '0; w_block <= '0;
      overflow <= 1'b0; r_block_of[0] <= '0; r_block_of[1] <= '0;
    end else begin
      fifo_cnt <= fifo_cnt + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
      if (push) fifo_wp <= (fifo_wp == FAW'(FIFO_DEPTH-1)) ? '0 : fifo_wp + 1'b1;
      if (pop)  fifo_rp <= (fifo_rp == FAW'(FIFO_DEPTH-1)) ? '0 : fifo_rp + 1'b1;
      if (in_valid) begin
        if (blk_start) w_drop <= region_busy;
        if ((take && fifo_full) || (blk_start && region_busy)) overflow <= 1'b1;
        if (take && fifo_full) w_drop <= 1'b1;   // rest of this block is lost
        w_off <= (int'(w_off) == BLKW - 1) ? '0 : w_off + 1'b1;
        if (int'(w_off) == BLKW - 1) begin
          if (!w_drop && !(take && fifo_full)) begin
            r_block_of[w_reg] <= w_block;
            w_reg             <= !w_reg;
          end
          w_block <= w_block + 1'b1;
        end
      end
      // a region is full once its last word has been written to memory
      if (pop && int'(wr_addr) % BLKW == BLKW - 1) full[int'(wr_addr) / BLKW] <= 1'b1;
      if (release_r) full[release_reg] <= 1'b0;
    end
  end

  // ---------------- read side ---------------------------------------------------
  logic [$clog2(NF1 > 1 ? NF1 : 2)-1:0] r_f1;
  logic [$clog2(T)-1:0]  r_t;
  logic [$clog2(GW > 1 ? GW : 2)-1:0] r_c;
  logic [31:0]           resp_left;     // responses outstanding for the group

  assign rd_req_valid = (rst_q == R_REQ);
  assign rd_req_addr  = ADDR_W'(int'(r_reg) * BLKW + int'(r_t) * CW + int'(r_f1) * GW + int'(r_c));
  assign grp_f1       = 16'(r_f1);
  assign grp_block    = r_block_of[r_reg];
  assign out_valid    = rd_resp_valid;
  assign out_data     = rd_resp_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rst_q <= R_IDLE; r_reg <= 1'b0; r_f1 <= '0; r_t <= '0; r_c <= '0;
      grp_start <= 1'b0; release_r <= 1'b0; release_reg <= 1'b0; resp_left <= '0;
    end else begin
      grp_start <= 1'b0;
      release_r <= 1'b0;
      if (rd_resp_valid) resp_left <= resp_left - 1;
      case (rst_q)
        R_IDLE: if (full[r_reg]) rst_q <= R_WAIT;
        R_WAIT: if (grp_free && !grp_start) begin
          grp_start <= 1'b1;
          resp_left <= resp_left + 32'(T * GW) - (rd_resp_valid ? 1 : 0);
          rst_q     <= R_REQ;
        end
        R_REQ: if (rd_req_ready) begin
          if (int'(r_c) == GW - 1) begin
            r_c <= '0;
            if (int'(r_t) == T - 1) begin
              r_t <= '0;
              if (int'(r_f1) == NF1 - 1) begin
                r_f1  <= '0;
                rst_q <= R_DONE;
              end else begin
                r_f1  <= r_f1 + 1'b1;
                rst_q <= R_WAIT;
              end
            end else r_t <= r_t + 1'b1;
          end else r_c <= r_c + 1'b1;
        end
        R_DONE: begin
          // the region may be reused once all its words have come back
          if (resp_left == 0 || (resp_left == 1 && rd_resp_valid)) begin
            release_r   <= 1'b1;
            release_reg <= r_reg;
            r_reg       <= !r_reg;
            rst_q       <= R_IDLE;
          end
        end
        default: rst_q <= R_IDLE;
      endcase
    end
  end

  // the group announced by grp_start keeps r_f1 until the first request
  // has been accepted, so grp_f1 is valid with grp_start.
  property p_no_write_when_empty;
    @(posedge clk) disable iff (!rst_n) pop |-> (fifo_cnt != 0);
  endproperty
  assert property (p_no_write_when_empty);
endmodule
