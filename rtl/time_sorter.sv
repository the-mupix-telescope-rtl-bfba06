// time_sorter: sorts hits by time stamp and packs them into blocks.
//
// The merged hits of the four sensors arrive in the order the sensors read
// them out, not in time order. The sorter keeps one memory bin per 8-bit time
// stamp with SLOTS entries each; a hit is written into the bin of its own time
// stamp. A reader walks the bins in time order, always DELAY time stamps behind
// the present time, so that every hit of a bin has arrived by the time the bin
// is read. Every TS_PER_BLOCK (32) time stamps form one block: the reader emits
// a header with the block number, the hits of the 32 bins in time order, and a
// trailer with the hit count and an overflow flag. The header is only sent
// once all 32 bins of the block are due, so that a block goes out in one burst
// and does not hold the shared output while waiting for time to pass.
//
// A hit is dropped (drop pulse, overflow flag in the next trailer) when its
// bin is full, when it is DELAY or more time stamps old on arrival (its bin has
// been read), or when the reader lags so far behind that the bin still holds
// hits from one wrap of the 8-bit time stamp earlier.
//
// Interface: in_valid/in_hit one hit per clock, no back pressure; the output is
// a valid/ready stream of 32-bit words, out_last marks the trailer. now is the
// present time stamp and tick the strobe in which it advances. The reader
// spends one clock per empty bin and one per hit, so it sustains about one hit
// every two clocks on average (the time stamp advances every two clocks).
// Sorting by time stamp into blocks of 32 time stamps is the paper's; the bin
// memory, DELAY, SLOTS and the word format are this design's.
module time_sorter
  import mupix_pkg::*;
#(
  parameter int SLOTS        = 8,
  parameter int DELAY        = 64,
  parameter int TS_PER_BLOCK = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sync_rst,
  input  logic               tick,
  input  logic [TS_BITS-1:0] now,
  input  hit_t               in_hit,
  input  logic               in_valid,
  output logic [31:0]        out_data,
  output logic               out_valid,
  output logic               out_last,
  input  logic               out_ready,
  output logic               drop
);
  localparam int NBINS = 1 << TS_BITS;
  localparam int SW    = $clog2(SLOTS);
  localparam int CW    = $clog2(SLOTS + 1);
  localparam int BS    = $clog2(TS_PER_BLOCK);
  localparam int EW    = LABEL_BITS + COL_BITS + ROW_BITS;  // stored entry

  typedef enum logic [1:0] {S_HDR, S_BIN, S_HITS, S_TRL} state_e;
  state_e state;

  logic [EW-1:0]        mem [NBINS * SLOTS];
  logic [CW-1:0]        cnt [NBINS];
  logic [31:0]          rd_ext;     // bins read so far (extended time stamp)
  logic [15:0]          lag;        // now - rd_ext
  logic [SW-1:0]        slot;
  logic [15:0]          blk_hits;
  logic                 ovf;
  logic [TS_BITS-1:0]   rd_bin, age, wbin;
  logic                 ready_bin, ready_blk, advance, accept, last_bin;
  logic [EW-1:0]        rd_entry;

  assign rd_bin    = rd_ext[TS_BITS-1:0];
  assign ready_bin = (lag >= 16'(DELAY));
  assign ready_blk = (lag >= 16'(DELAY + TS_PER_BLOCK - 1));
  assign last_bin  = (rd_ext[BS-1:0] == BS'(TS_PER_BLOCK - 1));
  assign wbin      = in_hit.ts;
  assign age       = now - in_hit.ts;
  assign accept    = in_valid && (age < TS_BITS'(DELAY))
                     && ((lag + 16'(age)) < 16'(NBINS))
                     && (cnt[wbin] < CW'(SLOTS));
  assign rd_entry  = mem[{rd_bin, slot}];

  // reader output
  always_comb begin
    out_valid = 1'b0;
    out_last  = 1'b0;
    out_data  = '0;
    advance   = 1'b0;
    unique case (state)
      S_HDR: begin
        out_valid = ready_blk;
        out_data  = {W_PIX_HDR, 1'b0, rd_ext[31:BS]};
      end
      S_BIN: begin
        advance = ready_bin && (cnt[rd_bin] == '0);
      end
      S_HITS: begin
        out_valid = 1'b1;
        out_data  = {W_PIX_HIT, 6'd0, rd_entry, rd_bin};
        advance   = out_ready && (CW'(slot) + 1'b1 == cnt[rd_bin]);
      end
      S_TRL: begin
        out_valid = 1'b1;
        out_last  = 1'b1;
        out_data  = {W_PIX_TRL, ovf, 11'd0, blk_hits};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (accept) mem[{wbin, SW'(cnt[wbin])}] <= {in_hit.label, in_hit.col, in_hit.row};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NBINS; b++) cnt[b] <= '0;
      state    <= S_HDR;
      rd_ext   <= '0;
      lag      <= '0;
      slot     <= '0;
      blk_hits <= '0;
      ovf      <= 1'b0;
      drop     <= 1'b0;
    end else if (sync_rst) begin
      for (int b = 0; b < NBINS; b++) cnt[b] <= '0;
      state    <= S_HDR;
      rd_ext   <= '0;
      lag      <= '0;
      slot     <= '0;
      blk_hits <= '0;
      ovf      <= 1'b0;
      drop     <= 1'b0;
    end else begin
      drop <= in_valid && !accept;
      if (accept) cnt[wbin] <= cnt[wbin] + 1'b1;
      lag <= lag + 16'(tick) - 16'(advance);
      if (advance) begin
        rd_ext <= rd_ext + 1'b1;
        cnt[rd_bin] <= '0;
      end
      unique case (state)
        S_HDR: if (ready_blk && out_ready) begin
          state    <= S_BIN;
          blk_hits <= '0;
        end
        S_BIN: if (ready_bin) begin
          if (cnt[rd_bin] == '0) begin
            if (last_bin) state <= S_TRL;
          end else begin
            slot  <= '0;
            state <= S_HITS;
          end
        end
        S_HITS: if (out_ready) begin
          blk_hits <= blk_hits + 1'b1;
          slot     <= slot + 1'b1;
          if (advance) state <= last_bin ? S_TRL : S_BIN;
        end
        S_TRL: if (out_ready) begin
          state <= S_HDR;
          ovf   <= 1'b0;
        end
        default: state <= S_HDR;
      endcase
      if (in_valid && !accept) ovf <= 1'b1;
    end
  end
endmodule
