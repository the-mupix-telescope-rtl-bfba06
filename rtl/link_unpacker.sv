// link_unpacker: rebuilds hits from one decoded sensor link and labels them.
//
// The decoded byte stream of one link carries K28.5 commas when idle and
// four-byte hit frames: K28.0, column, row, time stamp. The unpacker waits for
// the header, collects the three data bytes and emits one hit, tagged with the
// sensor label of this link (FPGA number and link number). A control
// character or a code error inside a frame, or loss of word alignment, drops
// the frame and pulses frame_err.
// Interface: one byte per clock; hit_valid is a registered one-cycle strobe
// one clock after the time-stamp byte. Labelling each hit with its sensor
// follows the paper; the frame format is this design's.
module link_unpacker
  import mupix_pkg::*;
#(
  parameter logic [LABEL_BITS-1:0] LABEL = '0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       locked,
  input  logic [7:0] data,
  input  logic       k,
  input  logic       code_err,
  output hit_t       hit,
  output logic       hit_valid,
  output logic       frame_err
);
  typedef enum logic [1:0] {S_WAIT, S_COL, S_ROW, S_TS} state_e;
  state_e state;
  logic [COL_BITS-1:0] col_q;
  logic [ROW_BITS-1:0] row_q;
  logic                bad;

  assign bad = !locked || code_err || k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_WAIT;
      col_q     <= '0;
      row_q     <= '0;
      hit       <= '0;
      hit_valid <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      hit_valid <= 1'b0;
      frame_err <= 1'b0;
      if (state != S_WAIT && bad) begin
        frame_err <= locked;
        // a new header may start right away
        state <= (locked && k && !code_err && data == K28_0) ? S_COL : S_WAIT;
      end else begin
        unique case (state)
          S_WAIT: if (locked && !code_err && k && data == K28_0) state <= S_COL;
          S_COL: begin
            col_q <= data[COL_BITS-1:0];
            state <= S_ROW;
          end
          S_ROW: begin
            row_q <= data[ROW_BITS-1:0];
            state <= S_TS;
          end
          S_TS: begin
            hit       <= '{label: LABEL, col: col_q, row: row_q, ts: data};
            hit_valid <= 1'b1;
            state     <= S_WAIT;
          end
          default: state <= S_WAIT;
        endcase
      end
    end
  end
endmodule
