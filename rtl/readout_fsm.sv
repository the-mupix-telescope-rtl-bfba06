// readout_fsm: priority readout of the sensor periphery.
//
// The state machine looks for the full cell with the lowest index (lowest
// column, then lowest row), latches its address and time stamp, clears it and
// sends a four-byte frame to the 8b/10b encoder: the K28.0 control character,
// {3'b0, column}, {2'b0, row} and the time stamp. With no hit pending it sends
// the K28.5 comma, which the receiver uses for word alignment. One byte leaves
// per 125 MHz cycle, so a hit takes four cycles: 31.25 Mhit/s per sensor.
// Interface: tx_data/tx_k change every clock; clear is a one-cycle one-hot
// pulse in the cycle the header is sent.
// The priority readout follows the paper; frame format and priority order are
// this design's own.
module readout_fsm
  import mupix_pkg::*;
#(
  parameter int N_COLS = 32,
  parameter int N_ROWS = 40
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [N_COLS*N_ROWS-1:0]              full,
  input  logic [N_COLS*N_ROWS-1:0][TS_BITS-1:0] cell_ts,
  output logic [N_COLS*N_ROWS-1:0]              clear,
  output logic [7:0]                            tx_data,
  output logic                                  tx_k
);
  localparam int N  = N_COLS * N_ROWS;
  localparam int IW = $clog2(N);

  typedef enum logic [1:0] {S_HDR, S_COL, S_ROW, S_TS} state_e;
  state_e state;

  logic          any;
  logic [IW-1:0] sel;
  logic [COL_BITS-1:0] col_q;
  logic [ROW_BITS-1:0] row_q;
  logic [TS_BITS-1:0]  ts_q;

  // priority encoder: lowest full index
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (full[i]) begin
        any = 1'b1;
        sel = IW'(i);
      end
    end
  end

  always_comb begin
    clear = '0;
    if (state == S_HDR && any) clear[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_HDR;
      tx_data <= K28_5;
      tx_k    <= 1'b1;
      col_q   <= '0;
      row_q   <= '0;
      ts_q    <= '0;
    end else begin
      unique case (state)
        S_HDR: begin
          if (any) begin
            tx_data <= K28_0;
            tx_k    <= 1'b1;
            col_q   <= COL_BITS'(sel / IW'(N_ROWS));
            row_q   <= ROW_BITS'(sel % IW'(N_ROWS));
            ts_q    <= cell_ts[sel];
            state   <= S_COL;
          end else begin
            tx_data <= K28_5;
            tx_k    <= 1'b1;
          end
        end
        S_COL: begin
          tx_data <= 8'(col_q);
          tx_k    <= 1'b0;
          state   <= S_ROW;
        end
        S_ROW: begin
          tx_data <= 8'(row_q);
          tx_k    <= 1'b0;
          state   <= S_TS;
        end
        S_TS: begin
          tx_data <= ts_q;
          tx_k    <= 1'b0;
          state   <= S_HDR;
        end
        default: state <= S_HDR;
      endcase
    end
  end
endmodule
