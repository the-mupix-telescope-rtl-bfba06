// hit_buffer: the digital cells in the sensor periphery, one per pixel.
//
// Each pixel has a point-to-point line to its partner cell in the periphery.
// When that line (the comparator output) is high the cell stores a hit flag
// and the current 8-bit time stamp; the pixel address is implied by the cell.
// A cell that already holds a hit ignores further hits until the readout clears
// it. Cells are indexed col*N_ROWS + row.
// Interface: hit_in is sampled every clock; clear (one bit per cell) takes
// effect at the next edge and wins over a simultaneous new hit.
// Storing address and time stamp per cell follows the paper; the
// ignore-while-full rule and synchronous comparator inputs are this design's.
module hit_buffer #(
  parameter int N_COLS  = 32,
  parameter int N_ROWS  = 40,
  parameter int TS_BITS = 8
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [N_COLS*N_ROWS-1:0]              hit_in,
  input  logic [TS_BITS-1:0]                    ts,
  input  logic [N_COLS*N_ROWS-1:0]              clear,
  output logic [N_COLS*N_ROWS-1:0]              full,
  output logic [N_COLS*N_ROWS-1:0][TS_BITS-1:0] cell_ts
);
  localparam int N = N_COLS * N_ROWS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
      for (int i = 0; i < N; i++) cell_ts[i] <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        if (clear[i]) begin
          full[i] <= 1'b0;
        end else if (hit_in[i] && !full[i]) begin
          full[i]    <= 1'b1;
          cell_ts[i] <= ts;
        end
      end
    end
  end
endmodule
