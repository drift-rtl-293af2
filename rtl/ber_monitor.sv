// ber_monitor: runtime error-rate tracker that steers the DVFS policy.
//
// After every tile the ABFT wrappers of all arrays report their flagged rows
// and columns. The monitor estimates the number of large errors of an array
// as max(#flagged rows, #flagged columns) (each isolated error flags one row
// and one column), adds them over all arrays, and accumulates the result over
// a window of WINDOW_TILES tiles. At the end of a window it publishes the
// count and raises ber_high for one clock when the count exceeds HI_ERR (the
// operating point is too aggressive) or ber_low when it is below LO_ERR (there
// is margin left). The paper says only that the monitor tracks the error rate
// reported by ABFT and guides the DVFS module; the estimate, the window and
// the two thresholds are this design's choices.
//
// Timing: tile_valid is sampled every clock; err_count, ber_high and ber_low
// update on the clock after the tile that closes a window.
module ber_monitor #(
  parameter int unsigned NUM_SA       = 64,
  parameter int unsigned N            = 32,
  parameter int unsigned M            = 32,
  parameter int unsigned WINDOW_TILES = 64,
  parameter int unsigned HI_ERR       = 8,
  parameter int unsigned LO_ERR       = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     tile_valid,
  input  logic [NUM_SA-1:0][M-1:0] row_flags,
  input  logic [NUM_SA-1:0][N-1:0] col_flags,
  output logic [15:0]              err_count,
  output logic                     ber_high,
  output logic                     ber_low
);
  localparam int unsigned TW = $clog2(WINDOW_TILES + 1);

  logic [15:0]   tile_err;
  logic [15:0]   acc;
  logic [TW-1:0] tiles;

  always_comb begin
    tile_err = '0;
    for (int a = 0; a < NUM_SA; a++) begin
      logic [15:0] nr, nc;
      nr = 16'($countones(row_flags[a]));
      nc = 16'($countones(col_flags[a]));
      tile_err += (nr > nc) ? nr : nc;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      tiles     <= '0;
      err_count <= '0;
      ber_high  <= 1'b0;
      ber_low   <= 1'b0;
    end else begin
      ber_high <= 1'b0;
      ber_low  <= 1'b0;
      if (tile_valid) begin
        logic [16:0] sum;
        sum = 17'(acc) + 17'(tile_err);
        if (int'(tiles) == WINDOW_TILES - 1) begin
          err_count <= sum[16] ? 16'hffff : sum[15:0];
          ber_high  <= (sum > 17'(HI_ERR));
          ber_low   <= (sum < 17'(LO_ERR));
          acc       <= '0;
          tiles     <= '0;
        end else begin
          acc   <= sum[16] ? 16'hffff : sum[15:0];
          tiles <= tiles + 1'b1;
        end
      end
    end
  end
endmodule
