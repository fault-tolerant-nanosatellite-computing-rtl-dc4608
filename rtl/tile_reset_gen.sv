// tile_reset_gen: the reset generator of one tile.
//
// Each tile can be reset on its own, without disturbing the other tiles,
// so that the supervisor can reboot a faulty tile (after a partial
// reconfiguration, or when it swaps the tile for a spare). The tile reset is
// asserted at once, asynchronously, when either the chip reset or the
// supervisor's reset request for this tile is active. It is released
// synchronously, STRETCH clock cycles after both have gone inactive, so
// every flip-flop in the tile leaves reset in the same clock edge and the
// reset is never shorter than STRETCH cycles.
//
// Following the architecture: a per-tile reset generator, resettable by the
// supervisor. This design's choices: the stretch length and the synchronous
// release.
//
// Timing: tile_rst_n falls combinationally with ext_rst_n low or sup_rst
// high; it rises on the STRETCH-th rising clock edge after both released.
module tile_reset_gen #(
  parameter int unsigned STRETCH = 16
) (
  input  logic clk,
  input  logic ext_rst_n,   // chip reset, active low, asynchronous
  input  logic sup_rst,     // supervisor reset request, active high, asynchronous
  output logic tile_rst_n
);
  localparam int unsigned CW = $clog2(STRETCH + 1);

  logic          arst_n;
  logic [CW-1:0] cnt;

  assign arst_n = ext_rst_n && !sup_rst;

  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) begin
      cnt        <= '0;
      tile_rst_n <= 1'b0;
    end else if (cnt != CW'(STRETCH - 1)) begin
      cnt        <= cnt + 1'b1;
      tile_rst_n <= 1'b0;
    end else begin
      tile_rst_n <= 1'b1;
    end
  end

endmodule
