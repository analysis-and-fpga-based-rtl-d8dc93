// Update-rate divider of the PBNN prototype.
//
// The prototype runs the network at 1 kHz from the board's 100 MHz clock so
// that the output waveforms can be recorded comfortably. This block counts
// DIV clock cycles and raises tick for one cycle at the end of each count,
// giving one network update every DIV cycles (DIV = 100000 for
// 100 MHz -> 1 kHz). The paper names only the division; generating an enable
// instead of a slow derived clock is this design's choice, which keeps the
// whole design on one clock.
//
// Interface: rst (synchronous) restarts the count; the first tick comes DIV
// cycles after rst is released. With DIV = 1 tick is high on every cycle
// after reset.
module pbnn_clock_divider #(
  parameter int unsigned DIV = 100_000
) (
  input  logic clk,
  input  logic rst,
  output logic tick
);

  localparam int unsigned CW = (DIV > 1) ? $clog2(DIV) : 1;

  if (DIV < 1) begin : g_bad_div
    $error("pbnn_clock_divider: DIV must be at least 1");
  end

  logic [CW-1:0] count;

  always_ff @(posedge clk) begin
    if (rst) begin
      count <= '0;
      tick  <= 1'b0;
    end else if (count == CW'(DIV - 1)) begin
      count <= '0;
      tick  <= 1'b1;
    end else begin
      count <= count + 1'b1;
      tick  <= 1'b0;
    end
  end

endmodule
