// SCL timing generator shared by all I2C buses.
//
// The firmware drives 23 I2C buses whose clock lines are kept synchronized at
// no more than 1.6 MHz. Instead of one divider per bus, this block produces a
// single strobe, `tick`, four times per SCL period; every bus master advances
// one quarter of a bit on each tick, so all buses toggle SCL on the same
// system-clock edge. The divider is rounded up so the SCL frequency never
// exceeds SCL_HZ (100 MHz / 64 = 1.5625 MHz with the defaults).
//
// Interface: `en` low holds the divider at zero; `tick` is a one-cycle pulse
// every DIV cycles while `en` is high, the first one DIV cycles after `en`
// rises. The 1.6 MHz ceiling is the published figure; the 100 MHz system clock
// and the quarter-bit scheme are this design's choices.
module scl_tick_gen #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned SCL_HZ = 1_600_000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  output logic tick
);
  // cycles per quarter SCL period, rounded up
  localparam int unsigned DIV = (CLK_HZ + 4 * SCL_HZ - 1) / (4 * SCL_HZ);
  localparam int unsigned CW  = (DIV > 1) ? $clog2(DIV) : 1;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (cnt == CW'(DIV - 1)) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + 1'b1;
      tick <= 1'b0;
    end
  end
endmodule
