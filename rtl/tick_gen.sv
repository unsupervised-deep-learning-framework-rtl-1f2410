// tick_gen: sample-rate timing for the converters.
//
// Divides the system clock by DIV (100 MHz / 10 = 10 Msps by default) into a
// one-cycle enable `tick`, used by the DAC burst generator and the ADC
// capture so that the two converters run on the same sample grid, and a
// square-wave converter clock `conv_clk` (high for the first half of each
// period; it rises on the cycle after `tick`). The ADC part number and rate
// follow the published board; the divider itself is this design's choice.
module tick_gen #(
  parameter int unsigned DIV = shm_pkg::CLK_HZ / shm_pkg::FS_HZ
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick,
  output logic conv_clk
);
  localparam int unsigned CW = (DIV > 1) ? $clog2(DIV) : 1;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      tick     <= 1'b0;
      conv_clk <= 1'b0;
    end else begin
      cnt      <= (cnt == CW'(DIV - 1)) ? '0 : cnt + 1'b1;
      tick     <= (cnt == CW'(DIV - 1));
      conv_clk <= (cnt < CW'(DIV / 2));
    end
  end
endmodule
