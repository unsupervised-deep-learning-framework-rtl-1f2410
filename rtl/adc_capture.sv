// adc_capture: records N consecutive ADC samples after a trigger.
//
// `start` arms the block; from the next sample `tick` on it takes the
// parallel ADC output on every tick and writes it into a sample buffer at
// addresses 0..N-1, then pulses `done`. The 10-bit code is taken as offset
// binary and stored as a two's-complement sample (code - 512) by inverting
// the top bit, so a stored sample s stands for the normalised value s/512 in
// [-1, 1). Armed on the same tick as the burst generator, sample 0 is taken
// at the start of actuation. N = 4096 at 10 Msps (409.6 us) follows the
// published system; the offset-binary coding and the sampling instant are
// this design's choices (any fixed ADC pipeline delay only shifts the
// record).
module adc_capture #(
  parameter int unsigned N     = shm_pkg::N_SAMPLES,
  parameter int unsigned ADC_W = shm_pkg::ADC_W,
  localparam int unsigned AW   = $clog2(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  input  logic             start,
  input  logic [ADC_W-1:0] adc_data,
  output logic             busy,
  output logic             done,
  output logic             we,
  output logic [AW-1:0]    waddr,
  output logic [ADC_W-1:0] wdata
);
  logic          armed;
  logic [AW:0]   cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= 1'b0;
      busy  <= 1'b0;
      done  <= 1'b0;
      cnt   <= '0;
      we    <= 1'b0;
      waddr <= '0;
      wdata <= '0;
    end else begin
      we   <= 1'b0;
      done <= 1'b0;
      if (start && !busy) armed <= 1'b1;
      if (tick && (armed || busy)) begin
        armed <= 1'b0;
        we    <= 1'b1;
        waddr <= cnt[AW-1:0];
        wdata <= {~adc_data[ADC_W-1], adc_data[ADC_W-2:0]};
        if (cnt == (AW+1)'(N - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          cnt  <= '0;
        end else begin
          busy <= 1'b1;
          cnt  <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
