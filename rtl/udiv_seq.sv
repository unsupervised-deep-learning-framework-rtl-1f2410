// udiv_seq: sequential unsigned divider, one quotient bit per cycle.
//
// Restoring long division of a W-bit numerator by a W-bit denominator.
// `start` (while not busy) loads the operands; `done` pulses W+1 cycles
// later with `quo` = floor(num/den) and `rem` = num mod den. Division by
// zero returns an all-ones quotient, which callers treat as saturation.
// Helper of the feature extractor; its structure is this design's choice.
module udiv_seq #(
  parameter int unsigned W = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quo,
  output logic [W-1:0] rem
);
  localparam int unsigned CW = $clog2(W + 1);
  logic [W-1:0]  d;
  logic [CW-1:0] cnt;
  logic [W:0]    trial;

  always_comb trial = {rem, quo[W-1]} - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      quo  <= '0;
      rem  <= '0;
      d    <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        quo  <= num;
        rem  <= '0;
        d    <= den;
        cnt  <= CW'(W);
      end else if (busy) begin
        if (d == '0) begin
          quo  <= '1;
          rem  <= '0;
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          // shift {rem,quo} left by one, subtract if it fits
          if (!trial[W]) begin
            rem <= trial[W-1:0];
            quo <= {quo[W-2:0], 1'b1};
          end else begin
            rem <= {rem[W-2:0], quo[W-1]};
            quo <= {quo[W-2:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
          if (cnt == CW'(1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
