// anomaly_detector: reconstruction error and the damage decision.
//
// Computes the mean squared error between the feature vector a and its
// reconstruction a_hat, MSE = (1/16) * sum_j (a_j - a_hat_j)^2, and flags
// damage when MSE > threshold. The threshold is mu + sigma of the MSE
// distribution over the healthy training records; it is computed offline
// together with the model and written by the host.
//
// How it works: one element per cycle. The Q16.16 difference (33 bits) is
// squared exactly (Q32.32) and accumulated in 72 bits; the sum is divided
// by 16 with a shift and returned in Q16.16, truncated and saturated.
//
// Interface: `start` latches nothing but begins the walk over `feat` and
// `recon`, which must hold still until `done`; `done` pulses N_FEAT + 1
// cycles after `start` with `mse` and `damage` valid until the next start.
// The error measure and the mu + sigma rule follow the published method;
// the fixed-point format and the serial schedule are this design's choices.
module anomaly_detector (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  shm_pkg::fx_t  feat  [shm_pkg::N_FEAT],
  input  shm_pkg::fx_t  recon [shm_pkg::N_FEAT],
  input  shm_pkg::fx_t  threshold,
  output logic          busy,
  output logic          done,
  output shm_pkg::fx_t  mse,
  output logic          damage
);
  import shm_pkg::*;

  localparam int unsigned NW = $clog2(N_FEAT);
  localparam logic signed [71:0] SAT = 72'(FX_MAX);

  logic [NW-1:0]      idx;
  logic [71:0]        sum;
  logic signed [32:0] diff;
  logic        [65:0] sq;
  logic        [71:0] sum_n, mean_q16;
  fx_t                mse_n;

  always_comb begin
    diff     = 33'(feat[idx]) - 33'(recon[idx]);
    sq       = 66'(66'(diff) * 66'(diff));
    sum_n    = sum + 72'(sq);
    mean_q16 = sum_n >> (FX_FRAC + NW);
    mse_n    = (mean_q16 > 72'(SAT)) ? FX_MAX : fx_t'(mean_q16[FX_W-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; idx <= '0; sum <= '0;
      mse <= '0; damage <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; idx <= '0; sum <= '0;
      end else if (busy) begin
        sum <= sum_n;
        idx <= idx + 1'b1;
        if (idx == NW'(N_FEAT - 1)) begin
          busy   <= 1'b0;
          done   <= 1'b1;
          mse    <= mse_n;
          damage <= (mse_n > threshold);
        end
      end
    end
  end
endmodule
