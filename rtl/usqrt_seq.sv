// usqrt_seq: sequential integer square root, one result bit per cycle.
//
// Digit-by-digit (restoring) square root of a W-bit unsigned radicand:
// `start` loads `rad`; `done` pulses W/2+1 cycles later with
// `root` = floor(sqrt(rad)). Helper of the feature extractor; its structure
// is this design's choice.
module usqrt_seq #(
  parameter int unsigned W = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   rad,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  localparam int unsigned CW = $clog2(W / 2 + 1);
  logic [W-1:0]   x;       // radicand, consumed two bits per step
  logic [W/2+1:0] r;       // partial remainder, at most 2*root
  logic [CW-1:0]  cnt;
  logic [W/2+2:0] trial;
  logic [W/2+2:0] shifted;

  always_comb begin
    shifted = {r[W/2:0], x[W-1:W-2]};
    trial   = shifted - (W/2+3)'({root, 2'b01});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      x    <= '0;
      r    <= '0;
      root <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        x    <= rad;
        r    <= '0;
        root <= '0;
        cnt  <= CW'(W / 2);
      end else if (busy) begin
        x <= {x[W-3:0], 2'b00};
        if (!trial[W/2+2]) begin
          r    <= trial[W/2+1:0];
          root <= {root[W/2-2:0], 1'b1};
        end else begin
          r    <= shifted[W/2+1:0];
          root <= {root[W/2-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
