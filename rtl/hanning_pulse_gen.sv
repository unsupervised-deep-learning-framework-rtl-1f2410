// hanning_pulse_gen: actuation burst for the transmitting PZT.
//
// Produces N_CYC cycles of an F_HZ sine multiplied by one Hanning window
// period, s[k] = 0.5*(1 - cos(2*pi*k/K)) * sin(2*pi*N_CYC*k/K), one 12-bit
// DAC code per sample `tick` (FS_HZ). Two 32-bit phase accumulators run from
// the same sample tick: the window phase advances by STEP_W = (F_HZ/N_CYC) *
// 2^32 / FS_HZ and the carrier phase by exactly N_CYC * STEP_W, so the burst
// holds exactly N_CYC carrier cycles and ends when the window phase wraps
// (667 samples, 66.7 us, at the defaults). Both phases, rounded to 12 bits,
// index a quarter-wave sine table, sine_lut.hex, with entry
// i = round(2047*sin(pi/2*(i+0.5)/1024)), i = 0..1023, mirrored and negated
// for the other quadrants; the window uses the cosine (phase + 1/4 turn).
//
// Interface: `start` arms the generator; the burst begins on the next `tick`
// and `busy` is high while it plays. `dac_code` is offset binary, midscale
// (2048) when idle; `dac_wr` pulses for one cycle with each new code, the
// write strobe of the parallel DAC. `done` pulses one cycle after the last
// sample. The 5 cycles at 75 kHz and the 12-bit DAC follow the published
// system; the DDS structure, the offset-binary coding and midscale idle are
// this design's choices.
module hanning_pulse_gen #(
  parameter int unsigned FS_HZ = shm_pkg::FS_HZ,
  parameter int unsigned F_HZ  = shm_pkg::F_ACT_HZ,
  parameter int unsigned N_CYC = shm_pkg::N_BURST
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       tick,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  output logic [shm_pkg::DAC_W-1:0]  dac_code,
  output logic                       dac_wr
);
  import shm_pkg::*;

  localparam longint unsigned STEP_W64 =
      ((64'(F_HZ) << 32) / 64'(N_CYC) + 64'(FS_HZ) / 2) / 64'(FS_HZ);
  localparam logic [31:0] STEP_W = STEP_W64[31:0];
  localparam logic [31:0] STEP_C = 32'(STEP_W64 * 64'(N_CYC));
  localparam logic [DAC_W-1:0] MIDSCALE = DAC_W'(1 << (DAC_W - 1));

  logic [10:0] lut [1024];
  initial $readmemh("rtl/sine_lut.hex", lut);

  // full-wave sine from the quarter-wave table, 12-bit phase
  function automatic logic signed [11:0] sine(input logic [11:0] p);
    logic [9:0]  a;
    logic [10:0] m;
    a = p[10] ? ~p[9:0] : p[9:0];
    m = lut[a];
    return p[11] ? -$signed({1'b0, m}) : $signed({1'b0, m});
  endfunction

  logic        armed;
  logic        ending;        // the last burst sample has been written
  logic [31:0] ph_w, ph_c;

  // one sample: window (0..4094) times carrier (+-2047), rounded back by 2^12
  logic signed [11:0] carrier, wcos;
  logic        [12:0] window;     // 2 * 2047 * 0.5*(1 - cos)
  logic signed [24:0] prod;
  logic signed [12:0] value;
  logic        [32:0] ph_w_next;
  logic        [11:0] pc, pw;

  always_comb begin
    pc        = 12'((ph_c + 32'h0008_0000) >> 20);
    pw        = 12'((ph_w + 32'h0008_0000) >> 20) + 12'd1024;
    carrier   = sine(pc);
    wcos      = sine(pw);
    window    = 13'(13'sd2047 - 13'(wcos));
    prod      = 25'(carrier) * 25'($signed({1'b0, window}));
    value     = 13'((prod + 25'sd2048) >>> 12);
    ph_w_next = {1'b0, ph_w} + {1'b0, STEP_W};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed    <= 1'b0;
      ending   <= 1'b0;
      busy     <= 1'b0;
      done     <= 1'b0;
      ph_w     <= '0;
      ph_c     <= '0;
      dac_code <= MIDSCALE;
      dac_wr   <= 1'b0;
    end else begin
      done   <= 1'b0;
      dac_wr <= 1'b0;
      if (start && !busy) armed <= 1'b1;
      if (tick && (armed || busy)) begin
        if (!busy) begin
          // first sample of the burst is phase 0 (value 0)
          armed    <= 1'b0;
          busy     <= 1'b1;
          ph_w     <= STEP_W;
          ph_c     <= STEP_C;
          dac_code <= MIDSCALE;
          dac_wr   <= 1'b1;
        end else if (ending) begin
          ending   <= 1'b0;
          busy     <= 1'b0;
          done     <= 1'b1;
          ph_w     <= '0;
          ph_c     <= '0;
          dac_code <= MIDSCALE;
          dac_wr   <= 1'b1;
        end else begin
          ph_w     <= ph_w_next[31:0];
          ph_c     <= ph_c + STEP_C;
          dac_code <= DAC_W'(value + 13'sd2048);
          dac_wr   <= 1'b1;
          ending   <= ph_w_next[32];
        end
      end
    end
  end
endmodule
