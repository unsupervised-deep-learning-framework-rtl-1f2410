// shm_pkg: constants and types shared by the guided-wave structural health
// monitoring (SHM) node.
//
// The node fires a 5-cycle Hanning-windowed 75 kHz burst into one PZT
// transducer through a 12-bit DAC, records the wave at a second PZT with a
// 10-bit ADC at 10 Msps into a 4096-sample block RAM, reduces the first
// 200 us of the record to 16 time-domain features, reconstructs the feature
// vector with a small fully connected autoencoder and flags damage when the
// reconstruction mean squared error exceeds a threshold.
//
// Numbers taken from the published system: 4096 samples per record, 10-bit
// ADC, 12-bit DAC, 10 Msps, 75 kHz / 5 cycles, 16 features, 200 us feature
// window (2000 samples), the layer widths 16-16-32-64-(64)-64-32-16 and the
// 9696 trainable parameters. The fixed-point format (signed Q16.16) and the
// 100 MHz system clock of the datapath are this design's choices (the
// published model ran in floating-point software at 100 MHz).
package shm_pkg;

  // ---------------- acquisition ----------------
  localparam int unsigned CLK_HZ     = 100_000_000;
  localparam int unsigned FS_HZ      = 10_000_000;   // ADC/DAC sample rate
  localparam int unsigned F_ACT_HZ   = 75_000;       // burst centre frequency
  localparam int unsigned N_BURST    = 5;            // carrier cycles per burst
  localparam int unsigned ADC_W      = 10;
  localparam int unsigned DAC_W      = 12;
  localparam int unsigned N_SAMPLES  = 4096;         // samples per record
  localparam int unsigned SADDR_W    = $clog2(N_SAMPLES);
  localparam int unsigned N_WIN      = 2000;         // first 200 us at 10 Msps
  localparam int unsigned MUX_W      = 3;            // CD4051 select lines

  typedef logic signed [ADC_W-1:0] sample_t;         // normalised sample * 512

  // ---------------- fixed point ----------------
  localparam int unsigned FX_W    = 32;
  localparam int unsigned FX_FRAC = 16;
  typedef logic signed [FX_W-1:0] fx_t;              // signed Q16.16
  localparam fx_t FX_MAX = 32'sh7FFF_FFFF;
  localparam fx_t FX_MIN = -32'sh7FFF_FFFF;

  // ---------------- features ----------------
  localparam int unsigned N_FEAT = 16;
  typedef enum logic [3:0] {
    F_MEAN     = 4'd0,
    F_MEDIAN   = 4'd1,
    F_MAD      = 4'd2,
    F_VAR      = 4'd3,
    F_STD      = 4'd4,
    F_RMS      = 4'd5,
    F_RMSD     = 4'd6,
    F_KURT     = 4'd7,
    F_SKEW     = 4'd8,
    F_CREST    = 4'd9,
    F_IMPULSE  = 4'd10,
    F_SHAPE    = 4'd11,
    F_P2P      = 4'd12,
    F_ERATIO   = 4'd13,
    F_DI       = 4'd14,
    F_NDSE     = 4'd15
  } feat_e;

  // ---------------- autoencoder ----------------
  // Six dense layers with parameters; the parameter-free 64-wide layer of the
  // published model sits between layers 2 and 3 and does not change values.
  localparam int unsigned N_LAYERS  = 6;
  localparam int unsigned MAX_WIDTH = 64;
  localparam int unsigned N_PARAMS  = 9696;
  localparam int unsigned PADDR_W   = $clog2(N_PARAMS);

  function automatic int unsigned layer_in(input int unsigned l);
    case (l)
      0: return 16;
      1: return 16;
      2: return 32;
      3: return 64;
      4: return 64;
      default: return 32;
    endcase
  endfunction

  function automatic int unsigned layer_out(input int unsigned l);
    case (l)
      0: return 16;
      1: return 32;
      2: return 64;
      3: return 64;
      4: return 32;
      default: return 16;
    endcase
  endfunction

  // First parameter of each layer: kernel [in][out] row-major, then bias [out]
  // (the order in which a Keras Dense layer stores its weights).
  function automatic int unsigned layer_off(input int unsigned l);
    case (l)
      0: return 0;
      1: return 272;
      2: return 816;
      3: return 2928;
      4: return 7088;
      default: return 9168;
    endcase
  endfunction

  // ---------------- host register map (word addresses) ----------------
  localparam int unsigned HADDR_W     = 16;
  localparam logic [15:0] A_CTRL      = 16'h0000;  // W: bit0 start, bit1 baseline, bit2 process only
  localparam logic [15:0] A_STATUS    = 16'h0001;  // R: busy, done, damage, state
  localparam logic [15:0] A_MUX       = 16'h0002;  // RW: [2:0] tx, [5:3] rx
  localparam logic [15:0] A_THRESH    = 16'h0003;  // RW: threshold, Q16.16
  localparam logic [15:0] A_MSE       = 16'h0004;  // R: last MSE, Q16.16
  localparam logic [15:0] A_COUNT     = 16'h0005;  // R: records processed
  localparam logic [15:0] A_FEAT      = 16'h0010;  // R: 16 features
  localparam logic [15:0] A_RECON     = 16'h0020;  // R: 16 reconstructions
  localparam logic [15:0] A_SIG       = 16'h1000;  // RW: record, 4096 words
  localparam logic [15:0] A_BASE      = 16'h2000;  // RW: baseline, 4096 words
  localparam logic [15:0] A_PARAM     = 16'h4000;  // W: 9696 model parameters

  typedef enum logic [2:0] {
    S_IDLE   = 3'd0,
    S_SETTLE = 3'd1,
    S_ACQ    = 3'd2,
    S_FEAT   = 3'd3,
    S_AE     = 3'd4,
    S_DET    = 3'd5
  } seq_e;

endpackage
