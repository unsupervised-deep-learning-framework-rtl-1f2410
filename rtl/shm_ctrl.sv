// shm_ctrl: host registers and the measurement sequencer.
//
// The host (the embedded processor or the PC application behind it) sets
// the transmitter and receiver channel of the two 8-way analog
// multiplexers, loads the trained model and the damage threshold, and
// starts a measurement. One measurement runs
//   SETTLE  wait SETTLE_CYC cycles after the channel selects are applied
//   ACQ     fire the burst and record 4096 samples (both start on one tick)
//   FEAT    compute the 16 features against the stored baseline record
//   AE      reconstruct the features with the autoencoder
//   DET     reconstruction error and threshold compare
// A measurement started with CTRL.baseline = 1 stores its record as the
// baseline f_b and stops after ACQ. One started with CTRL.process = 1 skips
// SETTLE and ACQ and evaluates the record the host has written into the
// record buffer (stored test data, as in the published edge evaluation).
//
// Host bus: single-cycle requests (`h_req`, `h_we`, word address `h_addr`,
// `h_wdata`); a read returns `h_rdata` with `h_rvalid` on the next cycle.
// Register map (shm_pkg): CTRL (W: bit0 start, bit1 baseline, bit2
// process only), STATUS (R:
// bit0 busy, bit1 done, bit2 damage, bit3 baseline stored, [6:4] state),
// MUX (RW: [2:0] tx, [5:3] rx), THRESH, MSE, COUNT, FEAT[16], RECON[16],
// the record and baseline buffers (RW, 4096 words each; read while not in
// FEAT, written while idle) and the model parameters (W, 9696 words).
// Writes to MUX, the buffers and the model, and starts, are ignored while
// a measurement runs.
//
// What follows the published system: channel selection by the host,
// 4096-sample records, the feature / autoencoder / threshold chain, the
// baseline record, evaluation of stored records. The bus, the register
// map, the settle time and the mode bits are this design's choices.
module shm_ctrl #(
  parameter int unsigned SETTLE_CYC = 1000
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host bus
  input  logic                         h_req,
  input  logic                         h_we,
  input  logic [shm_pkg::HADDR_W-1:0]  h_addr,
  input  logic [31:0]                  h_wdata,
  output logic                         h_rvalid,
  output logic [31:0]                  h_rdata,
  output logic                         irq,
  // analog multiplexer selects
  output logic [shm_pkg::MUX_W-1:0]    tx_sel,
  output logic [shm_pkg::MUX_W-1:0]    rx_sel,
  // acquisition
  output logic                         acq_start,
  input  logic                         acq_done,
  output logic                         cap_to_base,
  // record buffers: host write side (test records) and read side
  output logic                         hb_we_sig,
  output logic                         hb_we_base,
  output logic [shm_pkg::SADDR_W-1:0]  hb_waddr,
  output logic [shm_pkg::ADC_W-1:0]    hb_wdata,
  output logic [shm_pkg::SADDR_W-1:0]  buf_raddr,
  input  logic [shm_pkg::SADDR_W-1:0]  fx_raddr,
  input  shm_pkg::sample_t             sig_rdata,
  input  shm_pkg::sample_t             base_rdata,
  // processing chain
  output logic                         feat_start,
  input  logic                         feat_done,
  input  shm_pkg::fx_t                 feat  [shm_pkg::N_FEAT],
  output logic                         ae_start,
  input  logic                         ae_done,
  input  shm_pkg::fx_t                 recon [shm_pkg::N_FEAT],
  output logic                         det_start,
  input  logic                         det_done,
  input  shm_pkg::fx_t                 mse,
  input  logic                         damage,
  output shm_pkg::fx_t                 threshold,
  // model parameter writes
  output logic                         pw_en,
  output logic [shm_pkg::PADDR_W-1:0]  pw_addr,
  output shm_pkg::fx_t                 pw_data
);
  import shm_pkg::*;

  localparam int unsigned SW = (SETTLE_CYC > 1) ? $clog2(SETTLE_CYC + 1) : 1;

  typedef enum logic [1:0] { R_REG, R_SIG, R_BASE } rsel_e;

  seq_e          st;
  logic [SW-1:0] settle;
  logic          mode_base, base_ok, done_flag;
  logic [31:0]   count;
  rsel_e         rsel;
  logic [31:0]   rreg;

  wire wr    = h_req &&  h_we;
  wire rd    = h_req && !h_we;
  wire idle  = (st == S_IDLE);
  wire in_sig  = (h_addr[15:12] == A_SIG[15:12]);
  wire in_base = (h_addr[15:12] == A_BASE[15:12]);
  wire in_par  = (h_addr >= A_PARAM) && (h_addr < A_PARAM + 16'(N_PARAMS));

  // record buffer address: the feature extractor owns it during FEAT
  always_comb buf_raddr = (st == S_FEAT) ? fx_raddr : h_addr[SADDR_W-1:0];

  // the host may load records of its own (stored test data) while idle
  always_comb begin
    hb_we_sig  = wr && in_sig && idle;
    hb_we_base = wr && in_base && idle;
    hb_waddr   = h_addr[SADDR_W-1:0];
    hb_wdata   = h_wdata[ADC_W-1:0];
  end

  always_comb begin
    pw_en   = wr && in_par && idle;
    pw_addr = PADDR_W'(h_addr - A_PARAM);
    pw_data = fx_t'(h_wdata);
  end

  always_comb begin
    case (rsel)
      R_SIG:   h_rdata = 32'(sig_rdata);
      R_BASE:  h_rdata = 32'(base_rdata);
      default: h_rdata = rreg;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; settle <= '0; mode_base <= 1'b0; base_ok <= 1'b0;
      done_flag <= 1'b0; count <= '0; tx_sel <= '0; rx_sel <= '0;
      threshold <= '0; acq_start <= 1'b0; cap_to_base <= 1'b0;
      feat_start <= 1'b0; ae_start <= 1'b0; det_start <= 1'b0;
      h_rvalid <= 1'b0; rsel <= R_REG; rreg <= '0; irq <= 1'b0;
    end else begin
      acq_start <= 1'b0; feat_start <= 1'b0; ae_start <= 1'b0; det_start <= 1'b0;
      irq <= 1'b0;

      // ---------------- host writes ----------------
      if (wr) begin
        if (h_addr == A_MUX && idle) begin
          tx_sel <= h_wdata[2:0];
          rx_sel <= h_wdata[5:3];
        end
        if (h_addr == A_THRESH) threshold <= fx_t'(h_wdata);
        if (in_base && idle) base_ok <= 1'b1;   // baseline loaded by the host
        if (h_addr == A_CTRL && h_wdata[0] && idle) begin
          done_flag <= 1'b0;
          if (h_wdata[2]) begin
            // process only: features of the record already in the buffer
            st <= S_FEAT; feat_start <= 1'b1;
          end else begin
            st <= S_SETTLE; settle <= '0; mode_base <= h_wdata[1];
          end
        end
      end

      // ---------------- host reads ----------------
      h_rvalid <= rd;
      if (rd) begin
        rsel <= (in_sig && st != S_FEAT) ? R_SIG : (in_base && st != S_FEAT) ? R_BASE : R_REG;
        rreg <= '0;
        if (h_addr == A_STATUS)
          rreg <= {25'd0, st, base_ok, damage, done_flag, !idle};
        else if (h_addr == A_MUX)    rreg <= {26'd0, rx_sel, tx_sel};
        else if (h_addr == A_THRESH) rreg <= 32'(threshold);
        else if (h_addr == A_MSE)    rreg <= 32'(mse);
        else if (h_addr == A_COUNT)  rreg <= count;
        else if (h_addr[15:4] == A_FEAT[15:4])  rreg <= 32'(feat[h_addr[3:0]]);
        else if (h_addr[15:4] == A_RECON[15:4]) rreg <= 32'(recon[h_addr[3:0]]);
      end

      // ---------------- sequencer ----------------
      case (st)
        S_SETTLE: begin
          settle <= settle + 1'b1;
          if (settle == SW'(SETTLE_CYC)) begin
            st <= S_ACQ; acq_start <= 1'b1; cap_to_base <= mode_base;
          end
        end
        S_ACQ: if (acq_done) begin
          if (cap_to_base) begin
            st <= S_IDLE; base_ok <= 1'b1; done_flag <= 1'b1; irq <= 1'b1;
          end else begin
            st <= S_FEAT; feat_start <= 1'b1;
          end
        end
        S_FEAT: if (feat_done) begin st <= S_AE;  ae_start  <= 1'b1; end
        S_AE:   if (ae_done)   begin st <= S_DET; det_start <= 1'b1; end
        S_DET:  if (det_done)  begin
          st <= S_IDLE; done_flag <= 1'b1; irq <= 1'b1; count <= count + 1'b1;
        end
        default: ;
      endcase
    end
  end

  // a started stage always reports back before the next one starts
  property p_one_stage;
    @(posedge clk) disable iff (!rst_n)
      $onehot0({acq_start, feat_start, ae_start, det_start});
  endproperty
  a_one_stage: assert property (p_one_stage);
endmodule
