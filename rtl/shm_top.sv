// shm_top: guided-wave damage detection node, acquisition to decision.
//
// One record: the controller applies the transmitter/receiver channel
// selects of the analog multiplexers, waits for them to settle, then on one
// sample tick starts both the Hanning burst generator (to the 12-bit DAC
// driving the transmitting PZT) and the ADC capture (10-bit, 10 Msps, 4096
// samples from the receiving PZT). A record taken in baseline mode is kept
// as the reference f_b. Any other record goes through the feature extractor
// (16 features over its first 2000 samples, compared with f_b), the
// autoencoder (9696 parameters, loaded by the host) and the anomaly
// detector (MSE of the reconstruction against a host-set threshold), and
// raises `irq` with STATUS.damage set or clear. The host may also write a
// stored record into the record buffer and run only the processing chain
// on it.
//
// Pins: `dac_code`/`dac_wr_n` go to the parallel DAC (one write strobe per
// sample, active low); `adc_clk` clocks the ADC and `adc_data` is its
// parallel offset-binary output; `tx_sel`/`rx_sel` drive the select inputs
// of the two 8-channel analog multiplexers. The host bus (see shm_ctrl)
// stands where the embedded processor of the published system connects.
// Timing at 100 MHz: settle 10 us, acquisition 409.6 us, features ~90 us,
// autoencoder ~97 us, decision 0.2 us.
module shm_top (
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
  // converters and multiplexers
  output logic [shm_pkg::DAC_W-1:0]    dac_code,
  output logic                         dac_wr_n,
  output logic                         adc_clk,
  input  logic [shm_pkg::ADC_W-1:0]    adc_data,
  output logic [shm_pkg::MUX_W-1:0]    tx_sel,
  output logic [shm_pkg::MUX_W-1:0]    rx_sel
);
  import shm_pkg::*;

  logic tick;
  logic acq_start, cap_to_base;
  logic pg_busy, pg_done, dac_wr;
  logic cap_busy, cap_done, cap_we;
  logic [SADDR_W-1:0] cap_waddr, buf_raddr, fx_raddr;
  logic [ADC_W-1:0]   cap_wdata;
  logic [ADC_W-1:0]   sig_q, base_q;
  logic feat_start, feat_busy, feat_done;
  logic ae_start, ae_busy, ae_done;
  logic det_start, det_busy, det_done, damage;
  fx_t  feat  [N_FEAT];
  fx_t  recon [N_FEAT];
  fx_t  mse, threshold;
  logic               pw_en;
  logic [PADDR_W-1:0] pw_addr;
  fx_t                pw_data;

  tick_gen u_tick (.clk, .rst_n, .tick, .conv_clk(adc_clk));

  hanning_pulse_gen u_pulse (
    .clk, .rst_n, .tick, .start(acq_start),
    .busy(pg_busy), .done(pg_done), .dac_code, .dac_wr
  );
  assign dac_wr_n = ~dac_wr;

  adc_capture u_cap (
    .clk, .rst_n, .tick, .start(acq_start), .adc_data,
    .busy(cap_busy), .done(cap_done),
    .we(cap_we), .waddr(cap_waddr), .wdata(cap_wdata)
  );

  // buffer write side: the capture during ACQ, the host while idle
  logic               hb_we_sig, hb_we_base;
  logic [SADDR_W-1:0] hb_waddr, buf_waddr;
  logic [ADC_W-1:0]   hb_wdata, buf_wdata;
  always_comb begin
    buf_waddr = cap_we ? cap_waddr : hb_waddr;
    buf_wdata = cap_we ? cap_wdata : hb_wdata;
  end

  sample_buffer u_sig_buf (
    .clk, .we((cap_we && !cap_to_base) || hb_we_sig), .waddr(buf_waddr), .wdata(buf_wdata),
    .raddr(buf_raddr), .rdata(sig_q)
  );
  sample_buffer u_base_buf (
    .clk, .we((cap_we && cap_to_base) || hb_we_base), .waddr(buf_waddr), .wdata(buf_wdata),
    .raddr(buf_raddr), .rdata(base_q)
  );

  feature_extractor u_feat (
    .clk, .rst_n, .start(feat_start), .busy(feat_busy), .done(feat_done),
    .raddr(fx_raddr), .sig_rdata(sample_t'(sig_q)), .base_rdata(sample_t'(base_q)),
    .feat
  );

  ae_engine u_ae (
    .clk, .rst_n, .pw_en, .pw_addr, .pw_data,
    .start(ae_start), .feat_in(feat), .busy(ae_busy), .done(ae_done), .recon
  );

  anomaly_detector u_det (
    .clk, .rst_n, .start(det_start), .feat, .recon, .threshold,
    .busy(det_busy), .done(det_done), .mse, .damage
  );

  shm_ctrl u_ctrl (
    .clk, .rst_n,
    .h_req, .h_we, .h_addr, .h_wdata, .h_rvalid, .h_rdata, .irq,
    .tx_sel, .rx_sel,
    .acq_start, .acq_done(cap_done), .cap_to_base,
    .hb_we_sig, .hb_we_base, .hb_waddr, .hb_wdata,
    .buf_raddr, .fx_raddr, .sig_rdata(sample_t'(sig_q)), .base_rdata(sample_t'(base_q)),
    .feat_start, .feat_done, .feat,
    .ae_start, .ae_done, .recon,
    .det_start, .det_done, .mse, .damage, .threshold,
    .pw_en, .pw_addr, .pw_data
  );

  // host and capture never write a buffer in the same cycle
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
    !(cap_we && (hb_we_sig || hb_we_base)));

  // the burst starts on the first sample of the record and ends inside it
  a_burst_in_record: assert property (@(posedge clk) disable iff (!rst_n)
    pg_busy |-> cap_busy);
endmodule
