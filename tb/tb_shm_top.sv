// tb_shm_top: the whole node, at its default parameters, end to end.
//
// A model of the transducer path stands between the DAC and ADC pins: the
// received wave is the transmitted burst, delayed by DELAY samples, scaled
// by a gain and offset to the ADC midscale, plus uniform noise. The
// testbench acts as the host on the register bus:
//   1. loads 9696 random model parameters, sets the channel selects;
//   2. records the baseline (baseline mode) and reads it back;
//   3. takes one measurement and checks, against the reference models of
//      tb_ref_pkg, the 16 features (from the read-back records), the 16
//      reconstructions (bit exact) and the MSE;
//   4. reloads the model as a fixed template of the healthy feature vector
//      (last-layer bias; all last-layer weights zero), takes three healthy
//      records, sets the threshold to mu + sigma of their MSE as the
//      published method does, then one healthy and one damaged record (40 %
//      larger, earlier arrival), and checks the decisions;
//   5. writes two stored records into the record buffer over the bus (a
//      copy of the baseline and a synthetic burst of other amplitude and
//      arrival) and evaluates them in process-only mode, as the published
//      edge evaluation did with its stored test set.
// Mechanisms counted (each must happen): baseline capture, measurement,
// record read-back, start ignored while busy, stored-record evaluation,
// healthy decision, damage decision. The measurement latency is checked against the published
// inference-time bound (< 1 ms for the model) and the record length
// (409.6 us).
module tb_shm_top;
  import shm_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic h_req = 1'b0, h_we = 1'b0, h_rvalid, irq;
  logic [15:0] h_addr = '0;
  logic [31:0] h_wdata = '0, h_rdata;
  logic [11:0] dac_code;
  logic dac_wr_n, adc_clk;
  logic [9:0] adc_data = 10'd512;
  logic [2:0] tx_sel, rx_sel;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  shm_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // ---------------- transducer path and ADC model ----------------
  real gain = 0.25;
  int  delay = 1200;
  int  noise = 6;
  int  tx_hist [8192];
  int  n_tick = 0;
  bit  active = 1'b0;
  int  last_code = 2048;
  always @(posedge clk) if (!dac_wr_n) begin
    last_code = int'(dac_code);
    if (!active) begin active = 1'b1; n_tick = 0; end
  end
  always @(posedge adc_clk) begin
    int v, k;
    if (active) begin
      tx_hist[n_tick] = last_code - 2048;
      k = n_tick - delay;
      v = (k >= 0) ? int'(gain * real'(tx_hist[k])) : 0;
      v = v + int'($urandom % (2 * noise + 1)) - noise;
      if (v > 511) v = 511;
      if (v < -512) v = -512;
      adc_data <= 10'(v + 512);
      n_tick++;
      if (n_tick >= 4200) active = 1'b0;
    end else begin
      adc_data <= 10'(512 + int'($urandom % (2 * noise + 1)) - noise);
    end
  end

  // ---------------- host bus ----------------
  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(posedge clk); h_req <= 1'b1; h_we <= 1'b1; h_addr <= a; h_wdata <= d;
    @(posedge clk); h_req <= 1'b0; h_we <= 1'b0;
    #1;
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(posedge clk); h_req <= 1'b1; h_we <= 1'b0; h_addr <= a;
    @(posedge clk); h_req <= 1'b0;
    #1; d = h_rdata;
  endtask

  int n_base = 0, n_meas = 0, n_stored = 0, n_readback = 0, n_ignored = 0, n_healthy = 0, n_damage = 0;

  task automatic measure(input bit base_mode, input bit stored, output longint cyc);
    logic [31:0] st;
    wr(A_CTRL, stored ? 32'h5 : base_mode ? 32'h3 : 32'h1);
    cyc = 0;
    // a second start while busy must be ignored
    wr(A_CTRL, 32'h1);
    rd(A_STATUS, st);
    if (st[0]) n_ignored++;
    while (!irq) begin @(posedge clk); cyc++; end
    repeat (2) @(posedge clk);
    rd(A_STATUS, st);
    check(st[0] == 1'b0 && st[1] == 1'b1, "not done after irq");
    if (stored) n_stored++; else if (base_mode) n_base++; else n_meas++;
  endtask

  task automatic read_record(input logic [15:0] base_addr, ref int r[]);
    logic [31:0] d;
    r = new[4096];
    for (int i = 0; i < 4096; i++) begin
      rd(base_addr + 16'(i), d);
      r[i] = int'($signed(d[9:0]));
    end
    n_readback++;
  endtask

  task automatic read_vec(input logic [15:0] base_addr, output fx_arr_t v);
    logic [31:0] d;
    for (int i = 0; i < N_FEAT; i++) begin rd(base_addr + 16'(i), d); v[i] = int'(d); end
  endtask

  int par[];
  int base_rec[], sig_rec[], stored_rec[];

  task automatic load_params();
    for (int i = 0; i < NPAR; i++) wr(A_PARAM + 16'(i), 32'(par[i]));
  endtask

  // full measurement with checks of features, reconstruction and MSE
  task automatic measure_and_check(input string name, output int mse_o, output bit dmg_o,
                                   input bit stored = 1'b0);
    longint cyc;
    fx_arr_t fhw, rhw, rref;
    feat_r_t fref;
    logic [31:0] d;
    int mref;
    measure(1'b0, stored, cyc);
    // settle 1000 + record 40960 + features ~8.6k + model 9.7k + decision;
    // a stored record skips the first two
    if (stored) check(cyc > 18000 && cyc < 25000, $sformatf("%s: processing took %0d cycles", name, cyc));
    else        check(cyc < 70000, $sformatf("%s: measurement took %0d cycles", name, cyc));
    read_record(A_SIG, sig_rec);
    read_vec(A_FEAT, fhw);
    read_vec(A_RECON, rhw);
    fref = ref_features(sig_rec, base_rec, N_WIN);
    for (int k = 0; k < N_FEAT; k++) begin
      real h, tol, dd;
      h = q16_to_real(fhw[k]);
      tol = 2.0e-3 * ((fref[k] < 0) ? -fref[k] : fref[k]) + 2.0e-4;
      dd = h - fref[k];
      check(dd <= tol && dd >= -tol, $sformatf("%s feature %0d hw %f ref %f", name, k, h, fref[k]));
    end
    rref = ref_ae(par, fhw);
    for (int k = 0; k < N_FEAT; k++)
      check(rhw[k] == rref[k], $sformatf("%s recon %0d hw %0d ref %0d", name, k, rhw[k], rref[k]));
    rd(A_MSE, d);
    mref = ref_mse(fhw, rhw);
    check(int'(d) - mref <= 1 && mref - int'(d) <= 1, $sformatf("%s mse %0d ref %0d", name, d, mref));
    mse_o = int'(d);
    rd(A_STATUS, d);
    dmg_o = d[2];
    if (dmg_o) n_damage++; else n_healthy++;
  endtask

  initial begin
    longint cyc;
    logic [31:0] d;
    int m, mh [3];
    bit dmg;
    real mu, sd, thr;
    feat_r_t ftmp;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);

    // 1. random model, channels
    par = new[NPAR];
    for (int i = 0; i < NPAR; i++) par[i] = int'($urandom % 32768) - 16384;
    load_params();
    wr(A_MUX, {26'd0, 3'd4, 3'd1});
    check(tx_sel == 3'd1 && rx_sel == 3'd4, "channel selects");
    wr(A_THRESH, 32'h7FFF_FFFE);

    // 2. baseline
    gain = 0.25; delay = 1200;
    measure(1'b1, 1'b0, cyc);
    check(cyc > 40960 && cyc < 43000, $sformatf("baseline record took %0d cycles", cyc));
    read_record(A_BASE, base_rec);
    begin
      int mx = 0;
      foreach (base_rec[i]) if (base_rec[i] > mx) mx = base_rec[i];
      check(mx > 300 && mx < 520, $sformatf("baseline peak %0d", mx));
    end

    // 3. one measurement, random model, bit-exact checks
    measure_and_check("random model", m, dmg);

    // 4. template model: recon = healthy feature vector
    ftmp = ref_features(base_rec, base_rec, N_WIN);
    for (int i = 0; i < NPAR; i++) par[i] = 0;
    for (int j = 0; j < 16; j++) par[9168 + 32 * 16 + j] = int'(ftmp[j] * 65536.0);
    load_params();
    for (int h = 0; h < 3; h++) measure_and_check($sformatf("healthy %0d", h), mh[h], dmg);
    mu = (real'(mh[0]) + real'(mh[1]) + real'(mh[2])) / 3.0;
    sd = 0.0;
    for (int h = 0; h < 3; h++) sd += (real'(mh[h]) - mu) * (real'(mh[h]) - mu);
    sd = $sqrt(sd / 3.0);
    thr = mu + sd;
    wr(A_THRESH, 32'(int'(thr)));
    $display("healthy MSE %0d %0d %0d, threshold %0d", mh[0], mh[1], mh[2], int'(thr));
    measure_and_check("healthy 4", m, dmg);
    check(dmg == (m > int'(thr)), "healthy 4 decision");
    gain = 0.35; delay = 1150;
    measure_and_check("damaged", m, dmg);
    $display("damaged MSE %0d", m);
    check(dmg == 1'b1, "damaged record not flagged");

    // 5. stored records written by the host
    for (int i = 0; i < 4096; i++) wr(A_SIG + 16'(i), 32'(base_rec[i]));
    measure_and_check("stored healthy", m, dmg, 1'b1);
    check(dmg == 1'b0, $sformatf("stored copy of the baseline flagged, mse %0d", m));
    make_burst(stored_rec, 4096, 300.0, 1100, 667, 0.0075, 6, 32'd77);
    for (int i = 0; i < 4096; i++) wr(A_SIG + 16'(i), 32'(stored_rec[i]));
    measure_and_check("stored damaged", m, dmg, 1'b1);
    check(dmg == 1'b1, $sformatf("stored damaged record not flagged, mse %0d", m));
    foreach (stored_rec[i]) if (sig_rec[i] != stored_rec[i]) begin
      check(1'b0, $sformatf("stored sample %0d read back %0d, written %0d", i, sig_rec[i], stored_rec[i]));
      break;
    end
    rd(A_COUNT, d);
    check(d == 32'd8, $sformatf("record count %0d", d));

    // mechanisms
    check(n_base > 0, "no baseline capture");
    check(n_meas > 0, "no measurement");
    check(n_readback > 0, "no record read-back");
    check(n_ignored > 0, "no start ignored while busy");
    check(n_stored > 0, "no stored-record evaluation");
    check(n_healthy > 0, "no healthy decision");
    check(n_damage > 0, "no damage decision");
    $display("mechanisms: baseline %0d measure %0d stored %0d readback %0d ignored-start %0d healthy %0d damage %0d",
             n_base, n_meas, n_stored, n_readback, n_ignored, n_healthy, n_damage);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
