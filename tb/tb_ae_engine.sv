// tb_ae_engine: the autoencoder against an integer reference model.
//
// Loads 9696 pseudo-random parameters (uniform in about +-0.5, Q16.16)
// through the parameter write port, runs three feature vectors and compares
// all 16 reconstructed values bit for bit with the reference model of
// tb_ref_pkg (same fixed-point rules). Also checks the run time: one cycle
// per parameter, 9696 + 4 cycles from the start request to done, well within the
// sub-millisecond inference time of the published system (< 100,000 cycles
// at 100 MHz), and that a second run with the same input repeats.
module tb_ae_engine;
  import shm_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic pw_en = 1'b0, start = 1'b0, busy, done;
  logic [13:0] pw_addr = '0;
  fx_t pw_data = '0;
  fx_t feat_in [N_FEAT];
  fx_t recon [N_FEAT];
  int checks = 0, failures = 0;
  int par[];

  always #5 clk = ~clk;

  ae_engine dut (.clk, .rst_n, .pw_en, .pw_addr, .pw_data, .start, .feat_in,
                 .busy, .done, .recon);

  task automatic run_vec(input fx_arr_t v, input string name);
    fx_arr_t r;
    longint cyc;
    for (int i = 0; i < N_FEAT; i++) feat_in[i] = fx_t'(v[i]);
    r = ref_ae(par, v);
    @(posedge clk); start <= 1'b1; @(posedge clk); start <= 1'b0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != N_PARAMS + 4 || cyc > 100000) begin
      failures++; $display("FAIL %s: %0d cycles", name, cyc);
    end
    for (int i = 0; i < N_FEAT; i++) begin
      checks++;
      if (int'(recon[i]) != r[i]) begin
        failures++;
        $display("FAIL %s out %0d: hw %0d ref %0d", name, i, recon[i], r[i]);
      end
    end
  endtask

  initial begin
    fx_arr_t v;
    int nz;
    par = new[NPAR];
    for (int i = 0; i < NPAR; i++) par[i] = int'($urandom % 65536) - 32768;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < NPAR; i++) begin
      @(posedge clk);
      pw_en <= 1'b1; pw_addr <= 14'(i); pw_data <= fx_t'(par[i]);
    end
    @(posedge clk); pw_en <= 1'b0;
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < N_FEAT; i++) v[i] = int'($urandom % 262144) - 131072;
      run_vec(v, $sformatf("vector %0d", t));
    end
    run_vec(v, "repeat");
    // the reference must have produced something other than all zeros
    nz = 0;
    for (int i = 0; i < N_FEAT; i++) if (recon[i] != 0) nz++;
    checks++; if (nz == 0) begin failures++; $display("FAIL: all-zero output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
