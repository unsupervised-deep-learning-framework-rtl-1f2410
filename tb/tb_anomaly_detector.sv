// tb_anomaly_detector: reconstruction MSE and threshold decision.
//
// Drives random Q16.16 feature and reconstruction vectors, compares the
// MSE with a floating-point evaluation of (1/16) * sum (a - a_hat)^2
// (within 1 LSB), checks the damage flag with the threshold just below
// and just above the MSE, the saturation of a huge error, and the latency
// of N_FEAT + 2 cycles from the start request to done.
module tb_anomaly_detector;
  import shm_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, damage;
  fx_t feat [N_FEAT];
  fx_t recon [N_FEAT];
  fx_t threshold = '0, mse;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  anomaly_detector dut (.clk, .rst_n, .start, .feat, .recon, .threshold,
                        .busy, .done, .mse, .damage);

  task automatic run(input fx_arr_t a, input fx_arr_t b, input int thr,
                     input bit exp_dmg, input int exp_mse, input string name);
    longint cyc;
    for (int i = 0; i < N_FEAT; i++) begin feat[i] = fx_t'(a[i]); recon[i] = fx_t'(b[i]); end
    threshold = fx_t'(thr);
    @(posedge clk); start <= 1'b1; @(posedge clk); start <= 1'b0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks += 3;
    if (cyc != N_FEAT + 2) begin failures++; $display("FAIL %s: %0d cycles", name, cyc); end
    if (int'(mse) - exp_mse > 1 || exp_mse - int'(mse) > 1) begin
      failures++; $display("FAIL %s: mse %0d ref %0d", name, mse, exp_mse);
    end
    if (damage != exp_dmg) begin failures++; $display("FAIL %s: damage %0d", name, damage); end
  endtask

  initial begin
    fx_arr_t a, b;
    int m;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < N_FEAT; i++) begin
        a[i] = int'($urandom % 400000) - 200000;
        b[i] = a[i] + int'($urandom % (2000 * (t + 1))) - 1000 * (t + 1);
      end
      m = ref_mse(a, b);
      run(a, b, m - 2, 1'b1, m, $sformatf("case %0d below", t));
      run(a, b, m + 2, 1'b0, m, $sformatf("case %0d above", t));
    end
    for (int i = 0; i < N_FEAT; i++) begin a[i] = 2147483647; b[i] = -2147483647; end
    run(a, b, 2147483646, 1'b1, 2147483647, "saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
