// tb_feature_extractor: the 16 features against a floating-point model.
//
// Two record memories (one-cycle read latency, like the block RAMs of the
// design) are filled with synthetic guided-wave records: Hanning-windowed
// 75 kHz bursts with different amplitude, arrival time and noise, as the
// baseline f_b and the measured f. The extractor's Q16.16 outputs are
// compared with the features computed here in floating point from their
// defining formulas (median by sorting). Tolerance: 0.2 % of the value plus
// 2e-4. Three record pairs are run, including f = f_b (RMSD, damage index
// and energy difference exactly zero). The run time is checked against
// "a few milliseconds" (here: under 300,000 cycles = 3 ms at 100 MHz).
module tb_feature_extractor;
  import shm_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [11:0] raddr;
  sample_t sig_q, base_q;
  fx_t feat [N_FEAT];
  sample_t sig_mem [4096];
  sample_t base_mem [4096];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    sig_q  <= sig_mem[raddr];
    base_q <= base_mem[raddr];
  end

  feature_extractor dut (.clk, .rst_n, .start, .busy, .done, .raddr,
                         .sig_rdata(sig_q), .base_rdata(base_q), .feat);

  task automatic run_case(const ref int s[], const ref int b[], input string name);
    feat_r_t r;
    longint cyc;
    for (int i = 0; i < 4096; i++) begin
      sig_mem[i]  = sample_t'(s[i]);
      base_mem[i] = sample_t'(b[i]);
    end
    r = ref_features(s, b, N_WIN);
    @(posedge clk); start <= 1'b1; @(posedge clk); start <= 1'b0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc > 300000) begin failures++; $display("FAIL %s: %0d cycles", name, cyc); end
    $display("%s: %0d cycles", name, cyc);
    for (int k = 0; k < N_FEAT; k++) begin
      real h, tol, d;
      h   = q16_to_real(int'(feat[k]));
      tol = 2.0e-3 * ((r[k] < 0) ? -r[k] : r[k]) + 2.0e-4;
      d   = h - r[k];
      checks++;
      if (d > tol || d < -tol) begin
        failures++;
        $display("FAIL %s feature %0d: hw %f ref %f", name, k, h, r[k]);
      end
    end
  endtask

  initial begin
    int s[], b[];
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    make_burst(b, 4096, 300.0, 200, 667, 0.0075, 25, 11);
    make_burst(s, 4096, 380.0, 230, 667, 0.0075, 25, 12);
    run_case(s, b, "damaged-like");
    run_case(b, b, "identical");
    make_burst(s, 4096, 150.0, 600, 667, 0.0075, 60, 13);
    s[1000] = 511; s[1001] = -512;
    run_case(s, b, "noisy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
