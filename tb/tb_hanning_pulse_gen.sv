// tb_hanning_pulse_gen: checks the actuation burst sample by sample.
//
// Runs the generator at its defaults (75 kHz, 5 cycles, 10 Msps from a
// 100 MHz clock), records every DAC write and compares each code with
// 2048 + 2047 * 0.5*(1 - cos(2*pi*f_w*t)) * sin(2*pi*f*t), f_w = f/5,
// computed here in floating point (tolerance 4 LSB for the 1024-entry
// table). Also checks the burst length (5 cycles at 75 kHz = 66.7 us, 667
// samples), midscale before and after, that writes only happen on sample
// ticks, and a second burst identical to the first.
module tb_hanning_pulse_gen;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tick, conv_clk, start = 1'b0, busy, done, dac_wr;
  logic [11:0] dac_code;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tick_gen u_tick (.clk, .rst_n, .tick, .conv_clk);
  hanning_pulse_gen dut (.clk, .rst_n, .tick, .start, .busy, .done, .dac_code, .dac_wr);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  int codes[$];
  logic tick_d;
  always_ff @(posedge clk) tick_d <= tick;
  always @(posedge clk) if (dac_wr) begin
    codes.push_back(int'(dac_code));
    check(tick_d, "DAC write not on a sample tick");
  end

  task automatic run_burst(output int got[$], output longint cyc);
    longint t0;
    codes.delete();
    @(posedge clk); start <= 1'b1; @(posedge clk); start <= 1'b0;
    t0 = 0;
    while (!busy) begin @(posedge clk); t0++; end
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    repeat (3) @(posedge clk);
    got = codes;
  endtask

  initial begin
    real pi = 3.14159265358979;
    int g1[$], g2[$];
    longint c1, c2;
    int nburst;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);
    check(dac_code == 12'd2048, "idle code is not midscale");
    run_burst(g1, c1);
    nburst = int'($ceil(10.0e6 / 15.0e3));   // samples in one window period
    // writes: nburst burst samples + one return to midscale
    check(g1.size() == nburst + 1, $sformatf("burst has %0d writes, expected %0d", g1.size(), nburst + 1));
    check(c1 >= longint'(nburst - 1) * 10 && c1 <= longint'(nburst) * 10 + 10,
          $sformatf("burst lasted %0d cycles", c1));
    for (int k = 0; k < g1.size() - 1 && k < nburst; k++) begin
      real t, e, d;
      t = k / 10.0e6;
      e = 2048.0 + 2047.0 * 0.5 * (1.0 - $cos(2.0 * pi * 15.0e3 * t)) * $sin(2.0 * pi * 75.0e3 * t);
      d = real'(g1[k]) - e;
      check(d < 4.0 && d > -4.0, $sformatf("sample %0d code %0d expected %f", k, g1[k], e));
    end
    if (g1.size() > 0) check(g1[g1.size() - 1] == 2048, "burst does not end at midscale");
    check(dac_code == 12'd2048, "code after burst is not midscale");
    // peak near the middle of the burst
    begin
      int mx, mn;
      mx = 0; mn = 4095;
      foreach (g1[i]) begin
        if (g1[i] > mx) mx = g1[i];
        if (g1[i] < mn) mn = g1[i];
      end
      check(mx > 3900 && mn < 200, $sformatf("peak codes %0d..%0d", mn, mx));
    end
    run_burst(g2, c2);
    check(g1.size() == g2.size(), "second burst differs in length");
    if (g1.size() == g2.size()) foreach (g1[i]) check(g1[i] == g2[i], "second burst differs");
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
