// tb_adc_capture: one record of 4096 samples at 10 Msps.
//
// An ADC model changes its 10-bit output once per sample period, after the
// sample tick, to a pseudo-random code it remembers. The testbench checks
// that exactly 4096 writes reach addresses 0..4095 in order, that each
// stored word is the code converted to two's complement (code - 512), that
// the record takes 4096 sample periods (409.6 us = 40960 clocks) and that a
// second start records again.
module tb_adc_capture;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tick, conv_clk, start = 1'b0, busy, done, we;
  logic [11:0] waddr;
  logic [9:0]  wdata, adc_data = '0;
  int checks = 0, failures = 0;
  int codes[$];
  int nwr;

  always #5 clk = ~clk;

  tick_gen u_tick (.clk, .rst_n, .tick, .conv_clk);
  adc_capture dut (.clk, .rst_n, .tick, .start, .adc_data, .busy, .done, .we, .waddr, .wdata);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ADC model: a new code after every tick; remember the code valid at each tick
  int tick_codes[$];
  always @(posedge clk) if (tick) begin
    tick_codes.push_back(int'(adc_data));
    adc_data <= 10'($urandom);
  end

  int base_idx;
  always @(posedge clk) if (we) begin
    int exp_code, qi;
    qi = base_idx;
    qi += int'(waddr);
    exp_code = tick_codes[qi];
    check(int'(waddr) == nwr, $sformatf("write %0d to address %0d", nwr, waddr));
    check(wdata == 10'(exp_code - 512), $sformatf("addr %0d data %h code %h", waddr, wdata, exp_code));
    nwr++;
  end

  task automatic record_once();
    longint cyc = 0;
    nwr = 0;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    // index into tick_codes of the first recorded tick
    while (!we) @(posedge clk);
    while (!done) begin @(posedge clk); cyc++; end
    @(posedge clk);
    check(nwr == 4096, $sformatf("%0d writes", nwr));
    check(cyc >= 4095 * 10 - 1 && cyc <= 4095 * 10 + 1, $sformatf("record took %0d cycles after first write", cyc));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // the first write belongs to the tick after start; its code index is
    // the queue size at that tick
    fork
      begin
        @(posedge clk iff start);
        @(posedge clk iff tick);
        base_idx = tick_codes.size();
      end
      record_once();
    join
    repeat (50) @(posedge clk);
    fork
      begin
        @(posedge clk iff start);
        @(posedge clk iff tick);
        base_idx = tick_codes.size();
      end
      record_once();
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
