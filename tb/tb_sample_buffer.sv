// tb_sample_buffer: write/read check of the record RAM.
//
// Fills all 4096 words with pseudo-random 10-bit values, reads every word
// back through the synchronous read port (one cycle latency) and compares
// with a copy kept here; then checks read-during-write returns the old word.
module tb_sample_buffer;
  logic clk = 1'b0;
  logic we = 1'b0;
  logic [11:0] waddr = '0, raddr = '0;
  logic [9:0]  wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [9:0] model [4096];

  always #5 clk = ~clk;

  sample_buffer dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    for (int i = 0; i < 4096; i++) begin
      @(posedge clk);
      we <= 1'b1; waddr <= 12'(i); wdata <= 10'($urandom);
      #1 model[i] = wdata;
    end
    @(posedge clk); we <= 1'b0;
    for (int i = 0; i < 4096; i++) begin
      raddr <= 12'(4095 - i);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[4095 - i]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", 4095 - i, rdata, model[4095 - i]);
      end
    end
    // read during write: old data
    @(posedge clk);
    we <= 1'b1; waddr <= 12'd77; wdata <= ~model[77]; raddr <= 12'd77;
    @(posedge clk); #1;
    we <= 1'b0;
    checks++; if (rdata !== model[77]) failures++;
    @(posedge clk); #1;
    checks++; if (rdata !== ~model[77]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
