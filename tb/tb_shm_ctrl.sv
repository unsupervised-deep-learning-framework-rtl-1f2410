// tb_shm_ctrl: register interface and measurement sequence.
//
// The acquisition and processing stages are replaced by simple responders
// that answer each start pulse with a done pulse after a fixed delay. The
// testbench checks register writes and read-back (channel selects,
// threshold, features, reconstructions, status, record counter), model
// parameter writes, record-buffer reads and the hand-over of the buffer
// address to the feature extractor, the settle time, the order of the
// stages in baseline, measurement and process-only mode, host writes into
// the record buffers, the interrupt, and that starts, channel changes,
// buffer writes and parameter writes are ignored while busy.
module tb_shm_ctrl;
  import shm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic h_req = 1'b0, h_we = 1'b0, h_rvalid, irq;
  logic [15:0] h_addr = '0;
  logic [31:0] h_wdata = '0, h_rdata;
  logic [2:0] tx_sel, rx_sel;
  logic acq_start, acq_done = 1'b0, cap_to_base;
  logic [11:0] buf_raddr, fx_raddr = 12'd3000;
  sample_t sig_rdata, base_rdata;
  logic feat_start, feat_done = 1'b0, ae_start, ae_done = 1'b0, det_start, det_done = 1'b0;
  fx_t feat [N_FEAT];
  fx_t recon [N_FEAT];
  fx_t mse = 32'sd12345, threshold;
  logic damage = 1'b0;
  logic pw_en;
  logic [13:0] pw_addr;
  fx_t pw_data;
  logic hb_we_sig, hb_we_base;
  logic [11:0] hb_waddr;
  logic [9:0] hb_wdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  shm_ctrl dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // record buffers: value = address pattern, one cycle latency
  always_ff @(posedge clk) begin
    sig_rdata  <= sample_t'(buf_raddr[9:0] ^ 10'h155);
    base_rdata <= sample_t'(buf_raddr[9:0] ^ 10'h0AA);
  end

  // stage responders and an event log
  string log_q[$];
  always @(posedge clk) begin
    if (acq_start)  begin log_q.push_back(cap_to_base ? "acqB" : "acq"); fork begin repeat (50) @(posedge clk); acq_done <= 1'b1; @(posedge clk); acq_done <= 1'b0; end join_none end
    if (feat_start) begin log_q.push_back("feat"); fork begin repeat (30) @(posedge clk); feat_done <= 1'b1; @(posedge clk); feat_done <= 1'b0; end join_none end
    if (ae_start)   begin log_q.push_back("ae");   fork begin repeat (20) @(posedge clk); ae_done <= 1'b1; @(posedge clk); ae_done <= 1'b0; end join_none end
    if (det_start)  begin log_q.push_back("det");  fork begin repeat (5)  @(posedge clk); det_done <= 1'b1; @(posedge clk); det_done <= 1'b0; end join_none end
    if (irq)        log_q.push_back("irq");
  end
  // the extractor owns the buffer address during FEAT
  int fx_own = 0;
  always @(posedge clk) if (dut.st == S_FEAT) begin
    if (buf_raddr == fx_raddr) fx_own++;
  end

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(posedge clk); h_req <= 1'b1; h_we <= 1'b1; h_addr <= a; h_wdata <= d;
    @(posedge clk); h_req <= 1'b0; h_we <= 1'b0;
    #1;
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(posedge clk); h_req <= 1'b1; h_we <= 1'b0; h_addr <= a;
    @(posedge clk); h_req <= 1'b0;
    #1; check(h_rvalid, "read without rvalid");
    d = h_rdata;
  endtask

  int npw, nhb;
  always @(posedge clk) if (pw_en) npw++;
  always @(posedge clk) if (hb_we_sig || hb_we_base) nhb++;

  initial begin
    logic [31:0] d;
    longint t_start, t_acq;
    for (int i = 0; i < N_FEAT; i++) begin feat[i] = fx_t'(1000 * i + 1); recon[i] = fx_t'(-7 * i); end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // channel selects
    wr(A_MUX, {26'd0, 3'd5, 3'd2});
    check(tx_sel == 3'd2 && rx_sel == 3'd5, "mux selects");
    rd(A_MUX, d); check(d == 32'h2A, $sformatf("mux readback %h", d));
    wr(A_THRESH, 32'h0001_8000);
    check(threshold == 32'sh0001_8000, "threshold");
    rd(A_THRESH, d); check(d == 32'h0001_8000, "threshold readback");
    // parameter writes
    npw = 0;
    @(posedge clk); h_req <= 1'b1; h_we <= 1'b1; h_addr <= A_PARAM + 16'd100; h_wdata <= 32'hDEAD_BEEF;
    #1 check(pw_en && pw_addr == 14'd100 && pw_data == 32'hDEAD_BEEF, "parameter write");
    @(posedge clk); h_req <= 1'b0; h_we <= 1'b0;
    wr(A_PARAM + 16'(N_PARAMS), 32'h1);   // outside the model: ignored
    check(npw == 1, $sformatf("%0d parameter writes", npw));
    // buffer reads
    rd(A_SIG + 16'd5, d);   check(d == 32'(sample_t'(10'd5 ^ 10'h155)), $sformatf("record read %h", d));
    rd(A_BASE + 16'd700, d); check(d == 32'(sample_t'(10'd700 ^ 10'h0AA)), $sformatf("baseline read %h", d));
    rd(A_FEAT + 16'd9, d);  check(d == 32'd9001, "feature read");
    rd(A_RECON + 16'd3, d); check(d == 32'(-21), "recon read");
    rd(A_MSE, d);           check(d == 32'd12345, "mse read");
    // host writes into the record buffers
    nhb = 0;
    @(posedge clk); h_req <= 1'b1; h_we <= 1'b1; h_addr <= A_SIG + 16'd7; h_wdata <= 32'h2A5;
    #1 check(hb_we_sig && !hb_we_base && hb_waddr == 12'd7 && hb_wdata == 10'h2A5, "record write");
    @(posedge clk); h_req <= 1'b1; h_we <= 1'b1; h_addr <= A_BASE + 16'd4000; h_wdata <= 32'h11F;
    #1 check(hb_we_base && !hb_we_sig && hb_waddr == 12'd4000 && hb_wdata == 10'h11F, "baseline write");
    @(posedge clk); h_req <= 1'b0; h_we <= 1'b0;
    #1 check(nhb == 2, $sformatf("%0d buffer writes", nhb));
    rd(A_STATUS, d); check(d[3] == 1'b1, "baseline valid after host write");
    // baseline capture
    log_q.delete();
    wr(A_CTRL, 32'h3);
    t_start = 0;
    while (!acq_start) begin @(posedge clk); t_start++; end
    check(t_start >= 1000 && t_start <= 1003, $sformatf("settle %0d cycles", t_start));
    rd(A_STATUS, d); check(d[0] == 1'b1, "busy during acquisition");
    wr(A_CTRL, 32'h1);        // ignored: busy
    wr(A_MUX, 32'h3F);        // ignored: busy
    npw = 0; wr(A_PARAM, 32'h5); check(npw == 0, "parameter write while busy");
    nhb = 0; wr(A_SIG, 32'h5); wr(A_BASE, 32'h5); check(nhb == 0, "buffer write while busy");
    check(tx_sel == 3'd2, "mux changed while busy");
    while (!irq) @(posedge clk);
    repeat (2) @(posedge clk);
    rd(A_STATUS, d); check(d[3:0] == 4'b1010, $sformatf("status after baseline %h", d));
    check(log_q.size() == 2 && log_q[0] == "acqB" && log_q[1] == "irq", "baseline sequence");
    // measurement, damage
    log_q.delete(); damage = 1'b1;
    wr(A_CTRL, 32'h1);
    while (!irq) @(posedge clk);
    repeat (2) @(posedge clk);
    check(log_q.size() == 5 && log_q[0] == "acq" && log_q[1] == "feat" && log_q[2] == "ae"
          && log_q[3] == "det" && log_q[4] == "irq", "measurement sequence");
    check(fx_own >= 25, $sformatf("extractor owned the address %0d cycles", fx_own));
    rd(A_STATUS, d); check(d[3:0] == 4'b1110, $sformatf("status after damage %h", d));
    rd(A_COUNT, d); check(d == 32'd1, "count 1");
    // measurement, healthy
    damage = 1'b0;
    wr(A_CTRL, 32'h1);
    while (!irq) @(posedge clk);
    repeat (2) @(posedge clk);
    rd(A_STATUS, d); check(d[3:0] == 4'b1010, $sformatf("status after healthy %h", d));
    rd(A_COUNT, d); check(d == 32'd2, "count 2");
    // process only: no settle, no acquisition
    log_q.delete(); damage = 1'b1;
    wr(A_CTRL, 32'h5);
    t_acq = 0;
    while (!irq) begin @(posedge clk); t_acq++; end
    repeat (2) @(posedge clk);
    check(log_q.size() == 4 && log_q[0] == "feat" && log_q[1] == "ae" && log_q[2] == "det"
          && log_q[3] == "irq", "process-only sequence");
    check(t_acq < 200, $sformatf("process-only run took %0d cycles", t_acq));
    rd(A_STATUS, d); check(d[3:0] == 4'b1110, $sformatf("status after process-only %h", d));
    rd(A_COUNT, d); check(d == 32'd3, "count 3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
