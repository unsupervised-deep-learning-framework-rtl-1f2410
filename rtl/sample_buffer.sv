// sample_buffer: one guided-wave record in block RAM.
//
// A simple dual-port memory of DEPTH words of W bits (4096 x 10 bits by
// default, the record length and ADC resolution of the published system):
// one synchronous write port and one synchronous read port whose data
// appears on the cycle after the address. Reading and writing the same
// address in one cycle returns the old word. No reset: contents are
// whatever was last written.
module sample_buffer #(
  parameter int unsigned DEPTH = shm_pkg::N_SAMPLES,
  parameter int unsigned W     = shm_pkg::ADC_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
