// ae_engine: the feature autoencoder, one multiply-accumulate per cycle.
//
// Evaluates the fully connected reconstruction network
//   16 -> 16 -> 32 -> 64 -> (64, no parameters) -> 64 -> 32 -> 16
// on a 16-element feature vector. Each dense layer computes
// y_j = relu(b_j + sum_i x_i * w_ij); the last layer is linear. The
// parameter-free 64-wide layer of the published model passes its input
// through unchanged, so the engine runs six layers.
//
// How it works: the 9696 parameters sit in one on-chip RAM in the order a
// Keras Dense layer stores them (per layer: kernel [in][out] row-major,
// then bias [out]; layer offsets in shm_pkg::layer_off). For each output
// neuron the issue stage reads the bias and then the in weights of that
// neuron, stepping the address by out; the execute stage, one cycle later,
// loads the bias into the accumulator or adds weight * activation. Because
// every parameter is read exactly once, a full inference takes 9696 cycles
// plus 3 (about 97 us at 100 MHz). Activations ping-pong between two
// 64-entry register arrays: layer l reads buffer l%2 and writes the other.
//
// Arithmetic: inputs, weights, biases and outputs are signed Q16.16;
// products are Q32.32, accumulated in 72 bits, then shifted back to Q16.16
// with truncation and saturated.
//
// Interface: `pw_en/pw_addr/pw_data` write one parameter (only while not
// busy). `start` latches `feat_in` and runs; `recon` is valid from the
// `done` pulse until the next start. The layer widths, the ReLU hidden
// activations and the 9696 parameters follow the published model; the
// linear output layer, the fixed-point format, the memory layout and the
// sequential schedule are this design's choices.
module ae_engine #(
  parameter int unsigned NP = shm_pkg::N_PARAMS,
  localparam int unsigned PAW = $clog2(NP)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pw_en,
  input  logic [PAW-1:0]     pw_addr,
  input  shm_pkg::fx_t       pw_data,
  input  logic               start,
  input  shm_pkg::fx_t       feat_in [shm_pkg::N_FEAT],
  output logic               busy,
  output logic               done,
  output shm_pkg::fx_t       recon [shm_pkg::N_FEAT]
);
  import shm_pkg::*;

  localparam int unsigned LW = $clog2(N_LAYERS);
  localparam int unsigned IW = $clog2(MAX_WIDTH + 1);

  // ---------------- parameter memory ----------------
  fx_t            pmem [NP];
  logic [PAW-1:0] raddr;
  fx_t            rdata;

  always_ff @(posedge clk) begin
    if (pw_en) pmem[pw_addr] <= pw_data;
    rdata <= pmem[raddr];
  end

  // ---------------- activations ----------------
  fx_t act0 [MAX_WIDTH];
  fx_t act1 [MAX_WIDTH];

  // ---------------- issue stage ----------------
  logic            issuing;
  logic [LW-1:0]   l;
  logic [IW-1:0]   j, k;
  logic [PAW-1:0]  wa;
  logic [IW-1:0]   l_in, l_out;
  logic [PAW-1:0]  l_off, l_boff;

  always_comb begin
    l_in   = IW'(layer_in(32'(l)));
    l_out  = IW'(layer_out(32'(l)));
    l_off  = PAW'(layer_off(32'(l)));
    l_boff = PAW'(layer_off(32'(l)) + layer_in(32'(l)) * layer_out(32'(l)));
    raddr  = (k == '0) ? l_boff + PAW'(j) : wa;
  end

  // ---------------- execute stage ----------------
  logic            e_valid, e_bias, e_last;
  logic [LW-1:0]   e_l;
  logic [IW-1:0]   e_i, e_j;
  logic            fin;
  logic signed [71:0] acc, acc_n;
  fx_t             x;
  logic signed [63:0] prod;
  fx_t             y;

  function automatic fx_t sat_q16(input logic signed [71:0] a);
    logic signed [71:0] s;
    s = a >>> FX_FRAC;
    if (s > 72'(FX_MAX))      return FX_MAX;
    else if (s < 72'(FX_MIN)) return FX_MIN;
    else                      return fx_t'(s);
  endfunction

  always_comb begin
    x     = e_l[0] ? act1[e_i[5:0]] : act0[e_i[5:0]];
    prod  = 64'(rdata) * 64'(x);
    acc_n = acc + 72'(prod);
    y     = sat_q16(acc_n);
    if (e_l != LW'(N_LAYERS - 1) && y[FX_W-1]) y = '0;   // ReLU on hidden layers
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; issuing <= 1'b0; fin <= 1'b0;
      l <= '0; j <= '0; k <= '0; wa <= '0;
      e_valid <= 1'b0; e_bias <= 1'b0; e_last <= 1'b0;
      e_l <= '0; e_i <= '0; e_j <= '0; acc <= '0;
      for (int n = 0; n < MAX_WIDTH; n++) begin
        act0[n] <= '0;
        act1[n] <= '0;
      end
      for (int n = 0; n < N_FEAT; n++) recon[n] <= '0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      // start: load the features into buffer 0
      if (start && !busy) begin
        busy <= 1'b1; issuing <= 1'b1;
        l <= '0; j <= '0; k <= '0;
        for (int n = 0; n < N_FEAT; n++) act0[n] <= feat_in[n];
      end
      // issue one parameter read per cycle
      e_valid <= issuing;
      e_bias  <= (k == '0);
      e_last  <= (k == l_in);
      e_i     <= k - 1'b1;
      e_j     <= j;
      e_l     <= l;
      if (issuing) begin
        // k = 0 reads the bias; the weights of neuron j follow at
        // l_off + i*out + j, i = 0 .. in-1
        if (k == '0) wa <= l_off + PAW'(j);
        else         wa <= wa + PAW'(l_out);
        if (k == l_in) begin
          k <= '0;
          if (j == l_out - 1'b1) begin
            j <= '0;
            if (l == LW'(N_LAYERS - 1)) issuing <= 1'b0;
            else                        l <= l + 1'b1;
          end else begin
            j <= j + 1'b1;
          end
        end else begin
          k <= k + 1'b1;
        end
      end
      // execute
      if (e_valid) begin
        if (e_bias) acc <= 72'(rdata) <<< FX_FRAC;
        else        acc <= acc_n;
        if (e_last) begin
          if (e_l[0]) act0[e_j[5:0]] <= y;
          else        act1[e_j[5:0]] <= y;
          if (e_l == LW'(N_LAYERS - 1) && e_j == IW'(layer_out(N_LAYERS - 1) - 1)) fin <= 1'b1;
        end
      end
      if (fin) begin
        busy <= 1'b0; done <= 1'b1;
        for (int n = 0; n < N_FEAT; n++) recon[n] <= act0[n];
      end
    end
  end
endmodule
