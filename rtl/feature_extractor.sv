// feature_extractor: the 16 time-domain guided-wave features.
//
// Reduces the first N samples of a record f and of the stored baseline
// record f_b (both normalised, sample s = value * 512) to the feature vector
// used by the autoencoder, in the order mean, median, mean absolute
// deviation, variance, standard deviation, RMS, RMSD, kurtosis, skew, crest
// factor, impulse factor, shape factor, peak-to-peak difference A - A_b,
// ratio of signal energy, damage index and normalised difference of signal
// energy. The formulas are the published ones; skew is Pearson's
// 3*(mean - median)/sigma, RMSD is sqrt(sum (f-f_b)^2 / sum f_b^2), the
// damage index is the same ratio without the root.
//
// How it works (all in exact integer arithmetic, then one rounding to
// Q16.16 per feature):
//   clear   - zero a 1024-bin histogram of sample values (1024 cycles)
//   pass A  - stream both records once: sum s, sum s^2, sum |s|, max |s|,
//             max/min of f and f_b, sum f_b^2, sum (f-f_b)^2, histogram
//   mean    - mu8 = sum s * 256 / N (mean with 8 fraction bits, truncated)
//   pass B  - stream f again: sum |d|, sum d^2, sum d^4 with d = 256 s - mu8
//   median  - walk the histogram in value order to the samples of rank
//             (N+1)/2 and N/2+1 (the same rank when N is odd)
//   finish  - 17 steps on one shared 128-bit sequential divider and one
//             64-bit sequential square root produce the ratios and roots
// At N = 2000 a run takes about 1024 + 2001 + 129 + 2001 + 1024 + 17*~160
// cycles, roughly 9 k cycles or 90 us at 100 MHz.
//
// Interface: pulse `start`; the block drives `raddr` to both record buffers
// and expects `sig_rdata`/`base_rdata` one cycle later (synchronous block
// RAM). `feat` is valid, and holds, from the `done` pulse to the next start.
// Division by zero (e.g. an all-zero baseline) saturates the feature to the
// largest Q16.16 value. The window of N = 2000 samples (200 us at 10 Msps)
// follows the published method; the histogram median, the integer moments,
// the truncations and the Q16.16 output format are this design's choices.
module feature_extractor #(
  parameter int unsigned N  = shm_pkg::N_WIN,
  parameter int unsigned AW = shm_pkg::SADDR_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  output logic                            busy,
  output logic                            done,
  output logic [AW-1:0]                   raddr,
  input  shm_pkg::sample_t                sig_rdata,
  input  shm_pkg::sample_t                base_rdata,
  output shm_pkg::fx_t                    feat [shm_pkg::N_FEAT]
);
  import shm_pkg::*;

  localparam int unsigned LO_RANK = (N + 1) / 2;
  localparam int unsigned HI_RANK = (N % 2 == 0) ? N / 2 + 1 : (N + 1) / 2;
  localparam logic [127:0] NN = 128'(N);

  typedef enum logic [3:0] {
    X_IDLE, X_CLR, X_PASSA, X_MU, X_PASSB, X_MED, X_FIN, X_DONE
  } xst_e;
  typedef enum logic [1:0] { M_ISSUE, M_DIV, M_SQRT } mst_e;

  xst_e st;
  mst_e mst;

  // ---------------- streaming ----------------
  logic [AW:0]  rcnt;         // next address to issue
  logic         rvalid;       // data of the previous address is on the bus
  logic         rlast;        // ... and it is the last one
  logic [9:0]   hcnt;         // histogram clear / scan index

  // pass A
  logic signed [31:0] s1;
  logic        [47:0] s2, sb2, sd2;
  logic        [31:0] sabs;
  logic        [9:0]  maxabs;
  logic signed [9:0]  smax, smin, bmax, bmin;
  // pass B
  logic signed [18:0] mu8;
  logic        [39:0] sad;
  logic        [63:0] sq2;
  logic        [95:0] sq4;
  // median
  logic        [11:0] hist [1024];
  logic        [12:0] cum;
  logic               found_lo, found_hi;
  logic signed [9:0]  med_lo, med_hi;
  // finishing temporaries
  logic        [31:0] sig8, r8, shq;
  logic        [31:0] var_q;

  // ---------------- per-sample arithmetic ----------------
  logic signed [10:0] dfb;
  logic        [9:0]  sabs_i;
  logic signed [18:0] d8;
  logic        [18:0] d8abs;
  logic        [37:0] d8sq;
  logic        [75:0] d8q;
  logic        [9:0]  hidx;

  always_comb begin
    dfb    = 11'(sig_rdata) - 11'(base_rdata);
    sabs_i = sig_rdata[9] ? 10'(-11'(sig_rdata)) : 10'(sig_rdata);
    d8     = (19'(sig_rdata) <<< 8) - mu8;
    d8abs  = d8[18] ? 19'(-d8) : 19'(d8);
    d8sq   = 38'(d8abs) * 38'(d8abs);
    d8q    = 76'(d8sq) * 76'(d8sq);
    hidx   = {~sig_rdata[9], sig_rdata[8:0]};
  end

  // ---------------- shared divider and square root ----------------
  logic [4:0]   step;
  logic         div_start, div_busy, div_done;
  logic [127:0] div_num, div_den, div_quo, div_rem;
  logic         sq_start, sq_busy, sq_done;
  logic [63:0]  sq_rad;
  logic [31:0]  sq_root;
  logic         op_sqrt;      // this step takes the root of the quotient

  udiv_seq #(.W(128)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo), .rem(div_rem)
  );
  usqrt_seq #(.W(64)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .rad(sq_rad),
    .busy(sq_busy), .done(sq_done), .root(sq_root)
  );

  logic [31:0]        abs_s1;
  logic signed [17:0] med8;
  logic signed [19:0] skew_d;
  logic        [19:0] skew_abs;
  logic        [47:0] ediff;

  always_comb begin
    abs_s1   = s1[31] ? 32'(-s1) : 32'(s1);
    med8     = 18'(11'(med_lo) + 11'(med_hi)) <<< 7;
    skew_d   = 20'(mu8) - 20'(med8);
    skew_abs = skew_d[19] ? 20'(-skew_d) : 20'(skew_d);
    ediff    = (s2 >= sb2) ? s2 - sb2 : sb2 - s2;
  end

  // operands of each finishing step (step 0 is the mean before pass B)
  always_comb begin
    div_num = '0;
    div_den = 128'd1;
    op_sqrt = 1'b0;
    case (step)
      5'd0:  begin div_num = 128'(abs_s1) << 8;  div_den = NN; end
      5'd1:  begin div_num = 128'(abs_s1) << 7;  div_den = NN; end
      5'd2:  begin div_num = 128'(sad);          div_den = NN << 1; end
      5'd3:  begin div_num = 128'(sq2);          div_den = NN << 18; end
      5'd4:  begin div_num = 128'(var_q) << 16;  op_sqrt = 1'b1; end
      5'd5:  begin div_num = 128'(s2) << 14;     div_den = NN; op_sqrt = 1'b1; end
      5'd6:  begin div_num = 128'(sd2) << 32;    div_den = 128'(sb2); op_sqrt = 1'b1; end
      5'd7:  begin div_num = (NN * 128'(sq4)) << 16;
                   div_den = 128'(sq2) * 128'(sq2); end
      5'd8:  begin div_num = 128'(sq2);          div_den = NN; op_sqrt = 1'b1; end
      5'd9:  begin div_num = (128'(skew_abs) * 128'd3) << 16; div_den = 128'(sig8); end
      5'd10: begin div_num = 128'(s2) << 16;     div_den = NN; op_sqrt = 1'b1; end
      5'd11: begin div_num = 128'(maxabs) << 24; div_den = 128'(r8); end
      5'd12: begin div_num = (NN * 128'(maxabs)) << 16; div_den = 128'(sabs); end
      5'd13: begin div_num = (NN * 128'(s2)) << 16; op_sqrt = 1'b1; end
      5'd14: begin div_num = 128'(shq) << 8;     div_den = 128'(sabs); end
      5'd15: begin div_num = 128'(s2) << 16;     div_den = 128'(sb2); end
      5'd16: begin div_num = 128'(sd2) << 16;    div_den = 128'(sb2); end
      5'd17: begin div_num = 128'(ediff) << 16;  div_den = 128'(sb2); end
      default: ;
    endcase
  end

  always_comb sq_rad = (div_quo[127:64] != '0) ? '1 : div_quo[63:0];

  function automatic fx_t sat_fx(input logic [127:0] mag, input logic neg);
    logic [30:0] m;
    m = (mag > 128'(FX_MAX)) ? 31'(FX_MAX) : mag[30:0];
    return neg ? -fx_t'({1'b0, m}) : fx_t'({1'b0, m});
  endfunction

  // histogram: cleared in X_CLR, one increment per sample in pass A
  always_ff @(posedge clk) begin
    if (st == X_CLR)                  hist[hcnt] <= '0;
    else if (st == X_PASSA && rvalid) hist[hidx] <= hist[hidx] + 1'b1;
  end

  // ---------------- sequencer ----------------
  logic [127:0] res;          // quotient or root of the step just finished
  logic         res_valid;

  always_comb begin
    res       = op_sqrt ? 128'(sq_root) : div_quo;
    res_valid = (mst == M_DIV && div_done && !op_sqrt) || (mst == M_SQRT && sq_done);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; mst <= M_ISSUE; step <= '0;
      busy <= 1'b0; done <= 1'b0;
      rcnt <= '0; rvalid <= 1'b0; rlast <= 1'b0; raddr <= '0; hcnt <= '0;
      s1 <= '0; s2 <= '0; sb2 <= '0; sd2 <= '0; sabs <= '0; maxabs <= '0;
      smax <= '0; smin <= '0; bmax <= '0; bmin <= '0;
      mu8 <= '0; sad <= '0; sq2 <= '0; sq4 <= '0;
      cum <= '0; found_lo <= 1'b0; found_hi <= 1'b0; med_lo <= '0; med_hi <= '0;
      sig8 <= '0; r8 <= '0; shq <= '0; var_q <= '0;
      div_start <= 1'b0; sq_start <= 1'b0;
      for (int i = 0; i < N_FEAT; i++) feat[i] <= '0;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      sq_start  <= 1'b0;
      // address stream used by both passes
      rvalid <= 1'b0;
      rlast  <= 1'b0;
      if ((st == X_PASSA || st == X_PASSB) && rcnt < (AW+1)'(N)) begin
        raddr  <= rcnt[AW-1:0];
        rcnt   <= rcnt + 1'b1;
        rvalid <= 1'b1;
        rlast  <= (rcnt == (AW+1)'(N - 1));
      end

      case (st)
        X_IDLE: if (start) begin
          st <= X_CLR; busy <= 1'b1; hcnt <= '0;
        end
        X_CLR: begin
          hcnt <= hcnt + 1'b1;
          if (hcnt == 10'd1023) begin
            st <= X_PASSA; rcnt <= '0;
            s1 <= '0; s2 <= '0; sb2 <= '0; sd2 <= '0; sabs <= '0; maxabs <= '0;
            smax <= -10'sd512; smin <= 10'sd511; bmax <= -10'sd512; bmin <= 10'sd511;
          end
        end
        X_PASSA: if (rvalid) begin
          s1   <= s1 + 32'(sig_rdata);
          s2   <= s2 + 48'(20'(sabs_i) * 20'(sabs_i));
          sb2  <= sb2 + 48'(20'(base_rdata) * 20'(base_rdata));
          sd2  <= sd2 + 48'(22'(dfb) * 22'(dfb));
          sabs <= sabs + 32'(sabs_i);
          if (sabs_i > maxabs)   maxabs <= sabs_i;
          if (sig_rdata > smax)  smax <= sig_rdata;
          if (sig_rdata < smin)  smin <= sig_rdata;
          if (base_rdata > bmax) bmax <= base_rdata;
          if (base_rdata < bmin) bmin <= base_rdata;
          if (rlast) begin
            st <= X_MU; step <= 5'd0; mst <= M_ISSUE;
          end
        end
        X_PASSB: if (rvalid) begin
          sad <= sad + 40'(d8abs);
          sq2 <= sq2 + 64'(d8sq);
          sq4 <= sq4 + 96'(d8q);
          if (rlast) begin
            st <= X_MED; hcnt <= '0; cum <= '0; found_lo <= 1'b0; found_hi <= 1'b0;
          end
        end
        X_MED: begin
          cum <= cum + 13'(hist[hcnt]);
          if (!found_lo && (cum + 13'(hist[hcnt])) >= 13'(LO_RANK)) begin
            found_lo <= 1'b1; med_lo <= {~hcnt[9], hcnt[8:0]};
          end
          if (!found_hi && (cum + 13'(hist[hcnt])) >= 13'(HI_RANK)) begin
            found_hi <= 1'b1; med_hi <= {~hcnt[9], hcnt[8:0]};
          end
          hcnt <= hcnt + 1'b1;
          if (hcnt == 10'd1023) begin
            st <= X_FIN; step <= 5'd1; mst <= M_ISSUE;
            feat[F_MEDIAN] <= fx_t'(32'(11'(med_lo) + 11'(med_hi)) <<< 6);
            feat[F_P2P]    <= fx_t'((32'(smax) - 32'(smin) - (32'(bmax) - 32'(bmin))) <<< 7);
          end
        end
        X_MU, X_FIN: begin
          case (mst)
            M_ISSUE: begin div_start <= 1'b1; mst <= M_DIV; end
            M_DIV: if (div_done) begin
              if (op_sqrt) begin sq_start <= 1'b1; mst <= M_SQRT; end
            end
            default: ;
          endcase
          if (res_valid) begin
            mst <= M_ISSUE;
            case (step)
              5'd0:  mu8 <= s1[31] ? -19'(res) : 19'(res);
              5'd1:  feat[F_MEAN]    <= sat_fx(res, s1[31]);
              5'd2:  feat[F_MAD]     <= sat_fx(res, 1'b0);
              5'd3:  begin feat[F_VAR] <= sat_fx(res, 1'b0); var_q <= 32'(sat_fx(res, 1'b0)); end
              5'd4:  feat[F_STD]     <= sat_fx(res, 1'b0);
              5'd5:  feat[F_RMS]     <= sat_fx(res, 1'b0);
              5'd6:  feat[F_RMSD]    <= sat_fx(res, 1'b0);
              5'd7:  feat[F_KURT]    <= sat_fx(res, 1'b0);
              5'd8:  sig8 <= res[31:0];
              5'd9:  feat[F_SKEW]    <= sat_fx(res, skew_d[19]);
              5'd10: r8 <= res[31:0];
              5'd11: feat[F_CREST]   <= sat_fx(res, 1'b0);
              5'd12: feat[F_IMPULSE] <= sat_fx(res, 1'b0);
              5'd13: shq <= res[31:0];
              5'd14: feat[F_SHAPE]   <= sat_fx(res, 1'b0);
              5'd15: feat[F_ERATIO]  <= sat_fx(res, 1'b0);
              5'd16: feat[F_DI]      <= sat_fx(res, 1'b0);
              default: feat[F_NDSE]  <= sat_fx(res, s2 < sb2);
            endcase
            if (st == X_MU) begin
              st <= X_PASSB; rcnt <= '0; sad <= '0; sq2 <= '0; sq4 <= '0;
            end else if (step == 5'd17) begin
              st <= X_DONE;
            end else begin
              step <= step + 1'b1;
            end
          end
        end
        X_DONE: begin
          busy <= 1'b0; done <= 1'b1; st <= X_IDLE;
        end
        default: st <= X_IDLE;
      endcase
    end
  end
endmodule
