// im_ml_est: maximum-likelihood estimate of the index-modulation symbol
// (bandwidth index, centre-frequency index) of one equalised data chirp.
//
// The block works on the NFFT_P-bin equalised spectrum in three passes:
//   1. capture: store the magnitude of every bin (alpha-max-plus-beta-min
//      approximation, max + min/2) while it arrives;
//   2. smoothing: low-pass filter the magnitude along frequency with a
//      SMW-bin moving sum and record the maximum of the result;
//   3. thresholding and correlation: the spectrum is normalised to its peak
//      and bins below 1/4 of the peak are set to zero (noise floor). Each
//      codebook entry c has a template equal to the magnitude spectrum of its
//      chirp, modelled as flat over its band lo_c..hi_c (f_c -/+ b_c/2) and
//      normalised to unit energy, 1/sqrt(W_c) over W_c bins. The correlation
//      with that template is S_c/sqrt(W_c), S_c the sum of the thresholded
//      spectrum over the band. All NB*NF sums run in parallel, one bin per
//      clock.
//   4. decision: the entry with the largest S_c^2/W_c wins, compared
//      one entry per clock by cross-multiplication (no division). A band that
//      is too narrow misses energy at its edges, one that is too wide is
//      penalised by its larger W_c unless the extra bins carry more than about
//      half the in-band level; ripple of the chirp spectrum and -14 dB
//      leakage from the other polarisation therefore do not move the decision.
//
// The paper names the steps (FFT, normalisation, smoothing/thresholding,
// correlation with the FFT of each codebook chirp, maximum). This design
// replaces the codebook chirps' spectra by flat band templates, as the
// spectrum of an FMCW chirp is close to flat over its swept band; smoothing
// width, the floor threshold and the magnitude approximation are its own
// choices.
//
// Timing: after the last input bin, 2*NFFT_P + NB*NF + 1 clocks to the done
// pulse. scores[c] is S_c/2^12.
module im_ml_est
  import isac_pkg::*;
#(
  parameter int NFFT_P = NFFT,
  parameter int SMW    = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [$clog2(NFFT_P)-1:0] in_idx,
  input  cplx24_t                   in_data,
  output logic                      done,
  output logic [BIW-1:0]            b_idx,
  output logic [FIW-1:0]            f_idx,
  output logic [NB*NF-1:0][31:0]    scores
);

  localparam int KW = $clog2(NFFT_P);
  localparam int NC = NB * NF;

  typedef logic signed [NC-1:0][15:0] edge_t;

  // band edges of every codebook entry in signed FFT bins
  function automatic edge_t mk_lo();
    edge_t t;
    for (int b = 0; b < NB; b++)
      for (int f = 0; f < NF; f++) begin
        longint e;
        e = (fc_hz(f) - bw_hz(b)/2) * NFFT_P;
        // ceil division for the lower edge
        t[b*NF+f] = 16'((e >= 0) ? (e + FS_HZ - 1) / FS_HZ : -((-e) / FS_HZ));
      end
    return t;
  endfunction

  function automatic edge_t mk_hi();
    edge_t t;
    for (int b = 0; b < NB; b++)
      for (int f = 0; f < NF; f++) begin
        longint e;
        e = (fc_hz(f) + bw_hz(b)/2) * NFFT_P;
        t[b*NF+f] = 16'((e >= 0) ? e / FS_HZ : -((-e + FS_HZ - 1) / FS_HZ));
      end
    return t;
  endfunction

  localparam edge_t LO = mk_lo();
  localparam edge_t HI = mk_hi();

  logic [23:0] mag [NFFT_P];
  logic [27:0] smo [NFFT_P];

  typedef enum logic [1:0] {P_CAP, P_SMOOTH, P_CORR, P_DEC} pstate_t;
  pstate_t       st;
  logic [KW-1:0] k;
  logic [27:0]   smax;
  logic [39:0]   sc [NC];
  logic [BIW+FIW-1:0] cidx;     // decision pass: entry under comparison
  logic [BIW+FIW-1:0] bc;
  logic [63:0]   bsq;           // S^2 of the best entry so far (S/2^12)
  logic [15:0]   bw_best;       // its width in bins

  function automatic logic [23:0] amag(input cplx24_t a);
    logic [23:0] x, y;
    x = a.re[23] ? 24'(-a.re) : 24'(a.re);
    y = a.im[23] ? 24'(-a.im) : 24'(a.im);
    return (x > y) ? x + (y >> 1) : y + (x >> 1);
  endfunction

  // moving sum centred on bin k (circular)
  logic [27:0] msum;
  always_comb begin
    msum = '0;
    for (int j = -SMW/2; j < SMW/2; j++)
      msum = msum + 28'(mag[KW'(int'(k) + j)]);
  end

  // signed frequency of bin k
  logic signed [15:0] kf;
  assign kf = (int'(k) < NFFT_P/2) ? 16'(k) : 16'(int'(k) - NFFT_P);

  always_comb
    for (int c = 0; c < NC; c++) scores[c] = 32'(sc[c] >> 12);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= P_CAP;
      k     <= '0;
      smax  <= '0;
      done  <= 1'b0;
      cidx  <= '0;
      bc    <= '0;
      bsq   <= '0;
      bw_best <= 16'd1;
      b_idx <= '0;
      f_idx <= '0;
      for (int c = 0; c < NC; c++) sc[c] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        P_CAP: if (in_valid) begin
          mag[in_idx] <= amag(in_data);
          if (in_idx == KW'(NFFT_P - 1)) begin
            st   <= P_SMOOTH;
            k    <= '0;
            smax <= '0;
          end
        end
        P_SMOOTH: begin
          smo[k] <= msum;
          if (msum > smax) smax <= msum;
          k <= k + 1'b1;
          if (k == KW'(NFFT_P - 1)) begin
            st <= P_CORR;
            for (int c = 0; c < NC; c++) sc[c] <= '0;
          end
        end
        P_CORR: begin
          logic [39:0] d;
          d = (smo[k] >= (smax >> 2)) ? 40'(smo[k]) : 40'd0;
          for (int c = 0; c < NC; c++)
            if (kf >= $signed(LO[c]) && kf <= $signed(HI[c]))
              sc[c] <= sc[c] + d;
          k <= k + 1'b1;
          if (k == KW'(NFFT_P - 1)) begin
            st      <= P_DEC;
            cidx    <= '0;
            bsq     <= '0;
            bw_best <= 16'd1;
            bc      <= '0;
          end
        end
        default: begin
          // S_c^2 / W_c > S_best^2 / W_best, cross-multiplied
          logic [26:0]  sv;
          logic [63:0]  sq;
          logic [127:0] lhs, rhs;
          logic [15:0]  wc;
          sv  = 27'(sc[cidx] >> 12);
          sq  = 64'(sv) * 64'(sv);
          wc  = 16'($signed(HI[cidx]) - $signed(LO[cidx]) + 16'sd1);
          lhs = 128'(sq) * 128'(bw_best);
          rhs = 128'(bsq) * 128'(wc);
          if (lhs > rhs) begin
            bsq     <= sq;
            bw_best <= wc;
            bc      <= cidx;
          end
          cidx <= cidx + 1'b1;
          if (cidx == (BIW+FIW)'(NC - 1)) begin
            logic [BIW+FIW-1:0] win;
            win   = (lhs > rhs) ? cidx : bc;
            b_idx <= BIW'(win / NF);
            f_idx <= FIW'(win % NF);
            done  <= 1'b1;
            st    <= P_CAP;
          end
        end
      endcase
    end
  end

endmodule
