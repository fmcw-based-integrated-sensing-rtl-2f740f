// pcfmcw_gen: phase-coded FMCW chirp generator, one polarisation.
//
// A start pulse loads the chirp's start-frequency tuning word f0, its chirp
// rate k and L phase symbols, and the block then emits NS_P complex samples,
// one per clock. The chirp phase is a second-order accumulator,
//   theta(n) = f0*n + k*n*(n-1)/2   (fractions of a turn, 32 bits),
// so the instantaneous frequency sweeps linearly from f_i - b_i/2 to
// f_i + b_i/2 over the chirp. Segment l (NS_P/L samples) adds the PSK phase
// 2*pi*sym[l]/M.
//
// Phase smoothing: the paper convolves exp(j*phi(t)) with a truncated
// Gaussian of span beta*Ts (beta = 0.2) and takes the argument. Because
// phi(t) is piecewise constant, the filter output near a segment boundary is
// (1-w)*exp(j*phi_a) + w*exp(j*phi_b), where w is the part of the kernel that
// lies on the far side of the boundary. This block evaluates exactly that: w
// comes from a table of the kernel's running sum, and a CORDIC takes the
// argument. The kernel is a binomial window of 2K+1 taps (K = beta*Ts/2),
// the usual integer stand-in for a Gaussian (sigma = sqrt(2K)/2 samples);
// the paper does not give sigma. Transitions are smoothed only inside a
// chirp: before the first and after the last segment the phase is held.
//
// Interface: start (1 cycle) with f0_ftw, rate, sym and a tag; out_valid/
// out_iq/out_first/out_last/out_tag follow one sample per clock, the first
// sample two clocks after start. A start while next_ok is high (idle, or the
// last sample of the current chirp) gives a gap-free chirp train. Output
// amplitude 16383.
module pcfmcw_gen
  import isac_pkg::*;
#(
  parameter int NS_P     = NS,      // samples per chirp
  parameter int BETA_PCT = 20,      // smoothing span in percent of a segment
  parameter int TAG_W    = 1        // width of the side-band tag
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [31:0]              f0_ftw,
  input  logic [31:0]              rate,
  input  logic [L_SEG-1:0][MB-1:0] sym,
  input  logic [TAG_W-1:0]         tag,
  output logic                     busy,
  output logic                     next_ok,
  output logic                     out_valid,
  output logic                     out_first,
  output logic                     out_last,
  output iq16_t                    out_iq,
  output logic [TAG_W-1:0]         out_tag
);

  localparam int SEG = NS_P / L_SEG;
  localparam int K   = (SEG * BETA_PCT) / 200;
  localparam int NW  = $clog2(NS_P + 1);
  localparam int SW  = $clog2(SEG + 1);
  localparam int LW  = $clog2(L_SEG + 1);

  typedef logic [2*K:0][16:0] cdf_t;

  // cdf[x+K] = sum_{d=-K..x} C(2K, d+K) / 2^(2K), in 1/65536
  function automatic cdf_t mk_cdf();
    cdf_t   t;
    longint c, cum;
    c   = 1;
    cum = 0;
    for (int i = 0; i <= 2*K; i++) begin
      cum  = cum + c;
      t[i] = 17'((cum * 65536) >> (2*K));
      c    = (c * (2*K - i)) / (i + 1);
    end
    return t;
  endfunction

  localparam cdf_t CDF = mk_cdf();

  logic                      run;
  logic [NW-1:0]             n;
  logic [SW-1:0]             p;     // position inside the segment
  logic [LW-1:0]             seg;
  logic [31:0]               ph, fw, k_r;
  logic [L_SEG-1:0][MB-1:0]  sym_r;
  logic [TAG_W-1:0]          tag_r;
  logic [LW-1:0]             segc;   // segment index held inside 0..L-1

  // smoothed PSK phase of the current sample
  logic [15:0] phi_cur, phi_oth, phi_s;
  logic [16:0] w;
  iq16_t       e_cur, e_oth;
  longint      acc_re, acc_im;

  always_comb begin
    segc    = (seg < LW'(L_SEG)) ? seg : LW'(L_SEG - 1);
    phi_cur = 16'(sym_r[segc]) << (16 - MB);
    phi_oth = phi_cur;
    w       = '0;
    if (SW'(p) >= SW'(SEG - K) && segc < LW'(L_SEG - 1)) begin
      phi_oth = 16'(sym_r[segc + 1'b1]) << (16 - MB);
      w       = CDF[int'(p) - SEG + K];
    end else if (int'(p) < K && segc > 0) begin
      phi_oth = 16'(sym_r[segc - 1'b1]) << (16 - MB);
      w       = 17'(65536) - CDF[int'(p) + K];
    end
    e_cur  = sincos(phi_cur);
    e_oth  = sincos(phi_oth);
    acc_re = longint'(65536 - int'(w)) * longint'(e_cur.re) + longint'(w) * longint'(e_oth.re);
    acc_im = longint'(65536 - int'(w)) * longint'(e_cur.im) + longint'(w) * longint'(e_oth.im);
    if (w == '0 || phi_oth == phi_cur) phi_s = phi_cur;
    else                               phi_s = atan2(acc_re, acc_im);
  end

  logic [31:0] ph_tot;
  assign ph_tot = ph + {phi_s, 16'h0000};
  assign busy    = run;
  // a start now continues the stream without a gap
  assign next_ok = !run || (n == NW'(NS_P - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      n         <= '0;
      p         <= '0;
      seg       <= '0;
      ph        <= '0;
      fw        <= '0;
      k_r       <= '0;
      sym_r     <= '0;
      tag_r     <= '0;
      out_tag   <= '0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      out_iq    <= '0;
    end else begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      if (run) begin
        out_valid <= 1'b1;
        out_first <= (n == '0);
        out_last  <= (n == NW'(NS_P - 1));
        // rounding to the nearest 1/65536 turn
        out_iq    <= sincos(ph_tot[31:16] + 16'(ph_tot[15]));
        ph        <= ph + fw;
        fw        <= fw + k_r;
        n         <= n + 1'b1;
        if (p == SW'(SEG - 1)) begin
          p   <= '0;
          seg <= seg + 1'b1;
        end else begin
          p <= p + 1'b1;
        end
        out_tag   <= tag_r;
        if (n == NW'(NS_P - 1)) run <= 1'b0;
      end
      // a start on the last sample of a chirp follows it seamlessly;
      // earlier it cuts the running chirp short
      if (start) begin
        run   <= 1'b1;
        n     <= '0;
        p     <= '0;
        seg   <= '0;
        ph    <= '0;
        fw    <= f0_ftw;
        k_r   <= rate;
        sym_r <= sym;
        tag_r <= tag;
      end
    end
  end

endmodule
