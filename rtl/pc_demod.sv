// pc_demod: phase-code demodulation of one equalised data chirp.
//
// Once the IM symbol is known, the receiver rebuilds the unmodulated chirp of
// that bandwidth and centre frequency (same second-order NCO as the
// transmitter, theta(n) = f0*n + k*n*(n-1)/2) and de-chirps the equalised time
// samples with it: z(n) = x(n) * exp(-j*theta(n)). Each segment of NS_P/L
// samples is integrated, S_l = sum z(n), and the symbol is the PSK point
// nearest to the angle of S_l, m_l = round(angle(S_l) * M / (2*pi)) mod M.
// Samples NS_P..NFFT-1 of the input (the zero padding of the FFT) are ignored.
//
// The paper builds M reference chirps exp(j*(theta + phi_m)), integrates the
// product with the received chirp per segment and takes the best match. The
// metric it prints, |x conj(x_m)|^2, is the same for every phi_m; the
// decision here maximises the real part Re(S_l exp(-j*phi_m)), which is what
// "maximum matching" amounts to and is computed via the angle of S_l.
//
// Interface: sel (estimated b, f indices) is sampled with the first input
// sample (in_idx == 0); after the last segment, done pulses with sym[L].
module pc_demod
  import isac_pkg::*;
#(
  parameter int NS_P   = NS,
  parameter int NFFT_P = NFFT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [BIW-1:0]            b_idx,
  input  logic [FIW-1:0]            f_idx,
  input  logic                      in_valid,
  input  logic [$clog2(NFFT_P)-1:0] in_idx,
  input  cplx24_t                   in_data,
  output logic                      done,
  output logic [L_SEG-1:0][MB-1:0]  sym
);

  localparam int SEG = NS_P / L_SEG;
  localparam int SW  = $clog2(SEG + 1);
  localparam int LW  = $clog2(L_SEG + 1);

  typedef logic [NB*NF-1:0][31:0] tab_t;
  function automatic tab_t mk_f0();
    tab_t t;
    for (int b = 0; b < NB; b++)
      for (int f = 0; f < NF; f++)
        t[b*NF+f] = ftw(fc_hz(f) - bw_hz(b)/2);
    return t;
  endfunction
  function automatic tab_t mk_rate();
    tab_t t;
    for (int b = 0; b < NB; b++)
      for (int f = 0; f < NF; f++)
        t[b*NF+f] = rate_word(bw_hz(b), NS_P);
    return t;
  endfunction
  localparam tab_t F0_TAB   = mk_f0();
  localparam tab_t RATE_TAB = mk_rate();

  logic [31:0]   ph, fw, k_r;
  logic [SW-1:0] p;
  logic [LW-1:0] seg;
  logic          act;
  longint        acc_re, acc_im;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph     <= '0;
      fw     <= '0;
      k_r    <= '0;
      p      <= '0;
      seg    <= '0;
      act    <= 1'b0;
      acc_re <= 0;
      acc_im <= 0;
      done   <= 1'b0;
      sym    <= '0;
    end else begin
      done <= 1'b0;
      if (in_valid && (in_idx == '0 || act)) begin
        logic [31:0] phc, fwc;
        iq16_t       e;
        longint      zr, zi, sr, si;
        if (in_idx == '0) begin
          phc = '0;
          fwc = F0_TAB[{b_idx, f_idx}];
          k_r <= RATE_TAB[{b_idx, f_idx}];
          act <= 1'b1;
        end else begin
          phc = ph;
          fwc = fw;
        end
        e  = sincos(phc[31:16] + 16'(phc[15]));
        zr = (longint'(in_data.re) * e.re + longint'(in_data.im) * e.im) >>> 14;
        zi = (longint'(in_data.im) * e.re - longint'(in_data.re) * e.im) >>> 14;
        sr = ((in_idx == '0 || p == '0) ? 0 : acc_re) + zr;
        si = ((in_idx == '0 || p == '0) ? 0 : acc_im) + zi;
        acc_re <= sr;
        acc_im <= si;
        ph <= phc + fwc;
        fw <= fwc + ((in_idx == '0) ? RATE_TAB[{b_idx, f_idx}] : k_r);
        if (in_idx == '0) begin
          p   <= SW'(1);
          seg <= '0;
        end else if (p == SW'(SEG - 1)) begin
          logic [15:0] ang;
          logic [LW-1:0] sg;
          ang = atan2(sr, si) + 16'(1 << (15 - MB));
          sg  = seg;
          sym[sg] <= ang[15 -: MB];
          p   <= '0;
          seg <= seg + 1'b1;
          if (sg == LW'(L_SEG - 1)) begin
            act  <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          p <= p + 1'b1;
        end
      end
    end
  end

endmodule
