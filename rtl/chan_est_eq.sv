// chan_est_eq: frequency-domain channel estimation and equalisation of one
// polarisation, applied bin by bin over the NFFT_P-point spectrum.
//
// Three modes, selected per spectrum with `mode`:
//   EQ_REF    store the spectrum u_p of the reference pilot chirp;
//   EQ_PILOT  LMMSE estimate from the received pilot spectrum y_p:
//               h(k) = y_p(k) conj(u_p(k)) / (|u_p(k)|^2 + sigma2_ce)
//             kept as Q14 (1.0 = 16384);
//   EQ_DATA   MMSE equalisation of a data-chirp spectrum y:
//               u^(k) = conj(h(k)) y(k) / (|h(k)|^2 + sigma2_eq)
//             sigma2_eq in units of |h|^2, i.e. 2^-28; the result is streamed
//             out with its bin index.
// The equations and the use of one pilot per frame for all following data
// chirps follow the paper. sigma2 = sigma_n^2 + sigma_i^2 is a run-time input
// (given twice, once in each unit); the paper's single constant appears in
// both formulas. Each denominator has 1 added so it is never zero.
//
// Timing: one bin per clock; out_valid follows in_valid by one clock.
module chan_est_eq
  import isac_pkg::*;
#(
  parameter int NFFT_P = NFFT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [1:0]                mode,
  input  logic [31:0]               sigma2_ce,
  input  logic [31:0]               sigma2_eq,
  input  logic                      in_valid,
  input  logic [$clog2(NFFT_P)-1:0] in_idx,
  input  cplx24_t                   in_data,
  output logic                      out_valid,
  output logic [$clog2(NFFT_P)-1:0] out_idx,
  output cplx24_t                   out_data
);

  localparam logic [1:0] EQ_REF = 2'd0, EQ_PILOT = 2'd1, EQ_DATA = 2'd2;

  cplx24_t uref [NFFT_P];
  cplx24_t hest [NFFT_P];

  function automatic logic signed [23:0] sat24(input longint v);
    if (v > 64'sd8388607)  return 24'sd8388607;
    if (v < -64'sd8388608) return -24'sd8388608;
    return 24'(v);
  endfunction

  cplx24_t u, h, y;
  longint  den_ce, num_ce_re, num_ce_im, den_eq, num_eq_re, num_eq_im;

  always_comb begin
    u = uref[in_idx];
    h = hest[in_idx];
    y = in_data;
    // LMMSE: y conj(u) * 2^14 / (|u|^2 + s)
    den_ce    = mag2(u) + longint'(sigma2_ce) + 1;
    num_ce_re = (longint'(y.re) * u.re + longint'(y.im) * u.im) <<< 14;
    num_ce_im = (longint'(y.im) * u.re - longint'(y.re) * u.im) <<< 14;
    // MMSE: conj(h) y * 2^14 / (|h|^2 + s)
    den_eq    = mag2(h) + longint'(sigma2_eq) + 1;
    num_eq_re = (longint'(h.re) * y.re + longint'(h.im) * y.im) <<< 14;
    num_eq_im = (longint'(h.re) * y.im - longint'(h.im) * y.re) <<< 14;
  end

  always_ff @(posedge clk) begin
    if (in_valid && mode == EQ_REF)   uref[in_idx] <= in_data;
    if (in_valid && mode == EQ_PILOT)
      hest[in_idx] <= '{re: sat24(num_ce_re / den_ce), im: sat24(num_ce_im / den_ce)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && (mode == EQ_DATA);
      if (in_valid) begin
        out_idx  <= in_idx;
        out_data <= '{re: sat24(num_eq_re / den_eq), im: sat24(num_eq_im / den_eq)};
      end
    end
  end

endmodule
