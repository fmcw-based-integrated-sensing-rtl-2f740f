// radar_phase_corr: slow-time phase correction ("compensate for IM effects")
// of one radar receive chain.
//
// After range alignment, bin m of chirp i still carries a phase that depends
// on the chirp's centre frequency and bandwidth, so the chirp-to-chirp
// (Doppler) phase progression is scrambled by the data. Relative to the pilot
// (centre f_ref = 0, bandwidth b_ref) the phase of bin m, tau_m = m/b_ref, is
//   phi_err,i(m) = 2*pi*[ (df_i - db_i/2)*tau_m - db_i/(2*Tc)*tau_m^2 ]
// with df_i = f_i - f_ref and db_i = b_i - b_ref. The block multiplies each
// bin by exp(-j*phi_err,i(m)). In units of a turn this is A_i*m - Q_i*m^2;
// A_i and Q_i are tables over the codebook, computed at elaboration.
//
// The paper gives phi_err = -2*pi*df_i*tau + pi*dS_i*tau^2: a term linear in
// delay from the centre-frequency offset and a quadratic one from the slope
// offset dS_i = db_i/Tc. Both are here; their signs follow this design's
// deramp convention (see radar_range_align), and the linear term also holds
// -db_i*tau/2 because a chirp of this design starts at f_i - b_i/2 at sample 0
// (the paper's Eq. (4)), which moves the start frequency with the bandwidth.
//
// Interface and timing: a stream of (bin, value, chirp selection); every input
// produces one corrected output one clock later.
module radar_phase_corr
  import isac_pkg::*;
#(
  parameter int NS_P = NS,
  parameter int NR_P = NR
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic [$clog2(NR_P)-1:0] in_bin,
  input  cplx24_t                 in_data,
  input  chirp_sel_t              in_sel,
  output logic                    out_valid,
  output logic                    out_last,
  output logic [$clog2(NR_P)-1:0] out_bin,
  output cplx24_t                 out_data
);

  typedef logic [NB*NF-1:0][31:0] tab_t;

  function automatic tab_t mk_lin();
    tab_t t;
    for (int b = 0; b < NB; b++)
      for (int f = 0; f < NF; f++) begin
        longint num;
        num = fc_hz(f) - (bw_hz(b) - PILOT_BW_HZ) / 2;
        t[b*NF+f] = 32'((num * 64'sd4294967296) / PILOT_BW_HZ);
      end
    return t;
  endfunction

  function automatic tab_t mk_quad();
    tab_t t;
    for (int b = 0; b < NB; b++)
      for (int f = 0; f < NF; f++) begin
        longint num;
        num = ((bw_hz(b) - PILOT_BW_HZ) * FS_HZ) / PILOT_BW_HZ;   // Hz
        t[b*NF+f] = 32'((num * 64'sd4294967296) / (2 * longint'(NS_P) * PILOT_BW_HZ));
      end
    return t;
  endfunction

  localparam tab_t LIN  = mk_lin();
  localparam tab_t QUAD = mk_quad();

  logic [31:0] a, q, m32, err;
  iq16_t       e;
  longint      yr, yi;

  always_comb begin
    if (in_sel.pilot) begin
      a = '0;
      q = '0;
    end else begin
      a = LIN[{in_sel.b_idx, in_sel.f_idx}];
      q = QUAD[{in_sel.b_idx, in_sel.f_idx}];
    end
    m32 = 32'(in_bin);
    err = a * m32 - q * m32 * m32;
    // multiply by exp(-j*err)
    e   = sincos(16'(-err[31:16]) - 16'(err[15]));
    yr  = (longint'(in_data.re) * e.re - longint'(in_data.im) * e.im) >>> 14;
    yi  = (longint'(in_data.re) * e.im + longint'(in_data.im) * e.re) >>> 14;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_bin   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid) begin
        out_bin  <= in_bin;
        out_data <= '{re: 24'(yr), im: 24'(yi)};
      end
    end
  end

endmodule
