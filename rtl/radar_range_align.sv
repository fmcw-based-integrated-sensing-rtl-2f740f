// radar_range_align: matched filter (deramp) and bandwidth-compensated range
// transform of one radar receive chain.
//
// Each received sample r(n) is mixed with the sample x(n) transmitted at the
// same instant, s(n) = x(n) * conj(r(n)) (deramping; the paper writes
// r*conj(x) for a chirp of negative phase, exp(-j*theta), while this design's
// chirps have phase +theta, so the conjugate keeps the beat frequency
// positive). A target at delay tau
// then gives a beat tone of b_i*tau/Tc, which moves with the chirp's
// bandwidth b_i. Instead of an FFT, the block evaluates the DTFT of s(n) at
// the beat frequency that range bin m would have in this chirp,
//   R_i(m) = sum_n s(n) * exp(-j*2*pi * (b_i/b_ref) * m * n / NS),
// so a fixed target falls in the same bin m = tau*b_ref for every bandwidth.
// The range grid is therefore tau_m = m / b_ref (bin spacing c/(2*b_ref)),
// with b_ref the pilot bandwidth.
//
// All NR_P bins are accumulated in parallel, one MAC per bin per sample, so the
// block keeps up with a continuous stream of chirps. After the last sample of
// a chirp the NR_P results (divided by 2^OUT_SHIFT) are streamed out, one bin
// per clock, while the next chirp accumulates.
//
// Interface: in_valid with tx_iq/rx_iq; in_first marks sample 0 of a chirp and
// carries the chirp's selection (pilot or bandwidth index). Output: out_valid,
// out_bin, out_data, out_sel; out_last on bin NR_P-1. Bins of chirp i appear
// from 2 to NR_P+1 clocks after its last sample.
//
// Following the paper: deramping, DTFT at f_beat,i(r_m) = 2 S_i r_m / c
// evaluated over all bins. Own choices: range grid, parallel evaluation,
// 32-bit phase accumulators, output scaling.
module radar_range_align
  import isac_pkg::*;
#(
  parameter int NS_P      = NS,
  parameter int NR_P      = NR,
  parameter int OUT_SHIFT = 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  chirp_sel_t              in_sel,
  input  iq16_t                   tx_iq,
  input  iq16_t                   rx_iq,
  output logic                    out_valid,
  output logic                    out_last,
  output logic [$clog2(NR_P)-1:0] out_bin,
  output cplx24_t                 out_data,
  output chirp_sel_t              out_sel
);

  localparam int NW = $clog2(NS_P + 1);
  localparam int RW = $clog2(NR_P);

  typedef logic [NB:0][31:0] inc_t;   // entry NB is the pilot

  // per-sample phase step of bin 1: (b/b_ref) / NS turns
  function automatic inc_t mk_inc();
    inc_t t;
    for (int b = 0; b <= NB; b++) begin
      longint bw;
      bw   = (b == NB) ? PILOT_BW_HZ : bw_hz(b);
      t[b] = 32'((bw * 64'sd4294967296) / (PILOT_BW_HZ * longint'(NS_P)));
    end
    return t;
  endfunction
  localparam inc_t INC = mk_inc();

  // deramp
  longint s_re, s_im;
  always_comb begin
    s_re = (longint'(tx_iq.re) * rx_iq.re + longint'(tx_iq.im) * rx_iq.im) >>> 14;
    s_im = (longint'(tx_iq.im) * rx_iq.re - longint'(tx_iq.re) * rx_iq.im) >>> 14;
  end

  logic [31:0]       base_new;
  always_comb base_new = in_sel.pilot ? INC[NB] : INC[in_sel.b_idx];

  logic [31:0]          base_r;
  logic [31:0]          ph   [NR_P];
  logic signed [39:0]   acc_re  [NR_P];
  logic signed [39:0]   acc_im  [NR_P];
  logic signed [39:0]   hold_re [NR_P];
  logic signed [39:0]   hold_im [NR_P];
  chirp_sel_t           sel_r, hold_sel;
  logic [NW-1:0]        n;
  logic                 dump;
  logic [RW-1:0]        ocnt;

  function automatic logic signed [23:0] sat24(input longint v);
    if (v > 64'sd8388607)  return 24'sd8388607;
    if (v < -64'sd8388608) return -24'sd8388608;
    return 24'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_r    <= '0;
      sel_r     <= '0;
      hold_sel  <= '0;
      n         <= '0;
      dump      <= 1'b0;
      ocnt      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_bin   <= '0;
      out_data  <= '0;
      out_sel   <= '0;
      for (int m = 0; m < NR_P; m++) begin
        ph[m]      <= '0;
        acc_re[m]  <= '0;
        acc_im[m]  <= '0;
        hold_re[m] <= '0;
        hold_im[m] <= '0;
      end
    end else begin
      // ---- accumulate ----
      if (in_valid) begin
        logic [31:0] base;
        base = in_first ? base_new : base_r;
        if (in_first) begin
          base_r <= base_new;
          sel_r  <= in_sel;
        end
        for (int m = 0; m < NR_P; m++) begin
          logic [31:0]        p;
          iq16_t              e;
          longint             tre, tim;
          logic signed [39:0] ar, ai;
          p   = in_first ? 32'd0 : ph[m];
          e   = sincos(p[31:16] + 16'(p[15]));
          tre = (s_re * longint'(e.re) + s_im * longint'(e.im)) >>> 14;
          tim = (s_im * longint'(e.re) - s_re * longint'(e.im)) >>> 14;
          ar  = in_first ? 40'sd0 : acc_re[m];
          ai  = in_first ? 40'sd0 : acc_im[m];
          acc_re[m] <= ar + 40'(tre);
          acc_im[m] <= ai + 40'(tim);
          ph[m]     <= p + 32'(m) * base;
          if (n == NW'(NS_P - 1) && !in_first) begin
            hold_re[m] <= ar + 40'(tre);
            hold_im[m] <= ai + 40'(tim);
          end
        end
        n <= in_first ? NW'(1) : n + 1'b1;
      end
      // ---- stream out ----
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (in_valid && !in_first && n == NW'(NS_P - 1)) begin
        dump     <= 1'b1;
        ocnt     <= '0;
        hold_sel <= sel_r;
      end else if (dump) begin
        out_valid <= 1'b1;
        out_bin   <= ocnt;
        out_sel   <= hold_sel;
        out_data  <= '{re: sat24(longint'(hold_re[ocnt]) >>> OUT_SHIFT),
                       im: sat24(longint'(hold_im[ocnt]) >>> OUT_SHIFT)};
        out_last  <= (ocnt == RW'(NR_P - 1));
        ocnt      <= ocnt + 1'b1;
        if (ocnt == RW'(NR_P - 1)) dump <= 1'b0;
      end
    end
  end

endmodule
