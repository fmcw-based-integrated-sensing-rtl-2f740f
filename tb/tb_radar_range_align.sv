// tb_radar_range_align: a gap-free train of chirps (random bandwidths and the
// pilot) and an echo delayed by D samples with a random phase. Every output
// bin is compared with the bandwidth-scaled DTFT of the deramped samples,
//   R(m) = sum_n x(n)*conj(r(n))/2^14 * exp(-j*2*pi*(b/b_ref)*m*n/NS) / 2^6,
// computed in floating point from the samples driven. The range peak must sit
// at bin round(D*b_ref/FS) for every bandwidth. Also checks out_sel, out_last
// and that the NR bins of a chirp leave within NR+1 clocks of its last sample.
module tb_radar_range_align;
  import isac_pkg::*;
  localparam int NCH_T    = 6;
  localparam int WATCHDOG = 20_000;
  localparam int TOT      = NCH_T * NS;
  `include "tb_common.svh"

  logic       in_valid = 0, in_first = 0;
  chirp_sel_t in_sel = '0;
  iq16_t      tx_iq = '0, rx_iq = '0;
  logic       out_valid, out_last;
  logic [5:0] out_bin;
  cplx24_t    out_data;
  chirp_sel_t out_sel;

  radar_range_align dut (.*);

  iq16_t      txa [TOT], rxa [TOT];
  chirp_sel_t sela [NCH_T];
  real        bwa [NCH_T];
  int         dly [NCH_T];
  int         t_last [NCH_T];
  int         cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    int  pos;
    real th;
    pos = 0;
    // chirp train; each chirp's echo uses its own delay
    for (int c = 0; c < NCH_T; c++) begin
      int b, f;
      real bw, fc;
      b = $urandom_range(NB - 1);
      f = $urandom_range(NF - 1);
      sela[c] = '{pilot: (c == 0), b_idx: BIW'(b), f_idx: FIW'(f)};
      bw = (c == 0) ? 60.0e6 : 40.0e6 + 2.0e6 * b;
      fc = (c == 0) ? 0.0 : (2.0 * f - 3.0) * 1.0e6;
      bwa[c] = bw;
      dly[c] = 5 + $urandom_range(50);
      for (int n = 0; n < NS; n++) begin
        th = (fc - bw / 2.0) / 100.0e6 * n + bw / 1.0e11 * real'(n) * real'(n - 1) / 2.0;
        txa[c*NS + n] = '{re: 16'($rtoi(16000.0 * $cos(2.0 * PI * wrap(th)))),
                          im: 16'($rtoi(16000.0 * $sin(2.0 * PI * wrap(th))))};
      end
    end
    for (int c = 0; c < NCH_T; c++) begin
      real ps;
      ps = 2.0 * PI * real'($urandom_range(1000)) / 1000.0;
      for (int n = 0; n < NS; n++) begin
        int  i;
        real ar, ai;
        i  = c*NS + n - dly[c];
        ar = (i < 0) ? 0.0 : real'(txa[i].re);
        ai = (i < 0) ? 0.0 : real'(txa[i].im);
        rxa[c*NS + n] = '{re: 16'($rtoi(0.5 * (ar * $cos(ps) - ai * $sin(ps)))),
                          im: 16'($rtoi(0.5 * (ar * $sin(ps) + ai * $cos(ps))))};
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < TOT; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_first = (i % NS == 0);
      in_sel   = sela[i / NS];
      tx_iq    = txa[i];
      rx_iq    = rxa[i];
      if (i % NS == NS - 1) t_last[i / NS] = cyc;
    end
    @(negedge clk) in_valid = 0;
  end

  // output checker
  initial begin
    int c, m, peak_bin;
    real peak, max_err;
    c = 0; m = 0; peak = 0.0; peak_bin = 0; max_err = 0.0;
    while (c < NCH_T) begin
      @(posedge clk);
      if (out_valid) begin
        real sr, si, er, ei, ang, xr, xi, yr, yi, e;
        check(int'(out_bin) == m, "bins in order");
        check(out_sel == sela[c], "selection follows the chirp");
        check(out_last == (m == NR - 1), "out_last");
        if (m == 0) check(cyc - t_last[c] <= 2, $sformatf("first bin %0d clocks after last sample", cyc - t_last[c]));
        er = 0.0; ei = 0.0;
        for (int n = 0; n < NS; n++) begin
          xr = real'(txa[c*NS + n].re); xi = real'(txa[c*NS + n].im);
          yr = real'(rxa[c*NS + n].re); yi = real'(rxa[c*NS + n].im);
          sr = (xr * yr + xi * yi) / 16384.0;
          si = (xi * yr - xr * yi) / 16384.0;
          ang = -2.0 * PI * wrap(bwa[c] / 60.0e6 * real'(m) * real'(n) / real'(NS));
          er += sr * $cos(ang) - si * $sin(ang);
          ei += sr * $sin(ang) + si * $cos(ang);
        end
        er /= 64.0; ei /= 64.0;
        e = $sqrt((er - real'(out_data.re))**2 + (ei - real'(out_data.im))**2);
        if (e > max_err) max_err = e;
        check(e <= 40.0 + 2.0e-3 * $sqrt(er*er + ei*ei), $sformatf("chirp %0d bin %0d: got (%0d,%0d) exp (%0.1f,%0.1f)",
              c, m, int'(out_data.re), int'(out_data.im), er, ei));
        begin
          real mr;
          mr = real'(out_data.re)**2 + real'(out_data.im)**2;
          if (mr > peak) begin
            peak = mr;
            peak_bin = m;
          end
        end
        m++;
        if (m == NR) begin
          check(peak_bin == $rtoi(real'(dly[c]) * 0.6 + 0.5),
                $sformatf("chirp %0d: peak at %0d for delay %0d", c, peak_bin, dly[c]));
          m = 0; c++; peak = 0.0;
        end
      end
    end
    $display("largest error %0.1f", max_err);
    finish_tb();
  end
endmodule
