// tb_radar_phase_corr: random range-bin values of random codebook chirps (and
// the pilot) through the phase correction. Expected output, in floating point:
//   y = x * exp(-j*2*pi*(A*m - Q*m^2)),
//   A = (f_c - (b - b_ref)/2)/b_ref,  Q = (b - b_ref)*FS/(2*NS*b_ref^2),
// and y = x for the pilot. Latency one clock, bin and last flag pass through.
module tb_radar_phase_corr;
  import isac_pkg::*;
  localparam int WATCHDOG = 20_000;
  `include "tb_common.svh"

  logic       in_valid = 0, in_last = 0;
  logic [5:0] in_bin = '0;
  cplx24_t    in_data = '0;
  chirp_sel_t in_sel = '0;
  logic       out_valid, out_last;
  logic [5:0] out_bin;
  cplx24_t    out_data;

  radar_phase_corr dut (.*);

  initial begin
    real max_err;
    max_err = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int  b, f, m;
      real bw, fc, a, q, ph, xr, xi, er, ei, e;
      bit  pil;
      b   = $urandom_range(NB - 1);
      f   = $urandom_range(NF - 1);
      m   = $urandom_range(NR - 1);
      pil = ($urandom_range(9) == 0);
      bw  = 40.0e6 + 2.0e6 * b;
      fc  = (2.0 * f - 3.0) * 1.0e6;
      xr  = real'(int'($urandom_range(2_000_000)) - 1_000_000);
      xi  = real'(int'($urandom_range(2_000_000)) - 1_000_000);
      @(negedge clk);
      in_valid = 1;
      in_last  = (m == NR - 1);
      in_bin   = 6'(m);
      in_sel   = '{pilot: pil, b_idx: BIW'(b), f_idx: FIW'(f)};
      in_data  = '{re: 24'($rtoi(xr)), im: 24'($rtoi(xi))};
      a  = (fc - (bw - 60.0e6) / 2.0) / 60.0e6;
      q  = (bw - 60.0e6) * 100.0e6 / (2.0 * NS * 60.0e6 * 60.0e6);
      ph = pil ? 0.0 : -2.0 * PI * wrap(a * m - q * m * m);
      er = xr * $cos(ph) - xi * $sin(ph);
      ei = xr * $sin(ph) + xi * $cos(ph);
      @(negedge clk);
      in_valid = 0;
      check(out_valid && out_bin == 6'(m) && out_last == (m == NR - 1), "valid/bin/last one clock later");
      e = $sqrt((er - real'(out_data.re))**2 + (ei - real'(out_data.im))**2);
      if (e > max_err) max_err = e;
      check(e <= 4.0 + 1.0e-3 * $sqrt(xr*xr + xi*xi),
            $sformatf("b=%0d f=%0d m=%0d pilot=%0d: got (%0d,%0d) exp (%0.1f,%0.1f)", b, f, m, pil,
                      int'(out_data.re), int'(out_data.im), er, ei));
    end
    $display("largest error %0.1f", max_err);
    finish_tb();
  end
endmodule
