// tb_pc_demod: equalised time-domain chirps of random bandwidth, centre
// frequency and PSK symbols (generated in floating point, phase smoothing
// left out), with a common phase error of up to 25 degrees, random amplitude
// and noise, followed by the zero-padding part of the IFFT output. The
// demodulated symbols must equal the sent ones, and done must pulse one
// clock after the last sample of the chirp.
module tb_pc_demod;
  import isac_pkg::*;
  localparam int WATCHDOG = 200_000;
  `include "tb_common.svh"

  logic [BIW-1:0] b_idx = '0;
  logic [FIW-1:0] f_idx = '0;
  logic           in_valid = 0;
  logic [9:0]     in_idx = '0;
  cplx24_t        in_data = '0;
  logic           done;
  logic [L_SEG-1:0][MB-1:0] sym;

  pc_demod dut (.*);

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int b, f, done_at;
      real bw, fc, a, pe, th, ph;
      logic [L_SEG-1:0][MB-1:0] s;
      b  = $urandom_range(NB - 1);
      f  = $urandom_range(NF - 1);
      bw = 40.0e6 + 2.0e6 * b;
      fc = (2.0 * f - 3.0) * 1.0e6;
      a  = 2000.0 + real'($urandom_range(30000));
      pe = (real'($urandom_range(500)) - 250.0) / 3600.0;   // turns, up to 25 degrees
      s  = (L_SEG*MB)'({$urandom, $urandom});
      b_idx = BIW'(b);
      f_idx = FIW'(f);
      done_at = -1;
      for (int n = 0; n < NFFT; n++) begin
        real xr, xi;
        @(negedge clk);
        if (done) done_at = n;
        xr = 0.0; xi = 0.0;
        if (n < NS) begin
          th = (fc - bw / 2.0) / 100.0e6 * n + bw / 1.0e11 * real'(n) * real'(n - 1) / 2.0;
          ph = 2.0 * PI * (wrap(th) + real'(s[n / (NS / L_SEG)]) / real'(M_PSK) + pe);
          xr = a * $cos(ph) + 0.1 * a * (real'($urandom_range(100)) / 50.0 - 1.0);
          xi = a * $sin(ph) + 0.1 * a * (real'($urandom_range(100)) / 50.0 - 1.0);
        end
        in_valid = 1;
        in_idx   = 10'(n);
        in_data  = '{re: 24'($rtoi(xr)), im: 24'($rtoi(xi))};
        if (n > 0) b_idx = BIW'($urandom);   // only sampled with sample 0
      end
      @(negedge clk);
      in_valid = 0;
      // sample NS-1 is taken at the clock after it is driven; done follows it
      check(done_at == NS, $sformatf("done seen at input %0d", done_at));
      check(sym == s, $sformatf("trial %0d: symbols %h sent %h", t, sym, s));
      repeat (3) @(negedge clk);
    end
    check(n_done == 40, "one done per chirp");
    finish_tb();
  end
endmodule
