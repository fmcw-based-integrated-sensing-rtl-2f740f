// tb_im_ml_est: synthetic equalised spectra of random codebook chirps: a
// band from fc - b/2 to fc + b/2 (in FFT bins of FS/NFFT) with random phase
// and +/-30 % ripple, a weak copy of another codebook chirp (cross-
// polarisation leakage, -14 dB) and a noise floor. The estimator must return
// the transmitted (b, f), and its done pulse must come 2*NFFT + NB*NF + 1
// clocks after the last bin.
module tb_im_ml_est;
  import isac_pkg::*;
  localparam int WATCHDOG = 400_000;
  `include "tb_common.svh"

  logic        in_valid = 0;
  logic [9:0]  in_idx = '0;
  cplx24_t     in_data = '0;
  logic        done;
  logic [BIW-1:0] b_idx;
  logic [FIW-1:0] f_idx;
  logic [NB*NF-1:0][31:0] scores;

  im_ml_est dut (.*);

  function automatic bit in_band(input int k, input int b, input int f);
    real fk, lo, hi;
    fk = real'((k < NFFT/2) ? k : k - NFFT) * 100.0e6 / real'(NFFT);
    lo = (2.0 * f - 3.0) * 1.0e6 - (40.0e6 + 2.0e6 * b) / 2.0;
    hi = (2.0 * f - 3.0) * 1.0e6 + (40.0e6 + 2.0e6 * b) / 2.0;
    return fk >= lo && fk <= hi;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int b, f, b2, f2, cyc;
      real a;
      b  = (t < NB) ? t : $urandom_range(NB - 1);
      f  = $urandom_range(NF - 1);
      b2 = $urandom_range(NB - 1);
      f2 = $urandom_range(NF - 1);
      a  = 20000.0 + real'($urandom_range(100000));
      for (int k = 0; k < NFFT; k++) begin
        real m, p;
        m = 0.03 * a * real'($urandom_range(100)) / 100.0;
        if (in_band(k, b2, f2)) m += 0.2 * a;
        if (in_band(k, b, f))   m += a * (0.7 + 0.6 * real'($urandom_range(100)) / 100.0);
        p = 2.0 * PI * real'($urandom_range(999)) / 1000.0;
        @(negedge clk);
        in_valid = 1;
        in_idx   = 10'(k);
        in_data  = '{re: 24'($rtoi(m * $cos(p))), im: 24'($rtoi(m * $sin(p)))};
      end
      @(negedge clk);
      in_valid = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      check(int'(b_idx) == b && int'(f_idx) == f,
            $sformatf("trial %0d: got b=%0d f=%0d, sent b=%0d f=%0d", t, b_idx, f_idx, b, f));
      check(cyc == 2 * NFFT + NB * NF + 1, $sformatf("decision took %0d clocks", cyc));
    end
    finish_tb();
  end
endmodule
