// tb_pcfmcw_gen: chirps with random codebook bandwidth, centre frequency and
// phase symbols, compared sample by sample with a floating-point model:
//   x(n) = A*exp(j*2*pi*(f0*n/FS + b/(FS*NS)*n*(n-1)/2 + phi_s(n)))
// where phi_s is the PSK phase sequence smoothed exactly as defined: the
// argument of the sum over the 2K+1 binomial kernel taps (K = 0.1 segment) of
// exp(j*phi) of the neighbouring samples, with the chirp's own first and last
// segment held beyond its ends. Also checks the two-clock start latency,
// out_first/out_last, the tag, and a gap-free back-to-back chirp pair.
module tb_pcfmcw_gen;
  import isac_pkg::*;
  localparam int WATCHDOG = 20_000;
  localparam int SEG = NS / L_SEG;
  localparam int K   = SEG / 10;
  `include "tb_common.svh"

  logic                     start = 0;
  logic [31:0]              f0_ftw = '0, rate = '0;
  logic [L_SEG-1:0][MB-1:0] sym = '0;
  logic [0:0]               tag = '0;
  logic                     busy, next_ok, out_valid, out_first, out_last;
  iq16_t                    out_iq;
  logic [0:0]               out_tag;

  pcfmcw_gen dut (.*);

  real wk [2*K+1];
  int  max_err = 0;

  function automatic logic [31:0] tw(input real hz);
    real t;
    t = hz / 100.0e6 * 4294967296.0;
    if (t < 0) t = t + 4294967296.0;
    return 32'(longint'(t));
  endfunction

  // expected sample n of a chirp
  function automatic void model(input real f0, input real bw, input logic [L_SEG-1:0][MB-1:0] s,
                                input int n, output real er, output real ei);
    real th, sr, si, ph;
    int  m, l;
    th = f0 / 100.0e6 * n + bw / (100.0e6 * NS) * real'(n) * real'(n - 1) / 2.0;
    sr = 0.0; si = 0.0;
    for (int j = -K; j <= K; j++) begin
      m = n + j;
      if (m < 0) m = 0;
      if (m > NS - 1) m = NS - 1;
      l  = m / SEG;
      ph = 2.0 * PI * real'(s[l]) / real'(M_PSK);
      sr += wk[j + K] * $cos(ph);
      si += wk[j + K] * $sin(ph);
    end
    ph = 2.0 * PI * wrap(th) + $atan2(si, sr);
    er = 16383.0 * $cos(ph);
    ei = 16383.0 * $sin(ph);
  endfunction

  // one chirp: drive start at the current negedge, then check NS samples
  task automatic run_chirp(input bit chain);
    int  b, f, lat;
    real bw, fc, f0;
    logic [L_SEG-1:0][MB-1:0] s;
    logic [0:0] tg;
    b  = $urandom_range(NB - 1);
    f  = $urandom_range(NF - 1);
    bw = 40.0e6 + 2.0e6 * b;
    fc = (2.0 * f - 3.0) * 1.0e6;
    f0 = fc - bw / 2.0;
    s  = (L_SEG*MB)'({$urandom, $urandom});
    tg = 1'($urandom);
    start = 1; f0_ftw = tw(f0); rate = tw(bw / 1000.0); sym = s; tag = tg;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!out_valid) begin
      @(negedge clk);
      lat++;
    end
    if (!chain) check(lat == 2, $sformatf("start latency %0d", lat));
    for (int n = 0; n < NS; n++) begin
      real er, ei;
      int  e;
      check(out_valid, "continuous output");
      check(out_first == (n == 0) && out_last == (n == NS - 1), "first/last flags");
      check(out_tag == tg, "tag");
      model(f0, bw, s, n, er, ei);
      e = $rtoi($sqrt((er - real'(out_iq.re))**2 + (ei - real'(out_iq.im))**2));
      if (e > max_err) max_err = e;
      // near a segment boundary with opposite phases the smoothed phasor
      // passes close to zero and its argument is ill-conditioned
      check(e <= (((n % SEG) < K || (n % SEG) >= SEG - K) ? 40 : 12), $sformatf("sample %0d: got (%0d,%0d) exp (%0.1f,%0.1f)", n,
            int'(out_iq.re), int'(out_iq.im), er, ei));
      if (n == NS - 2 && chain) begin
        check(next_ok, "next_ok on the last sample");
        return;   // the caller starts the next chirp on this clock
      end
      if (n < NS - 1) @(negedge clk);
    end
  endtask

  initial begin
    longint c, s;
    c = 1; s = 0;
    for (int i = 0; i <= 2*K; i++) begin
      wk[i] = real'(c) / real'(64'd1 << (2*K));
      c = c * (2*K - i) / (i + 1);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(next_ok && !busy, "idle after reset");
    run_chirp(0);
    @(negedge clk);
    check(!out_valid && !busy, "stops after NS samples");
    repeat (5) @(negedge clk);
    // back to back: the second start comes with the last sample of the first
    for (int t = 0; t < 3; t++) begin
      run_chirp(1);
      @(negedge clk);   // now on the last sample of the running chirp
      check(out_last, "last sample while restarting");
      run_chirp(0);
      repeat (3) @(negedge clk);
    end
    $display("largest error %0d", max_err);
    finish_tb();
  end
endmodule
