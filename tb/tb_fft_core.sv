// tb_fft_core: 64-point transforms of random data, forward and inverse, with
// different per-stage scaling masks, compared with a direct DFT computed in
// floating point. Also checks the natural output order, the out_en hold and
// the compute latency of (N/2)*log2(N) butterfly clocks. The error bound is
// 8 LSB plus 0.6% of the rms output (16-bit CORDIC twiddles, one rounding per
// product).
module tb_fft_core;
  import isac_pkg::*;
  localparam int WATCHDOG = 200_000;
  localparam int N    = 64;
  localparam int LOGN = 6;
  `include "tb_common.svh"

  logic            inverse = 0, in_valid = 0, out_en = 1;
  logic [LOGN-1:0] scale = '0;
  cplx24_t         in_data = '0, out_data;
  logic            in_ready, out_valid, busy;
  logic [LOGN-1:0] out_idx;

  fft_core #(.N(N)) dut (.*);

  real xr [N], xi [N];
  int  max_err;

  task automatic run_one(input bit inv, input logic [LOGN-1:0] sc, input int amp, input bit stall);
    int nsc, k_out, t_last, t_first, cyc;
    real g;
    nsc = $countones(sc);
    g   = 1.0 / real'(1 << nsc);
    for (int n = 0; n < N; n++) begin
      xr[n] = real'(int'($urandom_range(2*amp)) - amp);
      xi[n] = real'(int'($urandom_range(2*amp)) - amp);
    end
    inverse = inv;
    scale   = sc;
    cyc = 0;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      check(in_ready, "ready while loading");
      in_valid = 1;
      in_data  = '{re: 24'($rtoi(xr[n])), im: 24'($rtoi(xi[n]))};
      if (n == 7) begin    // a gap in the input stream
        in_valid = 0;
        @(negedge clk);
        in_valid = 1;
      end
    end
    @(negedge clk) in_valid = 0;
    t_last = 0;
    k_out  = 0;
    while (k_out < N) begin
      if (stall) out_en = ($urandom_range(3) != 0);
      @(posedge clk);
      t_last++;
      if (out_valid) begin
        real er, ei, ang;
        int  k;
        k = int'(out_idx);
        if (k_out == 0) t_first = t_last;
        check(k == k_out, "natural output order");
        er = 0.0; ei = 0.0;
        for (int n = 0; n < N; n++) begin
          ang = (inv ? 2.0 : -2.0) * PI * real'(n * k) / real'(N);
          er += xr[n] * $cos(ang) - xi[n] * $sin(ang);
          ei += xr[n] * $sin(ang) + xi[n] * $cos(ang);
        end
        er *= g; ei *= g;
        begin
          int e;
          e = $rtoi($sqrt((er - real'(out_data.re))**2 + (ei - real'(out_data.im))**2));
          if (e > max_err) max_err = e;
          check(real'(e) <= 8.0 + 6.0e-3 * real'(amp) * $sqrt(2.0 * N / 3.0) * g, $sformatf("bin %0d: got (%0d,%0d) exp (%f,%f)", k, int'(out_data.re), int'(out_data.im), er, ei));
        end
        k_out++;
      end
      @(negedge clk);
    end
    out_en = 1;
    if (!stall)   // load ends at the last input; N/2*log2N butterflies, then 1 clock to the first output
      check(t_first == (N/2)*LOGN + 2, $sformatf("latency %0d", t_first));
    @(negedge clk);
    check(!busy, "idle after unload");
  endtask

  initial begin
    max_err = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_one(0, 6'b111111, 100000, 0);
    run_one(1, 6'b111111, 100000, 0);
    run_one(0, 6'b101010, 20000, 0);
    run_one(1, 6'b010101, 20000, 1);
    run_one(0, 6'b000000, 1000, 1);
    for (int t = 0; t < 5; t++) run_one(t % 2, LOGN'($urandom), 8000, t % 2);
    $display("largest error %0d", max_err);
    finish_tb();
  end
endmodule
