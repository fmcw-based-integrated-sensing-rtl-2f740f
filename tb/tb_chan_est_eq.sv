// tb_chan_est_eq: 32-bin spectra. A reference pilot spectrum u is stored, a
// received pilot y_p = H*u (random complex channel per bin) gives the
// channel estimate, and data spectra y = H*x are equalised. The output is
// compared with the LMMSE/MMSE formulas evaluated in floating point,
//   h = y_p conj(u) / (|u|^2 + s_ce),  x^ = conj(h) y / (|h|^2 + s_eq),
// and, with no regularisation, with the transmitted x itself. Output only
// in data mode, one clock after the input.
module tb_chan_est_eq;
  import isac_pkg::*;
  localparam int WATCHDOG = 20_000;
  localparam int N = 32;
  `include "tb_common.svh"

  logic [1:0]  mode = 2'd0;
  logic [31:0] sigma2_ce = 32'd0, sigma2_eq = 32'd0;
  logic        in_valid = 0;
  logic [4:0]  in_idx = '0;
  cplx24_t     in_data = '0;
  logic        out_valid;
  logic [4:0]  out_idx;
  cplx24_t     out_data;

  chan_est_eq #(.NFFT_P(N)) dut (.*);

  real ur [N], ui [N], hr [N], hi [N], er_h [N], ei_h [N];

  task automatic feed(input logic [1:0] md, input real dr [N], input real di [N],
                      input bit expect_out, input real xr [N], input real xi [N], input real tol_x);
    mode = md;
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      in_valid = 1;
      in_idx   = 5'(k);
      in_data  = '{re: 24'($rtoi(dr[k])), im: 24'($rtoi(di[k]))};
      @(negedge clk);
      in_valid = 0;
      check(out_valid == expect_out, "output only in data mode");
      if (expect_out) begin
        real yr, yi, den, qr, qi, e;
        yr  = real'(int'(in_data.re)); yi = real'(int'(in_data.im));
        // x^ = conj(h) y * 2^14 / (|h|^2 + s), h in Q14
        den = (er_h[k]**2 + ei_h[k]**2) + real'(sigma2_eq) + 1.0;
        qr  = (er_h[k] * yr + ei_h[k] * yi) * 16384.0 / den;
        qi  = (er_h[k] * yi - ei_h[k] * yr) * 16384.0 / den;
        e   = $sqrt((qr - real'(out_data.re))**2 + (qi - real'(out_data.im))**2);
        check(int'(out_idx) == k, "index follows");
        check(e <= 3.0 + 2.0e-3 * $sqrt(qr*qr + qi*qi), $sformatf("bin %0d: got (%0d,%0d) exp (%0.1f,%0.1f)",
              k, int'(out_data.re), int'(out_data.im), qr, qi));
        if (tol_x > 0.0)
          check($sqrt((xr[k] - real'(out_data.re))**2 + (xi[k] - real'(out_data.im))**2) <= tol_x,
                $sformatf("bin %0d: equalised (%0d,%0d) sent (%0.0f,%0.0f)", k,
                          int'(out_data.re), int'(out_data.im), xr[k], xi[k]));
      end
    end
  endtask

  initial begin
    real yr [N], yi [N], xr [N], xi [N], z [N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      sigma2_ce = (trial < 2) ? 32'd0 : 32'd50_000_000;
      sigma2_eq = (trial < 2) ? 32'd0 : 32'd20_000_000;
      for (int k = 0; k < N; k++) begin
        real a, p;
        a = 5000.0 + real'($urandom_range(20000));
        p = 2.0 * PI * real'($urandom_range(999)) / 1000.0;
        ur[k] = a * $cos(p); ui[k] = a * $sin(p);
        a = 0.3 + real'($urandom_range(1200)) / 1000.0;
        p = 2.0 * PI * real'($urandom_range(999)) / 1000.0;
        hr[k] = a * $cos(p); hi[k] = a * $sin(p);
        yr[k] = $rtoi(hr[k] * ur[k] - hi[k] * ui[k]);
        yi[k] = $rtoi(hr[k] * ui[k] + hi[k] * ur[k]);
        z[k]  = 0.0;
      end
      // expected channel estimate, Q14
      for (int k = 0; k < N; k++) begin
        real den, u_r, u_i;
        u_r = real'($rtoi(ur[k])); u_i = real'($rtoi(ui[k]));
        den = u_r*u_r + u_i*u_i + real'(sigma2_ce) + 1.0;
        er_h[k] = $rtoi((yr[k] * u_r + yi[k] * u_i) * 16384.0 / den);
        ei_h[k] = $rtoi((yi[k] * u_r - yr[k] * u_i) * 16384.0 / den);
      end
      feed(2'd0, ur, ui, 0, z, z, 0.0);
      feed(2'd1, yr, yi, 0, z, z, 0.0);
      for (int d = 0; d < 3; d++) begin
        for (int k = 0; k < N; k++) begin
          xr[k] = real'(int'($urandom_range(40000)) - 20000);
          xi[k] = real'(int'($urandom_range(40000)) - 20000);
          yr[k] = $rtoi(hr[k] * xr[k] - hi[k] * xi[k]);
          yi[k] = $rtoi(hr[k] * xi[k] + hi[k] * xr[k]);
        end
        feed(2'd2, yr, yi, 1, xr, xi, (trial < 2) ? 30.0 : 0.0);
      end
    end
    finish_tb();
  end
endmodule
