// tb_radar_doppler: small maps (8 range bins, 10 chirps, 16-point Doppler
// transform). Frames of random values are written chirp by chirp; every map
// value is compared with the floating-point slow-time transform
//   D(m,k) = sum_i x(m,i) * exp(+j*2*pi*k*i/NDOP) / 2^(log2(NDOP)/2),
// zero padding included. Then frames are pushed faster than the Doppler stage
// can process them and the overrun flag must rise (and not before).
module tb_radar_doppler;
  import isac_pkg::*;
  localparam int WATCHDOG = 50_000;
  localparam int NR_T = 8, NCH_T = 10, NDOP_T = 16;
  `include "tb_common.svh"

  logic          in_valid = 0, in_last = 0;
  logic [2:0]    in_bin = '0;
  cplx24_t       in_data = '0;
  logic          out_valid, frame_done, overrun;
  logic [2:0]    out_bin;
  logic [3:0]    out_dop;
  cplx24_t       out_data;

  radar_doppler #(.NR_P(NR_T), .NCH_P(NCH_T), .NDOP_P(NDOP_T)) dut (.*);

  real xr [3][NR_T][NCH_T], xi [3][NR_T][NCH_T];
  int  frames_out = 0, n_out = 0, n_done = 0;
  bit  fast = 0;

  task automatic send_frame(input int fr, input int gap);
    for (int i = 0; i < NCH_T; i++)
      for (int m = 0; m < NR_T; m++) begin
        xr[fr][m][i] = real'(int'($urandom_range(200_000)) - 100_000);
        xi[fr][m][i] = real'(int'($urandom_range(200_000)) - 100_000);
        @(negedge clk);
        in_valid = 1;
        in_last  = (m == NR_T - 1);
        in_bin   = 3'(m);
        in_data  = '{re: 24'($rtoi(xr[fr][m][i])), im: 24'($rtoi(xi[fr][m][i]))};
        @(negedge clk);
        in_valid = 0;
        repeat (gap) @(negedge clk);
      end
  endtask

  // checker of the map values of frames sent with gaps
  always @(posedge clk) if (!fast) begin
    if (out_valid) begin
      real er, ei, ang, e;
      int  m, k, fr;
      m = int'(out_bin); k = int'(out_dop); fr = frames_out % 3;
      check(m == n_out / NDOP_T && k == n_out % NDOP_T, "map order");
      er = 0.0; ei = 0.0;
      for (int i = 0; i < NCH_T; i++) begin
        ang = 2.0 * PI * real'(k * i) / real'(NDOP_T);
        er += xr[fr][m][i] * $cos(ang) - xi[fr][m][i] * $sin(ang);
        ei += xr[fr][m][i] * $sin(ang) + xi[fr][m][i] * $cos(ang);
      end
      er /= 4.0; ei /= 4.0;
      e = $sqrt((er - real'(out_data.re))**2 + (ei - real'(out_data.im))**2);
      // bound: 8 LSB plus 0.1% of the rms map value (about 65000)
      check(e <= 8.0 + 65.0, $sformatf("frame %0d (%0d,%0d): got (%0d,%0d) exp (%0.1f,%0.1f)",
            frames_out, m, k, int'(out_data.re), int'(out_data.im), er, ei));
      n_out++;
    end
    if (frame_done) begin
      check(n_out == NR_T * NDOP_T, "complete map before frame_done");
      n_out = 0;
      frames_out++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 3; fr++) begin
      send_frame(fr, 6);            // 7 clocks per value: slower than the Doppler stage
      check(!overrun, "no overrun at a sustainable rate");
    end
    wait (frames_out == 3);
    repeat (5) @(negedge clk);
    fast = 1;
    for (int fr = 0; fr < 3; fr++) send_frame(fr, 0);
    repeat (5) @(negedge clk);
    check(overrun, "overrun flagged when frames arrive faster than processed");
    finish_tb();
  end
endmodule
