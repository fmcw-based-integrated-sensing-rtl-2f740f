// tb_isac_tx: frames of 5 chirps of 100 samples. Checks the frame structure
// (pilot first, gap-free chirps, frame and chirp markers, 4-clock start
// latency), that each data chirp carries the codebook entry of the word taken
// on data_ready (in order), the first samples of every chirp against the
// floating-point chirp model, the plain chirp sent when the data source
// stalls, and the sensing-only frame with comm_en low (idle_chirps count).
module tb_isac_tx;
  import isac_pkg::*;
  localparam int WATCHDOG = 20_000;
  localparam int NS_T = 100, NCH_T = 5;
  `include "tb_common.svh"

  logic                    frame_start = 0, comm_en = 1, data_valid = 1;
  logic [NIM+L_SEG*MB-1:0] data_bits = '0;
  logic                    data_ready, out_valid, out_first, out_frame, busy;
  iq16_t                   out_iq;
  chirp_sel_t              out_sel;
  logic [15:0]             idle_chirps;

  isac_tx #(.NS_P(NS_T), .NCH_P(NCH_T)) dut (.*);

  logic [NIM+L_SEG*MB-1:0] words [$];
  int n_ready = 0, frame_words = 0, stall_after = -1;
  logic [15:0] idle_seen = '0;
  always @(posedge clk) begin
    if (data_ready) begin
      words.push_back(data_bits);
      n_ready++;
      frame_words++;
    end
    idle_seen <= idle_chirps;
  end
  // the source has no word ready after stall_after words of this frame,
  // until the transmitter has sent a plain chirp in its place
  bit released = 0;
  always @(negedge clk) begin
    if (idle_chirps != idle_seen && !data_valid) released = 1;
    data_valid = !(frame_words == stall_after && !released);
  end
  always @(negedge clk) if (data_ready === 1'b0 && $urandom_range(3) == 0) data_bits = (NIM+L_SEG*MB)'({$urandom, $urandom});

  // one frame; stall_at: chirp index whose preparation sees data_valid low (-1: none)
  task automatic run_frame(input bit ce, input int stall_at);
    int lat, idle0, c, n;
    logic [NIM+L_SEG*MB-1:0] w;
    bit exp_pilot;
    comm_en = ce;
    idle0 = int'(idle_chirps);
    words.delete();
    frame_words = 0;
    released    = 0;
    stall_after = (stall_at > 0) ? stall_at - 1 : -1;
    @(negedge clk);
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    lat = 1;
    while (!out_valid) begin
      @(negedge clk);
      lat++;
    end
    // frame_start is sampled at the clock after this count starts; the first
    // sample follows 4 clocks after that
    check(lat == 5, $sformatf("frame start latency %0d", lat));
    for (c = 0; c < NCH_T; c++) begin
      real bw, fc, f0;
      int  b, f;
      logic [L_SEG-1:0][MB-1:0] s;
      exp_pilot = (c == 0) || !ce || (c == stall_at);
      if (!exp_pilot) w = words.pop_front();
      b  = int'(w[NIM-1:0]) / NF;
      f  = int'(w[NIM-1:0]) % NF;
      s  = w[NIM +: L_SEG*MB];
      bw = exp_pilot ? 60.0e6 : 40.0e6 + 2.0e6 * b;
      fc = exp_pilot ? 0.0 : (2.0 * f - 3.0) * 1.0e6;
      f0 = fc - bw / 2.0;
      for (n = 0; n < NS_T; n++) begin
        check(out_valid, "gap-free chirp train");
        check(out_first == (n == 0), "chirp marker");
        check(out_frame == (n == 0 && c == 0), "frame marker");
        check(out_sel.pilot == exp_pilot, $sformatf("chirp %0d pilot flag", c));
        if (!exp_pilot) check(out_sel.b_idx == BIW'(b) && out_sel.f_idx == FIW'(f), "codebook entry");
        if (n < 4) begin
          real th, ph, er, ei;
          th = f0 / 100.0e6 * n + bw / (100.0e6 * NS_T) * real'(n) * real'(n - 1) / 2.0;
          ph = 2.0 * PI * (wrap(th) + (exp_pilot ? 0.0 : real'(s[0]) / real'(M_PSK)));
          er = 16383.0 * $cos(ph);
          ei = 16383.0 * $sin(ph);
          check($sqrt((er - real'(out_iq.re))**2 + (ei - real'(out_iq.im))**2) < 12.0,
                $sformatf("chirp %0d sample %0d (%0d,%0d) exp (%0.1f,%0.1f)", c, n,
                          int'(out_iq.re), int'(out_iq.im), er, ei));
        end
        @(negedge clk);
      end
    end
    check(!out_valid, "frame ends after NCH chirps");
    stall_after = -1;
    repeat (3) @(negedge clk);
    check(!busy, "idle after the frame");
    check(int'(idle_chirps) - idle0 == (!ce ? NCH_T - 1 : (stall_at > 0 ? 1 : 0)),
          $sformatf("idle chirp count %0d", int'(idle_chirps) - idle0));
    check(words.size() == 0, "every word taken was sent");
  endtask

  initial begin
    data_bits = (NIM+L_SEG*MB)'({$urandom, $urandom});
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_frame(1, -1);
    check(n_ready == NCH_T - 1, "one data word per data chirp");
    run_frame(1, 2);          // the source stalls when chirp 2 is prepared
    run_frame(0, -1);         // sensing only
    run_frame(1, 3);
    finish_tb();
  end
endmodule
