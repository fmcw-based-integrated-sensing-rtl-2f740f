// Shared body of the end-to-end testbenches of isac_top (included inside a
// module that defines NCH_T, the number of chirps per frame of the DUT, and
// instantiates the DUT as `dut`).
//
// Scenario, both polarisations at once:
//   frame 1 (comm_en = 1): pilot + data chirps with random data; the data
//     source stalls once, so one chirp goes out as plain FMCW (idle chirp).
//     The communication receivers record the frame through a channel with
//     delay DC, a complex gain per polarisation, cross-polarisation leakage
//     14 dB below the co-polar gain and small noise, then decode it. The radar receivers see an
//     echo with delay DR and a Doppler shift of DOP_BIN/NDOP cycles per chirp.
//   frame 2 (comm_en = 0): sensing only, every chirp is plain FMCW.
// Checks: every decoded data word equals the word sent (IM and PM counted
// separately), the sync lag equals the channel delay seen from the capture
// point, the range-Doppler peak of each frame sits at (range bin of DR,
// DOP_BIN), the idle-chirp counters, and that each mechanism happened.

  localparam int DC      = 13;    // comm channel delay, samples
  localparam int DR      = 10;    // radar echo delay -> range bin 6
  localparam int EXP_BIN = (DR * 60) / 100;
  localparam int DOP_BIN = 5;
  localparam int CAP_LEAD = 7;    // capture this many clocks before frame_start
  localparam int HIST    = 64;
  localparam real XPOL   = 0.12;  // cross-polarisation leakage, -14 dB below |g_p| of about 0.6

  logic clk = 0, rst_n = 1;
  // a real falling edge, so that the asynchronous resets act
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic                         frame_start = 0, comm_en = 1, comm_capture = 0;
  logic [31:0]                  sigma2_ce = 32'd1_000_000, sigma2_eq = 32'd2_700_000;
  logic [1:0]                   data_valid;
  logic [1:0][NIM+L_SEG*MB-1:0] data_bits;
  logic [1:0]                   data_ready;
  logic [1:0]                   tx_valid, tx_first, tx_frame;
  iq16_t [1:0]                  tx_iq;
  logic [1:0][15:0]             tx_idle_chirps;
  iq16_t [1:0]                  radar_rx_iq;
  logic [1:0]                   rd_valid, rd_frame_done, rd_overrun;
  logic [1:0][5:0]              rd_bin, rd_dop;
  cplx24_t [1:0]                rd_data;
  logic [1:0]                   comm_rx_valid;
  iq16_t [1:0]                  comm_rx_iq;
  logic [1:0]                   comm_ready, comm_sync_done, comm_valid, comm_err, comm_frame_done;
  logic [1:0][5:0]              comm_sync_lag;
  logic [1:0][$clog2(NCH_T)-1:0] comm_chirp;
  logic [1:0][NIM+L_SEG*MB-1:0] comm_bits;
  logic [1:0][BIW-1:0]          comm_b_idx;
  logic [1:0][FIW-1:0]          comm_f_idx;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- data source ----------------
  logic [NIM+L_SEG*MB-1:0] sent [2][NCH_T];
  bit                      idle [2][NCH_T];
  int                      prep [2];
  int                      words[2];
  logic [15:0]             idle_prev [2];
  bit                      stall [2];
  int                      n_stall_chirps = 0;

  function automatic logic [NIM+L_SEG*MB-1:0] rnd_word();
    return {$urandom, $urandom};
  endfunction

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      if (data_ready[p]) begin
        prep[p]++;
        if (prep[p] < NCH_T) begin
          sent[p][prep[p]] <= data_bits[p];
          idle[p][prep[p]] <= 1'b0;
        end
        words[p]++;
        data_bits[p] <= rnd_word();
      end
      if (tx_idle_chirps[p] != idle_prev[p]) begin
        prep[p]++;
        if (prep[p] < NCH_T) idle[p][prep[p]] <= 1'b1;
        idle_prev[p] <= tx_idle_chirps[p];
        if (stall[p]) n_stall_chirps++;
        stall[p] <= 1'b0;
      end
    end
  end
  assign data_valid = {~stall[1], ~stall[0]};

  // ---------------- channels ----------------
  iq16_t hist [2][HIST];
  int    hptr = 0;
  longint ntx = 0;   // transmitted samples since frame start (radar Doppler)
  real    gre[2] = '{0.55, 0.35};
  real    gim[2] = '{0.40, -0.50};

  function automatic logic signed [15:0] clip16(input real v);
    if (v > 32767.0)  return 16'sd32767;
    if (v < -32768.0) return -16'sd32768;
    return 16'($rtoi(v));
  endfunction

  always @(negedge clk) begin
    for (int p = 0; p < 2; p++) hist[p][hptr] = tx_valid[p] ? tx_iq[p] : '0;
    for (int p = 0; p < 2; p++) begin
      iq16_t d, x;
      real   ph, re, im, nre, nim;
      // radar echo: 0.5 * tx(n-DR) * exp(j*2*pi*fd*n)
      d  = hist[p][(hptr - DR + HIST) % HIST];
      ph = 2.0 * 3.14159265358979 * real'(ntx) * real'(DOP_BIN) / (real'(NDOP) * real'(NS));
      re = 0.5 * (real'(d.re) * $cos(ph) - real'(d.im) * $sin(ph));
      im = 0.5 * (real'(d.re) * $sin(ph) + real'(d.im) * $cos(ph));
      radar_rx_iq[p] = '{re: clip16(re), im: clip16(im)};
      // comm: g_p * tx_p(n-DC) + XPOL * tx_q(n-DC) + noise
      d   = hist[p][(hptr - DC + HIST) % HIST];
      x   = hist[1-p][(hptr - DC + HIST) % HIST];
      nre = real'(int'($urandom_range(128)) - 64);
      nim = real'(int'($urandom_range(128)) - 64);
      re  = gre[p] * real'(d.re) - gim[p] * real'(d.im) + XPOL * real'(x.re) + nre;
      im  = gre[p] * real'(d.im) + gim[p] * real'(d.re) + XPOL * real'(x.im) + nim;
      comm_rx_iq[p] = '{re: clip16(re), im: clip16(im)};
    end
    if (tx_valid[0]) ntx++;
    hptr = (hptr + 1) % HIST;
  end
  assign comm_rx_valid = 2'b11;

  // ---------------- radar map monitor ----------------
  longint best_m2 [2];
  int     best_bin [2], best_dop [2];
  int     maps_done [2];
  int     rd_frames = 0;

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      if (rd_valid[p]) begin
        longint m2;
        m2 = mag2(rd_data[p]);
        if (m2 > best_m2[p]) begin
          best_m2[p]  <= m2;
          best_bin[p] <= int'(rd_bin[p]);
          best_dop[p] <= int'(rd_dop[p]);
        end
      end
      if (rd_frame_done[p]) begin
        $display("radar pol %0d frame %0d: peak at range bin %0d, Doppler bin %0d",
                 p, maps_done[p] + 1, best_bin[p], best_dop[p]);
        check(best_bin[p] == EXP_BIN && best_dop[p] == DOP_BIN,
              $sformatf("radar pol %0d peak (%0d,%0d) expected (%0d,%0d)",
                        p, best_bin[p], best_dop[p], EXP_BIN, DOP_BIN));
        check(!rd_overrun[p], "Doppler memory overrun");
        maps_done[p] <= maps_done[p] + 1;
        best_m2[p]   <= 0;
        rd_frames++;
      end
    end
  end

  // ---------------- comm monitor ----------------
  int  n_dec = 0, n_idle_rx = 0, im_err = 0, pm_err = 0, n_sync = 0;
  int  bw_used [NB];
  int  cap_cycle = 0, frame_cycle = 0, cyc = 0;
  bit  frame_seen = 0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (comm_capture) cap_cycle <= cyc;
    if (tx_frame[0] && !frame_seen) begin
      frame_cycle <= cyc;
      frame_seen  <= 1'b1;
    end
    for (int p = 0; p < 2; p++) begin
      if (comm_sync_done[p]) begin
        n_sync++;
        // capture pulse at clock c -> first recorded sample is tx sample of clock c+1
        $display("comm pol %0d: sync lag %0d (expected %0d)", p, comm_sync_lag[p],
                 frame_cycle - cap_cycle - 1 + DC);
        check(int'(comm_sync_lag[p]) == frame_cycle - cap_cycle - 1 + DC,
              $sformatf("sync lag pol %0d", p));
      end
      if (comm_valid[p]) begin
        int i;
        i = int'(comm_chirp[p]);
        if (idle[p][i]) begin
          n_idle_rx++;
        end else begin
          n_dec++;
          bw_used[int'(comm_b_idx[p])]++;
          check(comm_bits[p][NIM-1:0] == sent[p][i][NIM-1:0],
                $sformatf("IM symbol pol %0d chirp %0d: got %h sent %h", p, i,
                          comm_bits[p][NIM-1:0], sent[p][i][NIM-1:0]));
          check(comm_bits[p][NIM+L_SEG*MB-1:NIM] == sent[p][i][NIM+L_SEG*MB-1:NIM],
                $sformatf("PM symbols pol %0d chirp %0d: got %h sent %h", p, i,
                          comm_bits[p][NIM+L_SEG*MB-1:NIM], sent[p][i][NIM+L_SEG*MB-1:NIM]));
          if (comm_bits[p][NIM-1:0] != sent[p][i][NIM-1:0]) im_err++;
          if (comm_bits[p][NIM+L_SEG*MB-1:NIM] != sent[p][i][NIM+L_SEG*MB-1:NIM]) pm_err++;
          check(!comm_err[p], "codebook index out of range");
        end
      end
    end
  end

  // ---------------- sequence ----------------
  initial begin
    data_bits = {rnd_word(), rnd_word()};
    for (int p = 0; p < 2; p++) begin
      prep[p] = 0; words[p] = 0; idle_prev[p] = 0; stall[p] = 0;
      best_m2[p] = 0; maps_done[p] = 0; best_bin[p] = 0; best_dop[p] = 0;
      for (int i = 0; i < NCH_T; i++) begin
        sent[p][i] = '0;
        idle[p][i] = 1'b0;
      end
      for (int i = 0; i < HIST; i++) hist[p][i] = '0;
    end
    foreach (bw_used[b]) bw_used[b] = 0;
    radar_rx_iq = '0;
    comm_rx_iq  = '0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (comm_ready == 2'b11);
    @(negedge clk);
    // frame 1: communication on, capture at the receivers
    comm_capture = 1;
    @(negedge clk) comm_capture = 0;
    repeat (CAP_LEAD - 1) @(negedge clk);
    frame_start = 1;
    @(negedge clk) frame_start = 0;
    // stall the data source once, after three words per polarisation
    wait (words[0] >= 3 && words[1] >= 3);
    @(negedge clk) stall[0] = 1; stall[1] = 1;
    wait (tx_frame == 2'b00 && !dut.g_pol[0].u_tx.busy);
    // frame 2: sensing only
    repeat (20) @(negedge clk);
    comm_en = 0;
    frame_start = 1;
    @(negedge clk) frame_start = 0;
    wait (maps_done[0] == 2 && maps_done[1] == 2 && comm_frame_done == 2'b00 && n_dec + n_idle_rx == 2*(NCH_T-1));
    repeat (10) @(posedge clk);
    $display("decoded data chirps %0d, idle chirps seen %0d, IM errors %0d, PM errors %0d",
             n_dec, n_idle_rx, im_err, pm_err);
    // mechanisms
    check(n_dec == 2*(NCH_T-2), $sformatf("data chirps decoded %0d", n_dec));
    check(n_stall_chirps == 2, "data-source stall -> plain chirp, once per polarisation");
    check(n_sync == 2, "time sync ran for both polarisations");
    check(rd_frames == 4, "range-Doppler maps: 2 frames x 2 polarisations");
    check(tx_idle_chirps[0] == 16'(1 + NCH_T - 1) && tx_idle_chirps[1] == 16'(1 + NCH_T - 1),
          "sensing-only frame sends plain chirps");
    begin
      automatic int nb = 0;
      foreach (bw_used[b]) if (bw_used[b] > 0) nb++;
      $display("distinct bandwidths decoded: %0d", nb);
      check(nb >= 2, "bandwidth hopping exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
