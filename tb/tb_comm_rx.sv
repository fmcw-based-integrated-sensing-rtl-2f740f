// tb_comm_rx: one polarisation of the communication receiver, fed by the
// transmitter over a simple channel.
//
// An isac_tx sends frames of NCH_T chirps (pilot + data) with random data
// words. The channel delays the signal by a random number of samples, applies
// a random complex gain and adds uniform noise of +-64. comm_rx records each
// frame after a capture pulse issued CAP_LEAD clocks before frame_start.
// Checked per frame: the sync lag equals the delay seen from the capture, every
// data chirp is decoded once, in order, with the sent IM index and phase
// symbols, and frame_done follows the last decoded chirp.
module tb_comm_rx;
  import isac_pkg::*;
  localparam int WATCHDOG = 2_000_000;
  localparam int NCH_T    = 4;
  localparam int CAP_LEAD = 7;
  localparam int HIST     = 64;
  localparam int NFRAMES  = 2;
  `include "tb_common.svh"

  localparam int DWB = NIM + L_SEG * MB;

  // transmitter
  logic           frame_start = 0, comm_en = 1, data_valid = 1;
  logic [DWB-1:0] data_bits;
  logic           data_ready, tx_valid, tx_first, tx_frame, tx_busy;
  iq16_t          tx_iq;
  chirp_sel_t     tx_sel;
  logic [15:0]    tx_idle;

  isac_tx #(.NCH_P(NCH_T)) u_tx (
    .clk, .rst_n, .frame_start, .comm_en, .data_valid, .data_bits,
    .data_ready, .out_valid(tx_valid), .out_first(tx_first), .out_frame(tx_frame),
    .out_iq(tx_iq), .out_sel(tx_sel), .busy(tx_busy), .idle_chirps(tx_idle)
  );

  // receiver
  logic                     rx_valid = 1, capture = 0;
  iq16_t                    rx_iq = '0;
  logic [31:0]              sigma2_ce = 32'd1_000_000, sigma2_eq = 32'd2_700_000;
  logic                     ready, busy, sync_done, out_valid, out_err, frame_done;
  logic [5:0]               sync_lag;
  logic [$clog2(NCH_T)-1:0] out_chirp;
  logic [DWB-1:0]           out_bits;
  logic [BIW-1:0]           out_b_idx;
  logic [FIW-1:0]           out_f_idx;

  comm_rx #(.NCH_P(NCH_T)) dut (
    .clk, .rst_n, .in_valid(rx_valid), .in_iq(rx_iq), .capture, .sigma2_ce, .sigma2_eq,
    .ready, .busy, .sync_done, .sync_lag, .out_valid, .out_chirp, .out_bits, .out_err,
    .out_b_idx, .out_f_idx, .frame_done
  );

  // data source: a new random word after each one consumed
  logic [DWB-1:0] sent [NCH_T];
  int             words = 0;
  always_ff @(posedge clk) if (data_ready) begin
    words <= words + 1;
    sent[words + 1] <= data_bits;
    data_bits <= DWB'({$urandom, $urandom});
  end

  // channel
  iq16_t hist [HIST];
  int    hptr = 0, delay = 13;
  real   gre = 0.6, gim = 0.3;

  function automatic logic signed [15:0] clip16(input real v);
    if (v > 32767.0)  return 16'sd32767;
    if (v < -32768.0) return -16'sd32768;
    return 16'(longint'(v));
  endfunction

  always @(negedge clk) begin
    iq16_t d;
    real   re, im;
    hist[hptr] = tx_valid ? tx_iq : '0;
    d  = hist[(hptr - delay + HIST) % HIST];
    re = gre * real'(d.re) - gim * real'(d.im) + real'(int'($urandom_range(128)) - 64);
    im = gre * real'(d.im) + gim * real'(d.re) + real'(int'($urandom_range(128)) - 64);
    rx_iq = '{re: clip16(re), im: clip16(im)};
    hptr = (hptr + 1) % HIST;
  end

  // monitor
  int cyc = 0, cap_cycle = 0, frame_cycle = 0;
  int n_dec = 0, n_sync = 0, n_done = 0, next_chirp = 1;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (capture) cap_cycle <= cyc;
    if (tx_frame) frame_cycle <= cyc;
    if (sync_done) begin
      n_sync++;
      check(int'(sync_lag) == frame_cycle - cap_cycle - 1 + delay,
            $sformatf("sync lag %0d expected %0d", sync_lag, frame_cycle - cap_cycle - 1 + delay));
    end
    if (out_valid) begin
      int i;
      i = int'(out_chirp);
      n_dec++;
      check(i == next_chirp, $sformatf("chirp order: got %0d expected %0d", i, next_chirp));
      check(!out_err, "no decode error");
      check(out_bits[NIM-1:0] == sent[i][NIM-1:0],
            $sformatf("IM index chirp %0d: got %0d sent %0d", i, out_bits[NIM-1:0], sent[i][NIM-1:0]));
      check(out_bits[DWB-1:NIM] == sent[i][DWB-1:NIM],
            $sformatf("phase symbols chirp %0d: got %h sent %h", i, out_bits[DWB-1:NIM], sent[i][DWB-1:NIM]));
      check({out_b_idx, out_f_idx} == sent[i][NIM-1:0], "IM indices");
      next_chirp++;
    end
    if (frame_done) begin
      n_done++;
      check(next_chirp == NCH_T, "frame_done after the last data chirp");
    end
  end

  initial begin
    for (int i = 0; i < HIST; i++) hist[i] = '0;
    for (int i = 0; i < NCH_T; i++) sent[i] = '0;
    data_bits = DWB'({$urandom, $urandom});
    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int fr = 0; fr < NFRAMES; fr++) begin
      wait (ready && !busy && !tx_busy);
      @(negedge clk);
      delay      = 5 + int'($urandom_range(40));
      gre        = 0.3 + 0.5 * real'($urandom_range(100)) / 100.0;
      gim        = -0.4 + 0.8 * real'($urandom_range(100)) / 100.0;
      next_chirp = 1;
      words      = 0;
      capture    = 1;
      @(negedge clk) capture = 0;
      repeat (CAP_LEAD - 1) @(negedge clk);
      frame_start = 1;
      @(negedge clk) frame_start = 0;
      wait (n_done == fr + 1);
      repeat (5) @(negedge clk);
    end
    check(n_sync == NFRAMES, "one time sync per frame");
    check(n_dec == NFRAMES * (NCH_T - 1), "every data chirp decoded");
    finish_tb();
  end
endmodule
