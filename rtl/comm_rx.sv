// comm_rx: communication receiver of one polarisation.
//
// Processing chain (one row of the dual-polarised receiver):
//   record frame -> time sync on the pilot -> per chirp: FFT ->
//   channel estimation (pilot) / MMSE equalisation (data) ->
//   IM ML estimation and, in parallel, IFFT of the equalised spectrum ->
//   phase-code demodulation with the estimated b, f -> codebook decoding.
//
// After reset the block synthesises the reference pilot chirp, transforms it
// and stores its spectrum in the equaliser (about NFFT_P*(2+log2(NFFT_P)/2)
// clocks; `ready` then goes high). A `capture` pulse records the next
// NCH_P*NS_P + WIN input samples. Time sync then searches the first WIN
// positions for the pilot (WIN*(NS_P+2) clocks). Chirp i is read from
// lag + i*NS_P, zero-padded to NFFT_P points and transformed. Chirp 0 updates
// the channel estimate; chirps 1..NCH_P-1 are equalised and demodulated, one at
// a time (roughly 2*NFFT_P*(2+log2(NFFT_P)/2) clocks per chirp). Each data
// chirp gives one out_valid pulse with its index, the decoded bits and the
// estimated IM indices. frame_done follows the last chirp.
//
// The order of operations follows the receiver of the paper, including its
// offline character: the measured system recorded IQ data and then
// processed it. Processing one chirp at a time, the frame memory and the
// sequencing are this design's choices; the IFFT output waits for the IM
// decision, which the phase-code demodulator needs.
module comm_rx
  import isac_pkg::*;
#(
  parameter int NS_P   = NS,
  parameter int NCH_P  = NCHIRP,
  parameter int NFFT_P = NFFT,
  parameter int WIN    = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  iq16_t                   in_iq,
  input  logic                    capture,
  input  logic [31:0]             sigma2_ce,
  input  logic [31:0]             sigma2_eq,
  output logic                    ready,
  output logic                    busy,
  output logic                    sync_done,
  output logic [$clog2(WIN)-1:0]  sync_lag,
  output logic                    out_valid,
  output logic [$clog2(NCH_P)-1:0] out_chirp,
  output logic [NIM+L_SEG*MB-1:0] out_bits,
  output logic                    out_err,
  output logic [BIW-1:0]          out_b_idx,
  output logic [FIW-1:0]          out_f_idx,
  output logic                    frame_done
);

  localparam int DEPTH = NCH_P * NS_P + WIN;
  localparam int AW    = $clog2(DEPTH);
  localparam int KW    = $clog2(NFFT_P);
  localparam int CHW   = $clog2(NCH_P);
  localparam int NW    = $clog2(NS_P + 1);

  function automatic logic [KW-1:0] alt_scale();
    logic [KW-1:0] s;
    for (int i = 0; i < KW; i++) s[i] = (i % 2 == 0);
    return s;
  endfunction
  localparam logic [KW-1:0] SCALE = alt_scale();

  localparam logic [31:0] P_F0   = ftw(-PILOT_BW_HZ/2);
  localparam logic [31:0] P_RATE = rate_word(PILOT_BW_HZ, NS_P);

  typedef enum logic [3:0] {
    S_RESET, S_INIT, S_INIT_WAIT, S_IDLE, S_CAP, S_SYNC,
    S_FEED, S_SPEC, S_DEMOD
  } state_t;
  state_t st;

  // ---------------- frame memory ----------------
  logic          buf_we, buf_re;
  logic [AW-1:0] buf_waddr, buf_raddr;
  iq16_t         buf_rdata;
  logic          ts_re;
  logic [AW-1:0] ts_raddr;
  logic          ch_re;
  logic [AW-1:0] ch_raddr;

  assign buf_re    = (st == S_SYNC) ? ts_re : ch_re;
  assign buf_raddr = (st == S_SYNC) ? ts_raddr : ch_raddr;

  frame_buffer #(.DEPTH(DEPTH)) u_buf (
    .clk, .we(buf_we), .waddr(buf_waddr), .wdata(in_iq),
    .rd_en(buf_re), .raddr(buf_raddr), .rdata(buf_rdata)
  );

  // ---------------- time sync ----------------
  logic ts_start, ts_done, ts_busy;
  logic [$clog2(WIN)-1:0] ts_lag;
  logic [47:0] ts_peak;

  time_sync #(.NS_P(NS_P), .WIN(WIN), .AW(AW)) u_sync (
    .clk, .rst_n, .start(ts_start), .base('0),
    .rd_en(ts_re), .rd_addr(ts_raddr), .rd_data(buf_rdata),
    .busy(ts_busy), .done(ts_done), .lag(ts_lag), .peak(ts_peak)
  );

  // ---------------- reference pilot ----------------
  logic  g_start, g_valid, g_busy, g_next_ok, g_first, g_last;
  iq16_t g_iq;
  logic [0:0] g_tag;

  pcfmcw_gen #(.NS_P(NS_P)) u_ref (
    .clk, .rst_n, .start(g_start), .f0_ftw(P_F0), .rate(P_RATE), .sym('0),
    .tag(1'b0), .busy(g_busy), .next_ok(g_next_ok), .out_valid(g_valid),
    .out_first(g_first), .out_last(g_last), .out_iq(g_iq), .out_tag(g_tag)
  );

  // ---------------- forward FFT ----------------
  logic          f_in_valid, f_in_ready, f_out_valid, f_busy;
  cplx24_t       f_in_data, f_out_data;
  logic [KW-1:0] f_out_idx;

  fft_core #(.N(NFFT_P)) u_fft (
    .clk, .rst_n, .inverse(1'b0), .scale(SCALE),
    .in_valid(f_in_valid), .in_data(f_in_data), .in_ready(f_in_ready),
    .out_en(1'b1), .out_valid(f_out_valid), .out_data(f_out_data),
    .out_idx(f_out_idx), .busy(f_busy)
  );

  // ---------------- channel estimation / equalisation ----------------
  logic [1:0]    ce_mode;
  logic          ce_out_valid;
  logic [KW-1:0] ce_out_idx;
  cplx24_t       ce_out_data;

  chan_est_eq #(.NFFT_P(NFFT_P)) u_ce (
    .clk, .rst_n, .mode(ce_mode), .sigma2_ce, .sigma2_eq,
    .in_valid(f_out_valid), .in_idx(f_out_idx), .in_data(f_out_data),
    .out_valid(ce_out_valid), .out_idx(ce_out_idx), .out_data(ce_out_data)
  );

  // ---------------- IM estimation ----------------
  logic           im_done;
  logic [BIW-1:0] im_b;
  logic [FIW-1:0] im_f;
  logic [NB*NF-1:0][31:0] im_scores;

  im_ml_est #(.NFFT_P(NFFT_P)) u_im (
    .clk, .rst_n, .in_valid(ce_out_valid), .in_idx(ce_out_idx),
    .in_data(ce_out_data), .done(im_done), .b_idx(im_b), .f_idx(im_f),
    .scores(im_scores)
  );

  // ---------------- IFFT ----------------
  logic          i_in_ready, i_out_valid, i_busy, im_ok;
  cplx24_t       i_out_data;
  logic [KW-1:0] i_out_idx;

  fft_core #(.N(NFFT_P)) u_ifft (
    .clk, .rst_n, .inverse(1'b1), .scale(SCALE),
    .in_valid(ce_out_valid), .in_data(ce_out_data), .in_ready(i_in_ready),
    .out_en(im_ok), .out_valid(i_out_valid), .out_data(i_out_data),
    .out_idx(i_out_idx), .busy(i_busy)
  );

  // ---------------- phase-code demodulation and decoding ----------------
  logic                     pc_done;
  logic [L_SEG-1:0][MB-1:0] pc_sym;
  logic [BIW-1:0]           est_b;
  logic [FIW-1:0]           est_f;

  pc_demod #(.NS_P(NS_P), .NFFT_P(NFFT_P)) u_pc (
    .clk, .rst_n, .b_idx(est_b), .f_idx(est_f),
    .in_valid(i_out_valid), .in_idx(i_out_idx), .in_data(i_out_data),
    .done(pc_done), .sym(pc_sym)
  );

  codebook_decoder u_dec (
    .clk, .rst_n, .in_valid(pc_done), .b_idx(est_b), .f_idx(est_f),
    .sym(pc_sym), .out_valid(out_valid), .out_err(out_err), .out_bits(out_bits)
  );

  // ---------------- sequencing ----------------
  logic [AW-1:0]   wcnt;
  logic [AW-1:0]   lag_r;
  logic [CHW:0]    chirp;
  logic [KW:0]     feed;        // samples handed to the FFT
  logic [NW-1:0]   rd_cnt;      // reads issued for this chirp
  logic            rv;          // read data valid this clock

  assign buf_we    = (st == S_CAP) && in_valid;
  assign buf_waddr = wcnt;
  assign ts_start  = (st == S_CAP) && in_valid && (wcnt == AW'(DEPTH - 1));
  assign g_start   = (st == S_RESET);
  assign ready     = (st != S_RESET) && (st != S_INIT) && (st != S_INIT_WAIT);
  assign busy      = !ready || (st != S_IDLE);

  always_comb begin
    ce_mode = 2'd2;
    if (st == S_INIT || st == S_INIT_WAIT) ce_mode = 2'd0;
    else if (chirp == '0)                  ce_mode = 2'd1;
  end

  // FFT input: generator / memory / zero padding
  always_comb begin
    f_in_valid = 1'b0;
    f_in_data  = '0;
    ch_re      = 1'b0;
    ch_raddr   = lag_r + AW'(int'(chirp) * NS_P) + AW'(rd_cnt);
    if (st == S_INIT) begin
      if (g_valid) begin
        f_in_valid = 1'b1;
        f_in_data  = '{re: 24'(g_iq.re), im: 24'(g_iq.im)};
      end else if (!g_busy && feed >= (KW+1)'(NS_P) && feed < (KW+1)'(NFFT_P)) begin
        f_in_valid = 1'b1;
      end
    end else if (st == S_FEED) begin
      ch_re = (rd_cnt < NW'(NS_P));
      if (rv) begin
        f_in_valid = 1'b1;
        f_in_data  = '{re: 24'(buf_rdata.re), im: 24'(buf_rdata.im)};
      end else if (rd_cnt == NW'(NS_P) && feed >= (KW+1)'(NS_P) && feed < (KW+1)'(NFFT_P)) begin
        f_in_valid = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_RESET;
      wcnt       <= '0;
      lag_r      <= '0;
      chirp      <= '0;
      feed       <= '0;
      rd_cnt     <= '0;
      rv         <= 1'b0;
      im_ok      <= 1'b0;
      est_b      <= '0;
      est_f      <= '0;
      sync_done  <= 1'b0;
      sync_lag   <= '0;
      out_chirp  <= '0;
      out_b_idx  <= '0;
      out_f_idx  <= '0;
      frame_done <= 1'b0;
    end else begin
      sync_done  <= 1'b0;
      frame_done <= 1'b0;
      rv         <= ch_re;
      if (f_in_valid) feed <= feed + 1'b1;
      if (ch_re) rd_cnt <= rd_cnt + 1'b1;
      if (im_done) begin
        im_ok <= 1'b1;
        est_b <= im_b;
        est_f <= im_f;
      end
      // the IFFT result is released once the IM estimate is known and
      // drained completely (the demodulator uses the first NS_P points)
      if (i_out_valid && i_out_idx == KW'(NFFT_P - 1)) im_ok <= 1'b0;
      if (pc_done) begin
        out_chirp <= CHW'(chirp);
        out_b_idx <= est_b;
        out_f_idx <= est_f;
      end
      case (st)
        S_RESET: begin
          st   <= S_INIT;
          feed <= '0;
        end
        S_INIT: if (f_in_valid && feed == (KW+1)'(NFFT_P - 1)) st <= S_INIT_WAIT;
        S_INIT_WAIT: if (f_out_valid && f_out_idx == KW'(NFFT_P - 1)) st <= S_IDLE;
        S_IDLE: if (capture) begin
          st   <= S_CAP;
          wcnt <= '0;
        end
        S_CAP: if (in_valid) begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == AW'(DEPTH - 1)) st <= S_SYNC;
        end
        S_SYNC: if (ts_done) begin
          lag_r     <= AW'(ts_lag);
          sync_lag  <= ts_lag;
          sync_done <= 1'b1;
          chirp     <= '0;
          feed      <= '0;
          rd_cnt    <= '0;
          st        <= S_FEED;
        end
        S_FEED: if (f_in_valid && feed == (KW+1)'(NFFT_P - 1)) st <= S_SPEC;
        S_SPEC: if (f_out_valid && f_out_idx == KW'(NFFT_P - 1)) begin
          if (chirp == '0) begin
            chirp  <= chirp + 1'b1;
            feed   <= '0;
            rd_cnt <= '0;
            st     <= S_FEED;
          end else begin
            st <= S_DEMOD;
          end
        end
        default: if (pc_done) begin   // S_DEMOD
          feed   <= '0;
          rd_cnt <= '0;
          if (chirp == (CHW+1)'(NCH_P - 1)) begin
            frame_done <= 1'b1;
            st         <= S_IDLE;
          end else begin
            chirp <= chirp + 1'b1;
            st    <= S_FEED;
          end
        end
      endcase
    end
  end

endmodule
