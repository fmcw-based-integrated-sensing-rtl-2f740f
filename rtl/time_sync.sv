// time_sync: frame timing of the communication receiver.
//
// The frame starts with a plain FMCW pilot chirp. The block slides a copy of
// that pilot (generated locally: quadratic-phase NCO with the pilot's start
// frequency and rate) over the first WIN candidate start positions of the
// recorded frame and, for each lag, correlates all NS_P samples:
//   C(lag) = sum_n y(base + lag + n) * conj(p(n)),
// keeping the lag with the largest |C|^2. One product per clock, so a search
// takes WIN*NS_P + 3 clocks from start to done.
//
// The paper synchronises to the maximum of the cross-correlation between the
// reference pilot and the received signal over a sliding window; the search
// window length, the full-chirp correlation length and the sequential
// evaluation are choices of this design.
//
// Interface: start pulse with base; the block reads the frame memory through
// rd_en/rd_addr (data one clock later on rd_data); done pulses with lag and
// peak (|C|^2 of the best lag, in units of 2^-16).
module time_sync
  import isac_pkg::*;
#(
  parameter int NS_P  = NS,
  parameter int WIN   = 64,
  parameter int AW    = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [AW-1:0]          base,
  output logic                   rd_en,
  output logic [AW-1:0]          rd_addr,
  input  iq16_t                  rd_data,
  output logic                   busy,
  output logic                   done,
  output logic [$clog2(WIN)-1:0] lag,
  output logic [47:0]            peak
);

  localparam logic [31:0] P_F0   = ftw(-PILOT_BW_HZ/2);
  localparam logic [31:0] P_RATE = rate_word(PILOT_BW_HZ, NS_P);
  localparam int NW = $clog2(NS_P + 1);
  localparam int LW = $clog2(WIN);

  logic          run;
  logic [LW:0]   cur_lag;
  logic [NW-1:0] n;
  logic [31:0]   ph, fw;
  logic [AW-1:0] base_r;

  // pipeline stage: reference sample for the data that arrives next clock
  logic   v1, last1, v2, last2;
  iq16_t  ref1, ref2;
  logic [AW-1:0] addr2;
  longint acc_re, acc_im;
  logic [47:0] best;
  logic [LW-1:0] best_lag;

  assign busy = run || v1 || v2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run      <= 1'b0;
      cur_lag  <= '0;
      n        <= '0;
      ph       <= '0;
      fw       <= '0;
      base_r   <= '0;
      v1       <= 1'b0;
      last1    <= 1'b0;
      ref1     <= '0;
      v2       <= 1'b0;
      last2    <= 1'b0;
      ref2     <= '0;
      addr2    <= '0;
      acc_re   <= 0;
      acc_im   <= 0;
      best     <= '0;
      best_lag <= '0;
      rd_en    <= 1'b0;
      rd_addr  <= '0;
      done     <= 1'b0;
      lag      <= '0;
      peak     <= '0;
    end else begin
      done  <= 1'b0;
      rd_en <= 1'b0;
      v1    <= 1'b0;
      last1 <= 1'b0;
      // the memory answers one clock after the registered request
      v2    <= v1;
      last2 <= last1;
      ref2  <= ref1;
      addr2 <= rd_addr;
      if (start) begin
        run     <= 1'b1;
        base_r  <= base;
        cur_lag <= '0;
        n       <= '0;
        ph      <= '0;
        fw      <= P_F0;
        best    <= '0;
        best_lag<= '0;
      end else if (run) begin
        // issue read of y(base+lag+n) and the matching reference sample
        rd_en   <= 1'b1;
        rd_addr <= base_r + AW'(cur_lag) + AW'(n);
        v1      <= 1'b1;
        last1   <= (n == NW'(NS_P - 1));
        ref1    <= sincos(ph[31:16] + 16'(ph[15]));
        ph      <= ph + fw;
        fw      <= fw + P_RATE;
        n       <= n + 1'b1;
        if (n == NW'(NS_P - 1)) begin
          n  <= '0;
          ph <= '0;
          fw <= P_F0;
          cur_lag <= cur_lag + 1'b1;
          if (cur_lag == (LW+1)'(WIN - 1)) run <= 1'b0;
        end
      end
      // accumulate (rd_data now holds the sample requested two clocks ago)
      if (v2) begin : acc_blk
        longint pr, pi, sr, si;
        logic [47:0] m;
        logic [LW-1:0] this_lag;
        pr = (longint'(rd_data.re) * ref2.re + longint'(rd_data.im) * ref2.im) >>> 14;
        pi = (longint'(rd_data.im) * ref2.re - longint'(rd_data.re) * ref2.im) >>> 14;
        sr = acc_re + pr;
        si = acc_im + pi;
        if (last2) begin
          m = 48'((sr * sr + si * si) >>> 16);
          this_lag = LW'(addr2 - base_r - AW'(NS_P - 1));
          if (m > best) begin
            best     <= m;
            best_lag <= this_lag;
          end
          acc_re <= 0;
          acc_im <= 0;
          if (!run && !v1) begin
            done <= 1'b1;
            lag  <= (m > best) ? this_lag : best_lag;
            peak <= (m > best) ? m : best;
          end
        end else begin
          acc_re <= sr;
          acc_im <= si;
        end
      end
    end
  end

endmodule
