// radar_doppler: corner turn and slow-time FFT, producing the range-Doppler map
// of one radar receive chain.
//
// Corrected range bins arrive chirp by chirp (bin 0..NR_P-1, in_last on the
// final bin of a chirp). They are written into a corner-turn memory at
// [bin][chirp]. Once NCH_P chirps, one frame, are in, the memory bank is
// handed to the Doppler stage and the next frame is written into the other
// bank (ping-pong). The Doppler stage reads, for each range bin, the NCH_P
// values of that bin, pads them with zeros to NDOP_P points, runs the FFT and
// streams out D(m,k) for k = 0..NDOP_P-1.
//
// The deramp of radar_range_align, x*conj(r), conjugates the echo's Doppler
// phase, so the slow-time transform uses exp(+j*2*pi*k*i/NDOP_P) (the FFT core
// in inverse mode, same scaling): bin k then holds an echo whose phase
// advances by +k/NDOP_P of a turn from chirp to chirp.
//
// The paper applies a standard FFT across the chirp index at each range bin
// after phase correction; the memory organisation, ping-pong banking, zero
// padding to a power of two and the FFT scaling (half the stages) are choices
// of this design.
//
// Timing: per frame about NR_P*(NDOP_P*(2 + log2(NDOP_P)/2) + 2) clocks, well
// below the NR_P-bin x NCH_P-chirp input time of a frame of NS-sample chirps.
// frame_done pulses with the last map value.
module radar_doppler
  import isac_pkg::*;
#(
  parameter int NR_P   = NR,
  parameter int NCH_P  = NCHIRP,
  parameter int NDOP_P = NDOP
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_last,
  input  logic [$clog2(NR_P)-1:0]   in_bin,
  input  cplx24_t                   in_data,
  output logic                      out_valid,
  output logic [$clog2(NR_P)-1:0]   out_bin,
  output logic [$clog2(NDOP_P)-1:0] out_dop,
  output cplx24_t                   out_data,
  output logic                      frame_done,
  output logic                      overrun
);

  localparam int RW = $clog2(NR_P);
  localparam int DW = $clog2(NDOP_P);
  localparam int CW = $clog2(NCH_P + 1);

  cplx24_t mem [2][NR_P * NDOP_P];

  logic          wbank, rbank;
  logic [CW-1:0] wchirp;
  logic          pend;          // a full bank waits for the Doppler stage

  typedef enum logic [1:0] {D_IDLE, D_FEED, D_WAIT} dstate_t;
  dstate_t       dstate;
  logic [RW-1:0] rbin;
  logic [DW:0]   rcnt;

  // FFT
  logic    f_in_valid, f_in_ready, f_out_valid, f_busy;
  cplx24_t f_in_data, f_out_data;
  logic [DW-1:0] f_out_idx;

  always_comb begin
    f_in_valid = (dstate == D_FEED) && f_in_ready && !rcnt[DW];
    if (rcnt < (DW+1)'(NCH_P))
      f_in_data = mem[rbank][int'(rbin) * NDOP_P + int'(rcnt)];
    else
      f_in_data = '0;
  end

  localparam logic [DW-1:0] SCALE = DW'({DW{2'b10}});

  fft_core #(.N(NDOP_P)) u_fft (
    .clk, .rst_n,
    .inverse  (1'b1),   // see header
    .scale    (SCALE),
    .in_valid (f_in_valid),
    .in_data  (f_in_data),
    .in_ready (f_in_ready),
    .out_en   (1'b1),
    .out_valid(f_out_valid),
    .out_data (f_out_data),
    .out_idx  (f_out_idx),
    .busy     (f_busy)
  );

  // ---- write side ----
  logic start_frame;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank   <= 1'b0;
      wchirp  <= '0;
      pend    <= 1'b0;
      overrun <= 1'b0;
    end else begin
      if (start_frame) pend <= 1'b0;
      if (in_valid) begin
        mem[wbank][int'(in_bin) * NDOP_P + int'(wchirp)] <= in_data;
        if (in_last) begin
          if (wchirp == CW'(NCH_P - 1)) begin
            wchirp <= '0;
            wbank  <= ~wbank;
            pend   <= 1'b1;
            if (pend && !start_frame) overrun <= 1'b1;
          end else begin
            wchirp <= wchirp + 1'b1;
          end
        end
      end
    end
  end

  // ---- Doppler side ----
  assign start_frame = (dstate == D_IDLE) && pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dstate     <= D_IDLE;
      rbank      <= 1'b0;
      rbin       <= '0;
      rcnt       <= '0;
      out_valid  <= 1'b0;
      out_bin    <= '0;
      out_dop    <= '0;
      out_data   <= '0;
      frame_done <= 1'b0;
    end else begin
      out_valid  <= 1'b0;
      frame_done <= 1'b0;
      case (dstate)
        D_IDLE: if (pend) begin
          dstate <= D_FEED;
          rbank  <= ~wbank;
          rbin   <= '0;
          rcnt   <= '0;
        end
        D_FEED: if (f_in_valid) begin
          rcnt <= rcnt + 1'b1;
          if (rcnt == (DW+1)'(NDOP_P - 1)) dstate <= D_WAIT;
        end
        default: if (f_out_valid) begin
          out_valid <= 1'b1;
          out_bin   <= rbin;
          out_dop   <= f_out_idx;
          out_data  <= f_out_data;
          if (f_out_idx == DW'(NDOP_P - 1)) begin
            rcnt <= '0;
            rbin <= rbin + 1'b1;
            if (rbin == RW'(NR_P - 1)) begin
              dstate     <= D_IDLE;
              frame_done <= 1'b1;
            end else begin
              dstate <= D_FEED;
            end
          end
        end
      endcase
    end
  end

endmodule
