// isac_top: dual-polarised IM-PM-FMCW joint sensing and communication
// transceiver.
//
// Two identical polarisation slices (index 0 = V-pol, 1 = H-pol) each hold:
//   * isac_tx            pilot + data chirp frames, IM mapping, phase-coded
//                        FMCW synthesis, towards the transmit RF chain (DAC);
//   * radar_range_align  deramp of the radar echo against the transmitted
//                        chirp and bandwidth-compensated range transform;
//   * radar_phase_corr   removal of the IM-induced slow-time phase;
//   * radar_doppler      corner turn and slow-time FFT (range-Doppler map);
//   * comm_rx            the communication receiver of that polarisation.
// The two slices share frame timing (frame_start, comm_en) and run
// concurrently; the data words of the two polarisations are independent, so a
// chirp period carries 2*(NIM + L*log2(M)) bits.
//
// The RF chains, antennas and converters are outside: tx_iq leaves at one
// sample per clock while tx_valid is high, radar_rx_iq must hold the radar ADC
// sample of the same clock (the echo of the same polarisation), comm_rx_iq /
// comm_rx_valid carry the samples of a communication receiver, which in a
// loopback test is this node itself.
//
// Timing: see the slice blocks. A frame occupies NCH_P*NS_P transmit clocks;
// the range-Doppler map of a frame follows within about NR*NDOP*5 clocks after
// its last chirp; the communication receiver delivers one decoded data word
// per data chirp after its own recording and processing.
module isac_top
  import isac_pkg::*;
#(
  parameter int NS_P   = NS,
  parameter int NCH_P  = NCHIRP,
  parameter int NFFT_P = NFFT,
  parameter int NR_P   = NR,
  parameter int NDOP_P = NDOP,
  parameter int WIN    = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // frame control
  input  logic                          frame_start,
  input  logic                          comm_en,
  // transmit data, per polarisation
  input  logic [1:0]                    data_valid,
  input  logic [1:0][NIM+L_SEG*MB-1:0]  data_bits,
  output logic [1:0]                    data_ready,
  // transmit samples towards the RF chains
  output logic [1:0]                    tx_valid,
  output logic [1:0]                    tx_first,
  output logic [1:0]                    tx_frame,
  output iq16_t [1:0]                   tx_iq,
  output logic [1:0][15:0]              tx_idle_chirps,
  // radar receive samples (same clock as tx_valid)
  input  iq16_t [1:0]                   radar_rx_iq,
  // range-Doppler map
  output logic [1:0]                    rd_valid,
  output logic [1:0][$clog2(NR_P)-1:0]  rd_bin,
  output logic [1:0][$clog2(NDOP_P)-1:0] rd_dop,
  output cplx24_t [1:0]                 rd_data,
  output logic [1:0]                    rd_frame_done,
  output logic [1:0]                    rd_overrun,
  // communication receiver
  input  logic [1:0]                    comm_rx_valid,
  input  iq16_t [1:0]                   comm_rx_iq,
  input  logic                          comm_capture,
  input  logic [31:0]                   sigma2_ce,
  input  logic [31:0]                   sigma2_eq,
  output logic [1:0]                    comm_ready,
  output logic [1:0]                    comm_sync_done,
  output logic [1:0][$clog2(WIN)-1:0]   comm_sync_lag,
  output logic [1:0]                    comm_valid,
  output logic [1:0][$clog2(NCH_P)-1:0] comm_chirp,
  output logic [1:0][NIM+L_SEG*MB-1:0]  comm_bits,
  output logic [1:0]                    comm_err,
  output logic [1:0][BIW-1:0]           comm_b_idx,
  output logic [1:0][FIW-1:0]           comm_f_idx,
  output logic [1:0]                    comm_frame_done
);

  for (genvar p = 0; p < 2; p++) begin : g_pol
    chirp_sel_t tx_sel;
    logic       tx_busy;

    isac_tx #(.NS_P(NS_P), .NCH_P(NCH_P)) u_tx (
      .clk, .rst_n, .frame_start, .comm_en,
      .data_valid (data_valid[p]),
      .data_bits  (data_bits[p]),
      .data_ready (data_ready[p]),
      .out_valid  (tx_valid[p]),
      .out_first  (tx_first[p]),
      .out_frame  (tx_frame[p]),
      .out_iq     (tx_iq[p]),
      .out_sel    (tx_sel),
      .busy       (tx_busy),
      .idle_chirps(tx_idle_chirps[p])
    );

    logic                    ra_valid, ra_last;
    logic [$clog2(NR_P)-1:0] ra_bin;
    cplx24_t                 ra_data;
    chirp_sel_t              ra_sel;

    radar_range_align #(.NS_P(NS_P), .NR_P(NR_P)) u_range (
      .clk, .rst_n,
      .in_valid (tx_valid[p]),
      .in_first (tx_first[p]),
      .in_sel   (tx_sel),
      .tx_iq    (tx_iq[p]),
      .rx_iq    (radar_rx_iq[p]),
      .out_valid(ra_valid),
      .out_last (ra_last),
      .out_bin  (ra_bin),
      .out_data (ra_data),
      .out_sel  (ra_sel)
    );

    logic                    pc_valid, pc_last;
    logic [$clog2(NR_P)-1:0] pc_bin;
    cplx24_t                 pc_data;

    radar_phase_corr #(.NS_P(NS_P), .NR_P(NR_P)) u_corr (
      .clk, .rst_n,
      .in_valid (ra_valid),
      .in_last  (ra_last),
      .in_bin   (ra_bin),
      .in_data  (ra_data),
      .in_sel   (ra_sel),
      .out_valid(pc_valid),
      .out_last (pc_last),
      .out_bin  (pc_bin),
      .out_data (pc_data)
    );

    radar_doppler #(.NR_P(NR_P), .NCH_P(NCH_P), .NDOP_P(NDOP_P)) u_dop (
      .clk, .rst_n,
      .in_valid  (pc_valid),
      .in_last   (pc_last),
      .in_bin    (pc_bin),
      .in_data   (pc_data),
      .out_valid (rd_valid[p]),
      .out_bin   (rd_bin[p]),
      .out_dop   (rd_dop[p]),
      .out_data  (rd_data[p]),
      .frame_done(rd_frame_done[p]),
      .overrun   (rd_overrun[p])
    );

    logic rx_busy;

    comm_rx #(.NS_P(NS_P), .NCH_P(NCH_P), .NFFT_P(NFFT_P), .WIN(WIN)) u_crx (
      .clk, .rst_n,
      .in_valid  (comm_rx_valid[p]),
      .in_iq     (comm_rx_iq[p]),
      .capture   (comm_capture),
      .sigma2_ce, .sigma2_eq,
      .ready     (comm_ready[p]),
      .busy      (rx_busy),
      .sync_done (comm_sync_done[p]),
      .sync_lag  (comm_sync_lag[p]),
      .out_valid (comm_valid[p]),
      .out_chirp (comm_chirp[p]),
      .out_bits  (comm_bits[p]),
      .out_err   (comm_err[p]),
      .out_b_idx (comm_b_idx[p]),
      .out_f_idx (comm_f_idx[p]),
      .frame_done(comm_frame_done[p])
    );
  end

endmodule
