// isac_tx: transmitter of one polarisation (one row of the ISAC Tx).
//
// A frame is NCH_P chirps sent back to back without gaps: chirp 0 is the pilot,
// a plain FMCW chirp over the whole band used by the receivers for timing and
// channel estimation, and chirps 1..NCH_P-1 are IM-PM-FMCW data chirps. For
// each data chirp the block takes one data word (NIM IM bits and L*log2(M)
// PM bits) through a valid/ready handshake, maps it with im_mapper and has
// pcfmcw_gen synthesise it. Radar sensing uses every chirp, so the chirp
// train never stops: when comm_en is low, or no data word is waiting when the
// next chirp must be prepared, a plain FMCW chirp (the pilot waveform) is sent
// instead of a data chirp and counted in idle_chirps. This is the paper's
// "data modulation off" sensing-only mode.
//
// Timing: frame_start starts a frame; the pilot's first sample appears 4
// clocks after the clock edge that samples frame_start, then one sample per clock for NCH_P*NS_P clocks. data_ready is
// a one-clock pulse that consumes data_bits when data_valid is high. Each
// output sample carries the selection (pilot or b/f indices) of its chirp,
// which the radar receiver needs for its compensation.
module isac_tx
  import isac_pkg::*;
#(
  parameter int NS_P  = NS,
  parameter int NCH_P = NCHIRP
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    frame_start,
  input  logic                    comm_en,
  input  logic                    data_valid,
  input  logic [NIM+L_SEG*MB-1:0] data_bits,
  output logic                    data_ready,
  output logic                    out_valid,
  output logic                    out_first,     // first sample of a chirp
  output logic                    out_frame,     // first sample of a frame
  output iq16_t                   out_iq,
  output chirp_sel_t              out_sel,
  output logic                    busy,
  output logic [15:0]             idle_chirps
);

  localparam int CW = $clog2(NCH_P + 1);

  logic          active;
  logic [CW-1:0] prep_cnt;    // chirps prepared so far in this frame
  logic          prep_req, m_valid, ready_set;
  logic          pilot_req;

  chirp_sel_t                 m_sel;
  logic [31:0]                m_f0, m_rate;
  logic [L_SEG-1:0][MB-1:0]   m_sym;
  logic                       g_start, g_next_ok, g_busy, g_last;
  logic [$bits(chirp_sel_t):0] g_tag;

  // request a new mapping when nothing is prepared and chirps remain
  always_comb begin
    prep_req   = active && !ready_set && !m_valid && (prep_cnt < CW'(NCH_P));
    pilot_req  = (prep_cnt == '0) || !comm_en || !data_valid;
    data_ready = prep_req && !pilot_req;
    g_start    = ready_set && g_next_ok;
  end

  im_mapper #(.NS_P(NS_P)) u_map (
    .clk, .rst_n,
    .in_valid  (prep_req),
    .in_pilot  (pilot_req),
    .in_bits   (data_bits),
    .out_valid (m_valid),
    .out_sel   (m_sel),
    .out_f0_ftw(m_f0),
    .out_rate  (m_rate),
    .out_sym   (m_sym)
  );

  // hold the prepared chirp until the generator takes it
  chirp_sel_t               h_sel;
  logic [31:0]              h_f0, h_rate;
  logic [L_SEG-1:0][MB-1:0] h_sym;
  logic                     h_frame;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active      <= 1'b0;
      prep_cnt    <= '0;
      ready_set   <= 1'b0;
      h_sel       <= '0;
      h_f0        <= '0;
      h_rate      <= '0;
      h_sym       <= '0;
      h_frame     <= 1'b0;
      idle_chirps <= '0;
    end else begin
      if (frame_start && !active) begin
        active   <= 1'b1;
        prep_cnt <= '0;
      end
      if (prep_req) begin
        prep_cnt <= prep_cnt + 1'b1;
        if (prep_cnt != '0 && pilot_req) idle_chirps <= idle_chirps + 1'b1;
      end
      if (m_valid) begin
        ready_set <= 1'b1;
        h_sel     <= m_sel;
        h_f0      <= m_f0;
        h_rate    <= m_rate;
        h_sym     <= m_sym;
        h_frame   <= (prep_cnt == CW'(1));
      end
      if (g_start) begin
        ready_set <= 1'b0;
        if (prep_cnt == CW'(NCH_P)) active <= 1'b0;
      end
    end
  end

  pcfmcw_gen #(.NS_P(NS_P), .TAG_W($bits(chirp_sel_t) + 1)) u_gen (
    .clk, .rst_n,
    .start    (g_start),
    .f0_ftw   (h_f0),
    .rate     (h_rate),
    .sym      (h_sym),
    .tag      ({h_frame, h_sel}),
    .busy     (g_busy),
    .next_ok  (g_next_ok),
    .out_valid(out_valid),
    .out_first(out_first),
    .out_last (g_last),
    .out_iq   (out_iq),
    .out_tag  (g_tag)
  );

  assign out_sel   = g_tag[$bits(chirp_sel_t)-1:0];
  assign out_frame = out_first && g_tag[$bits(chirp_sel_t)];
  assign busy      = active || ready_set || g_busy;

endmodule
