// im_mapper: the "index modulation" stage of the transmitter. It takes the data
// word of one chirp and turns it into everything the chirp generator needs.
//
// The lowest NIM bits select one of NB*NF codebook entries; the entry number is
// split into a bandwidth index (entry / NF) and a centre-frequency index
// (entry % NF). The next L*MB bits are the L phase symbols, segment 0 first.
// The codebook is held as two tables of tuning words computed at elaboration:
// the start frequency f_i - b_i/2 and the chirp rate b_i/(Tc*FS), both as
// 32-bit fractions of a turn per sample. A pilot request ignores the data and
// selects the full-band pilot chirp with all phase symbols 0 (plain FMCW).
//
// Timing: one request per cycle, result registered one cycle later
// (out_valid follows in_valid by one clock).
//
// From the paper: the IM indices are bandwidth and centre frequency, the IM bit
// count is floor(log2(NB*NF)), PM carries L*log2(M) bits, the pilot is a plain
// FMCW chirp over the whole allocated band. Own choices: the bit order, natural
// binary (no Gray) labelling, centre frequencies placed symmetrically about 0 Hz.
module im_mapper
  import isac_pkg::*;
#(
  parameter int NS_P = NS        // samples per chirp (sets the chirp rate)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_pilot,
  input  logic [NIM+L_SEG*MB-1:0] in_bits,
  output logic                    out_valid,
  output chirp_sel_t              out_sel,
  output logic [31:0]             out_f0_ftw,   // start frequency tuning word
  output logic [31:0]             out_rate,     // tuning-word increment per sample
  output logic [L_SEG-1:0][MB-1:0] out_sym
);

  typedef logic [NB*NF-1:0][31:0] tab_t;

  function automatic tab_t mk_f0();
    tab_t t;
    for (int b = 0; b < NB; b++)
      for (int f = 0; f < NF; f++)
        t[b*NF+f] = ftw(fc_hz(f) - bw_hz(b)/2);
    return t;
  endfunction

  function automatic tab_t mk_rate();
    tab_t t;
    for (int b = 0; b < NB; b++)
      for (int f = 0; f < NF; f++)
        t[b*NF+f] = rate_word(bw_hz(b), NS_P);
    return t;
  endfunction

  localparam tab_t F0_TAB   = mk_f0();
  localparam tab_t RATE_TAB = mk_rate();
  localparam logic [31:0] PILOT_F0   = ftw(-PILOT_BW_HZ/2);
  localparam logic [31:0] PILOT_RATE = rate_word(PILOT_BW_HZ, NS_P);

  logic [NIM-1:0] idx;
  logic [BIW-1:0] b_idx;
  logic [FIW-1:0] f_idx;

  always_comb begin
    idx   = in_bits[NIM-1:0];
    b_idx = BIW'(idx / NIM'(NF));
    f_idx = FIW'(idx % NIM'(NF));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_sel    <= '0;
      out_f0_ftw <= '0;
      out_rate   <= '0;
      out_sym    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (in_pilot) begin
          out_sel    <= '{pilot: 1'b1, b_idx: '0, f_idx: '0};
          out_f0_ftw <= PILOT_F0;
          out_rate   <= PILOT_RATE;
          out_sym    <= '0;
        end else begin
          out_sel    <= '{pilot: 1'b0, b_idx: b_idx, f_idx: f_idx};
          out_f0_ftw <= F0_TAB[idx];
          out_rate   <= RATE_TAB[idx];
          for (int l = 0; l < L_SEG; l++)
            out_sym[l] <= in_bits[NIM + l*MB +: MB];
        end
      end
    end
  end

endmodule
