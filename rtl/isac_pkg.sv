// isac_pkg: shared types, default sizes and arithmetic helpers of the
// dual-polarised IM-PM-FMCW transceiver.
//
// The waveform is a baseband FMCW chirp whose bandwidth and centre frequency
// are chosen from a small codebook (index modulation, IM) and whose L equal
// segments each carry an M-PSK phase (phase modulation, PM). Every chirp lasts
// NS samples at FS_HZ. Phases are carried as unsigned fractions of one turn:
// 32-bit for the numerically controlled oscillators, 16-bit for the CORDIC.
//
// Values that follow the described system: M = 4 (phases 0, pi/2, pi, 3pi/2),
// L = 10 segments in a 10 us chirp (one phase transition per microsecond),
// bandwidths from 40 MHz upwards in 2 MHz steps (2.4 GHz band B1), centre
// frequencies 2 MHz apart, I = 50 chirps per frame, smoothing span
// beta = 0.2 of a segment, signed 16-bit IQ samples.
// Choices of this design: 100 MS/s sampling (1000 samples per 10 us chirp),
// 8 bandwidths x 4 centre frequencies (5 IM bits), a pilot of 60 MHz
// centred at 0 Hz that covers every codebook chirp, 1024-point FFTs,
// 64 range bins and a 64-point Doppler FFT.
package isac_pkg;

  // ---------------- default sizes ----------------
  localparam longint FS_HZ    = 100_000_000;  // baseband sample rate
  localparam int     NS       = 1000;         // samples per chirp (Tc = 10 us)
  localparam int     NFFT     = 1024;         // fast-time FFT size (zero padded)
  localparam int     L_SEG    = 10;           // phase segments per chirp
  localparam int     M_PSK    = 4;            // PSK order
  localparam int     MB       = $clog2(M_PSK);// bits per phase symbol
  localparam int     NB       = 8;            // bandwidth options
  localparam int     NF       = 4;            // centre-frequency options
  localparam int     NIM      = $clog2(NB*NF);// IM bits per chirp (floor log2, NB*NF a power of 2)
  localparam int     NCHIRP   = 50;           // chirps per frame, pilot included
  localparam int     NR       = 64;           // radar range bins
  localparam int     NDOP     = 64;           // slow-time FFT size
  localparam longint BW0_HZ   = 40_000_000;   // smallest codebook bandwidth
  localparam longint DB_HZ    = 2_000_000;    // bandwidth step
  localparam longint DF_HZ    = 2_000_000;    // centre-frequency step
  localparam longint PILOT_BW_HZ = 60_000_000;// pilot / reference bandwidth
  localparam int     SMOOTH_K = 10;           // half span of the phase smoother, samples

  localparam int BIW = $clog2(NB);
  localparam int FIW = $clog2(NF);

  // ---------------- types ----------------
  typedef struct packed {
    logic signed [15:0] re;
    logic signed [15:0] im;
  } iq16_t;

  typedef struct packed {
    logic signed [23:0] re;
    logic signed [23:0] im;
  } cplx24_t;

  // Which chirp is on air: the pilot (plain FMCW) or a codebook entry.
  typedef struct packed {
    logic           pilot;
    logic [BIW-1:0] b_idx;
    logic [FIW-1:0] f_idx;
  } chirp_sel_t;

  // ---------------- codebook arithmetic (elaboration time) ----------------
  function automatic longint bw_hz(input int b);
    return BW0_HZ + longint'(b) * DB_HZ;
  endfunction

  // centre frequencies symmetric about 0 Hz: (2f-(NF-1)) * DF/2
  function automatic longint fc_hz(input int f);
    return (longint'(2*f - (NF-1)) * DF_HZ) / 2;
  endfunction

  // frequency in Hz -> 32-bit tuning word (turns per sample * 2^32)
  function automatic logic [31:0] ftw(input longint hz);
    longint num;
    num = hz * 64'sd4294967296;
    return 32'(num / FS_HZ);
  endfunction

  // chirp rate (increment of the tuning word per sample) for bandwidth bw
  // swept over ns samples: bw / (ns * FS) * 2^32
  function automatic logic [31:0] rate_word(input longint bw, input int ns);
    longint num;
    num = bw * 64'sd4294967296;
    return 32'(num / (FS_HZ * longint'(ns)));
  endfunction

  // ---------------- CORDIC ----------------
  // atan(2^-i) in 1/65536 turn
  function automatic int cordic_atan(input int i);
    case (i)
      0: return 8192;  1: return 4836;  2: return 2555;  3: return 1297;
      4: return 651;   5: return 326;   6: return 163;   7: return 81;
      8: return 41;    9: return 20;    10: return 10;   11: return 5;
      12: return 3;    13: return 1;    default: return 1;
    endcase
  endfunction

  // cos/sin of a 16-bit phase (1/65536 turn), amplitude 16383 (Q1.14)
  function automatic iq16_t sincos(input logic [15:0] ph);
    int x, y, z, xn;
    iq16_t r;
    z = int'($signed(ph));
    x = 9949;  // 16383 * CORDIC gain compensation 0.60725
    y = 0;
    if (z > 16384 || z < -16384) begin
      z = z - (z > 0 ? 32768 : -32768);
      x = -x;
    end
    for (int i = 0; i < 15; i++) begin
      if (z >= 0) begin
        xn = x - (y >>> i); y = y + (x >>> i); z = z - cordic_atan(i);
      end else begin
        xn = x + (y >>> i); y = y - (x >>> i); z = z + cordic_atan(i);
      end
      x = xn;
    end
    if (x > 16383) x = 16383;
    if (x < -16383) x = -16383;
    if (y > 16383) y = 16383;
    if (y < -16383) y = -16383;
    r.re = 16'(x);
    r.im = 16'(y);
    return r;
  endfunction

  // angle of (re, im) as a 16-bit phase (1/65536 turn); inputs up to 40 bits
  function automatic logic [15:0] atan2(input longint re, input longint im);
    longint x, y, xn;
    int z;
    x = re; y = im; z = 0;
    if (x < 0) begin
      x = -x; y = -y; z = 32768;
    end
    for (int i = 0; i < 15; i++) begin
      if (y > 0) begin
        xn = x + (y >>> i); y = y - (x >>> i); z = z + cordic_atan(i);
      end else begin
        xn = x - (y >>> i); y = y + (x >>> i); z = z - cordic_atan(i);
      end
      x = xn;
    end
    return 16'(z);
  endfunction

  // |a|^2 of a 24-bit complex value
  function automatic longint mag2(input cplx24_t a);
    return longint'(a.re) * longint'(a.re) + longint'(a.im) * longint'(a.im);
  endfunction

endpackage
