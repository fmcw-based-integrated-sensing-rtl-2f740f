// fft_core: in-place radix-2 decimation-in-time FFT / IFFT of N complex points.
//
// Operation in three phases:
//   load     N samples arrive on in_valid/in_data (gaps allowed) and are
//            written at bit-reversed addresses; in_ready is high meanwhile.
//   compute  log2(N) stages of N/2 butterflies, one butterfly per clock.
//            Twiddles exp(-/+ j*2*pi*k/N) come from the CORDIC of isac_pkg.
//            Stage s divides its outputs by 2 when scale[s] is set.
//   unload   N results in natural order on out_valid/out_data/out_idx, one
//            per clock while out_en is high (out_en holds the output).
// inverse is sampled with the first loaded sample (forward: exp(-j...)).
// Latency: N load cycles + (N/2)*log2(N) compute cycles + N unload cycles.
//
// The paper only names the FFTs (fast time, slow time, pilot and data
// spectra, the IFFT before phase-code demodulation); the radix-2 iterative
// architecture, the 24-bit data path and the per-stage scaling are choices of
// this design. Products and halvings round to nearest; butterfly outputs
// saturate to 24 bits.
module fft_core
  import isac_pkg::*;
#(
  parameter int N = NFFT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  inverse,
  input  logic [$clog2(N)-1:0]  scale,
  input  logic                  in_valid,
  input  cplx24_t               in_data,
  output logic                  in_ready,
  input  logic                  out_en,
  output logic                  out_valid,
  output cplx24_t               out_data,
  output logic [$clog2(N)-1:0]  out_idx,
  output logic                  busy
);

  localparam int LOGN = $clog2(N);

  typedef enum logic [1:0] {S_LOAD, S_CALC, S_OUT} state_t;
  state_t state;

  cplx24_t mem [N];

  logic [LOGN-1:0] cnt;        // load / unload counter
  logic [LOGN-1:0] bfly;       // butterfly counter within a stage (N/2)
  logic [$clog2(LOGN+1)-1:0] stage;
  logic            inv_r;
  logic [LOGN-1:0] scale_r;

  function automatic logic [LOGN-1:0] bitrev(input logic [LOGN-1:0] a);
    for (int i = 0; i < LOGN; i++) bitrev[i] = a[LOGN-1-i];
  endfunction

  function automatic logic signed [23:0] sat24(input longint v);
    if (v > 64'sd8388607)  return 24'sd8388607;
    if (v < -64'sd8388608) return -24'sd8388608;
    return 24'(v);
  endfunction

  // butterfly addressing
  logic [LOGN-1:0] half, pos, a_idx, b_idx;
  logic [15:0]     tw_ph;
  iq16_t           tw;
  longint          tr, ti, ar, ai, sr, si, dr, di;
  logic            sh;

  always_comb begin
    half  = LOGN'(1) << stage;
    pos   = bfly & (half - 1'b1);
    a_idx = ((bfly >> stage) << (stage + 1)) | pos;
    b_idx = a_idx | half;
    // angle = pos / (2*half) turns
    tw_ph = 16'((32'(pos) << 16) >> (stage + 1));
    tw    = sincos(inv_r ? tw_ph : 16'(-tw_ph));
    tr    = (longint'(mem[b_idx].re) * tw.re - longint'(mem[b_idx].im) * tw.im + 8192) >>> 14;
    ti    = (longint'(mem[b_idx].re) * tw.im + longint'(mem[b_idx].im) * tw.re + 8192) >>> 14;
    ar    = longint'(mem[a_idx].re);
    ai    = longint'(mem[a_idx].im);
    sh    = scale_r[stage];
    sr    = sh ? (ar + tr + 1) >>> 1 : ar + tr;
    si    = sh ? (ai + ti + 1) >>> 1 : ai + ti;
    dr    = sh ? (ar - tr + 1) >>> 1 : ar - tr;
    di    = sh ? (ai - ti + 1) >>> 1 : ai - ti;
  end

  assign in_ready  = (state == S_LOAD);
  assign busy      = (state != S_LOAD) || (cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      cnt       <= '0;
      bfly      <= '0;
      stage     <= '0;
      inv_r     <= 1'b0;
      scale_r   <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_idx   <= '0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        S_LOAD: if (in_valid) begin
          mem[bitrev(cnt)] <= in_data;
          if (cnt == '0) begin
            inv_r   <= inverse;
            scale_r <= scale;
          end
          cnt <= cnt + 1'b1;
          if (cnt == LOGN'(N - 1)) begin
            state <= S_CALC;
            stage <= '0;
            bfly  <= '0;
          end
        end
        S_CALC: begin
          mem[a_idx] <= '{re: sat24(sr), im: sat24(si)};
          mem[b_idx] <= '{re: sat24(dr), im: sat24(di)};
          bfly <= bfly + 1'b1;
          if (bfly == LOGN'(N/2 - 1)) begin
            bfly  <= '0;
            stage <= stage + 1'b1;
            if (int'(stage) == LOGN - 1) begin
              state <= S_OUT;
              cnt   <= '0;
            end
          end
        end
        default: if (out_en) begin
          out_valid <= 1'b1;
          out_data  <= mem[cnt];
          out_idx   <= cnt;
          cnt       <= cnt + 1'b1;
          if (cnt == LOGN'(N - 1)) state <= S_LOAD;
        end
      endcase
    end
  end

endmodule
