// frame_buffer: sample memory of the communication receiver.
//
// The receiver first records a frame of baseband IQ samples and then works on
// the record (synchronisation, then chirp by chirp), as the measured system did
// with its stored IQ files. This is a simple dual-port RAM of DEPTH signed
// 16-bit IQ words: one write port, one read port with a registered output
// (read data valid one clock after rd_en). Sized by default for one frame of
// NCHIRP chirps plus a synchronisation search window.
module frame_buffer
  import isac_pkg::*;
#(
  parameter int DEPTH = NCHIRP * NS + 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  iq16_t                    wdata,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output iq16_t                    rdata
);

  iq16_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rdata <= mem[raddr];
  end

endmodule
