// tb_isac_top_full: end-to-end test of isac_top with every parameter at its
// default (50-chirp frames of 1000-sample chirps, 1024-point FFTs, 64 range
// and 64 Doppler bins). Same scenario and checks as tb_isac_top.
module tb_isac_top_full;
  import isac_pkg::*;
  localparam int NCH_T    = NCHIRP;
  localparam int WATCHDOG = 3_000_000;

  isac_top dut (.*);

  `include "tb_isac_top_body.svh"
endmodule
