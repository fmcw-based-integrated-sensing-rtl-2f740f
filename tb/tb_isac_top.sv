// tb_isac_top: end-to-end test of isac_top at a reduced frame length of 8
// chirps (all other sizes at their defaults). See tb_isac_top_body.svh for the
// scenario and the checks.
module tb_isac_top;
  import isac_pkg::*;
  localparam int NCH_T    = 8;
  localparam int WATCHDOG = 600_000;

  isac_top #(.NCH_P(NCH_T)) dut (.*);

  `include "tb_isac_top_body.svh"
endmodule
