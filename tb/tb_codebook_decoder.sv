// tb_codebook_decoder: random (b, f, symbols) triples must come back as the
// data word that the IM mapper would have taken them from: entry b*NF + f in
// the low bits, symbol l at bits NIM + l*MB. Latency one clock.
module tb_codebook_decoder;
  import isac_pkg::*;
  localparam int WATCHDOG = 10_000;
  `include "tb_common.svh"

  logic                     in_valid = 0;
  logic [BIW-1:0]           b_idx = '0;
  logic [FIW-1:0]           f_idx = '0;
  logic [L_SEG-1:0][MB-1:0] sym = '0;
  logic                     out_valid, out_err;
  logic [NIM+L_SEG*MB-1:0]  out_bits;

  codebook_decoder dut (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int unsigned e;
      @(negedge clk);
      in_valid = 1;
      b_idx = BIW'($urandom);
      f_idx = FIW'($urandom);
      sym   = (L_SEG*MB)'({$urandom, $urandom});
      e     = int'(b_idx) * NF + int'(f_idx);
      @(negedge clk);
      in_valid = 0;
      check(out_valid, "out_valid one clock after in_valid");
      check(out_bits[NIM-1:0] == NIM'(e), $sformatf("entry %0d got %0d", e, out_bits[NIM-1:0]));
      for (int l = 0; l < L_SEG; l++)
        check(out_bits[NIM + l*MB +: MB] == sym[l], $sformatf("symbol %0d", l));
      check(!out_err, "entry inside the codebook");
      @(negedge clk);
      check(!out_valid, "single pulse");
    end
    finish_tb();
  end
endmodule
