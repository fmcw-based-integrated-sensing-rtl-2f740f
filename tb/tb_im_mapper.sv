// tb_im_mapper: random data words and the pilot through the IM mapper.
// Expected values come from the codebook definition in Hz: bandwidth
// 40 MHz + 2 MHz*b, centre (2f-3) MHz, start frequency fc - b/2 as a tuning
// word of 2^32 per sample rate, chirp rate b/(FS*NS) * 2^32 per sample.
module tb_im_mapper;
  import isac_pkg::*;
  localparam int WATCHDOG = 10_000;
  `include "tb_common.svh"

  logic                    in_valid = 0, in_pilot = 0;
  logic [NIM+L_SEG*MB-1:0] in_bits = '0;
  logic                    out_valid;
  chirp_sel_t              out_sel;
  logic [31:0]             out_f0_ftw, out_rate;
  logic [L_SEG-1:0][MB-1:0] out_sym;

  im_mapper dut (.*);

  function automatic longint tw(input real hz);   // tuning word, mod 2^32
    real t;
    t = hz / 100.0e6 * 4294967296.0;
    if (t < 0) t = t + 4294967296.0;
    return longint'(t) & 64'hFFFF_FFFF;
  endfunction

  function automatic bit near(input logic [31:0] a, input longint b);
    longint d;
    d = (longint'(a) - b) & 64'hFFFF_FFFF;
    return d <= 2 || d >= 64'hFFFF_FFFE;
  endfunction

  int n_out = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int  b, f;
      real bw, fc;
      @(negedge clk);
      in_valid = 1;
      in_pilot = (t % 50 == 0);
      in_bits  = (NIM+L_SEG*MB)'({$urandom, $urandom});
      b  = int'(in_bits[NIM-1:0]) / NF;
      f  = int'(in_bits[NIM-1:0]) % NF;
      bw = in_pilot ? 60.0e6 : 40.0e6 + 2.0e6 * b;
      fc = in_pilot ? 0.0 : (2.0 * f - 3.0) * 1.0e6;
      @(negedge clk);
      in_valid = 0;
      check(out_valid, "out_valid one clock after in_valid");
      check(out_sel.pilot == in_pilot, "pilot flag");
      if (!in_pilot) begin
        check(out_sel.b_idx == BIW'(b) && out_sel.f_idx == FIW'(f), "b/f index split");
        for (int l = 0; l < L_SEG; l++)
          check(out_sym[l] == in_bits[NIM + l*MB +: MB], $sformatf("symbol %0d", l));
      end
      check(near(out_f0_ftw, tw(fc - bw / 2.0)),
            $sformatf("f0 word %h exp %h", out_f0_ftw, tw(fc - bw / 2.0)));
      check(near(out_rate, tw(bw / 1000.0)), $sformatf("rate word %h", out_rate));
      @(negedge clk);
      check(!out_valid, "out_valid is a single pulse");
    end
    finish_tb();
  end
endmodule
