// tb_frame_buffer: fills a small frame memory with random samples, then reads
// random addresses (data one clock after rd_en) while writing elsewhere, and
// compares with a shadow copy. Also checks that rdata holds without rd_en.
module tb_frame_buffer;
  import isac_pkg::*;
  localparam int WATCHDOG = 20_000;
  localparam int DEPTH    = 300;
  localparam int AW       = $clog2(DEPTH);
  `include "tb_common.svh"

  logic          we = 0, rd_en = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  iq16_t         wdata = '0, rdata;
  iq16_t         shadow [DEPTH];

  frame_buffer #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = iq16_t'($urandom);
      shadow[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int t = 0; t < 2000; t++) begin
      int ra, wa;
      iq16_t expv, held;
      ra = $urandom_range(DEPTH - 1);
      wa = $urandom_range(DEPTH - 1);
      rd_en = 1; raddr = AW'(ra);
      we = (wa != ra); waddr = AW'(wa); wdata = iq16_t'($urandom);
      expv = shadow[ra];
      if (we) shadow[wa] = wdata;
      @(negedge clk);
      check(rdata == expv, $sformatf("read %0d", ra));
      held = rdata;
      rd_en = 0; we = 0; raddr = AW'($urandom_range(DEPTH - 1));
      @(negedge clk);
      check(rdata == held, "rdata holds without rd_en");
    end
    finish_tb();
  end
endmodule
