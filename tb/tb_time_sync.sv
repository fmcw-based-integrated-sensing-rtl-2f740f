// tb_time_sync: a recorded frame whose pilot chirp (plain 60 MHz FMCW centred
// at 0 Hz) starts at a random offset inside the 64-sample search window,
// preceded by noise and followed by a data chirp of another bandwidth, with a
// random carrier phase and additive noise. The frame memory is a model in the
// testbench with one clock of read latency. The reported lag must equal the
// offset, and the search must take WIN*NS + 3 clocks.
module tb_time_sync;
  import isac_pkg::*;
  localparam int WATCHDOG = 1_000_000;
  localparam int WIN      = 64;
  localparam int MEMN     = 3 * NS;
  `include "tb_common.svh"

  logic        start = 0;
  logic [15:0] base = '0;
  logic        rd_en, busy, done;
  logic [15:0] rd_addr;
  iq16_t       rd_data = '0;
  logic [5:0]  lag;
  logic [47:0] peak;

  time_sync dut (.*);

  iq16_t mem [MEMN];
  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  task automatic make_frame(input int bofs, input int off);
    real ps, th, ar, ai, nr, ni;
    ps = 2.0 * PI * real'($urandom_range(999)) / 1000.0;
    for (int a = 0; a < MEMN; a++) begin
      int n;
      n  = a - bofs - off;
      ar = 0.0; ai = 0.0;
      if (n >= 0 && n < NS) begin          // pilot
        th = -0.3 * n + 0.6 / NS * real'(n) * real'(n - 1) / 2.0;
        ar = 9000.0 * $cos(2.0 * PI * wrap(th) + ps);
        ai = 9000.0 * $sin(2.0 * PI * wrap(th) + ps);
      end else if (n >= NS && n < 2 * NS) begin   // a 44 MHz data chirp
        n  = n - NS;
        th = -0.23 * n + 0.44 / NS * real'(n) * real'(n - 1) / 2.0;
        ar = 9000.0 * $cos(2.0 * PI * wrap(th));
        ai = 9000.0 * $sin(2.0 * PI * wrap(th));
      end
      nr = real'(int'($urandom_range(3000)) - 1500);
      ni = real'(int'($urandom_range(3000)) - 1500);
      mem[a] = '{re: 16'($rtoi(ar + nr)), im: 16'($rtoi(ai + ni))};
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int off, bofs, cyc;
      off  = (t == 0) ? 0 : (t == 1) ? WIN - 1 : $urandom_range(WIN - 1);
      bofs = $urandom_range(200);
      make_frame(bofs, off);
      @(negedge clk);
      start = 1; base = 16'(bofs);
      @(negedge clk);
      start = 0;
      cyc = 1;
      check(busy, "busy during the search");
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      check(int'(lag) == off, $sformatf("lag %0d expected %0d", lag, off));
      check(cyc == WIN * NS + 3, $sformatf("search took %0d clocks", cyc));
      @(negedge clk);
      check(!busy && !done, "idle after done");
    end
    finish_tb();
  end
endmodule
