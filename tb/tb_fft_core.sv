// Testbench of fft_core.
// A 64-point core (OUT_SHIFT 3) gets random complex inputs, written in a
// random address order. Each forward and inverse result is compared bin by
// bin with a direct DFT computed here in floating point,
// sum x[n] exp(-+j 2 pi k n / N) / 2^3, with a tolerance of 3 LSB. It also
// checks that busy lasts N/2*log2(N) cycles and that done holds until
// release. Watchdog: 5 ms.
module tb_fft_core;
  import lumami_pkg::*;
  localparam int N = 64, SH = 3, LG = 6;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, start = 0, inverse = 0, release_i = 0;
  logic [LG-1:0] wr_addr = '0, rd_addr = '0;
  cplx_t wr_data = '0, rd_data;
  logic busy, done;
  int checks = 0, failures = 0;
  int xr [N], xi [N], perm [N];

  fft_core #(.N(N), .OUT_SHIFT(SH)) dut (.*);
  always #2.5ns clk = ~clk;

  initial begin
    #5ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  initial begin
    real er, ei, ang;
    int cyc, t;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 12; trial++) begin
      for (int n = 0; n < N; n++) begin
        xr[n] = int'($urandom_range(0, 200)) - 100;
        xi[n] = int'($urandom_range(0, 200)) - 100;
        perm[n] = n;
      end
      if (trial == 0) begin  // impulse
        for (int n = 0; n < N; n++) begin xr[n] = 0; xi[n] = 0; end
        xr[0] = 800;
      end
      perm.shuffle();
      inverse <= trial[0];
      for (int n = 0; n < N; n++) begin
        wr_en <= 1; wr_addr <= LG'(perm[n]);
        wr_data <= '{re: 12'(xr[perm[n]]), im: 12'(xi[perm[n]])};
        @(posedge clk);
      end
      wr_en <= 0; start <= 1;
      @(posedge clk);
      start <= 0;
      cyc = 0;
      @(posedge clk);
      while (!done) begin @(posedge clk); cyc++; end
      checks++;
      if (cyc != N / 2 * LG) begin
        failures++;
        $display("run took %0d cycles", cyc);
      end
      for (int k = 0; k < N; k++) begin
        rd_addr <= LG'(k);
        #1;
        er = 0; ei = 0;
        for (int n = 0; n < N; n++) begin
          ang = (trial[0] ? 1.0 : -1.0) * 2.0 * 3.14159265358979 * k * n / N;
          er += xr[n] * $cos(ang) - xi[n] * $sin(ang);
          ei += xr[n] * $sin(ang) + xi[n] * $cos(ang);
        end
        er = er / (1 << SH); ei = ei / (1 << SH);
        checks++;
        if (absr(real'(rd_data.re) - er) > 3.0 || absr(real'(rd_data.im) - ei) > 3.0) begin
          failures++;
          if (failures < 6) $display("trial %0d bin %0d got %0d,%0d exp %f,%f", trial, k, rd_data.re, rd_data.im, er, ei);
        end
      end
      @(posedge clk);
      checks++;
      if (!done) failures++;
      release_i <= 1;
      @(posedge clk);
      release_i <= 0;
      @(posedge clk);
      checks++;
      if (done || busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
