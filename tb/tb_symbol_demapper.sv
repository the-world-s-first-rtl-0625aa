// Testbench of symbol_demapper.
// Drives random detected symbols (uniform over the 12-bit range, and noisy
// constellation points) and compares the output bits with a reference that
// picks the nearest of the 2^b odd levels by exhaustive distance search and
// Gray codes its index. Points exactly half-way between levels are skipped
// because either decision is correct. Watchdog: 100 us.
module tb_symbol_demapper;
  import lumami_pkg::*;
  localparam int ZSH = 8;
  mod_t mod;
  cplx_t sym;
  logic [5:0] bits;
  int checks = 0, failures = 0;

  symbol_demapper #(.ZSH(ZSH)) dut (.mod, .sym, .bits);

  // nearest level index, -1 on a tie
  function automatic int nearest(int v, int b);
    int best, bd, d;
    best = 0; bd = 1 << 30;
    for (int i = 0; i < (1 << b); i++) begin
      d = v - (2 * i - ((1 << b) - 1)) * (1 << ZSH);
      if (d < 0) d = -d;
      if (d < bd) begin bd = d; best = i; end
      else if (d == bd) best = -1;
    end
    return best;
  endfunction

  initial begin
    #100us;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int b, ii, iq, exp_bits, re, im;
    mod = MOD_QPSK; sym = '0;
    for (int r = 0; r < 3000; r++) begin
      mod = mod_t'($urandom_range(0, 2));
      b = int'(mod_bits(mod)) / 2;
      if (r % 2 == 0) begin
        re = int'($urandom_range(0, 4095)) - 2048;
        im = int'($urandom_range(0, 4095)) - 2048;
      end else begin
        re = (2 * int'($urandom_range(0, (1 << b) - 1)) - ((1 << b) - 1)) * 256 + int'($urandom_range(0, 400)) - 200;
        im = (2 * int'($urandom_range(0, (1 << b) - 1)) - ((1 << b) - 1)) * 256 + int'($urandom_range(0, 400)) - 200;
        if (re > 2047) re = 2047;
        if (im > 2047) im = 2047;
      end
      sym.re = 12'(re); sym.im = 12'(im);
      #1;
      ii = nearest(re, b); iq = nearest(im, b);
      if (ii < 0 || iq < 0) continue;
      exp_bits = (((ii ^ (ii >> 1)) << b) | (iq ^ (iq >> 1)));
      checks++;
      if (int'(bits) != exp_bits) begin
        failures++;
        if (failures < 5) $display("mismatch mod=%0d z=%0d,%0d got %b exp %b", mod, re, im, bits, 6'(exp_bits));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
