// Testbench of symbol_mapper.
// For every modulation and every bit pattern it finds, by searching the Gray
// sequence, the level index whose Gray code equals each axis' bits and
// checks the mapped component against (2*idx - (2^b - 1)) * 2^ZSH. A fixed
// number of random patterns follows. Watchdog: 100 us.
module tb_symbol_mapper;
  import lumami_pkg::*;
  localparam int ZSH = 8;
  mod_t mod;
  logic [5:0] bits;
  cplx_t sym;
  int checks = 0, failures = 0;

  symbol_mapper #(.ZSH(ZSH)) dut (.mod, .bits, .sym);

  function automatic int ref_level(int g, int b);
    for (int i = 0; i < (1 << b); i++)
      if ((i ^ (i >> 1)) == g) return (2 * i - ((1 << b) - 1)) * (1 << ZSH);
    return 99999;
  endfunction

  task automatic check_one(mod_t m, logic [5:0] bv);
    int b, gi, gq;
    mod = m; bits = bv;
    #1;
    b  = int'(mod_bits(m)) / 2;
    gi = int'(bv >> b) & ((1 << b) - 1);
    gq = int'(bv) & ((1 << b) - 1);
    checks++;
    if (int'(sym.re) != ref_level(gi, b) || int'(sym.im) != ref_level(gq, b)) begin
      failures++;
      if (failures < 5) $display("mismatch mod=%0d bits=%b got %0d,%0d", m, bv, sym.re, sym.im);
    end
  endtask

  initial begin
    #100us;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    mod = MOD_QPSK; bits = '0;
    for (int m = 0; m < 3; m++)
      for (int v = 0; v < (1 << mod_bits(mod_t'(m))); v++) check_one(mod_t'(m), 6'(v));
    for (int r = 0; r < 200; r++) check_one(mod_t'($urandom_range(0, 2)), 6'($urandom) & 6'h3f);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
