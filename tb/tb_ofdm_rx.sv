// Testbench of ofdm_rx (NFFT 64, NCP 16, NUSED 48, OUT_SHIFT 3).
// Streams symbols of random time-domain samples, one sample every 3 cycles,
// with random symbol types. For every UL pilot / UL data symbol it computes
// here the DFT of the NFFT samples after the cyclic prefix and checks the 48
// used subcarriers (subcarrier sc at bin sc-24 mod 64 for sc < 24, bin
// sc-23 otherwise) with a 3 LSB tolerance, plus subcarrier index and type;
// other symbol types must give no output. Random out_ready back-pressure is
// applied. A final phase holds out_ready low so both FFT cores fill and
// checks that the next UL symbols are counted as overflows.
// Watchdog: 20 ms.
module tb_ofdm_rx;
  import lumami_pkg::*;
  localparam int NFFT = 64, NCP = 16, NUSED = 48, SH = 3, SL = NFFT + NCP;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, out_ready = 0;
  sym_t in_type = SYM_GUARD;
  cplx_t in_data = '0;
  logic out_valid;
  beat_t out_beat;
  logic [15:0] overflows;
  int checks = 0, failures = 0;
  real exp_re[$], exp_im[$];
  int exp_sc[$], exp_st[$];
  logic stall_phase = 0;

  ofdm_rx #(.NFFT(NFFT), .NCP(NCP), .NUSED(NUSED), .OUT_SHIFT(SH)) dut (.*);
  always #2.5ns clk = ~clk;

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  initial begin
    #20ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) begin
    out_ready <= stall_phase ? 1'b0 : ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_re.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        real er, ei;
        int es, et;
        er = exp_re.pop_front(); ei = exp_im.pop_front(); es = exp_sc.pop_front(); et = exp_st.pop_front();
        if (absr(real'(out_beat.s.re) - er) > 3.0 || absr(real'(out_beat.s.im) - ei) > 3.0
            || int'(out_beat.sc) != es || int'(out_beat.st) != et) begin
          failures++;
          if (failures < 6) $display("sc %0d got %0d,%0d exp %f,%f (sc %0d st %0d)", es, out_beat.s.re, out_beat.s.im, er, ei, out_beat.sc, out_beat.st);
        end
      end
    end
  end

  task automatic send_symbol(sym_t st, int gap, logic expect_out);
    int xr [SL], xi [SL];
    real er, ei, ang;
    int bin;
    for (int t = 0; t < SL; t++) begin
      xr[t] = int'($urandom_range(0, 200)) - 100;
      xi[t] = int'($urandom_range(0, 200)) - 100;
    end
    if (expect_out) begin
      for (int sc = 0; sc < NUSED; sc++) begin
        bin = (sc < NUSED / 2) ? NFFT - NUSED / 2 + sc : sc - NUSED / 2 + 1;
        er = 0; ei = 0;
        for (int n = 0; n < NFFT; n++) begin
          ang = -2.0 * 3.14159265358979 * bin * n / NFFT;
          er += xr[NCP + n] * $cos(ang) - xi[NCP + n] * $sin(ang);
          ei += xr[NCP + n] * $sin(ang) + xi[NCP + n] * $cos(ang);
        end
        exp_re.push_back(er / (1 << SH)); exp_im.push_back(ei / (1 << SH));
        exp_sc.push_back(sc); exp_st.push_back(int'(st));
      end
    end
    for (int t = 0; t < SL; t++) begin
      in_valid = 1; in_first = (t == 0); in_type = st;
      in_data = '{re: 12'(xr[t]), im: 12'(xi[t])};
      @(negedge clk);
      in_first = 0;
      if (gap > 0) begin
        in_valid = 0;
        repeat (gap) @(negedge clk);
      end
    end
    in_valid = 0;
  endtask

  initial begin
    sym_t st;
    int ov0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < 14; s++) begin
      st = sym_t'($urandom_range(0, 5));
      send_symbol(st, 5, st == SYM_UL_PIL || st == SYM_UL_DATA);
    end
    repeat (4000) @(posedge clk);
    checks++;
    if (exp_re.size() != 0 || overflows != 0) begin
      failures++;
      $display("left %0d expected outputs, overflows %0d", exp_re.size(), overflows);
    end
    // overload: nothing is read, two symbols fill both cores, the rest overflow
    stall_phase = 1;
    ov0 = int'(overflows);
    for (int s = 0; s < 4; s++) send_symbol(SYM_UL_DATA, 0, s < 2);
    repeat (1000) @(posedge clk);
    checks++;
    if (int'(overflows) - ov0 != 2) begin
      failures++;
      $display("overflows %0d", overflows);
    end
    stall_phase = 0;
    repeat (2000) @(posedge clk);
    checks++;
    if (exp_re.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
