// Testbench of ofdm_tx (NFFT 64, NCP 16, NUSED 48, OUT_SHIFT 3).
// Sends symbols of 48 random subcarriers with random input gaps and random
// output back-pressure. For each symbol it computes here the inverse DFT
// x[t] = sum X[bin] exp(+j 2 pi bin t / 64) / 2^3 over the used bins and
// checks the 80 output samples (cyclic prefix = last 16 samples first) with
// a 3 LSB tolerance, the first flag and the symbol type. Watchdog: 20 ms.
module tb_ofdm_tx;
  import lumami_pkg::*;
  localparam int NFFT = 64, NCP = 16, NUSED = 48, SH = 3, SL = NFFT + NCP;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_ready = 0;
  beat_t in_beat = '0;
  logic in_ready, out_valid, out_first;
  sym_t out_type;
  cplx_t out_data;
  int checks = 0, failures = 0, nsym = 0;
  real exp_re[$], exp_im[$];
  int exp_first[$], exp_st[$];

  ofdm_tx #(.NFFT(NFFT), .NCP(NCP), .NUSED(NUSED), .OUT_SHIFT(SH)) dut (.*);
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

  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_re.size() == 0) failures++;
    else begin
      real er, ei;
      int ef, es;
      er = exp_re.pop_front(); ei = exp_im.pop_front(); ef = exp_first.pop_front(); es = exp_st.pop_front();
      if (absr(real'(out_data.re) - er) > 3.0 || absr(real'(out_data.im) - ei) > 3.0
          || int'(out_first) != ef || int'(out_type) != es) begin
        failures++;
        if (failures < 6) $display("got %0d,%0d exp %f,%f", out_data.re, out_data.im, er, ei);
      end
    end
  end

  initial begin
    int xr [NUSED], xi [NUSED];
    real tr [NFFT], ti [NFFT], ang;
    int bin;
    sym_t st;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 8; s++) begin
      st = (s % 3 == 0) ? SYM_DL_PIL : SYM_DL_DATA;
      for (int k = 0; k < NUSED; k++) begin
        xr[k] = int'($urandom_range(0, 200)) - 100;
        xi[k] = int'($urandom_range(0, 200)) - 100;
      end
      for (int t = 0; t < NFFT; t++) begin
        tr[t] = 0; ti[t] = 0;
        for (int k = 0; k < NUSED; k++) begin
          bin = (k < NUSED / 2) ? NFFT - NUSED / 2 + k : k - NUSED / 2 + 1;
          ang = 2.0 * 3.14159265358979 * bin * t / NFFT;
          tr[t] += xr[k] * $cos(ang) - xi[k] * $sin(ang);
          ti[t] += xr[k] * $sin(ang) + xi[k] * $cos(ang);
        end
      end
      for (int t = 0; t < SL; t++) begin
        exp_re.push_back(tr[(t + NFFT - NCP) % NFFT] / (1 << SH));
        exp_im.push_back(ti[(t + NFFT - NCP) % NFFT] / (1 << SH));
        exp_first.push_back(int'(t == 0));
        exp_st.push_back(int'(st));
      end
      for (int k = 0; k < NUSED; k++) begin
        @(negedge clk);
        while ($urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        in_beat.s = '{re: 12'(xr[k]), im: 12'(xi[k])};
        in_beat.sc = 11'(k);
        in_beat.st = st;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
    end
    repeat (3000) @(posedge clk);
    checks++;
    if (exp_re.size() != 0) begin
      failures++;
      $display("%0d samples missing", exp_re.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
