// End-to-end testbench of lumami_bs at reduced size: M 8 antennas (4 SDRs of
// 2 in 2 subsystems), K 2 users, 2 co-processors, 64-point OFDM with 16 CP
// samples and 48 used subcarriers, the full 140-symbol frame, 8 Neumann
// terms (so the weight unit is slower than the detector needs and stalls
// happen).
// A flat radio channel h[m][k] is modelled here. For every UL pilot and UL
// data symbol the users' frequency-domain symbols (pilots on subcarriers
// sc mod K = k with the BPSK sign of the design, or QPSK data of amplitude
// 100) are turned into ADC samples by an inverse DFT and the channel, one
// sample every 4 clocks. The detected UL bits of both co-processors are
// compared with the bits sent. For every DL symbol the DAC samples of all
// antennas are passed back through the channel to each user (reciprocity,
// calibration 1.0), a DFT is taken, and the quadrant of each user's
// subcarrier must match the DL pilot (+1) or the QPSK symbol of the DL bits
// supplied.
// Frame 0 uses ZF on a random channel; frame 1 switches the mode to MRC with
// a channel whose user columns are orthogonal; frame 2 uses RZF. Then the
// ADC runs at one sample per 2 clocks so the FFTs cannot keep up.
// Mechanisms counted, each a failure if it never happened: correct UL
// symbols, correct DL symbols, detector/precoder stall, mode switch (correct
// MRC bits), RZF bits, FFT overflow. Watchdog: 50 ms.
module tb_lumami_bs;
  import lumami_pkg::*;
  localparam int M = 8, K = 2, NANT = 2, NSDR = 2, NCO = 2, NFFT = 64, NCP = 16, NUSED = 48;
  localparam int NSYM = 140, SL = NFFT + NCP, NSC = NUSED / NCO, NT = 8;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, trigger = 0;
  det_mode_t mode = DET_ZF;
  mod_t modulation = MOD_QPSK;
  logic [31:0] beta = '0;
  logic [7:0] m_active = 8'(M);
  logic [M-1:0] cal_we = '0;
  cplx_t cal_coef = '0;
  logic tbl_we = 0;
  logic [7:0] tbl_addr = '0;
  sym_t tbl_type = SYM_GUARD;
  logic adc_valid = 0;
  cplx_t adc_data [M];
  logic [M-1:0] dac_valid, dac_ready = '1, dac_first;
  sym_t dac_type [M];
  cplx_t dac_data [M];
  logic [NCO-1:0] ul_bits_valid, dl_bits_valid = '1, dl_bits_ready;
  logic [10:0] ul_bits_sc [NCO];
  logic [5:0] ul_bits [NCO][K];
  logic [5:0] dl_bits [NCO][K];
  logic running;
  logic [15:0] frame_cnt;
  logic [M-1:0] rx_overflow;
  logic [31:0] det_stalls [NCO], pre_stalls [NCO];
  logic [7:0] dl_req_dropped [NCO];
  logic [NCO-1:0] wc_busy;
  logic [7:0] sym_idx;

  lumami_bs #(.M(M), .K(K), .NANT(NANT), .NSDR(NSDR), .NCO(NCO), .NFFT(NFFT), .NCP(NCP),
              .NUSED(NUSED), .NSYM(NSYM), .NTERMS(NT)) dut (.*);
  always #2.5ns clk = ~clk;

  int checks = 0, failures = 0;
  logic overload = 0;
  int ul_ok = 0, ul_bad = 0, dl_ok = 0, dl_bad = 0, mrc_ok = 0, rzf_ok = 0, cur_frame = 0;
  real hr [M][K], hi [M][K];
  int ul_exp_sc [NCO][$];
  int ul_exp_b [NCO][$];
  int dl_given [NCO][$];
  cplx_t dacq [M][$];
  sym_t dac_st [$];

  initial begin
    #50ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic int psign(int sc);
    int ones = 0;
    for (int b = 0; b < 11; b++) if (((sc >> b) & 1) && ((12'h2A5 >> b) & 1)) ones++;
    return (ones % 2) ? -1 : 1;
  endfunction

  function automatic int bin_of(int sc);
    return (sc < NUSED / 2) ? NFFT - NUSED / 2 + sc : sc - NUSED / 2 + 1;
  endfunction

  // QPSK with the design's labelling: bit 1 -> I, bit 0 -> Q, 0 -> -1
  function automatic int qpsk(int b);
    return b ? 1 : -1;
  endfunction

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- UL bits ----------------
  always @(posedge clk) if (rst_n) for (int j = 0; j < NCO; j++) if (ul_bits_valid[j]) begin
    int es, eb;
    if (ul_exp_sc[j].size() == 0) begin
      if (!overload) ul_bad++;
    end
    else begin
      es = ul_exp_sc[j].pop_front(); eb = ul_exp_b[j].pop_front();
      if (int'(ul_bits_sc[j]) == es && int'({ul_bits[j][1][1:0], ul_bits[j][0][1:0]}) == eb) begin
        ul_ok++;
        if (cur_frame == 1) mrc_ok++;
        if (cur_frame == 2) rzf_ok++;
      end else begin
        ul_bad++;
        if (ul_bad < 5) $display("UL co %0d sc %0d/%0d bits %b%b exp %b", j, ul_bits_sc[j], es, ul_bits[j][1][1:0], ul_bits[j][0][1:0], 4'(eb));
      end
    end
  end

  // ---------------- DL bits supply ----------------
  always @(posedge clk) if (rst_n) for (int j = 0; j < NCO; j++) if (dl_bits_valid[j] && dl_bits_ready[j])
    dl_given[j].push_back(int'({dl_bits[j][1][1:0], dl_bits[j][0][1:0]}));
  always @(negedge clk) for (int j = 0; j < NCO; j++) if (!rst_n || dl_bits_ready[j])
    for (int k = 0; k < K; k++) dl_bits[j][k] = 6'($urandom_range(0, 3));

  // ---------------- DAC capture and DL check ----------------
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < M; m++) if (dac_valid[m] && dac_ready[m]) begin
      dacq[m].push_back(dac_data[m]);
      if (m == 0 && dac_first[0]) dac_st.push_back(dac_type[0]);
    end
  end

  real dr [M][SL], di [M][SL];
  always @(posedge clk) if (rst_n && dac_st.size() > 0) begin
    logic ready;
    ready = 1;
    for (int m = 0; m < M; m++) if (dacq[m].size() < SL) ready = 0;
    if (ready) begin
      sym_t st;
      real rr, ri, ang, c, s;
      int bits, eqi, eqq, bin;
      st = dac_st.pop_front();
      for (int m = 0; m < M; m++)
        for (int t = 0; t < SL; t++) begin
          cplx_t d;
          d = dacq[m].pop_front();
          dr[m][t] = d.re; di[m][t] = d.im;
        end
      for (int sc = 0; sc < NUSED; sc++) begin
        int j;
        j = sc / NSC;
        bits = (st == SYM_DL_DATA && dl_given[j].size() > 0) ? dl_given[j].pop_front() : 0;
        bin = bin_of(sc);
        for (int k = 0; k < K; k++) begin
          rr = 0; ri = 0;
          for (int t = 0; t < NFFT; t++) begin
            ang = -2.0 * PI * bin * t / NFFT;
            c = $cos(ang); s = $sin(ang);
            for (int m = 0; m < M; m++) begin
              real yr, yi;
              // r_k(t) = sum_m h[m][k] x_m(t)
              yr = hr[m][k] * dr[m][NCP + t] - hi[m][k] * di[m][NCP + t];
              yi = hr[m][k] * di[m][NCP + t] + hi[m][k] * dr[m][NCP + t];
              rr += yr * c - yi * s;
              ri += yr * s + yi * c;
            end
          end
          if (st == SYM_DL_PIL) begin eqi = 1; eqq = 0; end
          else begin eqi = qpsk((bits >> (2 * k + 1)) & 1); eqq = qpsk((bits >> (2 * k)) & 1); end
          if (st == SYM_DL_PIL ? (rr > 0 && (ri < rr / 2 && ri > -rr / 2))
                               : ((rr > 0) == (eqi > 0) && (ri > 0) == (eqq > 0)))
            dl_ok++;
          else begin
            dl_bad++;
            if (dl_bad < 5) $display("DL st %0d sc %0d user %0d got %f,%f exp %0d,%0d", st, sc, k, rr, ri, eqi, eqq);
          end
        end
      end
    end
  end

  // ---------------- ADC stimulus ----------------
  task automatic set_channel(int kind);
    for (int m = 0; m < M; m++) begin
      if (kind == 1) begin
        real ph;
        ph = 2.0 * PI * $urandom_range(0, 999) / 1000.0;
        hr[m][0] = 0.7 * $cos(ph); hi[m][0] = 0.7 * $sin(ph);
        hr[m][1] = (m % 2 ? -1.0 : 1.0) * hr[m][0];
        hi[m][1] = (m % 2 ? -1.0 : 1.0) * hi[m][0];
      end else
        for (int k = 0; k < K; k++) begin
          int a, c;
          a = $urandom_range(0, 1000);
          c = $urandom_range(0, 1000);
          hr[m][k] = (a - 500) / 700.0;
          hi[m][k] = (c - 500) / 700.0;
        end
    end
  endtask

  // one symbol of ADC samples; pace = clocks per sample
  task automatic send_symbol(sym_t st, int pace, logic record);
    real xr [K][NUSED], xi [K][NUSED], tr [K][NFFT], ti [K][NFFT], ang;
    int b [K][NUSED];
    for (int sc = 0; sc < NUSED; sc++)
      for (int k = 0; k < K; k++) begin
        b[k][sc] = $urandom_range(0, 3);
        if (st == SYM_UL_PIL) begin
          xr[k][sc] = (sc % K == k) ? 100.0 * psign(sc) : 0.0; xi[k][sc] = 0.0;
        end else if (st == SYM_UL_DATA) begin
          xr[k][sc] = 100.0 * qpsk(b[k][sc] >> 1); xi[k][sc] = 100.0 * qpsk(b[k][sc] & 1);
        end else begin
          xr[k][sc] = 0.0; xi[k][sc] = 0.0;
        end
      end
    if (st == SYM_UL_DATA && record)
      for (int sc = 0; sc < NUSED; sc++) begin
        ul_exp_sc[sc / NSC].push_back(sc);
        ul_exp_b[sc / NSC].push_back((b[1][sc] << 2) | b[0][sc]);
      end
    for (int k = 0; k < K; k++)
      for (int t = 0; t < NFFT; t++) begin
        tr[k][t] = 0; ti[k][t] = 0;
        if (st == SYM_UL_PIL || st == SYM_UL_DATA)
          for (int sc = 0; sc < NUSED; sc++) begin
            ang = 2.0 * PI * bin_of(sc) * t / NFFT;
            tr[k][t] += 0.5 * (xr[k][sc] * $cos(ang) - xi[k][sc] * $sin(ang));
            ti[k][t] += 0.5 * (xr[k][sc] * $sin(ang) + xi[k][sc] * $cos(ang));
          end
      end
    for (int s = 0; s < SL; s++) begin
      int t;
      t = (s + NFFT - NCP) % NFFT;
      @(negedge clk);
      for (int m = 0; m < M; m++) begin
        real yr, yi;
        yr = 0; yi = 0;
        for (int k = 0; k < K; k++) begin
          yr += hr[m][k] * tr[k][t] - hi[m][k] * ti[k][t];
          yi += hr[m][k] * ti[k][t] + hi[m][k] * tr[k][t];
        end
        adc_data[m] = '{re: 12'($rtoi(yr + (yr < 0 ? -0.5 : 0.5))), im: 12'($rtoi(yi + (yi < 0 ? -0.5 : 0.5)))};
      end
      adc_valid = 1;
      @(negedge clk);
      adc_valid = 0;
      repeat (pace - 2) @(negedge clk);
    end
  endtask

  function automatic sym_t frame_type(int n);
    int slot, pos;
    slot = n / 7; pos = n % 7;
    if (slot < 2) return SYM_CTRL;
    case (pos)
      0: return SYM_UL_PIL;
      1, 2: return SYM_UL_DATA;
      4: return (slot < 4) ? SYM_DL_PIL : SYM_DL_DATA;
      5: return SYM_DL_DATA;
      default: return SYM_GUARD;
    endcase
  endfunction

  initial begin
    for (int m = 0; m < M; m++) adc_data[m] = '0;
    set_channel(0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    trigger = 1;
    repeat (3) @(negedge clk);
    for (int f = 0; f < 3; f++) begin
      for (int n = 0; n < NSYM; n++) begin
        if (n == 0) begin
          cur_frame = f;
          if (f == 1) begin mode = DET_MRC; set_channel(1); end
          if (f == 2) begin mode = DET_RZF; beta = 32'd2000; set_channel(0); end
        end
        // the first data symbols after a channel change use the old pilots
        send_symbol(frame_type(n), 6, n >= 14);
      end
    end
    repeat (3000) @(negedge clk);
    chk(ul_exp_sc[0].size() == 0 && ul_exp_sc[1].size() == 0, "all UL subcarriers detected");
    // overload: one sample per clock during UL symbols (outputs not checked)
    overload = 1;
    for (int n = 0; n < 17; n++) send_symbol(frame_type(n), 2, 0);
    repeat (3000) @(negedge clk);
    $display("UL ok %0d bad %0d, DL ok %0d bad %0d, MRC ok %0d, RZF ok %0d, stalls det %0d/%0d pre %0d/%0d, overflow %b",
             ul_ok, ul_bad, dl_ok, dl_bad, mrc_ok, rzf_ok, det_stalls[0], det_stalls[1], pre_stalls[0], pre_stalls[1], rx_overflow);
    chk(ul_ok > 0, "mechanism: UL detection");
    chk(ul_bad == 0, "UL bit errors");
    chk(dl_ok > 0, "mechanism: DL precoding");
    chk(dl_bad == 0, "DL symbol errors");
    chk(mrc_ok > 0, "mechanism: mode switch to MRC");
    chk(rzf_ok > 0, "mechanism: RZF");
    chk(det_stalls[0] + det_stalls[1] + pre_stalls[0] + pre_stalls[1] > 0, "mechanism: stall");
    chk(|rx_overflow, "mechanism: FFT overflow");
    chk(dl_req_dropped[0] == 0 && dl_req_dropped[1] == 0, "no DL request dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
