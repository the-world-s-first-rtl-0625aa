// Testbench of channel_estimator (M 6, K 4, NSC 24 at SC_BASE 24, PAR 4,
// two read ports).
// Sends the 24 pilot subcarriers of the sub-band, each a random 6-antenna
// vector, with random gaps, twice (second time with new values). It checks
// the grp_stale / grp_done pulses and group index, then reads every group
// and antenna block through both read ports and compares with
// y[m] * p(sc), where the BPSK pilot sign p is computed here by counting the
// set bits of sc & 0x2A5 one by one; antennas beyond M must read zero.
// Watchdog: 2 ms.
module tb_channel_estimator;
  import lumami_pkg::*;
  localparam int M = 6, K = 4, NSC = 24, SCB = 24, PAR = 4, GRP = NSC / K, GW = 3, MW = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  cplx_t in_y [M];
  logic [10:0] in_sc = '0;
  logic grp_stale, grp_done;
  logic [GW-1:0] grp_idx;
  logic [GW-1:0] rd_g [2];
  logic [MW-1:0] rd_m0 [2];
  cplx_t rd_d [2][K][PAR];
  int checks = 0, failures = 0, nst = 0, ndone = 0;
  cplx_t y [NSC][M];

  channel_estimator #(.M(M), .K(K), .NSC(NSC), .SC_BASE(SCB), .PAR(PAR), .NRD(2)) dut (.*);
  always #2.5ns clk = ~clk;

  function automatic int psign(int sc);
    int ones = 0;
    for (int b = 0; b < 11; b++) if (((sc >> b) & 1) && ((12'h2A5 >> b) & 1)) ones++;
    return (ones % 2) ? -1 : 1;
  endfunction

  initial begin
    #2ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (grp_stale) begin nst++; checks++; if (int'(grp_idx) != (nst - 1) % GRP) failures++; end
    if (grp_done) begin ndone++; checks++; if (int'(grp_idx) != (ndone - 1) % GRP) failures++; end
  end

  initial begin
    int s, er, ei;
    for (int m = 0; m < M; m++) in_y[m] = '0;
    for (int r = 0; r < 2; r++) begin rd_g[r] = '0; rd_m0[r] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < NSC; i++)
        for (int m = 0; m < M; m++) y[i][m] = '{re: 12'(int'($urandom_range(0, 3000)) - 1500), im: 12'(int'($urandom_range(0, 3000)) - 1500)};
      for (int i = 0; i < NSC; i++) begin
        @(negedge clk);
        while ($urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_sc = 11'(SCB + i);
        for (int m = 0; m < M; m++) in_y[m] = y[i][m];
      end
      @(negedge clk);
      in_valid = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (nst != GRP * (pass + 1) || ndone != GRP * (pass + 1)) failures++;
      for (int g = 0; g < GRP; g++)
        for (int m0 = 0; m0 < 8; m0 += PAR) begin
          rd_g[0] = GW'(g); rd_m0[0] = MW'(m0);
          rd_g[1] = GW'(GRP - 1 - g); rd_m0[1] = MW'(m0);
          #1;
          for (int r = 0; r < 2; r++)
            for (int k = 0; k < K; k++)
              for (int i = 0; i < PAR; i++) begin
                int gg, sc;
                gg = (r == 0) ? g : GRP - 1 - g;
                sc = gg * K + k;
                s = psign(SCB + sc);
                er = (m0 + i < M) ? s * int'(y[sc][m0 + i].re) : 0;
                ei = (m0 + i < M) ? s * int'(y[sc][m0 + i].im) : 0;
                checks++;
                if (int'(rd_d[r][k][i].re) != er || int'(rd_d[r][k][i].im) != ei) begin
                  failures++;
                  if (failures < 5) $display("g %0d k %0d m %0d got %0d exp %0d", gg, k, m0 + i, rd_d[r][k][i].re, er);
                end
              end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
