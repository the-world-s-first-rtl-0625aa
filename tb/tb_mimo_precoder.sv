// Testbench of mimo_precoder (M 6, K 3, NSC 12 at SC_BASE 12, PAR 4).
// Random estimates G and weights X per group are served by memory models.
// Random user vectors u are offered on random subcarriers and the outputs
// are read with random ready. The reference, computed here in 64-bit
// integers, is v = (X^T u) >> 16 (floor) and x[m] = round(sum_k conj(G[k][m])
// v[k] / 2^12) saturated to 12 bits; it must match exactly, with the
// subcarrier and symbol type. Group 1 weights are withheld at first: the
// precoder must stall (stall_cycles) until they are valid. Watchdog: 2 ms.
module tb_mimo_precoder;
  import lumami_pkg::*;
  localparam int M = 6, K = 3, NSC = 12, SCB = 12, PAR = 4, GRP = 4, GW = 3, MW = 3, NV = 120;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  cplx_t in_u [K];
  logic [10:0] in_sc = '0;
  sym_t in_st = SYM_DL_DATA;
  logic [GRP-1:0] w_valid = 4'b1101;
  logic [GW-1:0] g_rd_g, x_rd_g;
  logic [MW-1:0] g_rd_m0;
  cplx_t g_rd_d [K][PAR];
  cplx32_t x_rd_d [K][K];
  logic out_valid, out_ready = 0;
  cplx_t out_x [M];
  logic [10:0] out_sc;
  sym_t out_st;
  logic [31:0] stall_cycles;
  int checks = 0, failures = 0, nout = 0;
  cplx_t G [GRP][K][M];
  cplx32_t X [GRP][K][K];
  longint exr [$], exi [$];
  int esc [$], est [$];

  mimo_precoder #(.M(M), .K(K), .NSC(NSC), .SC_BASE(SCB), .PAR(PAR)) dut (.*);
  always #2.5ns clk = ~clk;

  always_comb begin
    for (int k = 0; k < K; k++) begin
      for (int p = 0; p < PAR; p++)
        g_rd_d[k][p] = (int'(g_rd_m0) + p < M) ? G[g_rd_g][k][int'(g_rd_m0) + p] : cplx_t'(0);
      for (int j = 0; j < K; j++) x_rd_d[k][j] = X[x_rd_g][k][j];
    end
  end

  function automatic longint rnd_sat(longint v);
    v = (v + 2048) >>> 12;
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return v;
  endfunction

  initial begin
    #2ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(negedge clk) out_ready = ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (esc.size() == 0) failures++;
    else begin
      int sc, st;
      sc = esc.pop_front(); st = est.pop_front();
      if (int'(out_sc) != sc || int'(out_st) != st) failures++;
      for (int m = 0; m < M; m++) begin
        longint er, ei;
        er = exr.pop_front(); ei = exi.pop_front();
        if (longint'(out_x[m].re) != er || longint'(out_x[m].im) != ei) begin
          failures++;
          if (failures < 5) $display("sc %0d ant %0d got %0d,%0d exp %0d,%0d", sc, m, out_x[m].re, out_x[m].im, er, ei);
        end
      end
    end
    nout++;
  end

  initial begin
    longint vr [K], vi [K], xr, xi;
    int sc, g;
    cplx_t uv [K];
    sym_t st;
    for (int g = 0; g < GRP; g++)
      for (int k = 0; k < K; k++) begin
        for (int m = 0; m < M; m++) G[g][k][m] = '{re: 12'(int'($urandom_range(0, 1000)) - 500), im: 12'(int'($urandom_range(0, 1000)) - 500)};
        for (int j = 0; j < K; j++) X[g][k][j] = '{re: 32'(int'($urandom_range(0, 200000)) - 100000), im: 32'(int'($urandom_range(0, 200000)) - 100000)};
      end
    for (int k = 0; k < K; k++) in_u[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      sc = (v == 5) ? SCB + K : SCB + int'($urandom_range(0, NSC - 1));
      if (v < 5 && (sc - SCB) / K == 1) sc = sc + K;
      g = (sc - SCB) / K;
      st = (v % 4 == 0) ? SYM_DL_PIL : SYM_DL_DATA;
      for (int k = 0; k < K; k++) uv[k] = '{re: 12'(int'($urandom_range(0, 3000)) - 1500), im: 12'(int'($urandom_range(0, 3000)) - 1500)};
      for (int j = 0; j < K; j++) begin
        vr[j] = 0; vi[j] = 0;
        for (int k = 0; k < K; k++) begin
          vr[j] += longint'(X[g][k][j].re) * uv[k].re - longint'(X[g][k][j].im) * uv[k].im;
          vi[j] += longint'(X[g][k][j].re) * uv[k].im + longint'(X[g][k][j].im) * uv[k].re;
        end
        vr[j] = vr[j] >>> 16; vi[j] = vi[j] >>> 16;
      end
      for (int m = 0; m < M; m++) begin
        xr = 0; xi = 0;
        for (int k = 0; k < K; k++) begin
          xr += longint'(G[g][k][m].re) * vr[k] + longint'(G[g][k][m].im) * vi[k];
          xi += longint'(G[g][k][m].re) * vi[k] - longint'(G[g][k][m].im) * vr[k];
        end
        exr.push_back(rnd_sat(xr)); exi.push_back(rnd_sat(xi));
      end
      esc.push_back(sc); est.push_back(int'(st));
      @(negedge clk);
      in_valid = 1; in_sc = 11'(sc); in_st = st;
      for (int k = 0; k < K; k++) in_u[k] = uv[k];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      if (v == 5) begin
        repeat (50) @(negedge clk);
        checks++;
        if (stall_cycles < 40) failures++;
        w_valid = '1;
      end
    end
    repeat (200) @(posedge clk);
    checks++;
    if (nout != NV) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
