// Testbench of mimo_detector (M 6, K 3, NSC 12 at SC_BASE 12, PAR 4).
// The channel estimate G and weight matrix X of each of the 4 groups are
// random and served by models of the estimator and weight memories. Random
// receive vectors y are offered on random subcarriers. The reference,
// computed here in 64-bit integers, is q = G^H y, z = X q and
// out = sat((z + 2^31) >> 32) per user, which must match exactly, together
// with the subcarrier. Weights of group 2 are withheld at first: the
// detector must stall (counted in stall_cycles) and continue once they are
// marked valid. Watchdog: 2 ms.
module tb_mimo_detector;
  import lumami_pkg::*;
  localparam int M = 6, K = 3, NSC = 12, SCB = 12, PAR = 4, GRP = 4, GW = 3, MW = 3, NV = 120;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  cplx_t in_y [M];
  logic [10:0] in_sc = '0;
  logic [GRP-1:0] w_valid = 4'b1011;
  logic [GW-1:0] g_rd_g, x_rd_g;
  logic [MW-1:0] g_rd_m0;
  cplx_t g_rd_d [K][PAR];
  cplx32_t x_rd_d [K][K];
  logic out_valid;
  cplx_t out_z [K];
  logic [10:0] out_sc;
  logic [31:0] stall_cycles;
  int checks = 0, failures = 0, nout = 0;
  cplx_t G [GRP][K][M];
  cplx32_t X [GRP][K][K];
  longint ezr [$], ezi [$];
  int esc [$];

  mimo_detector #(.M(M), .K(K), .NSC(NSC), .SC_BASE(SCB), .PAR(PAR)) dut (.*);
  always #2.5ns clk = ~clk;

  always_comb begin
    for (int k = 0; k < K; k++) begin
      for (int p = 0; p < PAR; p++)
        g_rd_d[k][p] = (int'(g_rd_m0) + p < M) ? G[g_rd_g][k][int'(g_rd_m0) + p] : cplx_t'(0);
      for (int j = 0; j < K; j++) x_rd_d[k][j] = X[x_rd_g][k][j];
    end
  end

  function automatic longint satr(longint v);
    v = (v + (64'sd1 <<< 31)) >>> 32;
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

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (ezr.size() == 0) failures++;
    else begin
      int sc;
      sc = esc.pop_front();
      if (int'(out_sc) != sc) failures++;
      for (int k = 0; k < K; k++) begin
        longint er, ei;
        er = ezr.pop_front(); ei = ezi.pop_front();
        if (longint'(out_z[k].re) != er || longint'(out_z[k].im) != ei) begin
          failures++;
          if (failures < 5) $display("sc %0d user %0d got %0d,%0d exp %0d,%0d", sc, k, out_z[k].re, out_z[k].im, er, ei);
        end
      end
    end
    nout++;
  end

  initial begin
    longint qr [K], qi [K], zr, zi;
    int sc, g;
    cplx_t yv [M];
    for (int g = 0; g < GRP; g++)
      for (int k = 0; k < K; k++) begin
        for (int m = 0; m < M; m++) G[g][k][m] = '{re: 12'($urandom), im: 12'($urandom)};
        for (int j = 0; j < K; j++) X[g][k][j] = '{re: 32'(int'($urandom_range(0, 4000)) - 2000), im: 32'(int'($urandom_range(0, 4000)) - 2000)};
      end
    for (int m = 0; m < M; m++) in_y[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      sc = (v == 5) ? SCB + 2 * K + 1 : SCB + int'($urandom_range(0, NSC - 1));
      if (v < 5 && (sc - SCB) / K == 2) sc = sc - K;
      g = (sc - SCB) / K;
      for (int m = 0; m < M; m++) yv[m] = '{re: 12'($urandom), im: 12'($urandom)};
      for (int k = 0; k < K; k++) begin
        qr[k] = 0; qi[k] = 0;
        for (int m = 0; m < M; m++) begin
          qr[k] += longint'(G[g][k][m].re) * yv[m].re + longint'(G[g][k][m].im) * yv[m].im;
          qi[k] += longint'(G[g][k][m].re) * yv[m].im - longint'(G[g][k][m].im) * yv[m].re;
        end
      end
      for (int j = 0; j < K; j++) begin
        zr = 0; zi = 0;
        for (int k = 0; k < K; k++) begin
          zr += longint'(X[g][j][k].re) * qr[k] - longint'(X[g][j][k].im) * qi[k];
          zi += longint'(X[g][j][k].re) * qi[k] + longint'(X[g][j][k].im) * qr[k];
        end
        ezr.push_back(satr(zr)); ezi.push_back(satr(zi));
      end
      esc.push_back(sc);
      @(negedge clk);
      in_valid = 1; in_sc = 11'(sc);
      for (int m = 0; m < M; m++) in_y[m] = yv[m];
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
    repeat (100) @(posedge clk);
    checks++;
    if (nout != NV) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
