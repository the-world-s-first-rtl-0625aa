// Testbench of weight_calc (M 16, K 3, NSC 12 so 4 groups, PAR 4, 3 terms).
// Random channel estimates G per group are served by a memory model. For
// each mode (ZF, RZF with beta = A_00 / 4, MRC) every group is marked stale
// and complete; when its valid flag rises the stored K x K matrix is read
// and compared with a floating-point reference computed here:
// A = G^H G (+ beta I), D = diag(A), E = A - D, and the Neumann sum
// sum_{n<L} (-D^-1 E)^n D^-1 scaled by 2^40, with L = 3 (ZF, RZF) or 1
// (MRC). The tolerance is 0.2% of the largest entry. It also checks that
// w_valid drops on grp_stale and that ZF gets closer to the exact identity
// X A = 2^40 I than MRC does. Watchdog: 5 ms.
module tb_weight_calc;
  import lumami_pkg::*;
  localparam int M = 16, K = 3, NSC = 12, PAR = 4, GRP = 4, GW = 3, MW = 5;
  logic clk = 0, rst_n = 0;
  det_mode_t mode = DET_ZF;
  logic [31:0] beta = '0;
  logic grp_stale = 0, grp_done = 0;
  logic [GW-1:0] grp_idx = '0;
  logic [GW-1:0] g_rd_g;
  logic [MW-1:0] g_rd_m0;
  cplx_t g_rd_d [K][PAR];
  logic [GW-1:0] x_rd_g [2];
  cplx32_t x_rd_d [2][K][K];
  logic [GRP-1:0] w_valid;
  logic busy;
  int checks = 0, failures = 0;
  cplx_t G [GRP][K][M];

  weight_calc #(.M(M), .K(K), .NSC(NSC), .PAR(PAR), .NTERMS(3)) dut (.*);
  always #2.5ns clk = ~clk;

  always_comb
    for (int k = 0; k < K; k++)
      for (int p = 0; p < PAR; p++)
        g_rd_d[k][p] = (int'(g_rd_m0) + p < M) ? G[g_rd_g][k][int'(g_rd_m0) + p] : cplx_t'(0);

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
    real ar [K][K], a_im [K][K], tr [K][K], ti [K][K], sr [K][K], si [K][K], nr [K][K], ni [K][K];
    real mx, err_zf, err_mrc, e, pr, pi;
    int nt;
    err_zf = 0; err_mrc = 0;
    x_rd_g[0] = '0; x_rd_g[1] = '0;
    for (int g = 0; g < GRP; g++)
      for (int k = 0; k < K; k++)
        for (int m = 0; m < M; m++)
          G[g][k][m] = '{re: 12'(int'($urandom_range(0, 2000)) - 1000), im: 12'(int'($urandom_range(0, 2000)) - 1000)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int md = 0; md < 3; md++) begin
      mode = (md == 0) ? DET_ZF : (md == 1) ? DET_RZF : DET_MRC;
      nt = (md == 2) ? 1 : 3;
      for (int g = 0; g < GRP; g++) begin
        // Gram matrix A[j][k] = sum_m conj(G[j][m]) G[k][m]
        for (int j = 0; j < K; j++)
          for (int k = 0; k < K; k++) begin
            ar[j][k] = 0; a_im[j][k] = 0;
            for (int m = 0; m < M; m++) begin
              ar[j][k] += real'(G[g][j][m].re) * G[g][k][m].re + real'(G[g][j][m].im) * G[g][k][m].im;
              a_im[j][k] += real'(G[g][j][m].re) * G[g][k][m].im - real'(G[g][j][m].im) * G[g][k][m].re;
            end
          end
        if (md == 1) begin
          beta = 32'($rtoi(ar[0][0] / 4.0));
          for (int j = 0; j < K; j++) ar[j][j] += real'(beta);
        end
        // T = -D^-1 E; term = D^-1; sum of terms
        for (int j = 0; j < K; j++)
          for (int k = 0; k < K; k++) begin
            tr[j][k] = (j == k) ? 0.0 : -ar[j][k] / ar[j][j];
            ti[j][k] = (j == k) ? 0.0 : -a_im[j][k] / ar[j][j];
            nr[j][k] = (j == k) ? 1.0 / ar[j][j] : 0.0;
            ni[j][k] = 0.0;
            sr[j][k] = nr[j][k]; si[j][k] = 0.0;
          end
        for (int n = 1; n < nt; n++) begin
          real qr [K][K], qi [K][K];
          for (int j = 0; j < K; j++)
            for (int k = 0; k < K; k++) begin
              qr[j][k] = 0; qi[j][k] = 0;
              for (int l = 0; l < K; l++) begin
                qr[j][k] += tr[j][l] * nr[l][k] - ti[j][l] * ni[l][k];
                qi[j][k] += tr[j][l] * ni[l][k] + ti[j][l] * nr[l][k];
              end
            end
          for (int j = 0; j < K; j++)
            for (int k = 0; k < K; k++) begin
              nr[j][k] = qr[j][k]; ni[j][k] = qi[j][k];
              sr[j][k] += qr[j][k]; si[j][k] += qi[j][k];
            end
        end
        // run the unit on this group
        @(negedge clk);
        grp_idx = GW'(g); grp_stale = 1;
        @(negedge clk);
        grp_stale = 0;
        checks++;
        if (w_valid[g]) failures++;
        grp_done = 1;
        @(negedge clk);
        grp_done = 0;
        while (!w_valid[g]) @(negedge clk);
        x_rd_g[1] = GW'(g);
        #1;
        mx = 0;
        for (int j = 0; j < K; j++)
          for (int k = 0; k < K; k++) if (absr(sr[j][k]) > mx) mx = absr(sr[j][k]);
        mx = mx * (2.0 ** 40);
        for (int j = 0; j < K; j++)
          for (int k = 0; k < K; k++) begin
            checks++;
            if (absr(real'(x_rd_d[1][j][k].re) - sr[j][k] * (2.0 ** 40)) > 0.002 * mx
                || absr(real'(x_rd_d[1][j][k].im) - si[j][k] * (2.0 ** 40)) > 0.002 * mx) begin
              failures++;
              if (failures < 6) $display("mode %0d g %0d X[%0d][%0d] got %0d,%0d exp %f,%f", md, g, j, k,
                                         x_rd_d[1][j][k].re, x_rd_d[1][j][k].im, sr[j][k] * (2.0 ** 40), si[j][k] * (2.0 ** 40));
            end
          end
        // distance of X A from 2^40 I (without the RZF regularisation)
        if (md != 1) begin
          e = 0;
          for (int j = 0; j < K; j++)
            for (int k = 0; k < K; k++) begin
              pr = 0; pi = 0;
              for (int l = 0; l < K; l++) begin
                pr += real'(x_rd_d[1][j][l].re) * ar[l][k] - real'(x_rd_d[1][j][l].im) * a_im[l][k];
                pi += real'(x_rd_d[1][j][l].re) * a_im[l][k] + real'(x_rd_d[1][j][l].im) * ar[l][k];
              end
              pr = pr / (2.0 ** 40) - ((j == k) ? 1.0 : 0.0);
              e += pr * pr + (pi / (2.0 ** 40)) * (pi / (2.0 ** 40));
            end
          if (md == 0) err_zf += e; else err_mrc += e;
        end
      end
    end
    checks++;
    if (!(err_zf < err_mrc)) begin
      failures++;
      $display("ZF residual %f not below MRC %f", err_zf, err_mrc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
