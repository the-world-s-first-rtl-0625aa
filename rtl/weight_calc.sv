// Detection / precoding weights per subcarrier group: Gram matrix and its
// Neumann-series inverse.
//
// For each group g whose channel estimate G (M x K) is complete, the unit
//   1. accumulates the Gram matrix A = G^H G, K lanes wide and PAR antennas
//      per cycle (K*ceil(M/PAR) cycles), and adds beta to its diagonal in
//      RZF mode (A + beta*I);
//   2. inverts the diagonal D: dinv_j = 2^DSH / A_jj (one divider, K cycles);
//   3. forms the ratios R = D^-1 E (E = A - D), kept with RF fraction bits;
//   4. runs the Neumann recursion X_1 = D^-1, X_{n+1} = D^-1 - R X_n, which
//      gives X_L = sum_{n<L} (-D^-1 E)^n D^-1, the L-term approximation of
//      A^-1 (K*K cycles per term);
//   5. stores X (scaled by 2^DSH, 32-bit complex) as the group's inverse
//      and marks the group valid.
// Modes (run time): MRC uses one term (X = D^-1, a matched filter with
// per-user gain normalisation), ZF uses NTERMS terms of A^-1 and RZF the
// same with A + beta*I. The stored X serves both the detector
// (z = X G^H y) and the precoder (x = conj(G) X^T u).
// Groups are queued in a pending mask and served lowest index first; a
// group's valid flag clears when a new pilot for it arrives.
// Read ports return the whole K x K inverse of a group, combinationally.
// The paper gives the Neumann-series ZF detector, its reliance on a
// diagonally dominant Gram matrix, and run-time switching between MRC, ZF
// and RZF on the same hardware; the number of terms, the fixed-point
// scaling and the schedule are this design's.
module weight_calc
  import lumami_pkg::*;
#(
  parameter int unsigned M      = 100,
  parameter int unsigned K      = 12,
  parameter int unsigned NSC    = 300,
  parameter int unsigned PAR    = 4,
  parameter int unsigned NTERMS = 3,
  parameter int unsigned DSH    = 40,
  parameter int unsigned RF     = 24,
  localparam int unsigned GRP   = NSC / K,
  localparam int unsigned GW    = $clog2(GRP + 1),
  localparam int unsigned MW    = $clog2(M + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  det_mode_t     mode,
  input  logic [31:0]   beta,
  input  logic          grp_stale,
  input  logic          grp_done,
  input  logic [GW-1:0] grp_idx,
  // channel estimate read port
  output logic [GW-1:0] g_rd_g,
  output logic [MW-1:0] g_rd_m0,
  input  cplx_t         g_rd_d [K][PAR],
  // inverse read ports (detector, precoder)
  input  logic [GW-1:0] x_rd_g [2],
  output cplx32_t       x_rd_d [2][K][K],
  output logic [GRP-1:0] w_valid,
  output logic          busy
);
  typedef struct packed { longint re; longint im; } c64_t;
  typedef enum logic [2:0] {W_IDLE, W_GRAM, W_DIV, W_RATIO, W_ITER, W_NEXT, W_STORE} wst_t;

  localparam int unsigned NCH = (M + PAR - 1) / PAR;
  localparam longint DMAX = 64'sd2147483647;

  wst_t state;
  logic [GRP-1:0]          pend;
  logic [GW-1:0]           cur;
  logic [$clog2(K+1)-1:0]  j, l;
  logic [$clog2(NCH+1)-1:0] mc;
  logic [3:0]              term;
  c64_t   a   [K][K];
  c64_t   r   [K][K];
  c64_t   x   [K][K];
  c64_t   xn  [K][K];
  c64_t   s   [K];
  longint dinv [K];
  cplx32_t xs [GRP][K][K];

  function automatic c64_t cmul(c64_t p, c64_t q);
    cmul.re = p.re * q.re - p.im * q.im;
    cmul.im = p.re * q.im + p.im * q.re;
  endfunction

  function automatic logic signed [31:0] clamp32(longint v);
    if (v > DMAX) return 32'sh7fffffff;
    if (v < -DMAX) return -32'sh7fffffff;
    return v[31:0];
  endfunction

  // lowest pending group
  logic [GW-1:0] nxt;
  always_comb begin
    nxt = '0;
    for (int q = int'(GRP) - 1; q >= 0; q--) if (pend[q]) nxt = GW'(q);
  end

  assign g_rd_g  = cur;
  assign g_rd_m0 = MW'(mc * PAR);
  assign busy    = (state != W_IDLE);

  // Gram row j: lanes k, PAR antennas per cycle
  c64_t gram_add [K];
  always_comb begin
    for (int k = 0; k < int'(K); k++) begin
      gram_add[k] = '0;
      for (int p = 0; p < int'(PAR); p++) begin
        // conj(G[j][m]) * G[k][m]
        gram_add[k].re += longint'(g_rd_d[j][p].re) * longint'(g_rd_d[k][p].re)
                        + longint'(g_rd_d[j][p].im) * longint'(g_rd_d[k][p].im);
        gram_add[k].im += longint'(g_rd_d[j][p].re) * longint'(g_rd_d[k][p].im)
                        - longint'(g_rd_d[j][p].im) * longint'(g_rd_d[k][p].re);
      end
    end
  end

  logic [3:0] nterms_eff;
  assign nterms_eff = (mode == DET_MRC) ? 4'd1 : 4'(NTERMS);

  longint diag, quot;
  always_comb begin
    diag = a[j][j].re;
    quot = (diag > 0) ? ((64'sd1 <<< DSH) / diag) : DMAX;
    if (quot > DMAX) quot = DMAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= W_IDLE;
      pend    <= '0;
      w_valid <= '0;
      cur     <= '0;
      j       <= '0;
      l       <= '0;
      mc      <= '0;
      term    <= '0;
    end else begin
      if (grp_stale) w_valid[grp_idx] <= 1'b0;
      if (grp_done)  pend[grp_idx]    <= 1'b1;
      case (state)
        W_IDLE: if (|pend) begin
          cur   <= nxt;
          pend[nxt] <= 1'b0;
          if (grp_done && grp_idx == nxt) pend[nxt] <= 1'b1;
          j     <= '0;
          mc    <= '0;
          for (int p = 0; p < int'(K); p++)
            for (int q = 0; q < int'(K); q++) a[p][q] <= '0;
          state <= W_GRAM;
        end
        W_GRAM: begin
          for (int k = 0; k < int'(K); k++) begin
            a[j][k].re <= a[j][k].re + gram_add[k].re
                        + ((k == int'(j) && mode == DET_RZF && mc == $bits(mc)'(NCH - 1)) ? longint'(beta) : 0);
            a[j][k].im <= a[j][k].im + gram_add[k].im;
          end
          if (mc == $bits(mc)'(NCH - 1)) begin
            mc <= '0;
            if (j == $bits(j)'(K - 1)) begin
              j <= '0;
              state <= W_DIV;
            end else j <= j + 1'b1;
          end else mc <= mc + 1'b1;
        end
        W_DIV: begin
          dinv[j] <= quot;
          if (j == $bits(j)'(K - 1)) begin
            j <= '0;
            state <= W_RATIO;
          end else j <= j + 1'b1;
        end
        W_RATIO: begin
          for (int q = 0; q < int'(K); q++) begin
            r[j][q].re <= (q == int'(j)) ? 0 : (dinv[j] * a[j][q].re) >>> (DSH - RF);
            r[j][q].im <= (q == int'(j)) ? 0 : (dinv[j] * a[j][q].im) >>> (DSH - RF);
            x[j][q]    <= (q == int'(j)) ? '{re: dinv[j], im: 0} : '0;
          end
          if (j == $bits(j)'(K - 1)) begin
            j    <= '0;
            l    <= '0;
            for (int q = 0; q < int'(K); q++) s[q] <= '0;
            term <= 4'd1;
            state <= (nterms_eff <= 4'd1) ? W_STORE : W_ITER;
          end else j <= j + 1'b1;
        end
        W_ITER: begin
          // s[k] accumulates sum_l R[j][l] X[l][k]
          if (l == $bits(l)'(K)) begin
            for (int q = 0; q < int'(K); q++) begin
              xn[j][q].re <= ((q == int'(j)) ? dinv[j] : 0) - (s[q].re >>> RF);
              xn[j][q].im <= -(s[q].im >>> RF);
              s[q] <= '0;
            end
            l <= '0;
            if (j == $bits(j)'(K - 1)) begin
              j <= '0;
              state <= W_NEXT;
            end else j <= j + 1'b1;
          end else begin
            for (int q = 0; q < int'(K); q++) begin
              c64_t pr;
              pr = cmul(r[j][l], x[l][q]);
              s[q].re <= s[q].re + pr.re;
              s[q].im <= s[q].im + pr.im;
            end
            l <= l + 1'b1;
          end
        end
        W_NEXT: begin
          x     <= xn;
          term  <= term + 1'b1;
          state <= (term + 4'd1 < nterms_eff) ? W_ITER : W_STORE;
        end
        W_STORE: begin
          for (int p = 0; p < int'(K); p++)
            for (int q = 0; q < int'(K); q++)
              xs[cur][p][q] <= '{re: clamp32(x[p][q].re), im: clamp32(x[p][q].im)};
          w_valid[cur] <= 1'b1;
          state <= W_IDLE;
        end
        default: state <= W_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int pt = 0; pt < 2; pt++)
      for (int p = 0; p < int'(K); p++)
        for (int q = 0; q < int'(K); q++)
          x_rd_d[pt][p][q] = (int'(x_rd_g[pt]) < int'(GRP)) ? xs[x_rd_g[pt]][p][q] : '0;
  end

endmodule
