// Least-squares channel estimation from orthogonal-subcarrier UL pilots.
//
// In the UL pilot symbol user k sends its pilot on every K-th subcarrier,
// starting at subcarrier k. One group of K neighbouring subcarriers thus
// carries one pilot from each user, and the estimate of the M x K channel
// matrix of that group is used for all its K subcarriers (zeroth-order
// hold). For each incoming pilot subcarrier sc (an M-antenna vector y) the
// estimator computes group g = (sc - SC_BASE) / K and user k = (sc - SC_BASE)
// mod K, and stores G[g][k][m] = y[m] * conj(p(sc)) for all m. The pilots are
// BPSK, p(sc) = +1 or -1, so conj(p)/|p|^2 = p and the product is a sign
// flip; the common pilot amplitude stays in the estimate and cancels in the
// detection weights. The pilot sign is the parity of (sc & PILOT_MASK).
// The estimator pulses grp_stale when the first pilot of a group arrives
// (its weights become invalid) and grp_done when the last one is stored.
// Storage: GRP*K*M complex values, GRP = NSC/K groups of the co-processor's
// sub-band. NRD read ports return G[g][0..K-1][m0..m0+PAR-1]
// combinationally (zero beyond antenna M-1).
// Timing: one pilot subcarrier per cycle, always ready.
// The paper gives the pilot arrangement, the LS estimator and the
// zeroth-order hold over K = 12 subcarriers (Sec. V-F1); the pilot sequence
// and the storage layout are this design's.
module channel_estimator
  import lumami_pkg::*;
#(
  parameter int unsigned M          = 100,
  parameter int unsigned K          = 12,
  parameter int unsigned NSC        = 300,
  parameter int unsigned SC_BASE    = 0,
  parameter int unsigned PAR        = 4,
  parameter int unsigned NRD        = 3,
  parameter logic [10:0] PILOT_MASK = 11'h2A5,
  localparam int unsigned GRP       = NSC / K,
  localparam int unsigned GW        = $clog2(GRP + 1),
  localparam int unsigned MW        = $clog2(M + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  cplx_t         in_y [M],
  input  logic [10:0]   in_sc,
  output logic          grp_stale,
  output logic          grp_done,
  output logic [GW-1:0] grp_idx,
  input  logic [GW-1:0] rd_g  [NRD],
  input  logic [MW-1:0] rd_m0 [NRD],
  output cplx_t         rd_d  [NRD][K][PAR]
);
  cplx_t gmem [GRP][K][M];

  logic [10:0]   loc;
  logic [GW-1:0] g;
  logic [$clog2(K+1)-1:0] k;
  logic          neg;

  always_comb begin
    loc = in_sc - 11'(SC_BASE);
    g   = GW'(loc / 11'(K));
    k   = $bits(k)'(loc % 11'(K));
    neg = ^(in_sc & PILOT_MASK);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int m = 0; m < int'(M); m++) begin
        gmem[g][k][m].re <= neg ? -in_y[m].re : in_y[m].re;
        gmem[g][k][m].im <= neg ? -in_y[m].im : in_y[m].im;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp_stale <= 1'b0;
      grp_done  <= 1'b0;
      grp_idx   <= '0;
    end else begin
      grp_stale <= in_valid && (k == 0);
      grp_done  <= in_valid && (k == $bits(k)'(K - 1));
      if (in_valid) grp_idx <= g;
    end
  end

  always_comb begin
    for (int r = 0; r < int'(NRD); r++)
      for (int kk = 0; kk < int'(K); kk++)
        for (int p = 0; p < int'(PAR); p++)
          rd_d[r][kk][p] = (int'(rd_m0[r]) + p < int'(M) && int'(rd_g[r]) < int'(GRP))
                         ? gmem[rd_g[r]][kk][int'(rd_m0[r]) + p] : '0;
  end

endmodule
