// Linear DL MIMO precoder: x = conj(G) X^T u for one subcarrier at a time.
//
// For each vector u of K user symbols (grid pitch 2^(ZSH+1) per odd level,
// as produced by the symbol mapper) the precoder finds the subcarrier's
// group, waits for valid weights, then
//   V phase: v = X^T u >> VSH, K lanes (K cycles)
//   X phase: x[m] = sum_k conj(G[m][k]) v[k] >> XSH, PAR antennas per cycle
// and outputs the M-antenna vector saturated to 12 bits. Since
// conj(G) (G^H G)^-T is the transpose of the ZF detector (G^H G)^-1 G^H, the
// detector's stored inverse X serves here unchanged; in MRC mode the same
// path gives the MRT precoder with per-user normalisation. A reciprocal
// channel G^T then delivers 2^(DSH-VSH-XSH) * u to the users, up to the
// Neumann approximation error. The reciprocity calibration matrix C is
// applied afterwards, per antenna, on the SDRs.
// Latency: K + ceil(M/PAR) + 1 cycles per subcarrier once weights are valid.
// The paper gives the precoders (Table I) and the distributed calibration;
// the schedule and scaling are this design's.
module mimo_precoder
  import lumami_pkg::*;
#(
  parameter int unsigned M       = 100,
  parameter int unsigned K       = 12,
  parameter int unsigned NSC     = 300,
  parameter int unsigned SC_BASE = 0,
  parameter int unsigned PAR     = 4,
  parameter int unsigned VSH     = 16,
  parameter int unsigned XSH     = 12,
  localparam int unsigned GRP    = NSC / K,
  localparam int unsigned GW     = $clog2(GRP + 1),
  localparam int unsigned MW     = $clog2(M + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  cplx_t          in_u [K],
  input  logic [10:0]    in_sc,
  input  sym_t           in_st,
  input  logic [GRP-1:0] w_valid,
  output logic [GW-1:0]  g_rd_g,
  output logic [MW-1:0]  g_rd_m0,
  input  cplx_t          g_rd_d [K][PAR],
  output logic [GW-1:0]  x_rd_g,
  input  cplx32_t        x_rd_d [K][K],
  output logic           out_valid,
  input  logic           out_ready,
  output cplx_t          out_x [M],
  output logic [10:0]    out_sc,
  output sym_t           out_st,
  output logic [31:0]    stall_cycles
);
  typedef struct packed { longint re; longint im; } c64_t;
  typedef enum logic [2:0] {P_IDLE, P_WAIT, P_V, P_X, P_OUT} pst_t;
  localparam int unsigned NCH = (M + PAR - 1) / PAR;

  pst_t state;
  cplx_t u [K];
  logic [GW-1:0] g;
  logic [$clog2(NCH+1)-1:0] mc;
  logic [$clog2(K+1)-1:0] kk;
  c64_t v [K];

  assign in_ready  = (state == P_IDLE);
  assign out_valid = (state == P_OUT);
  assign g_rd_g    = g;
  assign g_rd_m0   = MW'(mc * PAR);
  assign x_rd_g    = g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= P_IDLE;
      g            <= '0;
      mc           <= '0;
      kk           <= '0;
      out_sc       <= '0;
      out_st       <= SYM_GUARD;
      stall_cycles <= '0;
      for (int m = 0; m < int'(M); m++) out_x[m] <= '0;
    end else begin
      case (state)
        P_IDLE: if (in_valid) begin
          u      <= in_u;
          out_sc <= in_sc;
          out_st <= in_st;
          g      <= GW'((in_sc - 11'(SC_BASE)) / 11'(K));
          state  <= P_WAIT;
        end
        P_WAIT: begin
          if (w_valid[g]) begin
            kk <= '0;
            for (int j = 0; j < int'(K); j++) v[j] <= '0;
            state <= P_V;
          end else stall_cycles <= stall_cycles + 1'b1;
        end
        P_V: begin
          if (kk == $bits(kk)'(K)) begin
            for (int j = 0; j < int'(K); j++) begin
              v[j].re <= v[j].re >>> VSH;
              v[j].im <= v[j].im >>> VSH;
            end
            mc    <= '0;
            state <= P_X;
          end else begin
            // v[j] += X[kk][j] * u[kk]
            for (int j = 0; j < int'(K); j++) begin
              v[j].re <= v[j].re + longint'(x_rd_d[kk][j].re) * longint'(u[kk].re)
                                 - longint'(x_rd_d[kk][j].im) * longint'(u[kk].im);
              v[j].im <= v[j].im + longint'(x_rd_d[kk][j].re) * longint'(u[kk].im)
                                 + longint'(x_rd_d[kk][j].im) * longint'(u[kk].re);
            end
            kk <= kk + 1'b1;
          end
        end
        P_X: begin
          for (int p = 0; p < int'(PAR); p++) begin
            if (int'(mc) * int'(PAR) + p < int'(M)) begin
              c64_t acc;
              acc = '0;
              for (int k = 0; k < int'(K); k++) begin
                // conj(G[k][m]) * v[k]
                acc.re += longint'(g_rd_d[k][p].re) * v[k].re + longint'(g_rd_d[k][p].im) * v[k].im;
                acc.im += longint'(g_rd_d[k][p].re) * v[k].im - longint'(g_rd_d[k][p].im) * v[k].re;
              end
              out_x[int'(mc)*int'(PAR)+p].re <= sat_sw((acc.re + (64'sd1 <<< (XSH - 1))) >>> XSH);
              out_x[int'(mc)*int'(PAR)+p].im <= sat_sw((acc.im + (64'sd1 <<< (XSH - 1))) >>> XSH);
            end
          end
          if (mc == $bits(mc)'(NCH - 1)) state <= P_OUT;
          else mc <= mc + 1'b1;
        end
        P_OUT: if (out_ready) state <= P_IDLE;
        default: state <= P_IDLE;
      endcase
    end
  end

endmodule
