// Linear UL MIMO detector: z = X G^H y for one subcarrier at a time.
//
// For each received M-antenna vector y of a UL data subcarrier the detector
// finds its group g, waits until the group's weights are valid (stall,
// counted in stall_cycles), then
//   MF phase: q = G^H y, K lanes, PAR antennas per cycle (ceil(M/PAR) cycles)
//   EQ phase: z = X q with X the group's stored inverse (K cycles)
// and outputs the K user estimates scaled by 2^-(DSH-ZSH) and saturated to
// 12 bits. With the LS estimate G = a*G_true (pilot amplitude a) and the
// inverse scaled by 2^DSH, a user symbol s gives z = 2^ZSH * s / a: the
// demapper's constellation grid has a pitch of 2^(ZSH+1) per odd level.
// The detector reads the channel estimate and the inverse through the
// estimator's and the weight unit's read ports.
// Latency: ceil(M/PAR) + K + 1 cycles per subcarrier once weights are valid.
// The paper gives the detection function (Table I) and that the weights are
// shared per group of K subcarriers; the schedule and scaling are this
// design's.
module mimo_detector
  import lumami_pkg::*;
#(
  parameter int unsigned M       = 100,
  parameter int unsigned K       = 12,
  parameter int unsigned NSC     = 300,
  parameter int unsigned SC_BASE = 0,
  parameter int unsigned PAR     = 4,
  parameter int unsigned DSH     = 40,
  parameter int unsigned ZSH     = 8,
  localparam int unsigned GRP    = NSC / K,
  localparam int unsigned GW     = $clog2(GRP + 1),
  localparam int unsigned MW     = $clog2(M + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  cplx_t          in_y [M],
  input  logic [10:0]    in_sc,
  input  logic [GRP-1:0] w_valid,
  output logic [GW-1:0]  g_rd_g,
  output logic [MW-1:0]  g_rd_m0,
  input  cplx_t          g_rd_d [K][PAR],
  output logic [GW-1:0]  x_rd_g,
  input  cplx32_t        x_rd_d [K][K],
  output logic           out_valid,
  output cplx_t          out_z [K],
  output logic [10:0]    out_sc,
  output logic [31:0]    stall_cycles
);
  typedef struct packed { longint re; longint im; } c64_t;
  typedef enum logic [1:0] {D_IDLE, D_WAIT, D_MF, D_EQ} dst_t;
  localparam int unsigned NCH = (M + PAR - 1) / PAR;

  dst_t state;
  cplx_t y [M];
  logic [10:0] sc_q;
  logic [GW-1:0] g;
  logic [$clog2(NCH+1)-1:0] mc;
  logic [$clog2(K+1)-1:0] kk;
  c64_t q [K];
  c64_t z [K];

  assign in_ready = (state == D_IDLE);
  assign g_rd_g   = g;
  assign g_rd_m0  = MW'(mc * PAR);
  assign x_rd_g   = g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= D_IDLE;
      sc_q         <= '0;
      g            <= '0;
      mc           <= '0;
      kk           <= '0;
      out_valid    <= 1'b0;
      out_sc       <= '0;
      stall_cycles <= '0;
      for (int k = 0; k < int'(K); k++) out_z[k] <= '0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        D_IDLE: if (in_valid) begin
          y     <= in_y;
          sc_q  <= in_sc;
          g     <= GW'((in_sc - 11'(SC_BASE)) / 11'(K));
          state <= D_WAIT;
        end
        D_WAIT: begin
          if (w_valid[g]) begin
            mc <= '0;
            for (int k = 0; k < int'(K); k++) q[k] <= '0;
            state <= D_MF;
          end else stall_cycles <= stall_cycles + 1'b1;
        end
        D_MF: begin
          for (int k = 0; k < int'(K); k++) begin
            c64_t acc;
            acc = q[k];
            for (int p = 0; p < int'(PAR); p++) begin
              if (int'(mc) * int'(PAR) + p < int'(M)) begin
                // conj(G[k][m]) * y[m]
                acc.re += longint'(g_rd_d[k][p].re) * longint'(y[int'(mc)*int'(PAR)+p].re)
                        + longint'(g_rd_d[k][p].im) * longint'(y[int'(mc)*int'(PAR)+p].im);
                acc.im += longint'(g_rd_d[k][p].re) * longint'(y[int'(mc)*int'(PAR)+p].im)
                        - longint'(g_rd_d[k][p].im) * longint'(y[int'(mc)*int'(PAR)+p].re);
              end
            end
            q[k] <= acc;
          end
          if (mc == $bits(mc)'(NCH - 1)) begin
            kk <= '0;
            for (int k = 0; k < int'(K); k++) z[k] <= '0;
            state <= D_EQ;
          end else mc <= mc + 1'b1;
        end
        D_EQ: begin
          if (kk == $bits(kk)'(K)) begin
            for (int j = 0; j < int'(K); j++) begin
              out_z[j].re <= sat_sw((z[j].re + (64'sd1 <<< (DSH - ZSH - 1))) >>> (DSH - ZSH));
              out_z[j].im <= sat_sw((z[j].im + (64'sd1 <<< (DSH - ZSH - 1))) >>> (DSH - ZSH));
            end
            out_sc    <= sc_q;
            out_valid <= 1'b1;
            state     <= D_IDLE;
          end else begin
            for (int j = 0; j < int'(K); j++) begin
              z[j].re <= z[j].re + longint'(x_rd_d[j][kk].re) * q[kk].re - longint'(x_rd_d[j][kk].im) * q[kk].im;
              z[j].im <= z[j].im + longint'(x_rd_d[j][kk].re) * q[kk].im + longint'(x_rd_d[j][kk].im) * q[kk].re;
            end
            kk <= kk + 1'b1;
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

endmodule
