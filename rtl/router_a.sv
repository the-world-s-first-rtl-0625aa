// Input router of a co-processor (router type A).
//
// One link arrives from each of the NSS subsystems, carrying that
// subsystem's antenna streams interleaved beat by beat in round-robin order
// for the co-processor's sub-band. Subsystem s carries antennas
// s*NA .. s*NA+cnt(s)-1, where cnt(s) = min(NA, M - s*NA): the last
// subsystem may be smaller. The router collects one round from every link
// (each link independently) and, once all have delivered, presents the full
// M-antenna vector of the subcarrier. A look-up table, filled from the
// run-time antenna count m_active before start-up, marks which antennas are
// deployed; the values of the others are replaced by zeros, so the detector
// sees only the deployed array.
// Timing: NA cycles per subcarrier at full link rate, plus one to hand over.
// The paper gives the function (round robin, LUT-based, zeros for antennas
// that do not exist); the collection scheme is this design's.
module router_a
  import lumami_pkg::*;
#(
  parameter int unsigned M   = 100,
  parameter int unsigned NA  = 16,
  localparam int unsigned NSS = (M + NA - 1) / NA
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [7:0]     m_active,
  input  logic [NSS-1:0] link_valid,
  output logic [NSS-1:0] link_ready,
  input  beat_t          link_beat [NSS],
  output logic           out_valid,
  input  logic           out_ready,
  output cplx_t          out_y [M],
  output logic [10:0]    out_sc,
  output sym_t           out_st
);
  function automatic int unsigned cnt(int unsigned s);
    return (M - s*NA < NA) ? (M - s*NA) : NA;
  endfunction

  logic [$clog2(NA+1)-1:0] slot [NSS];
  logic [NSS-1:0]          got;
  logic [M-1:0]            lut_en;
  cplx_t                   y [M];
  logic [10:0]             sc_q;
  sym_t                    st_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lut_en <= '0;
    else for (int m = 0; m < int'(M); m++) lut_en[m] <= (m < int'(m_active));
  end

  always_comb begin
    for (int s = 0; s < int'(NSS); s++) link_ready[s] = !got[s];
    out_valid = &got;
    out_sc    = sc_q;
    out_st    = st_q;
    for (int m = 0; m < int'(M); m++) out_y[m] = lut_en[m] ? y[m] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got  <= '0;
      sc_q <= '0;
      st_q <= SYM_GUARD;
      for (int s = 0; s < int'(NSS); s++) slot[s] <= '0;
      for (int m = 0; m < int'(M); m++) y[m] <= '0;
    end else begin
      if (out_valid && out_ready) got <= '0;
      else begin
        for (int s = 0; s < int'(NSS); s++) begin
          if (!got[s] && link_valid[s]) begin
            y[s*NA + int'(slot[s])] <= link_beat[s].s;
            if (s == 0) begin
              sc_q <= link_beat[s].sc;
              st_q <= link_beat[s].st;
            end
            if (slot[s] == $bits(slot[s])'(cnt(s) - 1)) begin
              slot[s] <= '0;
              got[s]  <= 1'b1;
            end else slot[s] <= slot[s] + 1'b1;
          end
        end
      end
    end
  end

  // all subsystems deliver the same subcarrier
  for (genvar s = 1; s < int'(NSS); s++) begin : g_chk
    always_ff @(posedge clk or negedge rst_n) begin
      if (rst_n) begin
        a_same_sc: assert (got[s] || !link_valid[s] || got[0] || !link_valid[0]
                           || (link_beat[s].sc == link_beat[0].sc));
      end
    end
  end

endmodule
