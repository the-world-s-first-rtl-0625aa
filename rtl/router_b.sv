// Output router of a co-processor (router type B).
//
// Takes one precoded M-antenna vector per subcarrier and distributes it to
// the NSS subsystem links: link s sends antennas s*NA .. s*NA+cnt(s)-1 one
// beat per cycle in round-robin order, all links in parallel. The next
// vector is accepted when every link has sent its share.
// Timing: up to NA cycles per subcarrier at full link rate.
// The paper gives the function (Fig. 5, round robin); the link format is
// this design's.
module router_b
  import lumami_pkg::*;
#(
  parameter int unsigned M   = 100,
  parameter int unsigned NA  = 16,
  localparam int unsigned NSS = (M + NA - 1) / NA
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  cplx_t          in_x [M],
  input  logic [10:0]    in_sc,
  input  sym_t           in_st,
  output logic [NSS-1:0] link_valid,
  input  logic [NSS-1:0] link_ready,
  output beat_t          link_beat [NSS]
);
  function automatic int unsigned cnt(int unsigned s);
    return (M - s*NA < NA) ? (M - s*NA) : NA;
  endfunction

  logic [$clog2(NA+1)-1:0] slot [NSS];
  logic [NSS-1:0]          pend;
  cplx_t                   x [M];
  logic [10:0]             sc_q;
  sym_t                    st_q;

  assign in_ready = ~|pend;

  always_comb begin
    for (int s = 0; s < int'(NSS); s++) begin
      link_valid[s]   = pend[s];
      link_beat[s].s  = x[s*NA + int'(slot[s])];
      link_beat[s].sc = sc_q;
      link_beat[s].st = st_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0;
      sc_q <= '0;
      st_q <= SYM_GUARD;
      for (int s = 0; s < int'(NSS); s++) slot[s] <= '0;
      for (int m = 0; m < int'(M); m++) x[m] <= '0;
    end else if (in_ready) begin
      if (in_valid) begin
        x    <= in_x;
        sc_q <= in_sc;
        st_q <= in_st;
        pend <= '1;
      end
    end else begin
      for (int s = 0; s < int'(NSS); s++) begin
        if (pend[s] && link_ready[s]) begin
          if (slot[s] == $bits(slot[s])'(cnt(s) - 1)) begin
            slot[s] <= '0;
            pend[s] <= 1'b0;
          end else slot[s] <= slot[s] + 1'b1;
        end
      end
    end
  end

endmodule
