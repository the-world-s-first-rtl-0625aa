// Hard-decision QAM demapper for one user (QPSK, 16-QAM, 64-QAM).
//
// Inverse of the symbol mapper: each component of the detected symbol z is
// sliced on the grid of odd levels spaced 2^(ZSH+1) apart, giving the level
// index idx = clamp(floor((z + 2^b * 2^ZSH) / 2^(ZSH+1)), 0, 2^b - 1), which
// is Gray coded; I gives the upper b bits, Q the lower. Unused upper output
// bits are zero. Combinational.
// The paper names symbol demapping on the co-processor (Fig. 5) and the
// constellations used; the decision rule and bit labelling are this
// design's (matching the mapper).
module symbol_demapper
  import lumami_pkg::*;
#(
  parameter int unsigned ZSH = 8
) (
  input  mod_t       mod,
  input  cplx_t      sym,
  output logic [5:0] bits
);
  int b, ii, iq;
  logic [2:0] gi, gq;

  function automatic int slice(int v, int nb);
    int idx;
    idx = (v + (1 << (nb + ZSH))) >>> (ZSH + 1);
    if (idx < 0) idx = 0;
    if (idx > (1 << nb) - 1) idx = (1 << nb) - 1;
    return idx;
  endfunction

  always_comb begin
    b  = int'(mod_bits(mod)) / 2;
    ii = slice(int'(sym.re), b);
    iq = slice(int'(sym.im), b);
    gi = 3'(ii ^ (ii >> 1));
    gq = 3'(iq ^ (iq >> 1));
    case (mod)
      MOD_QPSK:  bits = {4'b0, gi[0], gq[0]};
      MOD_QAM16: bits = {2'b0, gi[1:0], gq[1:0]};
      default:   bits = {gi, gq};
    endcase
  end

endmodule
