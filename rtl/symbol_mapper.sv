// QAM symbol mapper for one user (QPSK, 16-QAM, 64-QAM).
//
// The 2b bits of a symbol (b = 1, 2, 3 bits per axis) are split into the
// upper b bits for I and the lower b bits for Q; each group is a Gray code
// of the level index idx, and the level is the odd integer
// 2*idx - (2^b - 1). Output components are level * 2^ZSH, the grid that the
// detector and demapper use. Unused upper input bits are ignored.
// Combinational.
// The paper uses QPSK, 16-QAM and 64-QAM;
// the bit order, the Gray labelling and the unnormalised grid are this
// design's choice.
module symbol_mapper
  import lumami_pkg::*;
#(
  parameter int unsigned ZSH = 8
) (
  input  mod_t       mod,
  input  logic [5:0] bits,
  output cplx_t      sym
);
  function automatic logic [2:0] gray2bin(logic [2:0] gc);
    gray2bin[2] = gc[2];
    gray2bin[1] = gc[2] ^ gc[1];
    gray2bin[0] = gc[2] ^ gc[1] ^ gc[0];
  endfunction

  logic [2:0] gi, gq, ii, iq;
  int         b, lvl_i, lvl_q;

  always_comb begin
    b = int'(mod_bits(mod)) / 2;
    gi = '0;
    gq = '0;
    case (mod)
      MOD_QPSK:  begin gi = {2'b0, bits[1]};   gq = {2'b0, bits[0]};   end
      MOD_QAM16: begin gi = {1'b0, bits[3:2]}; gq = {1'b0, bits[1:0]}; end
      default:   begin gi = bits[5:3];         gq = bits[2:0];         end
    endcase
    // Gray decode within b bits (upper bits are zero)
    ii = gray2bin(gi);
    iq = gray2bin(gq);
    lvl_i = 2 * int'(ii) - ((1 << b) - 1);
    lvl_q = 2 * int'(iq) - ((1 << b) - 1);
    sym.re = SW'(lvl_i * (1 << ZSH));
    sym.im = SW'(lvl_q * (1 << ZSH));
  end

endmodule
