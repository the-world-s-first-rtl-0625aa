// Shared types and constants of the massive-MIMO base-station baseband.
//
// Samples and subcarriers are complex numbers with 12-bit I and 12-bit Q
// (3 bytes per complex value, the internal wordlength of the system).
// Symbol types follow the five time-slot types of the frame structure
// (UL pilot, UL data, DL pilot, DL data, switch guard) plus the control /
// synchronisation symbols of the first subframe. The detection mode selects
// at run time between matched filtering (MRC/MRT), zero forcing and
// regularised zero forcing, all served by the same Neumann-series hardware.
// The field widths and encodings here are this design's own choices.
package lumami_pkg;

  localparam int unsigned SW = 12;            // bits per I or Q component

  typedef struct packed {
    logic signed [SW-1:0] re;
    logic signed [SW-1:0] im;
  } cplx_t;

  typedef enum logic [2:0] {
    SYM_GUARD   = 3'd0,
    SYM_UL_PIL  = 3'd1,
    SYM_UL_DATA = 3'd2,
    SYM_DL_PIL  = 3'd3,
    SYM_DL_DATA = 3'd4,
    SYM_CTRL    = 3'd5
  } sym_t;

  typedef enum logic [1:0] {
    DET_MRC = 2'd0,
    DET_ZF  = 2'd1,
    DET_RZF = 2'd2
  } det_mode_t;

  typedef enum logic [1:0] {
    MOD_QPSK  = 2'd0,
    MOD_QAM16 = 2'd1,
    MOD_QAM64 = 2'd2
  } mod_t;

  // One beat on a point-to-point link: a complex value, the subcarrier it
  // belongs to (0 .. N_used-1) and the type of the OFDM symbol it comes from.
  typedef struct packed {
    cplx_t       s;
    logic [10:0] sc;
    sym_t        st;
  } beat_t;

  // Wide complex value for matrix entries of the detection weights.
  typedef struct packed {
    logic signed [31:0] re;
    logic signed [31:0] im;
  } cplx32_t;

  // Bits per QAM symbol and per I/Q axis.
  function automatic int unsigned mod_bits(mod_t m);
    case (m)
      MOD_QPSK:  return 2;
      MOD_QAM16: return 4;
      default:   return 6;
    endcase
  endfunction

  function automatic logic signed [SW-1:0] sat_sw(longint v);
    if (v > longint'(2**(SW-1)-1)) return SW'(2**(SW-1)-1);
    if (v < -longint'(2**(SW-1)))  return SW'(-(2**(SW-1)));
    return v[SW-1:0];
  endfunction

endpackage
