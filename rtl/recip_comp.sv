// Reciprocity compensation of one transmit antenna.
//
// Multiplies every transmitted sample by the antenna's complex calibration
// coefficient c (Q1.CF fixed point, so 2^CF is 1.0), rounding and saturating
// to the 12-bit sample format. The coefficient is written by the host
// (cal_we, cal_coef) and resets to 1.0. Because every antenna has its own
// coefficient, the chain of all antennas applies the diagonal calibration
// matrix C of the DL precoder C*f_pre(G) in a distributed way.
// Timing: one register stage; ready/valid with a single output register.
// The paper estimates the coefficients on the host and applies them on the
// SDRs, and its subsystem figure places the compensation between the RF
// front end and the OFDM modulator; one coefficient per antenna for the
// whole band follows that placement. The coefficient format is this design's.
module recip_comp
  import lumami_pkg::*;
#(
  parameter int unsigned CF = 10
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cal_we,
  input  cplx_t cal_coef,
  input  logic  in_valid,
  output logic  in_ready,
  input  logic  in_first,
  input  sym_t  in_type,
  input  cplx_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output logic  out_first,
  output sym_t  out_type,
  output cplx_t out_data
);
  cplx_t c;
  longint pr, pi;

  always_comb begin
    pr = longint'(in_data.re) * longint'(c.re) - longint'(in_data.im) * longint'(c.im);
    pi = longint'(in_data.re) * longint'(c.im) + longint'(in_data.im) * longint'(c.re);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c         <= '{re: SW'(1 << CF), im: '0};
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_type  <= SYM_GUARD;
      out_data  <= '0;
    end else begin
      if (cal_we) c <= cal_coef;
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_first   <= in_first;
          out_type    <= in_type;
          out_data.re <= sat_sw((pr + (64'sd1 <<< (CF - 1))) >>> CF);
          out_data.im <= sat_sw((pi + (64'sd1 <<< (CF - 1))) >>> CF);
        end
      end
    end
  end

endmodule
