// In-place radix-2 decimation-in-time FFT / IFFT of N points.
//
// The OFDM modulator and demodulator of every antenna use one of these. The
// core works in three phases:
//   LOAD  the user writes N complex samples (wr_en, wr_addr in natural order,
//         wr_data); the core stores them at bit-reversed addresses. Unwritten
//         addresses keep old contents, so a user must write all N points.
//         inverse selects the IFFT; it must be held through LOAD and at the
//         start pulse that begins the transform.
//   RUN   log2(N) stages of N/2 butterflies, one butterfly per clock, reading
//         and writing the working memory in place: N/2*log2(N) cycles
//         (11264 cycles for N = 2048).
//   DONE  done is high; rd_addr selects a bin (natural order) and rd_data
//         returns it scaled by 2^-OUT_SHIFT with rounding and saturation to
//         the 12-bit sample format, combinationally. release returns to LOAD.
// The IFFT is the forward FFT of the conjugated input, conjugated again; it
// carries no 1/N factor, so the overall scaling is set by OUT_SHIFT only.
// Twiddles exp(-j*2*pi*k/N) are held in a table of N/2 entries computed at
// elaboration (Q2.14). The internal word of IW bits is wide enough for the
// full bit growth of a 12-bit input (12 + log2 N bits).
// The paper gives the transform size (2048) and a 200 MHz clock with about
// 35 us per transform; the one-butterfly-per-cycle architecture is this
// design's own and takes about 56 us at 200 MHz.
module fft_core
  import lumami_pkg::*;
#(
  parameter int unsigned N         = 2048,
  parameter int unsigned OUT_SHIFT = 0,
  parameter int unsigned IW        = 28
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_addr,
  input  cplx_t                wr_data,
  input  logic                 start,
  input  logic                 inverse,
  output logic                 busy,
  output logic                 done,
  input  logic [$clog2(N)-1:0] rd_addr,
  output cplx_t                rd_data,
  input  logic                 release_i
);
  localparam int unsigned LG = $clog2(N);
  localparam int unsigned TF = 14;
  localparam longint RND = (OUT_SHIFT > 0) ? (64'd1 << (OUT_SHIFT - 1)) : 0;

  typedef enum logic [1:0] {S_LOAD, S_RUN, S_DONE} state_t;
  state_t state;

  logic signed [IW-1:0] mre [N];
  logic signed [IW-1:0] mim [N];
  logic signed [15:0]   twr [N/2];
  logic signed [15:0]   twi [N/2];

  initial begin
    for (int k = 0; k < int'(N/2); k++) begin
      twr[k] = 16'($rtoi($floor($cos(2.0*3.14159265358979*k/N)*(2.0**TF) + 0.5)));
      twi[k] = 16'($rtoi($floor(-$sin(2.0*3.14159265358979*k/N)*(2.0**TF) + 0.5)));
    end
  end

  function automatic logic [LG-1:0] bitrev(logic [LG-1:0] a);
    for (int i = 0; i < int'(LG); i++) bitrev[i] = a[LG-1-i];
  endfunction

  logic [$clog2(LG+1)-1:0] stage;
  logic [LG-2:0]           bidx;
  logic                    inv_q;

  // butterfly addresses
  logic [LG-1:0] i0, i1, pos_mask;
  logic [LG-2:0] tw_idx;
  always_comb begin
    pos_mask = LG'((1 << stage) - 1);
    i0 = (LG'(bidx) & pos_mask) | ((LG'(bidx) & ~pos_mask) << 1);
    i1 = i0 | LG'(1 << stage);
    tw_idx = (LG-1)'((LG'(bidx) & pos_mask) << (LG - 1 - int'(stage)));
  end

  logic signed [IW+16:0] pr, pi;
  logic signed [IW-1:0]  tr, ti;
  always_comb begin
    pr = (IW+17)'(mre[i1]) * (IW+17)'(twr[tw_idx]) - (IW+17)'(mim[i1]) * (IW+17)'(twi[tw_idx]);
    pi = (IW+17)'(mre[i1]) * (IW+17)'(twi[tw_idx]) + (IW+17)'(mim[i1]) * (IW+17)'(twr[tw_idx]);
    tr = IW'((pr + (IW+17)'(1 << (TF-1))) >>> TF);
    ti = IW'((pi + (IW+17)'(1 << (TF-1))) >>> TF);
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD && wr_en) begin
      mre[bitrev(wr_addr)] <= IW'(wr_data.re);
      // the IFFT conjugates its input on the way in
      mim[bitrev(wr_addr)] <= inverse ? -IW'(wr_data.im) : IW'(wr_data.im);
    end else if (state == S_RUN) begin
      mre[i0] <= mre[i0] + tr;
      mim[i0] <= mim[i0] + ti;
      mre[i1] <= mre[i0] - tr;
      mim[i1] <= mim[i0] - ti;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      stage <= '0;
      bidx  <= '0;
      inv_q <= 1'b0;
    end else begin
      case (state)
        S_LOAD: if (start) begin
          state <= S_RUN;
          stage <= '0;
          bidx  <= '0;
          inv_q <= inverse;
        end
        S_RUN: begin
          bidx <= bidx + 1'b1;
          if (&bidx) begin
            if (int'(stage) == LG - 1) state <= S_DONE;
            else stage <= stage + 1'b1;
          end
        end
        S_DONE: if (release_i) state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end

  assign busy = (state == S_RUN);
  assign done = (state == S_DONE);

  // scaled, rounded, saturated read port
  logic signed [IW-1:0] rre, rim;
  always_comb begin
    rre = mre[rd_addr];
    rim = inv_q ? -mim[rd_addr] : mim[rd_addr];
    if (OUT_SHIFT > 0) begin
      rre = (rre + IW'(RND)) >>> OUT_SHIFT;
      rim = (rim + IW'(RND)) >>> OUT_SHIFT;
    end
    rd_data.re = sat_sw(longint'(rre));
    rd_data.im = sat_sw(longint'(rim));
  end

endmodule
