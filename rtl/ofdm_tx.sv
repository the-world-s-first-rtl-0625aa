// OFDM modulator of one transmit antenna.
//
// Accepts the NUSED precoded subcarriers of one DL symbol in subcarrier
// order (ready/valid beats, same placement as the demodulator: subcarriers
// 0 .. NUSED/2-1 on the negative frequencies, the rest from bin 1 upward, DC
// and the guard bins zero). A walker visits the NFFT bins starting at the
// lowest negative-frequency bin and writes either the next input subcarrier
// or zero, so every bin is written once per symbol in NFFT cycles. The IFFT
// (NFFT/2*log2(NFFT) cycles) follows, then the symbol is streamed out with
// its cyclic prefix: NCP + NFFT samples, the first flagged out_first, the
// symbol type carried along. Two IFFT cores alternate so the next symbol can
// be loaded while the current one is sent.
// The paper gives NFFT, NCP and NUSED (Table II); the bin placement, the
// scaling 2^-OUT_SHIFT of the unnormalised IFFT and the handshakes are this
// design's choice.
module ofdm_tx
  import lumami_pkg::*;
#(
  parameter int unsigned NFFT      = 2048,
  parameter int unsigned NCP       = 144,
  parameter int unsigned NUSED     = 1200,
  parameter int unsigned OUT_SHIFT = 6
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  beat_t in_beat,
  output logic  out_valid,
  input  logic  out_ready,
  output logic  out_first,
  output sym_t  out_type,
  output cplx_t out_data
);
  localparam int unsigned LG = $clog2(NFFT);
  localparam int unsigned H  = NUSED / 2;

  logic          wsel, rsel;
  logic [LG:0]   p;                 // walker position
  logic [LG:0]   t;                 // output sample index
  logic [1:0]    busy_v, done_v;
  cplx_t         rd_v [2];
  sym_t          st_v [2];
  logic          loading;
  logic [LG-1:0] bin, rd_addr;
  logic          used, wr_en, fft_start, fft_release;
  cplx_t         wr_data;

  for (genvar g = 0; g < 2; g++) begin : g_fft
    fft_core #(.N(NFFT), .OUT_SHIFT(OUT_SHIFT)) u_fft (
      .clk, .rst_n, .wr_en(wr_en && wsel == 1'(g)), .wr_addr(bin), .wr_data,
      .start(fft_start && wsel == 1'(g)), .inverse(1'b1), .busy(busy_v[g]), .done(done_v[g]),
      .rd_addr, .rd_data(rd_v[g]), .release_i(fft_release && rsel == 1'(g))
    );
  end

  // the walker may write when the selected core is free
  assign loading = !busy_v[wsel] && !done_v[wsel];

  always_comb begin
    bin       = LG'(p + (LG+1)'(NFFT - H));
    used      = (p < (LG+1)'(H)) || ((p > (LG+1)'(H)) && (p <= (LG+1)'(NUSED)));
    in_ready  = loading && used;
    wr_data   = used ? in_beat.s : '0;
    wr_en     = loading && (!used || in_valid);
    fft_start = wr_en && (p == (LG+1)'(NFFT - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p       <= '0;
      wsel    <= 1'b0;
      st_v[0] <= SYM_GUARD;
      st_v[1] <= SYM_GUARD;
    end else if (wr_en) begin
      if (used) st_v[wsel] <= in_beat.st;
      if (p == (LG+1)'(NFFT - 1)) begin
        p    <= '0;
        wsel <= ~wsel;
      end else p <= p + 1'b1;
    end
  end

  // the precoder delivers the subcarriers in order
  always_ff @(posedge clk or negedge rst_n) begin
    if (rst_n) begin
      a_sc_order: assert (!(in_valid && in_ready)
                          || in_beat.sc == ((p < (LG+1)'(H)) ? 11'(p) : 11'(p - 1'b1)));
    end
  end

  // output with cyclic prefix
  always_comb begin
    rd_addr     = (t < (LG+1)'(NCP)) ? LG'(t + (LG+1)'(NFFT - NCP)) : LG'(t - (LG+1)'(NCP));
    out_valid   = done_v[rsel];
    out_data    = rd_v[rsel];
    out_first   = (t == '0);
    out_type    = st_v[rsel];
    fft_release = out_valid && out_ready && (t == (LG+1)'(NFFT + NCP - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t    <= '0;
      rsel <= 1'b0;
    end else if (out_valid && out_ready) begin
      if (t == (LG+1)'(NFFT + NCP - 1)) begin
        t    <= '0;
        rsel <= ~rsel;
      end else t <= t + 1'b1;
    end
  end

endmodule
