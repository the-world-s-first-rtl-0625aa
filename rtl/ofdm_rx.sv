// OFDM demodulator of one receive antenna.
//
// Takes the antenna's time-domain sample stream (one complex 12-bit sample
// per in_valid), tagged with the type of the OFDM symbol it belongs to and a
// flag on the first sample of each symbol. For UL pilot and UL data symbols
// it drops the NCP cyclic-prefix samples, loads the next NFFT samples into an
// FFT, transforms them and streams out the NUSED used subcarriers in
// subcarrier order 0 .. NUSED-1 (ready/valid), each beat carrying the
// subcarrier index and the symbol type. Subcarriers 0 .. NUSED/2-1 are the
// negative frequencies (bins NFFT-NUSED/2 ..), the rest the positive ones
// starting at bin 1; the DC bin is unused. Other symbol types are ignored.
// NCP must be at least 1.
// Two FFT cores alternate, so one symbol is transformed and read out while
// the next is collected. The ADC does not wait: a UL symbol that starts while
// both cores are still occupied is dropped and counted in overflows.
// Latency: NFFT/2*log2(NFFT) cycles after the last sample, then one
// subcarrier per cycle while out_ready is high.
// The paper gives NFFT = 2048, NCP = 144, NUSED = 1200 (Table II) and places
// OFDM processing on the SDRs; the subcarrier placement around DC follows
// LTE and the scaling (OUT_SHIFT) is this design's choice.
module ofdm_rx
  import lumami_pkg::*;
#(
  parameter int unsigned NFFT      = 2048,
  parameter int unsigned NCP       = 144,
  parameter int unsigned NUSED     = 1200,
  parameter int unsigned OUT_SHIFT = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_first,
  input  sym_t        in_type,
  input  cplx_t       in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output beat_t       out_beat,
  output logic [15:0] overflows
);
  localparam int unsigned LG = $clog2(NFFT);

  typedef enum logic [1:0] {R_IDLE, R_CP, R_FILL} rstate_t;
  rstate_t rstate;

  logic [LG:0]         cnt;
  logic [10:0]         sc;
  sym_t                st_v [2];
  logic                wsel, rsel;          // core being filled / read out
  logic                fft_start, fft_release, wr_en;
  logic [1:0]          busy_v, done_v;
  cplx_t               rd_v [2];
  logic [LG-1:0]       rd_addr;
  cplx_t               rd_data;

  wire ul_first = in_valid && in_first && (in_type == SYM_UL_PIL || in_type == SYM_UL_DATA);

  // two FFT cores used in turn, so that one symbol is transformed and read
  // out while the next one is collected
  for (genvar g = 0; g < 2; g++) begin : g_fft
    fft_core #(.N(NFFT), .OUT_SHIFT(OUT_SHIFT)) u_fft (
      .clk, .rst_n, .wr_en(wr_en && wsel == 1'(g)), .wr_addr(cnt[LG-1:0]), .wr_data(in_data),
      .start(fft_start && wsel == 1'(g)), .inverse(1'b0), .busy(busy_v[g]), .done(done_v[g]),
      .rd_addr, .rd_data(rd_v[g]), .release_i(fft_release && rsel == 1'(g))
    );
  end

  wire fft_done = done_v[rsel];
  assign rd_data = rd_v[rsel];

  // collection of one symbol
  wire can_take = (rstate == R_IDLE) && !busy_v[wsel] && !done_v[wsel];
  always_comb begin
    wr_en     = (rstate == R_FILL) && in_valid;
    fft_start = (rstate == R_FILL) && in_valid && (cnt == (LG+1)'(NFFT - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate    <= R_IDLE;
      cnt       <= '0;
      st_v[0]   <= SYM_GUARD;
      st_v[1]   <= SYM_GUARD;
      wsel      <= 1'b0;
      overflows <= '0;
    end else begin
      case (rstate)
        R_IDLE: if (ul_first) begin
          if (can_take) begin
            st_v[wsel] <= in_type;
            cnt    <= (LG+1)'(1);
            rstate <= (NCP > 1) ? R_CP : R_FILL;
            if (NCP == 1) cnt <= '0;
          end else begin
            overflows <= overflows + 1'b1;
          end
        end
        R_CP: if (in_valid) begin
          if (cnt == (LG+1)'(NCP - 1)) begin
            cnt    <= '0;
            rstate <= R_FILL;
          end else cnt <= cnt + 1'b1;
        end
        R_FILL: if (in_valid) begin
          if (cnt == (LG+1)'(NFFT - 1)) begin
            rstate <= R_IDLE;
            wsel   <= ~wsel;
          end
          cnt <= cnt + 1'b1;
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  // subcarrier read-out
  always_comb begin
    if (sc < 11'(NUSED/2)) rd_addr = LG'(NFFT - NUSED/2 + sc);
    else                   rd_addr = LG'(int'(sc) - int'(NUSED/2) + 1);
    out_valid   = fft_done;
    out_beat.s  = rd_data;
    out_beat.sc = sc;
    out_beat.st = st_v[rsel];
    fft_release = fft_done && out_ready && (sc == 11'(NUSED - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc   <= '0;
      rsel <= 1'b0;
    end else if (fft_done && out_ready) begin
      sc <= (sc == 11'(NUSED - 1)) ? '0 : sc + 1'b1;
      if (sc == 11'(NUSED - 1)) rsel <= ~rsel;
    end
  end

endmodule
