// Signal chain of one base-station antenna on an SDR.
//
// Receive: ADC samples -> OFDM demodulator -> NUSED subcarriers per UL
// symbol, handed to the subsystem's antenna combiner. Transmit: precoded
// subcarriers from the antenna splitter -> OFDM modulator -> reciprocity
// compensation -> DAC samples. The two directions are independent; the
// ADC side carries the symbol type and first-sample flag from the frame
// scheduler, the DAC side returns them with the samples.
// The per-antenna placement of OFDM processing and reciprocity compensation
// follows the paper's subsystem figure; the interfaces are this design's.
module sdr_chain
  import lumami_pkg::*;
#(
  parameter int unsigned NFFT  = 2048,
  parameter int unsigned NCP   = 144,
  parameter int unsigned NUSED = 1200
) (
  input  logic        clk,
  input  logic        rst_n,
  // ADC side
  input  logic        adc_valid,
  input  logic        adc_first,
  input  sym_t        adc_type,
  input  cplx_t       adc_data,
  output logic [15:0] rx_overflows,
  // subcarriers to the combiner
  output logic        ul_valid,
  input  logic        ul_ready,
  output beat_t       ul_beat,
  // subcarriers from the splitter
  input  logic        dl_valid,
  output logic        dl_ready,
  input  beat_t       dl_beat,
  // DAC side
  output logic        dac_valid,
  input  logic        dac_ready,
  output logic        dac_first,
  output sym_t        dac_type,
  output cplx_t       dac_data,
  // calibration coefficient
  input  logic        cal_we,
  input  cplx_t       cal_coef
);
  logic  tx_valid, tx_ready, tx_first;
  sym_t  tx_type;
  cplx_t tx_data;

  ofdm_rx #(.NFFT(NFFT), .NCP(NCP), .NUSED(NUSED)) u_rx (
    .clk, .rst_n, .in_valid(adc_valid), .in_first(adc_first), .in_type(adc_type),
    .in_data(adc_data), .out_valid(ul_valid), .out_ready(ul_ready), .out_beat(ul_beat),
    .overflows(rx_overflows)
  );

  ofdm_tx #(.NFFT(NFFT), .NCP(NCP), .NUSED(NUSED)) u_tx (
    .clk, .rst_n, .in_valid(dl_valid), .in_ready(dl_ready), .in_beat(dl_beat),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_first(tx_first), .out_type(tx_type),
    .out_data(tx_data)
  );

  recip_comp u_rc (
    .clk, .rst_n, .cal_we, .cal_coef, .in_valid(tx_valid), .in_ready(tx_ready),
    .in_first(tx_first), .in_type(tx_type), .in_data(tx_data), .out_valid(dac_valid),
    .out_ready(dac_ready), .out_first(dac_first), .out_type(dac_type), .out_data(dac_data)
  );

endmodule
