// One subsystem: NSDR SDRs of NANT antennas each, sharing two routers.
//
// Every antenna has its own chain (OFDM RX/TX, reciprocity compensation).
// The first SDR hosts the antenna combiner / bandwidth splitter, which
// interleaves the subsystem's NSDR*NANT receive streams and sends each
// sub-band to its co-processor over one of NCO links; the last SDR hosts
// the antenna splitter / bandwidth combiner for the transmit direction.
// The ADC and DAC samples of all antennas are ports (the RF front ends are
// outside the logic), as is one calibration coefficient per antenna.
// The structure follows the paper's subsystem figure. The paper's design
// point is 8 SDRs of 2 antennas (16 antenna streams per link); the last
// subsystem of the 100-antenna system has only 2 SDRs.
module subsystem
  import lumami_pkg::*;
#(
  parameter int unsigned NSDR  = 8,
  parameter int unsigned NANT  = 2,
  parameter int unsigned NCO   = 4,
  parameter int unsigned NFFT  = 2048,
  parameter int unsigned NCP   = 144,
  parameter int unsigned NUSED = 1200,
  localparam int unsigned NA   = NSDR * NANT
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic  [NA-1:0] adc_valid,
  input  logic           adc_first,
  input  sym_t           adc_type,
  input  cplx_t          adc_data [NA],
  output logic  [NA-1:0] rx_overflow,
  output logic  [NA-1:0] dac_valid,
  input  logic  [NA-1:0] dac_ready,
  output logic  [NA-1:0] dac_first,
  output sym_t           dac_type [NA],
  output cplx_t          dac_data [NA],
  input  logic  [NA-1:0] cal_we,
  input  cplx_t          cal_coef,
  // links to and from the co-processors
  output logic [NCO-1:0] up_valid,
  input  logic [NCO-1:0] up_ready,
  output beat_t          up_beat [NCO],
  input  logic [NCO-1:0] dn_valid,
  output logic [NCO-1:0] dn_ready,
  input  beat_t          dn_beat [NCO]
);
  logic [NA-1:0] ul_valid, dl_ready;
  logic          ul_ready, dl_valid;
  beat_t         ul_beat [NA];
  beat_t         dl_beat [NA];
  logic [15:0]   ovf [NA];

  for (genvar a = 0; a < int'(NA); a++) begin : g_ant
    sdr_chain #(.NFFT(NFFT), .NCP(NCP), .NUSED(NUSED)) u_chain (
      .clk, .rst_n,
      .adc_valid(adc_valid[a]), .adc_first, .adc_type, .adc_data(adc_data[a]),
      .rx_overflows(ovf[a]),
      .ul_valid(ul_valid[a]), .ul_ready, .ul_beat(ul_beat[a]),
      .dl_valid, .dl_ready(dl_ready[a]), .dl_beat(dl_beat[a]),
      .dac_valid(dac_valid[a]), .dac_ready(dac_ready[a]), .dac_first(dac_first[a]),
      .dac_type(dac_type[a]), .dac_data(dac_data[a]),
      .cal_we(cal_we[a]), .cal_coef
    );
    assign rx_overflow[a] = |ovf[a];
  end

  antenna_combiner #(.NA(NA), .NCO(NCO), .NUSED(NUSED)) u_comb (
    .clk, .rst_n, .in_valid(ul_valid), .in_ready(ul_ready), .in_beat(ul_beat),
    .link_valid(up_valid), .link_ready(up_ready), .link_beat(up_beat)
  );

  antenna_splitter #(.NA(NA), .NCO(NCO), .NUSED(NUSED)) u_split (
    .clk, .rst_n, .link_valid(dn_valid), .link_ready(dn_ready), .link_beat(dn_beat),
    .out_valid(dl_valid), .out_ready(dl_ready), .out_beat(dl_beat)
  );

endmodule
