// Top level of the massive-MIMO base-station baseband.
//
// M antennas are served by SDRs of NANT antennas each; NSDR SDRs form a
// subsystem whose antenna streams share NCO point-to-point links, one to
// every co-processor. NSS = ceil(M / (NSDR*NANT)) subsystems are built; the
// last one holds only the SDRs still needed (for M = 100: six subsystems of
// 8 SDRs and one of 2 SDRs). Each of the NCO co-processors handles
// NUSED/NCO subcarriers for all M antennas and all K users.
// Link wiring: up-link j of subsystem s goes to input s of co-processor j,
// and down-link s of co-processor j comes back to subsystem s, link j.
// The frame scheduler starts on the trigger's rising edge, counts the ADC
// strobe adc_valid (all antennas sample together) and tags every sample with
// its symbol type; at each DL symbol it asks all co-processors for a
// precoded symbol.
// Interface:
//   ADC: adc_valid (one strobe for all M antennas), adc_data[M].
//   DAC: per antenna dac_valid/dac_ready, dac_first on the first CP sample,
//        dac_type (symbol type) and dac_data.
//   Configuration (from the host): det mode, modulation, RZF beta, number of
//        deployed antennas m_active (the rest read as zero), per-antenna
//        reciprocity coefficient (cal_we, cal_coef) and the symbol table.
//   UL bits out and DL bits in per co-processor, one K-vector per subcarrier.
//   Status: per-antenna FFT overflow, detector/precoder stall counts, dropped
//   DL requests, frame counter.
// The structure (SDRs, subsystems, routers, co-processors, sub-band split)
// follows the paper's system architecture; the link protocol, the bit
// interfaces and the crossbar wiring are this design's choice.
module lumami_bs
  import lumami_pkg::*;
#(
  parameter int unsigned M      = 100,
  parameter int unsigned K      = 12,
  parameter int unsigned NANT   = 2,
  parameter int unsigned NSDR   = 8,
  parameter int unsigned NCO    = 4,
  parameter int unsigned NFFT   = 2048,
  parameter int unsigned NCP    = 144,
  parameter int unsigned NUSED  = 1200,
  parameter int unsigned NSYM   = 140,
  parameter int unsigned PAR    = 4,
  parameter int unsigned NTERMS = 3,
  localparam int unsigned NA    = NSDR * NANT,
  localparam int unsigned NSS   = (M + NA - 1) / NA,
  localparam int unsigned AW    = $clog2(NSYM)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           trigger,
  // configuration
  input  det_mode_t      mode,
  input  mod_t           modulation,
  input  logic [31:0]    beta,
  input  logic [7:0]     m_active,
  input  logic [M-1:0]   cal_we,
  input  cplx_t          cal_coef,
  input  logic           tbl_we,
  input  logic [AW-1:0]  tbl_addr,
  input  sym_t           tbl_type,
  // radio samples
  input  logic           adc_valid,
  input  cplx_t          adc_data [M],
  output logic [M-1:0]   dac_valid,
  input  logic [M-1:0]   dac_ready,
  output logic [M-1:0]   dac_first,
  output sym_t           dac_type [M],
  output cplx_t          dac_data [M],
  // user data
  output logic [NCO-1:0] ul_bits_valid,
  output logic [10:0]    ul_bits_sc [NCO],
  output logic [5:0]     ul_bits [NCO][K],
  input  logic [NCO-1:0] dl_bits_valid,
  output logic [NCO-1:0] dl_bits_ready,
  input  logic [5:0]     dl_bits [NCO][K],
  // status
  output logic           running,
  output logic [15:0]    frame_cnt,
  output logic [M-1:0]   rx_overflow,
  output logic [31:0]    det_stalls [NCO],
  output logic [31:0]    pre_stalls [NCO],
  output logic [7:0]     dl_req_dropped [NCO],
  output logic [NCO-1:0] wc_busy,
  output logic [AW-1:0]  sym_idx
);
  sym_t          sym_type;
  logic          sym_first, dl_req;
  sym_t          dl_req_type;

  frame_scheduler #(.NFFT(NFFT), .NCP(NCP), .NSYM(NSYM)) u_sched (
    .clk, .rst_n, .trigger, .sample_tick(adc_valid), .cfg_we(tbl_we), .cfg_addr(tbl_addr),
    .cfg_type(tbl_type), .running, .sym_type, .sym_first, .sym_idx, .dl_req, .dl_req_type,
    .frame_cnt
  );

  // link crossbar
  logic [NCO-1:0] ss_up_valid [NSS], ss_up_ready [NSS], ss_dn_valid [NSS], ss_dn_ready [NSS];
  beat_t          ss_up_beat  [NSS][NCO], ss_dn_beat [NSS][NCO];
  logic [NSS-1:0] co_up_valid [NCO], co_up_ready [NCO], co_dn_valid [NCO], co_dn_ready [NCO];
  beat_t          co_up_beat  [NCO][NSS], co_dn_beat [NCO][NSS];

  for (genvar s = 0; s < int'(NSS); s++) begin : g_xs
    for (genvar j = 0; j < int'(NCO); j++) begin : g_xj
      assign co_up_valid[j][s] = ss_up_valid[s][j];
      assign co_up_beat[j][s]  = ss_up_beat[s][j];
      assign ss_up_ready[s][j] = co_up_ready[j][s];
      assign ss_dn_valid[s][j] = co_dn_valid[j][s];
      assign ss_dn_beat[s][j]  = co_dn_beat[j][s];
      assign co_dn_ready[j][s] = ss_dn_ready[s][j];
    end
  end

  // subsystems; the last one holds only the remaining SDRs
  for (genvar s = 0; s < int'(NSS); s++) begin : g_ss
    localparam int unsigned NS  = (s < int'(NSS) - 1) ? NSDR : (M - (NSS - 1) * NA + NANT - 1) / NANT;
    localparam int unsigned NAS = NS * NANT;
    localparam int unsigned A0  = s * NA;

    logic [NAS-1:0] l_adc_valid, l_ovf, l_dac_valid, l_dac_ready, l_dac_first, l_cal_we;
    cplx_t          l_adc_data [NAS];
    sym_t           l_dac_type [NAS];
    cplx_t          l_dac_data [NAS];

    for (genvar a = 0; a < int'(NAS); a++) begin : g_a
      if (A0 + a < M) begin : g_used
        assign l_adc_valid[a]  = adc_valid;
        assign l_adc_data[a]   = adc_data[A0 + a];
        assign rx_overflow[A0 + a] = l_ovf[a];
        assign dac_valid[A0 + a]   = l_dac_valid[a];
        assign l_dac_ready[a]      = dac_ready[A0 + a];
        assign dac_first[A0 + a]   = l_dac_first[a];
        assign dac_type[A0 + a]    = l_dac_type[a];
        assign dac_data[A0 + a]    = l_dac_data[a];
        assign l_cal_we[a]         = cal_we[A0 + a];
      end else begin : g_spare
        // odd M: second antenna of the last SDR has no port
        assign l_adc_valid[a] = adc_valid;
        assign l_adc_data[a]  = '0;
        assign l_dac_ready[a] = 1'b1;
        assign l_cal_we[a]    = 1'b0;
      end
    end

    subsystem #(.NSDR(NS), .NANT(NANT), .NCO(NCO), .NFFT(NFFT), .NCP(NCP), .NUSED(NUSED)) u_ss (
      .clk, .rst_n, .adc_valid(l_adc_valid & {NAS{running}}), .adc_first(sym_first),
      .adc_type(sym_type), .adc_data(l_adc_data), .rx_overflow(l_ovf),
      .dac_valid(l_dac_valid), .dac_ready(l_dac_ready), .dac_first(l_dac_first),
      .dac_type(l_dac_type), .dac_data(l_dac_data), .cal_we(l_cal_we), .cal_coef,
      .up_valid(ss_up_valid[s]), .up_ready(ss_up_ready[s]), .up_beat(ss_up_beat[s]),
      .dn_valid(ss_dn_valid[s]), .dn_ready(ss_dn_ready[s]), .dn_beat(ss_dn_beat[s])
    );
  end

  for (genvar j = 0; j < int'(NCO); j++) begin : g_co
    coprocessor #(.M(M), .K(K), .NA(NA), .NUSED(NUSED), .NCO(NCO), .CO_IDX(j), .PAR(PAR),
                  .NTERMS(NTERMS)) u_co (
      .clk, .rst_n, .mode, .modulation, .beta, .m_active,
      .up_valid(co_up_valid[j]), .up_ready(co_up_ready[j]), .up_beat(co_up_beat[j]),
      .dn_valid(co_dn_valid[j]), .dn_ready(co_dn_ready[j]), .dn_beat(co_dn_beat[j]),
      .ul_bits_valid(ul_bits_valid[j]), .ul_bits_sc(ul_bits_sc[j]), .ul_bits(ul_bits[j]),
      .dl_req_valid(dl_req), .dl_req_type, .dl_bits_valid(dl_bits_valid[j]),
      .dl_bits_ready(dl_bits_ready[j]), .dl_bits(dl_bits[j]),
      .det_stalls(det_stalls[j]), .pre_stalls(pre_stalls[j]), .dl_req_dropped(dl_req_dropped[j]),
      .wc_busy(wc_busy[j])
    );
  end

endmodule
