// One co-processor: the MIMO processing of one sub-band.
//
// The band of NUSED subcarriers is split into NCO sub-bands; co-processor
// CO_IDX handles subcarriers CO_IDX*NSC .. CO_IDX*NSC+NSC-1 (NSC = NUSED/NCO)
// for all M antennas. Receive path: router A gathers the antenna vector of
// each subcarrier from the NSS subsystem links; UL pilot subcarriers go to
// the channel estimator, whose completed groups are queued for the weight
// unit (Gram matrix + Neumann inverse); UL data subcarriers go to the
// detector, which waits for its group's weights, and the K detected symbols
// are sliced by K demappers into ul_bits. Transmit path: a DL request (one
// per DL symbol, queued up to four) makes the co-processor produce the NSC
// subcarriers of its sub-band: for a DL pilot symbol every user gets the
// unit pilot level, for a DL data symbol K mappers turn dl_bits into
// symbols; the precoder forms the M-antenna vector and router B sends it to
// the subsystems. The detector and precoder share the estimate and weights.
// Run-time configuration: detection mode (MRC/ZF/RZF), modulation, RZF
// regularisation beta, number of deployed antennas.
// The structure follows the paper's co-processor figure; the queueing and
// handshakes are this design's.
module coprocessor
  import lumami_pkg::*;
#(
  parameter int unsigned M      = 100,
  parameter int unsigned K      = 12,
  parameter int unsigned NA     = 16,
  parameter int unsigned NUSED  = 1200,
  parameter int unsigned NCO    = 4,
  parameter int unsigned CO_IDX = 0,
  parameter int unsigned PAR    = 4,
  parameter int unsigned NTERMS = 3,
  parameter int unsigned ZSH    = 8,
  localparam int unsigned NSS   = (M + NA - 1) / NA,
  localparam int unsigned NSC   = NUSED / NCO,
  localparam int unsigned SC_BASE = CO_IDX * NSC,
  localparam int unsigned GRP   = NSC / K,
  localparam int unsigned GW    = $clog2(GRP + 1),
  localparam int unsigned MW    = $clog2(M + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  det_mode_t      mode,
  input  mod_t           modulation,
  input  logic [31:0]    beta,
  input  logic [7:0]     m_active,
  input  logic [NSS-1:0] up_valid,
  output logic [NSS-1:0] up_ready,
  input  beat_t          up_beat [NSS],
  output logic [NSS-1:0] dn_valid,
  input  logic [NSS-1:0] dn_ready,
  output beat_t          dn_beat [NSS],
  output logic           ul_bits_valid,
  output logic [10:0]    ul_bits_sc,
  output logic [5:0]     ul_bits [K],
  input  logic           dl_req_valid,
  input  sym_t           dl_req_type,
  input  logic           dl_bits_valid,
  output logic           dl_bits_ready,
  input  logic [5:0]     dl_bits [K],
  output logic [31:0]    det_stalls,
  output logic [31:0]    pre_stalls,
  output logic [7:0]     dl_req_dropped,
  output logic           wc_busy         // weight unit working
);
  // ---------------- receive path ----------------
  logic        ra_valid, ra_ready;
  cplx_t       ra_y [M];
  logic [10:0] ra_sc;
  sym_t        ra_st;

  router_a #(.M(M), .NA(NA)) u_ra (
    .clk, .rst_n, .m_active, .link_valid(up_valid), .link_ready(up_ready), .link_beat(up_beat),
    .out_valid(ra_valid), .out_ready(ra_ready), .out_y(ra_y), .out_sc(ra_sc), .out_st(ra_st)
  );

  logic det_ready;
  wire  is_pil  = (ra_st == SYM_UL_PIL);
  wire  is_data = (ra_st == SYM_UL_DATA);
  assign ra_ready = is_data ? det_ready : 1'b1;

  logic          gs, gd;
  logic [GW-1:0] gi;
  logic [GW-1:0] g_rd_g  [3];
  logic [MW-1:0] g_rd_m0 [3];
  cplx_t         g_rd_d  [3][K][PAR];

  channel_estimator #(.M(M), .K(K), .NSC(NSC), .SC_BASE(SC_BASE), .PAR(PAR), .NRD(3)) u_est (
    .clk, .rst_n, .in_valid(ra_valid && is_pil), .in_y(ra_y), .in_sc(ra_sc),
    .grp_stale(gs), .grp_done(gd), .grp_idx(gi), .rd_g(g_rd_g), .rd_m0(g_rd_m0), .rd_d(g_rd_d)
  );

  logic [GW-1:0]  x_rd_g [2];
  cplx32_t        x_rd_d [2][K][K];
  logic [GRP-1:0] w_valid;

  weight_calc #(.M(M), .K(K), .NSC(NSC), .PAR(PAR), .NTERMS(NTERMS)) u_wc (
    .clk, .rst_n, .mode, .beta, .grp_stale(gs), .grp_done(gd), .grp_idx(gi),
    .g_rd_g(g_rd_g[0]), .g_rd_m0(g_rd_m0[0]), .g_rd_d(g_rd_d[0]),
    .x_rd_g, .x_rd_d, .w_valid, .busy(wc_busy)
  );

  logic  det_ov;
  cplx_t det_z [K];

  mimo_detector #(.M(M), .K(K), .NSC(NSC), .SC_BASE(SC_BASE), .PAR(PAR), .ZSH(ZSH)) u_det (
    .clk, .rst_n, .in_valid(ra_valid && is_data), .in_ready(det_ready), .in_y(ra_y), .in_sc(ra_sc),
    .w_valid, .g_rd_g(g_rd_g[1]), .g_rd_m0(g_rd_m0[1]), .g_rd_d(g_rd_d[1]),
    .x_rd_g(x_rd_g[0]), .x_rd_d(x_rd_d[0]), .out_valid(det_ov), .out_z(det_z),
    .out_sc(ul_bits_sc), .stall_cycles(det_stalls)
  );

  for (genvar k = 0; k < int'(K); k++) begin : g_demap
    symbol_demapper #(.ZSH(ZSH)) u_dm (.mod(modulation), .sym(det_z[k]), .bits(ul_bits[k]));
  end
  assign ul_bits_valid = det_ov;

  // ---------------- transmit path ----------------
  sym_t       q_type [4];
  logic [1:0] q_wp, q_rp;
  logic [2:0] q_cnt;
  logic       act;
  sym_t       act_type;
  logic [10:0] dsc;
  logic       pre_ready, pre_valid;
  cplx_t      u [K];
  cplx_t      map_u [K];

  for (genvar k = 0; k < int'(K); k++) begin : g_map
    symbol_mapper #(.ZSH(ZSH)) u_mp (.mod(modulation), .bits(dl_bits[k]), .sym(map_u[k]));
  end

  wire pil = (act_type == SYM_DL_PIL);
  always_comb begin
    for (int k = 0; k < int'(K); k++) u[k] = pil ? '{re: SW'(1 << ZSH), im: '0} : map_u[k];
    pre_valid     = act && (pil || dl_bits_valid);
    dl_bits_ready = act && !pil && pre_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_wp <= '0; q_rp <= '0; q_cnt <= '0;
      act <= 1'b0; act_type <= SYM_GUARD; dsc <= '0;
      dl_req_dropped <= '0;
      for (int i = 0; i < 4; i++) q_type[i] <= SYM_GUARD;
    end else begin
      logic push, pop;
      push = dl_req_valid && (dl_req_type == SYM_DL_PIL || dl_req_type == SYM_DL_DATA);
      pop  = !act && (q_cnt != 0);
      if (push && q_cnt == 3'd4 && !pop) dl_req_dropped <= dl_req_dropped + 1'b1;
      else if (push) begin
        q_type[q_wp] <= dl_req_type;
        q_wp <= q_wp + 1'b1;
      end
      if (pop) begin
        act      <= 1'b1;
        act_type <= q_type[q_rp];
        q_rp     <= q_rp + 1'b1;
        dsc      <= 11'(SC_BASE);
      end else if (pre_valid && pre_ready) begin
        if (dsc == 11'(SC_BASE + NSC - 1)) act <= 1'b0;
        dsc <= dsc + 1'b1;
      end
      q_cnt <= q_cnt + ((push && !(q_cnt == 3'd4 && !pop)) ? 3'd1 : 3'd0) - (pop ? 3'd1 : 3'd0);
    end
  end

  logic        pc_valid, pc_ready;
  cplx_t       pc_x [M];
  logic [10:0] pc_sc;
  sym_t        pc_st;

  mimo_precoder #(.M(M), .K(K), .NSC(NSC), .SC_BASE(SC_BASE), .PAR(PAR)) u_pre (
    .clk, .rst_n, .in_valid(pre_valid), .in_ready(pre_ready), .in_u(u), .in_sc(dsc), .in_st(act_type),
    .w_valid, .g_rd_g(g_rd_g[2]), .g_rd_m0(g_rd_m0[2]), .g_rd_d(g_rd_d[2]),
    .x_rd_g(x_rd_g[1]), .x_rd_d(x_rd_d[1]), .out_valid(pc_valid), .out_ready(pc_ready),
    .out_x(pc_x), .out_sc(pc_sc), .out_st(pc_st), .stall_cycles(pre_stalls)
  );

  router_b #(.M(M), .NA(NA)) u_rb (
    .clk, .rst_n, .in_valid(pc_valid), .in_ready(pc_ready), .in_x(pc_x), .in_sc(pc_sc), .in_st(pc_st),
    .link_valid(dn_valid), .link_ready(dn_ready), .link_beat(dn_beat)
  );

endmodule
