// salsa_top: digital part of the SALSA 64-channel MPGD readout chip.
//
// Data path, one clock domain (the 1 GHz link bit clock from the PLL):
//   clk_mgmt strobe -> 64 x sar_logic (the SAR registers of the channel ADCs;
//   DAC and comparator are analog, reached through adc_dac_o / adc_cmp_i)
//   -> 64 x pedestal -> cmn (common mode, trigger seeds)
//   -> 64 x baseline_follow -> 64 x iir_filter
//   -> 64 x { zero_suppress | feature_extract } (feat_mode selects)
//   -> 64 x sync_fifo -> 64 x trig_window -> out_buffer -> 4 x serializer_tx.
// Trigger path: cmn seeds -> trig_prim -> prim_vld_o/prim_o and a fifth
// serial link, trig_link_o. sync_cmd keeps the sample timestamp and takes the
// external trigger and sync lines; i2c_slave and slow_control hold the
// configuration, including the front-end settings sent to the analog
// channels (fe_*_o), and the overflow and primitive counters.
// The block order and names follow the published architecture diagram, the
// order of the corrections follows the published text (pedestal, common
// mode, baseline following, IIR, suppression). Timing: a sample taken on a
// strobe is converted in 13 clocks and reaches the channel FIFO 5 clocks
// later; a data frame is 45 bits, one every 45 clocks per link.
module salsa_top
  import salsa_pkg::*;
#(
  parameter int unsigned N_CH      = 64,  // channels, power of two, <= 64
  parameter int unsigned CH_DEPTH  = 16,  // words per channel FIFO (one whole pulse)
  parameter int unsigned BUF_DEPTH = 32,  // words in the output buffer
  parameter int unsigned PRIM_DEPTH = 4   // trigger primitives awaiting the trigger link
) (
  input  logic             clk,
  input  logic             rst_n,
  // analog side of the channel ADCs
  output logic [ADC_W-1:0] adc_dac_o [N_CH],
  input  logic [N_CH-1:0]  adc_cmp_i,
  output logic             adc_sample_o,   // sample-and-hold instant
  // front-end settings
  output logic [1:0]       fe_gain_o,
  output logic [2:0]       fe_tpeak_o,
  output logic             fe_big_in_o,
  output logic             fe_polarity_o,
  // clock, trigger and synchronisation commands
  input  logic             trig_i,
  input  logic             sync_i,
  // I2C
  input  logic             scl_i,
  input  logic             sda_i,
  output logic             sda_oe_o,
  // serial outputs
  output logic [NLINK-1:0] link_o,
  output logic             trig_link_o,
  output logic             prim_vld_o,
  output prim_t            prim_o
);
  cfg_t             cfg;
  logic [ADC_W-1:0] ped [N_CH];
  logic             smp_en;
  logic [TS_W-1:0]  ts_now, ts_smp, ts_ped, ts_cmn, ts_bl, ts_iir, trig_ts;
  logic             trig_vld;

  // ---- slow control ----
  logic       reg_wr;
  logic [7:0] reg_addr, reg_wdata, reg_rdata;
  logic [15:0] ovf_cnt, prim_cnt;

  i2c_slave u_i2c (
    .clk, .rst_n, .scl_i, .sda_i, .sda_oe_o,
    .reg_wr_o(reg_wr), .reg_addr_o(reg_addr), .reg_wdata_o(reg_wdata), .reg_rdata_i(reg_rdata)
  );

  slow_control #(.N_CH(N_CH)) u_sc (
    .clk, .rst_n, .wr_i(reg_wr), .addr_i(reg_addr), .wdata_i(reg_wdata), .rdata_o(reg_rdata),
    .ovf_cnt_i(ovf_cnt), .prim_cnt_i(prim_cnt), .cfg_o(cfg), .ped_o(ped)
  );

  assign fe_gain_o     = cfg.fe_gain;
  assign fe_tpeak_o    = cfg.fe_tpeak;
  assign fe_big_in_o   = cfg.fe_big_in;
  assign fe_polarity_o = cfg.polarity;

  // ---- clocking and timestamps ----
  clk_mgmt u_clk (.clk, .rst_n, .div_i(cfg.clk_div), .smp_en_o(smp_en));
  assign adc_sample_o = smp_en;

  sync_cmd #(.TS_W(TS_W)) u_sync (
    .clk, .rst_n, .smp_en_i(smp_en), .trig_i, .sync_i,
    .ts_o(ts_now), .trig_vld_o(trig_vld), .trig_ts_o(trig_ts)
  );

  // ---- ADC and pedestal ----
  logic [N_CH-1:0]      adc_done, ped_vld;
  logic [ADC_W-1:0]     adc_data [N_CH];
  logic signed [SW-1:0] ped_y [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_fe
    sar_logic #(.W(ADC_W)) u_sar (
      .clk, .rst_n, .start_i(smp_en), .cmp_i(adc_cmp_i[c]), .dac_o(adc_dac_o[c]),
      .busy_o(), .done_o(adc_done[c]), .data_o(adc_data[c])
    );
    pedestal #(.ADC_W(ADC_W), .SW(SW)) u_ped (
      .clk, .rst_n, .vld_i(adc_done[c]), .x_i(adc_data[c]), .ped_i(ped[c]),
      .polarity_i(cfg.polarity), .vld_o(ped_vld[c]), .y_o(ped_y[c])
    );
  end

  // ---- common mode and trigger seeds ----
  logic                 cmn_vld;
  logic signed [SW-1:0] cmn_y [N_CH];
  logic [N_CH-1:0]      seeds;

  cmn #(.NCH(N_CH), .SW(SW), .THR_W(ADC_W)) u_cmn (
    .clk, .rst_n, .en_i(cfg.cmn_en), .seed_thr_i(cfg.seed_thr),
    .vld_i(ped_vld[0]), .x_i(ped_y), .vld_o(cmn_vld), .y_o(cmn_y), .seed_o(seeds)
  );

  // sample timestamp carried along the pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts_smp <= '0; ts_ped <= '0; ts_cmn <= '0; ts_bl <= '0; ts_iir <= '0;
    end else begin
      if (smp_en)      ts_smp <= ts_now;
      if (adc_done[0]) ts_ped <= ts_smp;
      if (ped_vld[0])  ts_cmn <= ts_ped;
      if (cmn_vld)     ts_bl  <= ts_cmn;
      if (g_ch[0].bl_vld) ts_iir <= ts_bl;
    end
  end

  // ---- trigger primitives ----
  logic  tl_rdy, tl_vld;
  prim_t tl_data;
  logic  prim_ovf;
  trig_prim #(.N(N_CH)) u_prim (
    .clk, .rst_n, .mult_thr_i(cfg.mult_thr), .vld_i(cmn_vld), .seed_i(seeds), .ts_i(ts_cmn),
    .vld_o(prim_vld_o), .prim_o(prim_o)
  );
  // primitives come at most once per sample, a frame takes PRIM_W+2 clocks
  sync_fifo #(.W(PRIM_W), .DEPTH(PRIM_DEPTH)) u_prim_fifo (
    .clk, .rst_n, .wr_vld_i(prim_vld_o), .wr_data_i(prim_o), .full_o(), .ovf_o(prim_ovf),
    .rd_vld_o(tl_vld), .rd_data_o(tl_data), .rd_rdy_i(tl_rdy)
  );
  serializer_tx #(.W(PRIM_W)) u_trig_tx (
    .clk, .rst_n, .en_i(1'b1), .in_vld_i(tl_vld), .in_data_i(tl_data),
    .in_rdy_o(tl_rdy), .sd_o(trig_link_o)
  );

  // ---- per-channel processing, buffering and trigger windows ----
  logic [N_CH-1:0]  ovf, win_vld, win_rdy;
  logic [HIT_W-1:0] win_data [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic                 bl_vld, iir_vld, zs_vld, ft_vld, f_vld, f_rdy;
    logic signed [SW-1:0] bl_y, iir_y;
    hit_t                 zs_hit, ft_hit, f_hit, w_hit;

    baseline_follow #(.SW(SW), .THR_W(ADC_W)) u_bl (
      .clk, .rst_n, .en_i(cfg.bl_en), .shift_i(cfg.bl_shift), .thr_i(cfg.bl_thr),
      .vld_i(cmn_vld), .x_i(cmn_y[c]), .vld_o(bl_vld), .y_o(bl_y), .base_o()
    );
    iir_filter #(.SW(SW)) u_iir (
      .clk, .rst_n, .shift_i(cfg.iir_shift), .vld_i(bl_vld), .x_i(bl_y),
      .vld_o(iir_vld), .y_o(iir_y)
    );
    zero_suppress #(.CHAN(c)) u_zs (
      .clk, .rst_n, .thr_i(cfg.zs_thr), .vld_i(iir_vld), .x_i(iir_y), .ts_i(ts_iir),
      .vld_o(zs_vld), .hit_o(zs_hit)
    );
    feature_extract #(.CHAN(c)) u_ft (
      .clk, .rst_n, .thr_i(cfg.zs_thr), .vld_i(iir_vld), .x_i(iir_y), .ts_i(ts_iir),
      .vld_o(ft_vld), .hit_o(ft_hit)
    );
    sync_fifo #(.W(HIT_W), .DEPTH(CH_DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_vld_i (cfg.feat_mode ? ft_vld : zs_vld),
      .wr_data_i(cfg.feat_mode ? ft_hit : zs_hit),
      .full_o(), .ovf_o(ovf[c]),
      .rd_vld_o(f_vld), .rd_data_o(f_hit), .rd_rdy_i(f_rdy)
    );
    trig_window u_win (
      .clk, .rst_n, .trig_mode_i(cfg.trig_mode), .lat_i(cfg.trig_lat), .win_i(cfg.trig_win),
      .now_i(ts_now), .trig_vld_i(trig_vld), .trig_ts_i(trig_ts),
      .in_vld_i(f_vld), .in_hit_i(f_hit), .in_rdy_o(f_rdy),
      .out_vld_o(win_vld[c]), .out_hit_o(w_hit), .out_rdy_i(win_rdy[c]), .drop_o()
    );
    assign win_data[c] = w_hit;
  end

  // ---- output buffer and data links ----
  logic [NLINK-1:0] tx_vld, tx_rdy;
  logic [HIT_W-1:0] tx_data;

  out_buffer #(.NCH(N_CH), .NLINK(NLINK), .W(HIT_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .link_en_i(cfg.link_en),
    .in_vld_i(win_vld), .in_data_i(win_data), .in_rdy_o(win_rdy),
    .tx_vld_o(tx_vld), .tx_data_o(tx_data), .tx_rdy_i(tx_rdy)
  );

  for (genvar l = 0; l < NLINK; l++) begin : g_tx
    serializer_tx #(.W(HIT_W)) u_tx (
      .clk, .rst_n, .en_i(cfg.link_en[l]), .in_vld_i(tx_vld[l]), .in_data_i(tx_data),
      .in_rdy_o(tx_rdy[l]), .sd_o(link_o[l])
    );
  end

  // ---- monitoring counters (saturating) ----
  logic [$clog2(N_CH+1)-1:0] ovf_n;
  always_comb begin
    ovf_n = '0;
    for (int i = 0; i < N_CH; i++) ovf_n += ($clog2(N_CH+1))'(ovf[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ovf_cnt  <= '0;
      prim_cnt <= '0;
    end else begin
      if (ovf_n != '0 || prim_ovf) ovf_cnt <= (ovf_cnt > 16'hFFFE - 16'(ovf_n)) ? 16'hFFFF : ovf_cnt + 16'(ovf_n) + 16'(prim_ovf);
      if (prim_vld_o && prim_cnt != 16'hFFFF) prim_cnt <= prim_cnt + 1'b1;
    end
  end
endmodule
