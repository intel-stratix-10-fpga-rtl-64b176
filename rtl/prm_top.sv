// prm_top: stand-alone firmware of one Pattern Recognition Mezzanine unit:
// pattern matching by (emulated) associative memories followed by cluster
// retrieval and a linearised track fit with constants held in HBM.
//
// Data flow: the Data Generator injects the clusters of an event; every
// cluster goes with its SSID to one layer of the Data Organiser, and its
// SSID to the ASIC emulator group, which returns the roadIDs of the matched
// patterns.  The Data Organiser asks HBM2DO for each road's pattern record
// (sectorID and eight SSIDs), collects the clusters stored under those SSIDs
// and hands the road to the Track Fitter.  The Track Fitter forms every
// cluster combination, fetches the chi2 constants of the sector through
// HBM2TF for each candidate, applies the chi2 cut, fetches the parameter
// constants for the survivors and computes the five track parameters; the
// tracks go back to the Data Generator's Comparator.  Before injection the
// Data Generator writes constants and patterns to the HBM (hbm_w*) and the
// patterns into the emulators.
//
// External parts are ports: the IPbus core's bus (ipb_*; word addresses
// 0x000-0xFFF reach the registers, 0x1000-0x1FFF the IPbus-to-APB bridge
// towards the HBM controller, apb_*, and 0x2000-0x201F the read-latency
// histograms: 0x2000+bin for the two HBM2DO pseudo-channels, 0x2010+bin for
// the six HBM2TF ones, a write there clears both), the Ethernet MAC's Avalon-ST streams
// and the IPbus core's AXI-Stream (both through the converter), the AXI read
// ports of the 2 + 6 HBM pseudo-channels and the HBM write port.  One clock,
// as in the original hardware tests (there the HBM ran on its own clock).
module prm_top
  import prm_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // IPbus bus from the IPbus core
  input  logic                 ipb_strobe,
  input  logic                 ipb_write,
  input  logic [31:0]          ipb_addr,
  input  logic [31:0]          ipb_wdata,
  output logic [31:0]          ipb_rdata,
  output logic                 ipb_ack,
  output logic                 ipb_err,
  // APB towards the HBM controller
  output logic                 apb_psel,
  output logic                 apb_penable,
  output logic                 apb_pwrite,
  output logic [15:0]          apb_paddr,
  output logic [31:0]          apb_pwdata,
  input  logic [31:0]          apb_prdata,
  input  logic                 apb_pready,
  input  logic                 apb_pslverr,
  // Ethernet MAC <-> IPbus core streams
  input  logic                 mac_rx_valid,
  output logic                 mac_rx_ready,
  input  logic [31:0]          mac_rx_data,
  input  logic                 mac_rx_sop,
  input  logic                 mac_rx_eop,
  input  logic [1:0]           mac_rx_empty,
  output logic                 ipc_rx_tvalid,
  input  logic                 ipc_rx_tready,
  output logic [31:0]          ipc_rx_tdata,
  output logic [3:0]           ipc_rx_tkeep,
  output logic                 ipc_rx_tlast,
  input  logic                 ipc_tx_tvalid,
  output logic                 ipc_tx_tready,
  input  logic [31:0]          ipc_tx_tdata,
  input  logic [3:0]           ipc_tx_tkeep,
  input  logic                 ipc_tx_tlast,
  output logic                 mac_tx_valid,
  input  logic                 mac_tx_ready,
  output logic [31:0]          mac_tx_data,
  output logic                 mac_tx_sop,
  output logic                 mac_tx_eop,
  output logic [1:0]           mac_tx_empty,
  // HBM write port (patterns and constants)
  output logic                 hbm_wvalid,
  output logic                 hbm_wsel,
  output logic [HBM_AW-1:0]    hbm_waddr,
  output logic [HBM_DW-1:0]    hbm_wdata,
  input  logic                 hbm_wready,
  // HBM pseudo-channels: 2 for the Data Organiser, 6 for the Track Fitter
  output logic    [1:0]        do_ar_valid,
  output axi_ar_t [1:0]        do_ar,
  input  logic    [1:0]        do_ar_ready,
  input  logic    [1:0]        do_r_valid,
  input  axi_r_t  [1:0]        do_r,
  output logic    [1:0]        do_r_ready,
  output logic    [5:0]        tf_ar_valid,
  output axi_ar_t [5:0]        tf_ar,
  input  logic    [5:0]        tf_ar_ready,
  input  logic    [5:0]        tf_r_valid,
  input  axi_r_t  [5:0]        tf_r,
  output logic    [5:0]        tf_r_ready,
  // activity
  output logic                 busy
);
  // ---------------- monitoring ----------------
  logic        sel_apb;
  logic [31:0] reg_rdata, apb_rdata_i;
  logic        reg_ack, reg_err, apb_ack, apb_err;
  logic        sel_hist, hist_ack, hist_clear;
  logic [31:0] hist_rdata, do_hist_count, tf_hist_count;
  assign sel_apb   = ipb_addr[31:12] == 20'h00001;
  assign sel_hist  = ipb_addr[31:5] == 27'h0000100;
  assign ipb_rdata = sel_apb ? apb_rdata_i : sel_hist ? hist_rdata : reg_rdata;
  assign ipb_ack   = reg_ack | apb_ack | hist_ack;
  assign ipb_err   = reg_err | apb_err;

  logic        start_init, start_inject, fake_en, ram_we;
  logic [15:0] n_const_chunks, n_patterns, n_expected, n_events, gap, ram_addr;
  logic [1:0]  ram_sel;
  logic [31:0] ram_wdata;
  logic [63:0] thresh;
  logic [15:0][31:0] stat;

  ipbus_regs u_regs (
    .clk, .rst_n,
    .ipb_strobe(ipb_strobe && !sel_apb && !sel_hist), .ipb_write, .ipb_addr, .ipb_wdata,
    .ipb_rdata(reg_rdata), .ipb_ack(reg_ack), .ipb_err(reg_err),
    .start_init, .start_inject, .fake_en, .n_const_chunks, .n_patterns, .n_expected,
    .n_events, .gap, .thresh, .ram_we, .ram_sel, .ram_addr, .ram_wdata,
    .busy, .stat);

  ipbus_to_apb u_apb (
    .clk, .rst_n,
    .ipb_strobe(ipb_strobe && sel_apb), .ipb_write, .ipb_addr({20'd0, ipb_addr[11:0]}), .ipb_wdata,
    .ipb_rdata(apb_rdata_i), .ipb_ack(apb_ack), .ipb_err(apb_err),
    .psel(apb_psel), .penable(apb_penable), .pwrite(apb_pwrite), .paddr(apb_paddr),
    .pwdata(apb_pwdata), .prdata(apb_prdata), .pready(apb_pready), .pslverr(apb_pslverr));

  avst_axis_converter #(.DATA_W(32)) u_conv (
    .clk, .rst_n,
    .rx_avst_valid(mac_rx_valid), .rx_avst_ready(mac_rx_ready), .rx_avst_data(mac_rx_data),
    .rx_avst_sop(mac_rx_sop), .rx_avst_eop(mac_rx_eop), .rx_avst_empty(mac_rx_empty),
    .rx_axis_tvalid(ipc_rx_tvalid), .rx_axis_tready(ipc_rx_tready), .rx_axis_tdata(ipc_rx_tdata),
    .rx_axis_tkeep(ipc_rx_tkeep), .rx_axis_tlast(ipc_rx_tlast),
    .tx_axis_tvalid(ipc_tx_tvalid), .tx_axis_tready(ipc_tx_tready), .tx_axis_tdata(ipc_tx_tdata),
    .tx_axis_tkeep(ipc_tx_tkeep), .tx_axis_tlast(ipc_tx_tlast),
    .tx_avst_valid(mac_tx_valid), .tx_avst_ready(mac_tx_ready), .tx_avst_data(mac_tx_data),
    .tx_avst_sop(mac_tx_sop), .tx_avst_eop(mac_tx_eop), .tx_avst_empty(mac_tx_empty));

  // ---------------- Data Generator ----------------
  logic                 dg_busy, cfg_we;
  logic [2:0]           cfg_emu, cfg_layer;
  logic [3:0]           cfg_patt;
  logic [SSID_W-1:0]    cfg_ssid;
  logic                 am_valid, am_ready;
  am_word_t             am_word;
  logic   [NLAYERS-1:0] dg_do_valid, dg_do_ready;
  do_in_t [NLAYERS-1:0] dg_do_word;
  logic                 trk_valid, trk_ready;
  track_t               trk;
  logic [15:0]          n_match, n_mismatch, n_unexpected, n_injected;

  data_generator u_dg (
    .clk, .rst_n,
    .ram_we, .ram_sel, .ram_addr, .ram_wdata,
    .start_init, .start_inject, .n_const_chunks, .n_patterns, .n_expected, .n_events, .gap,
    .fake_en, .busy(dg_busy),
    .hbm_wvalid, .hbm_wsel, .hbm_waddr, .hbm_wdata, .hbm_wready,
    .cfg_we, .cfg_emu, .cfg_patt, .cfg_layer, .cfg_ssid,
    .am_valid, .am_word, .am_ready,
    .do_valid(dg_do_valid), .do_word(dg_do_word), .do_ready(dg_do_ready),
    .trk_valid, .trk, .trk_ready,
    .n_match, .n_mismatch, .n_unexpected, .n_injected);

  // ---------------- ASIC emulator group ----------------
  logic       road_valid, road_ready;
  road_word_t road_word;
  asic_emu_group u_am (
    .clk, .rst_n,
    .in_valid(am_valid), .in_word(am_word), .in_ready(am_ready),
    .cfg_we, .cfg_emu, .cfg_patt, .cfg_layer, .cfg_ssid,
    .road_valid, .road_word, .road_ready);

  // ---------------- Data Organiser and HBM2DO ----------------
  logic              hreq_valid, hreq_ready, hrsp_valid, hrsp_ready, dor_valid, dor_ready;
  logic [ROAD_W-1:0] hreq_road;
  logic [7:0]        hreq_id, hrsp_id;
  patt_rec_t         hrsp_patt;
  do_road_t          dor;
  logic [15:0]       do_events, do_overflows;

  data_organiser u_do (
    .clk, .rst_n,
    .cl_valid(dg_do_valid), .cl_word(dg_do_word), .cl_ready(dg_do_ready),
    .road_valid, .road_word, .road_ready,
    .hreq_valid, .hreq_road, .hreq_id, .hreq_ready,
    .hrsp_valid, .hrsp_id, .hrsp_patt, .hrsp_ready,
    .tf_valid(dor_valid), .tf_road(dor), .tf_ready(dor_ready),
    .events(do_events), .overflows(do_overflows));

  hbm2do u_hbm2do (
    .clk, .rst_n,
    .req_valid(hreq_valid), .req_road(hreq_road), .req_id(hreq_id), .req_ready(hreq_ready),
    .ar_valid(do_ar_valid), .ar(do_ar), .ar_ready(do_ar_ready),
    .r_valid(do_r_valid), .r(do_r), .r_ready(do_r_ready),
    .rsp_valid(hrsp_valid), .rsp_id(hrsp_id), .rsp_patt(hrsp_patt), .rsp_ready(hrsp_ready));

  // ---------------- Track Fitter and HBM2TF ----------------
  logic                tq_valid, tq_ready, tq_kind, ck_valid, ck_ready;
  logic [SECTOR_W-1:0] tq_sector;
  logic [TAG_W-1:0]    tq_tag;
  chunk_t              ck;
  logic [31:0]         n_cand, n_pass, n_wait;

  track_fitter u_tf (
    .clk, .rst_n, .thresh,
    .road_valid(dor_valid), .road(dor), .road_ready(dor_ready),
    .hreq_valid(tq_valid), .hreq_sector(tq_sector), .hreq_kind(tq_kind), .hreq_tag(tq_tag),
    .hreq_ready(tq_ready),
    .ck_valid, .ck, .ck_ready,
    .trk_valid, .trk, .trk_ready,
    .n_cand, .n_pass, .n_wait);

  hbm2tf u_hbm2tf (
    .clk, .rst_n,
    .req_valid(tq_valid), .req_sector(tq_sector), .req_kind(tq_kind), .req_tag(tq_tag),
    .req_ready(tq_ready),
    .ar_valid(tf_ar_valid), .ar(tf_ar), .ar_ready(tf_ar_ready),
    .r_valid(tf_r_valid), .r(tf_r), .r_ready(tf_r_ready),
    .ck_valid, .ck, .ck_ready);

  // ---------------- HBM read-latency histograms ----------------
  axi_latency_hist #(.NCH(2)) u_do_hist (
    .clk, .rst_n,
    .ar_valid(do_ar_valid), .ar_ready(do_ar_ready), .r_valid(do_r_valid), .r_ready(do_r_ready),
    .clear(hist_clear), .rd_bin(ipb_addr[3:0]), .rd_count(do_hist_count));
  axi_latency_hist #(.NCH(6)) u_tf_hist (
    .clk, .rst_n,
    .ar_valid(tf_ar_valid), .ar_ready(tf_ar_ready), .r_valid(tf_r_valid), .r_ready(tf_r_ready),
    .clear(hist_clear), .rd_bin(ipb_addr[3:0]), .rd_count(tf_hist_count));

  // one-cycle IPbus answer for the histogram window
  assign hist_clear = ipb_strobe && sel_hist && ipb_write && !hist_ack;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist_ack   <= 1'b0;
      hist_rdata <= '0;
    end else begin
      hist_ack   <= ipb_strobe && sel_hist && !hist_ack;
      hist_rdata <= ipb_addr[4] ? tf_hist_count : do_hist_count;
    end
  end

  // ---------------- status ----------------
  always_comb begin
    stat     = '0;
    stat[0]  = {16'd0, n_match};
    stat[1]  = {16'd0, n_mismatch};
    stat[2]  = {16'd0, n_unexpected};
    stat[3]  = {16'd0, n_injected};
    stat[4]  = {16'd0, do_events};
    stat[5]  = {16'd0, do_overflows};
    stat[6]  = n_cand;
    stat[7]  = n_pass;
    stat[8]  = n_wait;
  end
  assign busy = dg_busy;
endmodule
