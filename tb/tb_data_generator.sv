// tb_data_generator: loads the three RAMs through the ram_* port and checks
//  * Storing to HBM: 6 constant chunks (sel 1, address*32, 256-bit data) and
//    5 pattern records (sel 0, at roadID*32), under random wready;
//  * Storing to ASIC Emulator: 8 SSIDs per pattern to emulator roadID/16,
//    slot roadID%16;
//  * injection of 4 events with fake clusters on: on the AM bus CMD_INIT,
//    one data word per cluster in RAM order, 8 fake words (SSID MSB set),
//    CMD_END; per Data Organiser layer the clusters in order, one fake
//    cluster and the end-of-event word; at least `gap` idle cycles between
//    CMD_END and the next CMD_INIT; all under random ready;
//  * the Comparator: a matching track, a track of a listed road with a
//    wrong parameter and a track of an unlisted road must count as match,
//    mismatch and unexpected.
// A second instance with USE_ENCODER = 1 sees the same events; its Data
// Organiser streams must hold the same number of clusters per layer, in
// non-decreasing SSID order, each followed by one end-of-event word.
module tb_data_generator;
  import prm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NEV = 4;

  logic ram_we, start_init, start_inject, fake_en, trk_valid, trk_ready;
  logic [1:0] ram_sel;
  logic [15:0] ram_addr, n_const_chunks, n_patterns, n_expected, n_events, gap;
  logic [31:0] ram_wdata;
  track_t trk;
  logic [15:0] n_match, n_mismatch, n_unexpected, n_injected;
  logic busy, hbm_wvalid, hbm_wsel, hbm_wready, cfg_we, am_valid, am_ready;
  logic [HBM_AW-1:0] hbm_waddr;
  logic [HBM_DW-1:0] hbm_wdata;
  logic [2:0] cfg_emu, cfg_layer;
  logic [3:0] cfg_patt;
  logic [SSID_W-1:0] cfg_ssid;
  am_word_t am_word;
  logic [NLAYERS-1:0] do_valid, do_ready;
  do_in_t [NLAYERS-1:0] do_word;

  data_generator dut (.*);

  // encoder-mode instance (streams only)
  logic e_busy, e_hv, e_hs, e_cw, e_amv, e_trk_ready;
  logic [HBM_AW-1:0] e_ha; logic [HBM_DW-1:0] e_hd;
  logic [2:0] e_ce, e_cl; logic [3:0] e_cp; logic [SSID_W-1:0] e_cs;
  am_word_t e_amw;
  logic [NLAYERS-1:0] e_dv;
  do_in_t [NLAYERS-1:0] e_dw;
  logic [15:0] e_m, e_mm, e_u, e_inj;
  data_generator #(.USE_ENCODER(1'b1)) u_enc (
    .clk, .rst_n, .ram_we, .ram_sel, .ram_addr, .ram_wdata, .start_init(1'b0), .start_inject,
    .n_const_chunks, .n_patterns, .n_expected, .n_events, .gap, .fake_en, .busy(e_busy),
    .hbm_wvalid(e_hv), .hbm_wsel(e_hs), .hbm_waddr(e_ha), .hbm_wdata(e_hd), .hbm_wready(1'b1),
    .cfg_we(e_cw), .cfg_emu(e_ce), .cfg_patt(e_cp), .cfg_layer(e_cl), .cfg_ssid(e_cs),
    .am_valid(e_amv), .am_word(e_amw), .am_ready(1'b1), .do_valid(e_dv), .do_word(e_dw), .do_ready('1),
    .trk_valid(1'b0), .trk(trk), .trk_ready(e_trk_ready), .n_match(e_m), .n_mismatch(e_mm),
    .n_unexpected(e_u), .n_injected(e_inj));

  task automatic wr(input int sel, input int a, input logic [31:0] d);
    @(negedge clk);
    ram_we = 1; ram_sel = 2'(sel); ram_addr = 16'(a); ram_wdata = d;
    @(negedge clk) ram_we = 0;
  endtask

  // reference data
  int caddr[6]; logic [31:0] cword[6][8];
  int proad[5], psec[5], pss[5][8];
  int nclu[NEV]; int clay[NEV][12], cssid[NEV][12]; logic [31:0] cclw[NEV][12];

  // expected streams
  logic [HBM_DW+HBM_AW:0] hbm_exp[$];
  logic [31:0] cfg_exp[$];
  am_word_t am_exp[$];
  do_in_t do_exp[NLAYERS][$];
  int fake_seen = 0;
  logic [15:0] fake_do[NLAYERS][$];

  always @(negedge clk) begin
    hbm_wready = $urandom_range(0, 2) != 0;
    am_ready   = $urandom_range(0, 2) != 0;
    do_ready   = NLAYERS'($urandom);
  end

  always @(posedge clk) if (rst_n) begin
    if (hbm_wvalid && hbm_wready) begin
      checks++;
      if (hbm_exp.size() == 0 || hbm_exp.pop_front() != {hbm_wsel, hbm_waddr, hbm_wdata}) begin
        failures++; $display("bad HBM write %h", hbm_waddr);
      end
    end
    if (cfg_we) begin
      checks++;
      if (cfg_exp.size() == 0 || cfg_exp.pop_front() != {cfg_emu, cfg_patt, cfg_layer, cfg_ssid}) begin
        failures++; $display("bad emulator write");
      end
    end
    if (am_valid && am_ready) begin
      checks++;
      if (am_exp.size() == 0) failures++;
      else begin
        am_word_t x;
        x = am_exp.pop_front();
        if (x.kind == AM_DATA && x.ssid == 16'hFFFF) begin
          // fake: layer given, SSID random with MSB set
          if (am_word.kind != AM_DATA || am_word.layer != x.layer || !am_word.ssid[15]) failures++;
          fake_seen++;
        end else if (am_word != x) begin failures++; $display("bad AM word %h exp %h", am_word, x); end
      end
    end
  end
  for (genvar l = 0; l < NLAYERS; l++) begin : g_do
    always @(posedge clk) if (rst_n && do_valid[l] && do_ready[l]) begin
      do_in_t x;
      checks++;
      if (do_exp[l].size() == 0) failures++;
      else begin
        x = do_exp[l].pop_front();
        if (!x.eoe && x.ssid == 16'hFFFF) begin
          if (do_word[l].eoe || !do_word[l].ssid[15]) failures++;
        end else if (do_word[l] != x) begin failures++; $display("bad DO word layer %0d", l); end
      end
    end
    // encoder instance: count, order, end of event
    int e_cnt = 0, e_ev = 0;
    logic [15:0] e_last = 0;
    always @(posedge clk) if (rst_n && e_dv[l]) begin
      if (e_dw[l].eoe) begin
        int n;
        n = 0;
        for (int k = 0; k < nclu[e_ev]; k++) if (clay[e_ev][k] == l) n++;
        checks++; if (e_cnt != n + 1) begin failures++; $display("encoder layer %0d event %0d count %0d exp %0d", l, e_ev, e_cnt, n + 1); end
        e_cnt = 0; e_ev++; e_last = 0;
      end else begin
        checks++; if (e_cnt > 0 && e_dw[l].ssid < e_last) failures++;
        e_last = e_dw[l].ssid; e_cnt++;
      end
    end
  end

  // gap between CMD_END and the next CMD_INIT
  int t_end = -1, cyc = 0, min_gap = 1 << 30;
  always @(posedge clk) begin
    cyc++;
    if (am_valid && am_ready && am_word.kind == AM_CMD) begin
      if (am_word.cmd == CMD_END) t_end = cyc;
      if (am_word.cmd == CMD_INIT && t_end >= 0 && cyc - t_end < min_gap) min_gap = cyc - t_end;
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    ram_we = 0; ram_sel = 0; ram_addr = 0; ram_wdata = 0; start_init = 0; start_inject = 0;
    fake_en = 0; trk_valid = 0; trk = '0;
    n_const_chunks = 6; n_patterns = 5; n_expected = 3; n_events = NEV; gap = 7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // constants
    for (int c = 0; c < 6; c++) begin
      caddr[c] = 28'h40_0000 + c * 3;
      wr(0, c*9, caddr[c]);
      for (int w = 0; w < 8; w++) begin cword[c][w] = $urandom; wr(0, c*9 + 1 + w, cword[c][w]); end
      hbm_exp.push_back({1'b1, HBM_AW'(caddr[c]) << 5, {cword[c][7], cword[c][6], cword[c][5], cword[c][4],
                                                        cword[c][3], cword[c][2], cword[c][1], cword[c][0]}});
    end
    // patterns
    for (int p = 0; p < 5; p++) begin
      patt_rec_t pr;
      proad[p] = p * 13 + 2; psec[p] = $urandom_range(0, 65535);
      wr(2, p*10, proad[p]); wr(2, p*10 + 1, psec[p]);
      pr.sector = 16'(psec[p]);
      for (int l = 0; l < 8; l++) begin
        pss[p][l] = $urandom_range(0, 65535); wr(2, p*10 + 2 + l, pss[p][l]);
        pr.ssid[l] = 16'(pss[p][l]);
        cfg_exp.push_back({3'(proad[p] / 16), 4'(proad[p] % 16), 3'(l), 16'(pss[p][l])});
      end
      hbm_exp.push_back({1'b0, PATT_BASE + (HBM_AW'(proad[p]) << 5), HBM_DW'(pr)});
    end
    // expected tracks: roads 2, 15, 28
    for (int t = 0; t < 3; t++) begin
      wr(2, 512 + t*4, proad[t]);
      wr(2, 512 + t*4 + 1, {16'(100 + t), 16'(t)});
      wr(2, 512 + t*4 + 2, {16'(t + 1), 16'(t + 2)});
      wr(2, 512 + t*4 + 3, {16'(t + 3), 16'(t + 4)});
    end
    // events
    a = 0;
    for (int e = 0; e < NEV; e++) begin
      am_exp.push_back('{kind: AM_CMD, cmd: CMD_INIT, layer: 0, ssid: 0});
      nclu[e] = $urandom_range(3, 12);
      for (int k = 0; k < nclu[e]; k++) begin
        clay[e][k] = $urandom_range(0, 7); cssid[e][k] = $urandom_range(0, 32767); cclw[e][k] = $urandom;
        wr(1, a, {1'b0, 3'(clay[e][k]), 12'd0, 16'(cssid[e][k])}); wr(1, a + 1, cclw[e][k]); a += 2;
        am_exp.push_back('{kind: AM_DATA, cmd: CMD_NONE, layer: 3'(clay[e][k]), ssid: 16'(cssid[e][k])});
        do_exp[clay[e][k]].push_back('{eoe: 0, ssid: 16'(cssid[e][k]), cl: cclw[e][k]});
      end
      wr(1, a, 32'h8000_0000); a += 1;
      for (int l = 0; l < 8; l++) begin
        am_exp.push_back('{kind: AM_DATA, cmd: CMD_NONE, layer: 3'(l), ssid: 16'hFFFF});
        do_exp[l].push_back('{eoe: 0, ssid: 16'hFFFF, cl: 0});
        do_exp[l].push_back('{eoe: 1, ssid: 0, cl: 0});
      end
      am_exp.push_back('{kind: AM_CMD, cmd: CMD_END, layer: 0, ssid: 0});
    end
    // initialisation
    @(negedge clk) start_init = 1;
    @(negedge clk) start_init = 0;
    wait (!busy);
    checks++; if (hbm_exp.size() != 0 || cfg_exp.size() != 0) failures++;
    // injection
    fake_en = 1;
    @(negedge clk) start_inject = 1;
    @(negedge clk) start_inject = 0;
    wait (!busy);
    wait (!e_busy);
    repeat (5) @(posedge clk);
    checks++; if (am_exp.size() != 0 || n_injected != NEV || e_inj != NEV) failures++;
    for (int l = 0; l < 8; l++) begin checks++; if (do_exp[l].size() != 0) failures++; end
    checks++; if (fake_seen != 8 * NEV) failures++;
    checks++; if (min_gap < 8) begin failures++; $display("gap %0d", min_gap); end
    // comparator
    for (int t = 0; t < 3; t++) begin
      @(negedge clk);
      trk_valid = 1;
      trk.road = ROAD_W'(t == 2 ? 999 : proad[t]);
      trk.chi2 = 16'(100 + t);
      trk.par[0] = 16'(t); trk.par[1] = 16'(t + 1); trk.par[2] = 16'(t + 2);
      trk.par[3] = 16'(t + 3); trk.par[4] = 16'(t == 1 ? 77 : t + 4);
      do @(posedge clk); while (!trk_ready);
      @(negedge clk) trk_valid = 0;
    end
    repeat (20) @(posedge clk);
    checks++; if (n_match != 1 || n_mismatch != 1 || n_unexpected != 1) begin
      failures++; $display("comparator %0d %0d %0d", n_match, n_mismatch, n_unexpected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
