// data_generator: stand-alone test source and checker of the PRM pipeline.
//
// It plays the role of the Tracking Processor and of the offline tools: it
// loads the memories, injects events and checks the fitted tracks.
//
// RAMs (32-bit words, written through ram_* from the monitoring registers):
//  * Constants RAM (ram_sel 0): groups of 9 words, word 0 the HBM chunk
//    address (byte address / 32), words 1..8 the 256-bit chunk, low word first.
//  * PRM Input RAM (ram_sel 1): the events.  A header word holds
//    [31] end of event, [30:28] layer, [15:0] SSID; a cluster header is
//    followed by the cluster word {y[15:0], x[15:0]}.
//  * PRM Extended Input RAM (ram_sel 2): from word 0, patterns of 10 words
//    (roadID, sectorID, SSID of layers 0..7); from word EXT_DEPTH/2, expected
//    tracks of 4 words (roadID, {chi2, p0}, {p1, p2}, {p3, p4}).
//
// Control Signals: start_init runs Storing to HBM (constant chunks, then one
// 32-byte pattern record per pattern at PATT_BASE + roadID*32) and Storing to
// ASIC Emulator (the eight SSIDs of each pattern into emulator roadID/16,
// slot roadID%16).  start_inject then injects n_events events: CMD_INIT on
// the AM bus, every cluster both to its Data Organiser layer and as an SSID
// data word on the AM bus, optionally one fake cluster per layer with a
// random SSID from a 16-bit LFSR (SSID MSB set), the end-of-event marker on
// all eight layers and CMD_END; then `gap` idle cycles, which sets the
// injection frequency.  With USE_ENCODER = 1 (chosen at elaboration) the
// SSID field of the RAM is ignored: clusters pass through ssid_encoder and
// the sorted per-layer streams are forwarded round-robin to the Data
// Organiser and the AM bus, CMD_END following the last layer's end-of-event.
//
// Comparator: each fitted track is searched, by roadID, in the expected
// list; it counts as a match when chi2 and all parameters are equal, as a
// mismatch when its road is listed with other values, and as unexpected
// otherwise.  The block split follows the paper; the RAM word formats, the
// LFSR and the comparison rule are this design's choices.
module data_generator
  import prm_pkg::*;
#(
  parameter bit USE_ENCODER = 1'b0,
  parameter int IN_DEPTH    = 1024,
  parameter int EXT_DEPTH   = 1024,
  parameter int CONST_DEPTH = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // RAM load
  input  logic                  ram_we,
  input  logic [1:0]            ram_sel,
  input  logic [15:0]           ram_addr,
  input  logic [31:0]           ram_wdata,
  // control
  input  logic                  start_init,
  input  logic                  start_inject,
  input  logic [15:0]           n_const_chunks,
  input  logic [15:0]           n_patterns,
  input  logic [15:0]           n_expected,
  input  logic [15:0]           n_events,
  input  logic [15:0]           gap,
  input  logic                  fake_en,
  output logic                  busy,
  // Storing to HBM
  output logic                  hbm_wvalid,
  output logic                  hbm_wsel,      // 0 patterns, 1 constants
  output logic [HBM_AW-1:0]     hbm_waddr,
  output logic [HBM_DW-1:0]     hbm_wdata,
  input  logic                  hbm_wready,
  // Storing to ASIC Emulator
  output logic                  cfg_we,
  output logic [2:0]            cfg_emu,
  output logic [3:0]            cfg_patt,
  output logic [2:0]            cfg_layer,
  output logic [SSID_W-1:0]     cfg_ssid,
  // AM input bus
  output logic                  am_valid,
  output am_word_t              am_word,
  input  logic                  am_ready,
  // Data Organiser input
  output logic   [NLAYERS-1:0]  do_valid,
  output do_in_t [NLAYERS-1:0]  do_word,
  input  logic   [NLAYERS-1:0]  do_ready,
  // Track Fitter output into the Comparator
  input  logic                  trk_valid,
  input  track_t                trk,
  output logic                  trk_ready,
  output logic [15:0]           n_match,
  output logic [15:0]           n_mismatch,
  output logic [15:0]           n_unexpected,
  output logic [15:0]           n_injected
);
  localparam int EXP_BASE = EXT_DEPTH / 2;

  logic [31:0] const_ram [CONST_DEPTH];
  logic [31:0] in_ram    [IN_DEPTH];
  logic [31:0] ext_ram   [EXT_DEPTH];
  always_ff @(posedge clk) if (ram_we) begin
    case (ram_sel)
      2'd0: const_ram[ram_addr[$clog2(CONST_DEPTH)-1:0]] <= ram_wdata;
      2'd1: in_ram[ram_addr[$clog2(IN_DEPTH)-1:0]]       <= ram_wdata;
      default: ext_ram[ram_addr[$clog2(EXT_DEPTH)-1:0]]  <= ram_wdata;
    endcase
  end

  typedef enum logic [3:0] {
    G_IDLE, G_CONST, G_PATT_CFG, G_PATT_HBM, G_EV_INIT, G_EV_RUN,
    G_EV_FAKE, G_EV_EOE, G_EV_END, G_EV_GAP
  } gst_e;
  gst_e gst;

  logic [15:0] cnt, rp, ev, gcnt;
  logic [3:0]  sub;
  logic [15:0] lfsr;
  logic [NLAYERS-1:0] sent;
  logic [HBM_DW-1:0]  chunk;
  logic [31:0] hdr, clw;
  logic        hdr_eoe;
  logic [2:0]  hdr_layer;

  // injector outputs (direct mode) or encoder input
  logic          inj_am_valid, inj_do_valid, enc_in_valid, enc_in_ready;
  am_word_t      inj_am_word;

  assign hdr       = in_ram[rp[$clog2(IN_DEPTH)-1:0]];
  assign clw       = in_ram[rp[$clog2(IN_DEPTH)-1:0] + 1'b1];
  assign hdr_eoe   = hdr[31];
  assign hdr_layer = hdr[30:28];

  // pattern record fields of pattern `cnt`
  logic [$clog2(EXT_DEPTH)-1:0] pbase;
  assign pbase = $clog2(EXT_DEPTH)'(cnt * 16'd10);
  patt_rec_t prec;
  always_comb begin
    prec.sector = ext_ram[pbase + 1'b1][SECTOR_W-1:0];
    for (int l = 0; l < NLAYERS; l++) prec.ssid[l] = ext_ram[pbase + 2 + l][SSID_W-1:0];
  end

  assign busy = (gst != G_IDLE);

  // ---------------- outputs of the control FSM ----------------
  always_comb begin
    hbm_wvalid = 1'b0; hbm_wsel = 1'b0; hbm_waddr = '0; hbm_wdata = '0;
    cfg_we = 1'b0; cfg_emu = '0; cfg_patt = '0; cfg_layer = '0; cfg_ssid = '0;
    inj_am_valid = 1'b0; inj_am_word = '0; inj_do_valid = 1'b0; enc_in_valid = 1'b0;
    case (gst)
      G_CONST: if (sub == 4'd9) begin
        hbm_wvalid = 1'b1; hbm_wsel = 1'b1;
        hbm_waddr  = HBM_AW'(const_ram[$clog2(CONST_DEPTH)'(cnt*16'd9)]) << 5;
        hbm_wdata  = chunk;
      end
      G_PATT_CFG: begin
        cfg_we    = 1'b1;
        cfg_emu   = 3'(ext_ram[pbase][ROAD_W-1:0] / 16);
        cfg_patt  = ext_ram[pbase][3:0];
        cfg_layer = sub[2:0];
        cfg_ssid  = prec.ssid[sub[2:0]];
      end
      G_PATT_HBM: begin
        hbm_wvalid = 1'b1; hbm_wsel = 1'b0;
        hbm_waddr  = PATT_BASE + (HBM_AW'(ext_ram[pbase][ROAD_W-1:0]) << 5);
        hbm_wdata  = HBM_DW'(prec);
      end
      G_EV_INIT: begin
        inj_am_valid = 1'b1;
        inj_am_word  = '{kind: AM_CMD, cmd: CMD_INIT, layer: '0, ssid: '0};
      end
      G_EV_RUN: if (!hdr_eoe) begin
        if (USE_ENCODER) enc_in_valid = 1'b1;
        else begin
          inj_am_valid = !sent[NLAYERS-1];     // sent[7] marks the AM word as sent
          inj_am_word  = '{kind: AM_DATA, cmd: CMD_NONE, layer: hdr_layer, ssid: hdr[SSID_W-1:0]};
          inj_do_valid = !sent[0];             // sent[0] marks the DO word as sent
        end
      end
      G_EV_FAKE: if (!USE_ENCODER) begin
        inj_am_valid = !sent[NLAYERS-1];
        inj_am_word  = '{kind: AM_DATA, cmd: CMD_NONE, layer: sub[2:0], ssid: {1'b1, lfsr[14:0]}};
        inj_do_valid = !sent[0];
      end else enc_in_valid = 1'b1;
      G_EV_EOE: if (USE_ENCODER) enc_in_valid = 1'b1;
      G_EV_END: if (!USE_ENCODER) begin
        inj_am_valid = 1'b1;
        inj_am_word  = '{kind: AM_CMD, cmd: CMD_END, layer: '0, ssid: '0};
      end
      default: ;
    endcase
  end

  // ---------------- direct mode and encoder mode data paths ----------------
  logic                  am_go, do_go;     // injector word accepted
  logic [NLAYERS-1:0]    do_eoe_ok;
  logic                  enc_done;         // encoder mode: whole event forwarded
  cluster_t              fake_cl;
  assign fake_cl = '{y: 16'(lfsr ^ 16'h5a5a), x: lfsr};

  if (!USE_ENCODER) begin : g_direct
    always_comb begin
      am_valid = inj_am_valid;
      am_word  = inj_am_word;
      do_valid = '0;
      do_word  = '0;
      for (int l = 0; l < NLAYERS; l++) begin
        if (gst == G_EV_EOE) begin
          do_valid[l] = !sent[l];
          do_word[l]  = '{eoe: 1'b1, ssid: '0, cl: '0};
        end else if (gst == G_EV_FAKE && 3'(l) == sub[2:0]) begin
          do_valid[l] = inj_do_valid;
          do_word[l]  = '{eoe: 1'b0, ssid: {1'b1, lfsr[14:0]}, cl: fake_cl};
        end else if (gst == G_EV_RUN && 3'(l) == hdr_layer) begin
          do_valid[l] = inj_do_valid;
          do_word[l]  = '{eoe: 1'b0, ssid: hdr[SSID_W-1:0], cl: clw};
        end
      end
    end
    assign am_go        = am_valid && am_ready;
    assign do_go        = |(do_valid & do_ready);
    assign do_eoe_ok    = do_valid & do_ready;
    assign enc_in_ready = 1'b0;
    assign enc_done     = 1'b0;
  end else begin : g_enc
    logic   [NLAYERS-1:0] e_valid, e_ready, e_eoe_seen;
    do_in_t [NLAYERS-1:0] e_word;
    logic [2:0]           rr, sel;
    logic                 sel_ok, fwd, end_pend;
    logic [15:0]          e_drop;
    ssid_encoder u_enc (
      .clk, .rst_n,
      .in_valid(enc_in_valid),
      .in_layer(gst == G_EV_FAKE ? sub[2:0] : hdr_layer),
      .in_cl   (gst == G_EV_FAKE ? fake_cl : cluster_t'(clw)),
      .in_eoe  (gst == G_EV_EOE),
      .in_ready(enc_in_ready),
      .out_valid(e_valid), .out_word(e_word), .out_ready(e_ready), .dropped(e_drop));
    always_comb begin
      sel_ok = 1'b0; sel = '0;
      for (int k = 0; k < NLAYERS; k++) begin
        if (!sel_ok && e_valid[((int'(rr) + k) % NLAYERS)] && !e_eoe_seen[((int'(rr) + k) % NLAYERS)]) begin sel_ok = 1'b1; sel = 3'(((int'(rr) + k) % NLAYERS)); end
      end
      end_pend = (&e_eoe_seen);
      am_valid = 1'b0; am_word = inj_am_word; do_valid = '0; do_word = e_word;
      if (inj_am_valid) am_valid = 1'b1;
      else if (end_pend) begin
        am_valid = 1'b1;
        am_word  = '{kind: AM_CMD, cmd: CMD_END, layer: '0, ssid: '0};
      end else if (sel_ok) begin
        do_valid[sel] = 1'b1;
        am_valid      = !e_word[sel].eoe;
        am_word       = '{kind: AM_DATA, cmd: CMD_NONE, layer: sel, ssid: e_word[sel].ssid};
      end
      fwd = !inj_am_valid && !end_pend && sel_ok && do_ready[sel] && (e_word[sel].eoe || am_ready);
      for (int l = 0; l < NLAYERS; l++) e_ready[l] = fwd && sel == 3'(l);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rr <= '0; e_eoe_seen <= '0;
      end else begin
        if (fwd) begin
          rr <= sel + 1'b1;
          if (e_word[sel].eoe) e_eoe_seen[sel] <= 1'b1;
        end
        if (!inj_am_valid && end_pend && am_ready) e_eoe_seen <= '0;
      end
    end
    assign enc_done  = !inj_am_valid && end_pend && am_ready;
    assign am_go     = inj_am_valid && am_ready;
    assign do_go     = 1'b0;
    assign do_eoe_ok = '0;
  end

  // ---------------- control FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gst <= G_IDLE; cnt <= '0; rp <= '0; ev <= '0; gcnt <= '0; sub <= '0;
      lfsr <= 16'hACE1; sent <= '0; chunk <= '0; n_injected <= '0;
    end else begin
      case (gst)
        G_IDLE: begin
          sub <= '0; cnt <= '0; sent <= '0;
          if (start_init) gst <= (n_const_chunks != 0) ? G_CONST : G_PATT_CFG;
          else if (start_inject) begin rp <= '0; ev <= '0; gst <= G_EV_INIT; end
        end
        // Storing to HBM: constants
        G_CONST: begin
          if (sub != 4'd9) begin
            if (sub != 0)
              chunk[(sub-1)*32 +: 32] <= const_ram[$clog2(CONST_DEPTH)'(cnt*16'd9 + 16'(sub))];
            sub <= sub + 1'b1;
            if (sub == 4'd8) chunk[7*32 +: 32] <= const_ram[$clog2(CONST_DEPTH)'(cnt*16'd9 + 16'd8)];
          end else if (hbm_wready) begin
            sub <= '0;
            cnt <= cnt + 1'b1;
            if (cnt + 1'b1 == n_const_chunks) begin cnt <= '0; gst <= G_PATT_CFG; end
          end
        end
        // Storing to ASIC Emulator, then Storing to HBM: patterns
        G_PATT_CFG: begin
          if (n_patterns == 0) gst <= G_IDLE;
          else if (sub == 4'd7) begin sub <= '0; gst <= G_PATT_HBM; end
          else sub <= sub + 1'b1;
        end
        G_PATT_HBM: if (hbm_wready) begin
          cnt <= cnt + 1'b1;
          gst <= (cnt + 1'b1 == n_patterns) ? G_IDLE : G_PATT_CFG;
        end
        // injection
        G_EV_INIT: if (am_go) begin
          gst <= (n_events == 0) ? G_IDLE : G_EV_RUN; sent <= '0;
        end
        G_EV_RUN: begin
          if (hdr_eoe) begin
            rp <= rp + 1'b1; sub <= '0; sent <= '0;
            gst <= fake_en ? G_EV_FAKE : G_EV_EOE;
          end else if (USE_ENCODER) begin
            if (enc_in_ready) rp <= rp + 16'd2;
          end else begin
            logic a, d;
            a = sent[NLAYERS-1] || am_go;
            d = sent[0] || do_go;
            if (a && d) begin rp <= rp + 16'd2; sent <= '0; end
            else begin sent[NLAYERS-1] <= a; sent[0] <= d; end
          end
        end
        G_EV_FAKE: begin
          logic done1;
          if (USE_ENCODER) done1 = enc_in_ready;
          else begin
            logic a, d;
            a = sent[NLAYERS-1] || am_go;
            d = sent[0] || do_go;
            done1 = a && d;
            if (!done1) begin sent[NLAYERS-1] <= a; sent[0] <= d; end
          end
          if (done1) begin
            sent <= '0;
            lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
            sub  <= sub + 1'b1;
            if (sub == 4'(NLAYERS-1)) begin sub <= '0; gst <= G_EV_EOE; end
          end
        end
        G_EV_EOE: begin
          if (USE_ENCODER) begin
            if (enc_in_ready) gst <= G_EV_END;
          end else begin
            sent <= sent | do_eoe_ok;
            if ((sent | do_eoe_ok) == '1) begin sent <= '0; gst <= G_EV_END; end
          end
        end
        G_EV_END: begin
          if ((!USE_ENCODER && am_go) || (USE_ENCODER && enc_done)) begin
            ev <= ev + 1'b1; gcnt <= '0; n_injected <= n_injected + 1'b1;
            gst <= G_EV_GAP;
          end
        end
        G_EV_GAP: begin
          gcnt <= gcnt + 1'b1;
          if (gcnt >= gap) gst <= (ev == n_events) ? G_IDLE : G_EV_INIT;
        end
        default: gst <= G_IDLE;
      endcase
    end
  end

  // ---------------- Comparator ----------------
  typedef enum logic [1:0] {C_IDLE, C_SEARCH, C_DONE} cst_e;
  cst_e        cst;
  logic [15:0] ci;
  logic        road_seen, equal_seen;
  track_t      ct;
  logic [$clog2(EXT_DEPTH)-1:0] eb;
  assign eb        = $clog2(EXT_DEPTH)'(EXP_BASE) + $clog2(EXT_DEPTH)'(ci * 16'd4);
  assign trk_ready = (cst == C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst <= C_IDLE; ci <= '0; road_seen <= 1'b0; equal_seen <= 1'b0; ct <= '0;
      n_match <= '0; n_mismatch <= '0; n_unexpected <= '0;
    end else case (cst)
      C_IDLE: if (trk_valid) begin
        ct <= trk; ci <= '0; road_seen <= 1'b0; equal_seen <= 1'b0;
        cst <= (n_expected == 0) ? C_DONE : C_SEARCH;
      end
      C_SEARCH: begin
        if (ext_ram[eb][ROAD_W-1:0] == ct.road) begin
          road_seen <= 1'b1;
          if (ext_ram[eb+1] == {ct.chi2, ct.par[0]} && ext_ram[eb+2] == {ct.par[1], ct.par[2]} &&
              ext_ram[eb+3] == {ct.par[3], ct.par[4]}) equal_seen <= 1'b1;
        end
        ci <= ci + 1'b1;
        if (ci + 1'b1 == n_expected) cst <= C_DONE;
      end
      C_DONE: begin
        if (equal_seen)     n_match      <= n_match + 1'b1;
        else if (road_seen) n_mismatch   <= n_mismatch + 1'b1;
        else                n_unexpected <= n_unexpected + 1'b1;
        cst <= C_IDLE;
      end
      default: cst <= C_IDLE;
    endcase
  end
endmodule
