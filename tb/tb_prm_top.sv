// tb_prm_top: end-to-end test of the PRM unit at its full size (no
// parameter overrides), driven only through its external interfaces.
//
// Set-up: eight HBM pseudo-channel models (2 on the Data Organiser ports,
// 6 on the Track Fitter ports) take the HBM write port by hbm_wsel, an APB
// slave model stands for the HBM controller and the converter streams are
// driven by small Ethernet and IPbus-core stand-ins.  Everything else is
// done with IPbus register accesses, as from the control PC: the constant
// sets of 8 sectors (96 chunks) and 48 patterns (roadIDs spread over all
// five emulators) are loaded and stored (start_init), then two test vector
// runs are injected:
//   run A: 40 events with one track each (the "1 track per event" vector),
//   run B: 3 events with 16 tracks each (the "16 tracks per event" vector),
// with fake clusters on.  A quarter of the tracks carry a second cluster on
// one layer, so the fit has more than one candidate per road.  The test
// bench fits every candidate with the reference arithmetic, sets the chi2
// cut at the 70th percentile and writes the surviving tracks to the
// Comparator's expected list.  After each run the status counters are read
// over IPbus: matches must equal the expected tracks, with no mismatch and
// no unexpected track, and the candidate and pass counters must equal the
// reference.
//
// Mechanism counters (each must be non-zero): chi2 rejections, roads per
// event > 1, candidates per road > 1, fake clusters injected, HBM refresh
// stalls, lane waits for constants, Data Organiser queueing the next event
// during a read phase, both DO pseudo-channels and all six TF
// pseudo-channels used, an APB access and both converter directions.  At the
// end the two HBM read-latency histograms are read over IPbus: their totals
// must equal the reads the channel models served, no read may be faster than
// the models' 20-cycle latency, refresh stalls must show as a tail at 40
// cycles or more, and a write to the window must clear them.
module tb_prm_top;
  import prm_pkg::*;
  import prm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NSEC = 8, NPAT = 48;

  // ---------------- DUT ----------------
  logic ipb_strobe, ipb_write, ipb_ack, ipb_err;
  logic [31:0] ipb_addr, ipb_wdata, ipb_rdata;
  logic apb_psel, apb_penable, apb_pwrite, apb_pready, apb_pslverr;
  logic [15:0] apb_paddr;
  logic [31:0] apb_pwdata, apb_prdata;
  logic mac_rx_valid, mac_rx_ready, mac_rx_sop, mac_rx_eop;
  logic [31:0] mac_rx_data, ipc_rx_tdata, ipc_tx_tdata, mac_tx_data;
  logic [1:0] mac_rx_empty, mac_tx_empty;
  logic ipc_rx_tvalid, ipc_rx_tready, ipc_rx_tlast, ipc_tx_tvalid, ipc_tx_tready, ipc_tx_tlast;
  logic [3:0] ipc_rx_tkeep, ipc_tx_tkeep;
  logic mac_tx_valid, mac_tx_ready, mac_tx_sop, mac_tx_eop;
  logic hbm_wvalid, hbm_wsel, hbm_wready;
  logic [HBM_AW-1:0] hbm_waddr;
  logic [HBM_DW-1:0] hbm_wdata;
  logic [1:0] do_ar_valid, do_ar_ready, do_r_valid, do_r_ready;
  axi_ar_t [1:0] do_ar;
  axi_r_t [1:0] do_r;
  logic [5:0] tf_ar_valid, tf_ar_ready, tf_r_valid, tf_r_ready;
  axi_ar_t [5:0] tf_ar;
  axi_r_t [5:0] tf_r;
  logic busy;

  prm_top dut (.*);

  // ---------------- HBM models ----------------
  int do_reads[2], do_stall[2], tf_reads[6], tf_stall[6];
  assign hbm_wready = 1'b1;
  for (genvar c = 0; c < 2; c++) begin : g_do_pc
    hbm_pc_model u_m (.clk, .rst_n, .ar_valid(do_ar_valid[c]), .ar(do_ar[c]), .ar_ready(do_ar_ready[c]),
      .r_valid(do_r_valid[c]), .r(do_r[c]), .r_ready(do_r_ready[c]),
      .we(hbm_wvalid && !hbm_wsel), .waddr(hbm_waddr), .wdata(hbm_wdata),
      .n_reads(do_reads[c]), .n_refresh_stalls(do_stall[c]));
  end
  for (genvar c = 0; c < 6; c++) begin : g_tf_pc
    hbm_pc_model u_m (.clk, .rst_n, .ar_valid(tf_ar_valid[c]), .ar(tf_ar[c]), .ar_ready(tf_ar_ready[c]),
      .r_valid(tf_r_valid[c]), .r(tf_r[c]), .r_ready(tf_r_ready[c]),
      .we(hbm_wvalid && hbm_wsel), .waddr(hbm_waddr), .wdata(hbm_wdata),
      .n_reads(tf_reads[c]), .n_refresh_stalls(tf_stall[c]));
  end

  // ---------------- APB slave (HBM controller registers) ----------------
  logic [31:0] apb_mem[64];
  int n_apb = 0;
  assign apb_pready  = 1'b1;
  assign apb_pslverr = 1'b0;
  assign apb_prdata  = apb_mem[apb_paddr[7:2]];
  always @(posedge clk) if (rst_n && apb_psel && apb_penable) begin
    n_apb++;
    if (apb_pwrite) apb_mem[apb_paddr[7:2]] = apb_pwdata;
  end

  // ---------------- Ethernet / IPbus-core stream stand-ins ----------------
  int n_rx_bytes = 0, n_tx_bytes = 0;
  assign ipc_rx_tready = 1'b1;
  assign mac_tx_ready  = 1'b1;
  always @(posedge clk) begin
    if (rst_n && ipc_rx_tvalid) begin
      for (int b = 0; b < 4; b++) if (ipc_rx_tkeep[b]) begin
        checks++; if (ipc_rx_tdata[b*8 +: 8] != 8'(8'h30 + n_rx_bytes)) failures++;
        n_rx_bytes++;
      end
    end
    if (rst_n && mac_tx_valid) begin
      for (int b = 0; b < (mac_tx_eop ? 4 - int'(mac_tx_empty) : 4); b++) begin
        checks++; if (mac_tx_data[(3-b)*8 +: 8] != 8'(8'h50 + n_tx_bytes)) failures++;
        n_tx_bytes++;
      end
    end
  end

  // ---------------- IPbus master ----------------
  task automatic ipb_wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    ipb_strobe = 1; ipb_write = 1; ipb_addr = a; ipb_wdata = d;
    do @(posedge clk); while (!ipb_ack && !ipb_err);
    if (ipb_err) begin failures++; $display("IPbus write error at %h", a); end
    @(negedge clk) ipb_strobe = 0;
    @(negedge clk);
  endtask
  task automatic ipb_rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    ipb_strobe = 1; ipb_write = 0; ipb_addr = a; ipb_wdata = 0;
    do @(posedge clk); while (!ipb_ack && !ipb_err);
    d = ipb_rdata;
    if (ipb_err) begin failures++; $display("IPbus read error at %h", a); end
    @(negedge clk) ipb_strobe = 0;
    @(negedge clk);
  endtask
  task automatic ram_load(input int sel, input int addr, input logic [31:0] w[$]);
    ipb_wr(32'h09, {14'd0, 2'(sel), 16'(addr)});
    foreach (w[i]) ipb_wr(32'h0A, w[i]);
  endtask

  // ---------------- reference data ----------------
  int S[NSEC][NDOF][NCOO], H[NSEC][NDOF], C[NSEC][NPAR][NCOO], Q[NSEC][NPAR];
  int proad[NPAT], psec[NPAT], pss[NPAT][NLAYERS];

  // one road of an event: clusters per layer
  typedef struct {
    int p;
    int ncl[NLAYERS];
    logic [31:0] cl[NLAYERS][2];
  } troad_t;
  troad_t runs[2][$];          // all roads, in event order
  int ev_nroads[2][$];
  logic [63:0] all_chi[$];

  function automatic void fit(input troad_t t, input logic [63:0] cut, inout logic [31:0] ex[$],
                              inout int ncand, inout int npass, input bit collect);
    int sec, tot;
    sec = psec[t.p];
    tot = 1;
    for (int l = 0; l < NLAYERS; l++) tot *= t.ncl[l];
    for (int n = 0; n < tot; n++) begin
      logic [NLAYERS-1:0][31:0] cl;
      xvec_t x;
      logic [63:0] c2;
      logic [15:0] p[NPAR];
      int cr[NCOO];
      int m;
      m = n;
      for (int l = 0; l < NLAYERS; l++) begin cl[l] = t.cl[l][m % t.ncl[l]]; m /= t.ncl[l]; end
      x = ref_coords(cl);
      c2 = ref_chi2(x, S[sec], H[sec]);
      ncand++;
      if (collect) all_chi.push_back(c2);
      else if (c2 <= cut) begin
        npass++;
        for (int i = 0; i < NPAR; i++) begin
          for (int j = 0; j < NCOO; j++) cr[j] = C[sec][i][j];
          p[i] = ref_par(x, cr, Q[sec][i]);
        end
        ex.push_back(32'(proad[t.p]));
        ex.push_back({ref_chi16(c2), p[0]});
        ex.push_back({p[1], p[2]});
        ex.push_back({p[3], p[4]});
      end
    end
  endfunction

  // ---------------- mechanism monitors ----------------
  int n_fake = 0, n_multi_road_ev = 0, n_queue_next = 0, roads_this_ev = 0, n_multi_cand = 0;
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NLAYERS; l++)
      if (dut.u_do.cl_valid[l] && dut.u_do.cl_ready[l]) begin
        if (!dut.u_do.cl_word[l].eoe && dut.u_do.cl_word[l].ssid[15]) n_fake++;
        if (dut.u_do.phase == 1'b1) n_queue_next++;
      end
    if (dut.u_am.road_valid && dut.u_am.road_ready) begin
      if (dut.u_am.road_word.eoe) begin
        if (roads_this_ev > 1) n_multi_road_ev++;
        roads_this_ev = 0;
      end else roads_this_ev++;
    end
    if (dut.u_do.tf_valid && dut.u_do.tf_ready) begin
      int pr;
      pr = 1;
      for (int l = 0; l < NLAYERS; l++) pr *= int'(dut.u_do.tf_road.ncl[l]);
      if (pr > 1) n_multi_cand++;
    end
  end

  int cyc = 0, t_last_track = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.trk_valid && dut.trk_ready) t_last_track = cyc;
  end

  initial begin
    #40000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w[$], ex[$], d;
    logic [63:0] cut;
    int ncand_tot, npass_tot, ncand_ref, npass_ref;
    ipb_strobe = 0; ipb_write = 0; ipb_addr = 0; ipb_wdata = 0;
    mac_rx_valid = 0; mac_rx_data = 0; mac_rx_sop = 0; mac_rx_eop = 0; mac_rx_empty = 0;
    ipc_tx_tvalid = 0; ipc_tx_tdata = 0; ipc_tx_tkeep = 0; ipc_tx_tlast = 0;
    for (int i = 0; i < 64; i++) apb_mem[i] = 32'h1000 + i;

    // constants and patterns
    for (int s = 0; s < NSEC; s++) begin
      for (int i = 0; i < NDOF; i++) begin
        for (int j = 0; j < NCOO; j++) S[s][i][j] = $urandom_range(0, 8192) - 4096;
        H[s][i] = $urandom_range(0, 2097152) - 1048576;
      end
      for (int i = 0; i < NPAR; i++) begin
        for (int j = 0; j < NCOO; j++) C[s][i][j] = $urandom_range(0, 131072) - 65536;
        Q[s][i] = $urandom_range(0, 2097152) - 1048576;
      end
    end
    for (int p = 0; p < NPAT; p++) begin
      proad[p] = (p % 5) * 16 + p / 5;
      psec[p]  = p % NSEC;
      for (int l = 0; l < NLAYERS; l++) pss[p][l] = p * 512 + l * 64 + $urandom_range(0, 63);
    end
    // events: run 0 = 40 x 1 track, run 1 = 3 x 16 tracks
    for (int r = 0; r < 2; r++) begin
      int nev, ntr;
      nev = (r == 0) ? 40 : 3;
      ntr = (r == 0) ? 1 : 16;
      for (int e = 0; e < nev; e++) begin
        ev_nroads[r].push_back(ntr);
        for (int k = 0; k < ntr; k++) begin
          troad_t t;
          int two;
          t.p = (r == 0) ? e : k * 3 + e;
          two = ($urandom_range(0, 3) == 0) ? $urandom_range(0, NLAYERS-1) : -1;
          for (int l = 0; l < NLAYERS; l++) begin
            t.ncl[l] = (l == two) ? 2 : 1;
            for (int c = 0; c < 2; c++) t.cl[l][c] = {16'($urandom_range(0, 400) - 200), 16'($urandom_range(0, 400) - 200)};
          end
          runs[r].push_back(t);
        end
      end
    end
    // chi2 cut at the 70th percentile of all candidates
    begin
      int nc, np;
      nc = 0; np = 0;
      for (int r = 0; r < 2; r++) foreach (runs[r][i]) fit(runs[r][i], 0, ex, nc, np, 1);
      all_chi.sort();
      cut = all_chi[all_chi.size() * 7 / 10];
    end

    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // converter: one packet each way
    fork
      begin
        for (int o = 0; o < 10; o += 4) begin
          @(negedge clk);
          mac_rx_valid = 1; mac_rx_sop = (o == 0); mac_rx_eop = (o + 4 >= 10);
          mac_rx_empty = mac_rx_eop ? 2'(4 - (10 - o)) : 2'd0;
          for (int b = 0; b < 4; b++) mac_rx_data[(3-b)*8 +: 8] = 8'(8'h30 + o + b);
          do @(posedge clk); while (!mac_rx_ready);
        end
        @(negedge clk) mac_rx_valid = 0;
      end
      begin
        for (int o = 0; o < 7; o += 4) begin
          @(negedge clk);
          ipc_tx_tvalid = 1; ipc_tx_tlast = (o + 4 >= 7);
          ipc_tx_tkeep = ipc_tx_tlast ? 4'b0111 : 4'b1111;
          for (int b = 0; b < 4; b++) ipc_tx_tdata[b*8 +: 8] = 8'(8'h50 + o + b);
          do @(posedge clk); while (!ipc_tx_tready);
        end
        @(negedge clk) ipc_tx_tvalid = 0;
      end
    join

    // APB: HBM controller register write and read back
    ipb_wr(32'h1003, 32'hCAFE_0003);
    ipb_rd(32'h1003, d);
    checks++; if (d != 32'hCAFE_0003) failures++;
    ipb_rd(32'h1005, d);
    checks++; if (d != 32'h1005) failures++;

    // configuration and RAM loading
    ipb_wr(32'h07, cut[31:0]);
    ipb_wr(32'h08, cut[63:32]);
    w.delete();
    for (int s = 0; s < NSEC; s++)
      for (int kind = 0; kind < 2; kind++) begin
        int nw, vals[64];
        nw = kind ? PAR_WORDS : CHI_WORDS;
        if (kind == 0) begin
          for (int i = 0; i < NDOF; i++) begin
            for (int j = 0; j < NCOO; j++) vals[i*NCOO+j] = S[s][i][j];
            vals[NDOF*NCOO+i] = H[s][i];
          end
        end else begin
          for (int i = 0; i < NPAR; i++) begin
            for (int j = 0; j < NCOO; j++) vals[i*NCOO+j] = C[s][i][j];
            vals[NPAR*NCOO+i] = Q[s][i];
          end
        end
        for (int k = 0; k * WPC < nw; k++) begin
          w.push_back(32'((CONST_BASE + HBM_AW'(s*512 + kind*256 + k*32)) >> 5));
          for (int i = 0; i < WPC; i++) w.push_back((k*WPC + i < nw) ? 32'(vals[k*WPC + i]) : 32'd0);
        end
      end
    ram_load(0, 0, w);
    ipb_wr(32'h02, w.size() / 9);
    w.delete();
    for (int p = 0; p < NPAT; p++) begin
      w.push_back(proad[p]); w.push_back(psec[p]);
      for (int l = 0; l < NLAYERS; l++) w.push_back(pss[p][l]);
    end
    ram_load(2, 0, w);
    ipb_wr(32'h03, NPAT);
    ipb_wr(32'h00, 32'h1);            // start_init
    do ipb_rd(32'h01, d); while (d[0]);

    ncand_tot = 0; npass_tot = 0;
    for (int r = 0; r < 2; r++) begin
      int nexp, ri, t0;
      // expected tracks and input RAM
      ex.delete();
      ncand_ref = 0; npass_ref = 0;
      foreach (runs[r][i]) fit(runs[r][i], cut, ex, ncand_ref, npass_ref, 0);
      nexp = ex.size() / 4;
      ram_load(2, 512, ex);
      w.delete();
      ri = 0;
      foreach (ev_nroads[r][e]) begin
        for (int k = 0; k < ev_nroads[r][e]; k++, ri++)
          for (int l = 0; l < NLAYERS; l++)
            for (int c = 0; c < runs[r][ri].ncl[l]; c++) begin
              w.push_back({1'b0, 3'(l), 12'd0, 16'(pss[runs[r][ri].p][l])});
              w.push_back(runs[r][ri].cl[l][c]);
            end
        w.push_back(32'h8000_0000);
      end
      ram_load(1, 0, w);
      ipb_wr(32'h04, nexp);
      ipb_wr(32'h05, ev_nroads[r].size());
      ipb_wr(32'h06, 20);
      t0 = cyc;
      ipb_wr(32'h00, 32'h6);          // start_inject with fake clusters
      // wait for all expected tracks
      do begin
        repeat (200) @(posedge clk);
        ipb_rd(32'h10, d);
      end while (int'(d) < npass_tot + npass_ref);
      $display("run %0d: %0d events, %0d tracks expected, %0d cycles from start to last track",
               r, ev_nroads[r].size(), nexp, t_last_track - t0);
      repeat (3000) @(posedge clk);
      ncand_tot += ncand_ref; npass_tot += npass_ref;
      ipb_rd(32'h10, d); checks++; if (int'(d) != npass_tot) begin failures++; $display("matches %0d exp %0d", d, npass_tot); end
      ipb_rd(32'h11, d); checks++; if (d != 0) begin failures++; $display("mismatches %0d", d); end
      ipb_rd(32'h12, d); checks++; if (d != 0) begin failures++; $display("unexpected %0d", d); end
      ipb_rd(32'h16, d); checks++; if (int'(d) != ncand_tot) begin failures++; $display("candidates %0d exp %0d", d, ncand_tot); end
      ipb_rd(32'h17, d); checks++; if (int'(d) != npass_tot) failures++;
      ipb_rd(32'h15, d); checks++; if (d != 0) failures++;
    end
    ipb_rd(32'h14, d); checks++; if (d != 43) begin failures++; $display("DO events %0d", d); end
    ipb_rd(32'h13, d); checks++; if (d != 43) failures++;

    // mechanisms
    begin
      int lane_wait, stalls, used_tf;
      ipb_rd(32'h18, d); lane_wait = int'(d);
      stalls = do_stall[0] + do_stall[1];
      used_tf = 0;
      for (int c = 0; c < 6; c++) begin stalls += tf_stall[c]; if (tf_reads[c] > 0) used_tf++; end
      $display("mechanisms: chi2 rejections %0d, multi-road events %0d, multi-candidate roads %0d, fake clusters %0d,",
               ncand_tot - npass_tot, n_multi_road_ev, n_multi_cand, n_fake);
      $display("  refresh stalls %0d, lane wait cycles %0d, next-event queueing %0d, DO channels %0d/%0d, TF channels used %0d, APB %0d, converter %0d/%0d",
               stalls, lane_wait, n_queue_next, do_reads[0], do_reads[1], used_tf, n_apb, n_rx_bytes, n_tx_bytes);
      checks++; if (ncand_tot - npass_tot <= 0) failures++;
      checks++; if (n_multi_road_ev == 0) failures++;
      checks++; if (n_multi_cand == 0) failures++;
      checks++; if (n_fake != 8 * 43) failures++;
      checks++; if (stalls == 0) failures++;
      checks++; if (lane_wait == 0) failures++;
      checks++; if (n_queue_next == 0) failures++;
      checks++; if (do_reads[0] == 0 || do_reads[1] == 0) failures++;
      checks++; if (used_tf != 6) failures++;
      checks++; if (n_apb != 3) failures++;
      checks++; if (n_rx_bytes != 10 || n_tx_bytes != 7) failures++;
    end

    // read-latency histograms: every read counted once, none faster than the
    // model's fixed latency, refresh stalls visible as a slow tail; a write
    // clears them
    begin
      int sum_do, sum_tf, fast, slow_do, slow_tf, hbm_tot;
      sum_do = 0; sum_tf = 0; fast = 0; slow_do = 0; slow_tf = 0;
      for (int b = 0; b < 16; b++) begin
        ipb_rd(32'h2000 + b, d); sum_do += int'(d);
        if (b < 5) fast += int'(d);
        if (b >= 10) slow_do += int'(d);
        ipb_rd(32'h2010 + b, d); sum_tf += int'(d);
        if (b < 5) fast += int'(d);
        if (b >= 10) slow_tf += int'(d);
      end
      hbm_tot = 0;
      for (int c = 0; c < 6; c++) hbm_tot += tf_reads[c];
      $display("latency histograms: DO %0d reads (%0d at >= 40 cycles), TF %0d reads (%0d at >= 40 cycles)",
               sum_do, slow_do, sum_tf, slow_tf);
      checks++; if (sum_do != do_reads[0] + do_reads[1]) begin failures++; $display("DO histogram %0d reads %0d", sum_do, do_reads[0] + do_reads[1]); end
      checks++; if (sum_tf != hbm_tot) begin failures++; $display("TF histogram %0d reads %0d", sum_tf, hbm_tot); end
      checks++; if (fast != 0) begin failures++; $display("%0d reads faster than 20 cycles", fast); end
      checks++; if (slow_do == 0 || slow_tf == 0) failures++;
      ipb_wr(32'h2000, 0);
      ipb_rd(32'h2000 + 6, d); checks++; if (d != 0) failures++;
      ipb_rd(32'h2010 + 6, d); checks++; if (d != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
