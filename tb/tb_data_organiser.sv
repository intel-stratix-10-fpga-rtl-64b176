// tb_data_organiser: 12 random events are streamed into the eight layer
// queues back to back (each layer: up to 6 distinct SSIDs, 1..6 clusters
// each, one run per SSID).  For each event 1..12 roads are sent; the test
// bench stands in for the HBM and returns the pattern record of each road
// after a random delay and in random order.  A pattern's SSID on a layer is
// one of the event's SSIDs, an SSID of the previous event (the stale-pointer
// case) or a random one.  Every road delivered to the Track Fitter side must
// carry min(count, MAXCL) clusters per layer, in arrival order, for SSIDs of
// the current event and none otherwise.  The event counter must reach 12,
// and the stale-pointer case must have occurred.  Timing: a road whose eight
// SSIDs all belong to the current event must be offered kmax + 2 cycles
// after its pattern is accepted (kmax = largest cluster count, at most
// MAXCL), any other road within MAXCL + 2 cycles.
module tb_data_organiser;
  import prm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NEV = 12;

  logic [NLAYERS-1:0] cl_valid, cl_ready;
  do_in_t [NLAYERS-1:0] cl_word;
  logic road_valid, road_ready, hreq_valid, hreq_ready, hrsp_valid, hrsp_ready, tf_valid, tf_ready;
  road_word_t road_word;
  logic [ROAD_W-1:0] hreq_road;
  logic [7:0] hreq_id, hrsp_id;
  patt_rec_t hrsp_patt;
  do_road_t tf_road;
  logic [15:0] events, overflows;

  data_organiser dut (.*);

  // event contents
  int nss[NEV][NLAYERS];
  int ss[NEV][NLAYERS][6];
  int ncl[NEV][NLAYERS][6];
  int clv[NEV][NLAYERS][6][6];
  int nroads[NEV];
  patt_rec_t patt[NEV][12];
  int n_stale_case = 0;

  function automatic bit in_event(int e, int l, int s, output int idx);
    for (int i = 0; i < nss[e][l]; i++) if (ss[e][l][i] == s) begin idx = i; return 1; end
    idx = -1; return 0;
  endfunction

  initial begin
    for (int e = 0; e < NEV; e++) begin
      for (int l = 0; l < NLAYERS; l++) begin
        nss[e][l] = (e % 2 == 0) ? $urandom_range(1, 6) : $urandom_range(0, 6);
        for (int i = 0; i < nss[e][l]; i++) begin
          int s, d;
          do s = $urandom_range(0, 40); while (in_event(e, l, s, d));
          ss[e][l][i] = s;
          ncl[e][l][i] = $urandom_range(1, 6);
          for (int c = 0; c < 6; c++) clv[e][l][i][c] = $urandom;
        end
      end
      nroads[e] = $urandom_range(1, 12);
      for (int r = 0; r < nroads[e]; r++) begin
        patt[e][r].sector = 16'($urandom);
        for (int l = 0; l < NLAYERS; l++) begin
          int ch, d;
          ch = (r % 3 == 0) ? 0 : $urandom_range(0, 3);   // every third road: all layers from this event
          if (ch < 2 && nss[e][l] > 0) patt[e][r].ssid[l] = 16'(ss[e][l][$urandom_range(0, nss[e][l]-1)]);
          else if (ch == 2 && e > 0 && nss[e-1][l] > 0) patt[e][r].ssid[l] = 16'(ss[e-1][l][$urandom_range(0, nss[e-1][l]-1)]);
          else patt[e][r].ssid[l] = 16'($urandom_range(0, 40));
          if (e > 0 && !in_event(e, l, int'(patt[e][r].ssid[l]), d) && in_event(e-1, l, int'(patt[e][r].ssid[l]), d))
            n_stale_case++;
        end
      end
    end
  end

  // cluster feeders, one per layer
  for (genvar l = 0; l < NLAYERS; l++) begin : g_feed
    initial begin
      cl_valid[l] = 0; cl_word[l] = '0;
      wait (rst_n);
      for (int e = 0; e < NEV; e++) begin
        for (int i = 0; i < nss[e][l]; i++)
          for (int c = 0; c < ncl[e][l][i]; c++) begin
            @(negedge clk);
            cl_valid[l] = 1; cl_word[l].eoe = 0; cl_word[l].ssid = 16'(ss[e][l][i]);
            cl_word[l].cl = clv[e][l][i][c];
            do @(posedge clk); while (!cl_ready[l]);
            @(negedge clk) cl_valid[l] = 0;
          end
        @(negedge clk);
        cl_valid[l] = 1; cl_word[l] = '0; cl_word[l].eoe = 1;
        do @(posedge clk); while (!cl_ready[l]);
        @(negedge clk) cl_valid[l] = 0;
      end
    end
  end

  // road feeder: road number = e*16 + r
  initial begin
    road_valid = 0; road_word = '0;
    wait (rst_n);
    for (int e = 0; e < NEV; e++) begin
      for (int r = 0; r <= nroads[e]; r++) begin
        @(negedge clk);
        road_valid = 1;
        road_word.eoe  = (r == nroads[e]);
        road_word.road = (r == nroads[e]) ? '0 : ROAD_W'(e*16 + r);
        do @(posedge clk); while (!road_ready);
        @(negedge clk) road_valid = 0;
      end
    end
  end

  // HBM stand-in: collect requests, answer in random order after a delay
  int q_id[$], q_road[$];
  always @(negedge clk) hreq_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && hreq_valid && hreq_ready) begin
    q_id.push_back(int'(hreq_id)); q_road.push_back(int'(hreq_road));
  end
  initial begin
    hrsp_valid = 0; hrsp_id = 0; hrsp_patt = '0;
    forever begin
      @(negedge clk);
      if (q_id.size() > 0 && $urandom_range(0, 2) == 0) begin
        int j, rd;
        j = $urandom_range(0, q_id.size() - 1);
        rd = q_road[j];
        hrsp_valid = 1; hrsp_id = 8'(q_id[j]); hrsp_patt = patt[rd / 16][rd % 16];
        q_id.delete(j); q_road.delete(j);
        do @(posedge clk); while (!hrsp_ready);
        @(negedge clk) hrsp_valid = 0;
      end
    end
  end

  // lookup latency
  int t_acc = 0, cyc = 0, n_lat = 0;
  patt_rec_t p_acc;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && hrsp_valid && hrsp_ready) begin t_acc = cyc; p_acc = hrsp_patt; end
    if (rst_n && tf_valid && !dut_tf_valid_q) begin
      int e, kmax, idx;
      bit all_hit;
      e = int'(tf_road.road) / 16;
      all_hit = 1; kmax = 1;
      for (int l = 0; l < NLAYERS; l++)
        if (in_event(e, l, int'(p_acc.ssid[l]), idx)) begin
          if (ncl[e][l][idx] > kmax) kmax = (ncl[e][l][idx] > MAXCL) ? MAXCL : ncl[e][l][idx];
        end else all_hit = 0;
      checks++;
      if (all_hit ? (cyc - t_acc != kmax + 2) : (cyc - t_acc > MAXCL + 2)) begin
        failures++; $display("road %0d offered after %0d cycles", tf_road.road, cyc - t_acc);
      end
      if (all_hit) n_lat++;
    end
  end
  logic dut_tf_valid_q;
  always @(posedge clk) dut_tf_valid_q <= rst_n && tf_valid && !tf_ready;

  // checker
  int nout = 0, total_roads = 0, n_hits = 0, n_capped = 0;
  always @(negedge clk) tf_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && tf_valid && tf_ready) begin
    int e, r, idx;
    bit ok;
    e = int'(tf_road.road) / 16; r = int'(tf_road.road) % 16;
    ok = (e < NEV) && (r < nroads[e]) && tf_road.sector == patt[e][r].sector;
    if (ok)
      for (int l = 0; l < NLAYERS; l++) begin
        if (in_event(e, l, int'(patt[e][r].ssid[l]), idx)) begin
          int n;
          n = ncl[e][l][idx] > MAXCL ? MAXCL : ncl[e][l][idx];
          if (ncl[e][l][idx] > MAXCL) n_capped++;
          n_hits++;
          if (int'(tf_road.ncl[l]) != n) ok = 0;
          for (int c = 0; c < n; c++) if (tf_road.cl[l][c] != 32'(clv[e][l][idx][c])) ok = 0;
        end else if (tf_road.ncl[l] != 0) ok = 0;
      end
    checks++;
    if (!ok) begin failures++; $display("road %0d wrong", tf_road.road); end
    nout++;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int e = 0; e < NEV; e++) total_roads += nroads[e];
    wait (events == 16'(NEV));
    repeat (10) @(posedge clk);
    checks++; if (nout != total_roads) begin failures++; $display("roads %0d of %0d", nout, total_roads); end
    checks++; if (overflows != 0) failures++;
    checks++; if (n_stale_case == 0 || n_hits == 0 || n_capped == 0 || n_lat == 0) failures++;
    $display("roads %0d, layer hits %0d, capped %0d, stale-pointer cases %0d", nout, n_hits, n_capped, n_stale_case);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
