// tb_track_fitter: the Track Fitter with hbm2tf and six pseudo-channel
// models.  Random chi2 and parameter constant sets are written for sectors
// 0..7; 40 random roads (1..3 clusters per layer, a few with an empty
// layer) are fitted.  The test bench computes every candidate's chi2 with
// the reference arithmetic and sets the cut at the median, so about half of
// the candidates must be rejected.  Every output track must equal one
// expected track (road, clusters, 16-bit chi2 and the five parameters) and
// every expected track must appear exactly once; the candidate and pass
// counters must match the reference.
module tb_track_fitter;
  import prm_pkg::*;
  import prm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NSEC = 8, NROAD = 40;

  logic [63:0] thresh;
  logic road_valid, road_ready, hreq_valid, hreq_kind, hreq_ready, ck_valid, ck_ready, trk_valid, trk_ready;
  do_road_t road;
  logic [SECTOR_W-1:0] hreq_sector;
  logic [TAG_W-1:0] hreq_tag;
  chunk_t ck;
  track_t trk;
  logic [31:0] n_cand, n_pass, n_wait;
  logic [5:0] ar_valid, ar_ready, r_valid, r_ready;
  axi_ar_t [5:0] ar;
  axi_r_t [5:0] r;
  logic we; logic [HBM_AW-1:0] waddr; logic [HBM_DW-1:0] wdata;
  int n_reads[6], n_stall[6];

  track_fitter dut (.clk, .rst_n, .thresh, .road_valid, .road, .road_ready,
    .hreq_valid, .hreq_sector, .hreq_kind, .hreq_tag, .hreq_ready,
    .ck_valid, .ck, .ck_ready, .trk_valid, .trk, .trk_ready, .n_cand, .n_pass, .n_wait);
  hbm2tf u_h (.clk, .rst_n, .req_valid(hreq_valid), .req_sector(hreq_sector), .req_kind(hreq_kind),
    .req_tag(hreq_tag), .req_ready(hreq_ready), .ck_valid, .ck, .ck_ready,
    .ar_valid, .ar, .ar_ready, .r_valid, .r, .r_ready);
  for (genvar c = 0; c < 6; c++) begin : g_m
    hbm_pc_model u_m (
      .clk, .rst_n, .ar_valid(ar_valid[c]), .ar(ar[c]), .ar_ready(ar_ready[c]),
      .r_valid(r_valid[c]), .r(r[c]), .r_ready(r_ready[c]),
      .we, .waddr, .wdata, .n_reads(n_reads[c]), .n_refresh_stalls(n_stall[c]));
  end

  int S[NSEC][NDOF][NCOO], H[NSEC][NDOF], C[NSEC][NPAR][NCOO], Q[NSEC][NPAR];
  do_road_t roads[NROAD];
  int n_exp_cand = 0;
  logic [63:0] chis[$];
  track_t exp_trk[$];
  logic [63:0] exp_chi[$];

  task automatic write_set(input int sec, input bit kind, input int w[64]);
    int nw;
    nw = kind ? PAR_WORDS : CHI_WORDS;
    for (int k = 0; k * WPC < nw; k++) begin
      @(negedge clk);
      we = 1; waddr = CONST_BASE + HBM_AW'(sec*512 + (kind ? 256 : 0) + k*32);
      for (int i = 0; i < WPC; i++) wdata[i*32 +: 32] = 32'(w[k*WPC + i]);
    end
    @(negedge clk) we = 0;
  endtask

  int tout = 0;
  bit used[$];
  always @(negedge clk) trk_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && trk_valid && trk_ready) begin
    bit found;
    found = 0;
    for (int i = 0; i < exp_trk.size(); i++)
      if (!found && !used[i] && exp_trk[i] == trk) begin found = 1; used[i] = 1; end
    checks++;
    if (!found) begin failures++; $display("unexpected track road %0d chi2 %0d", trk.road, trk.chi2); end
    tout++;
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w[64];
    road_valid = 0; road = '0; we = 0; waddr = 0; wdata = 0; thresh = '1;
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
    // roads and reference candidates
    for (int rd = 0; rd < NROAD; rd++) begin
      int wide;
      roads[rd] = '0;
      roads[rd].road = ROAD_W'(1000 + rd);
      roads[rd].sector = 16'($urandom_range(0, NSEC-1));
      wide = $urandom_range(0, NLAYERS-1);
      for (int l = 0; l < NLAYERS; l++) begin
        roads[rd].ncl[l] = CLW'((l == wide) ? $urandom_range(1, 3) : $urandom_range(1, 2));
        if (rd % 10 == 9 && l == 3) roads[rd].ncl[l] = 0;
        for (int c = 0; c < MAXCL; c++)
          roads[rd].cl[l][c] = {16'($urandom_range(0, 400) - 200), 16'($urandom_range(0, 400) - 200)};
      end
    end
    for (int rd = 0; rd < NROAD; rd++) begin
      int ix[NLAYERS], sec, tot;
      sec = int'(roads[rd].sector);
      tot = 1;
      for (int l = 0; l < NLAYERS; l++) begin
        tot *= int'(roads[rd].ncl[l]);
        ix[l] = 0;
      end
      for (int n = 0; n < tot; n++) begin
        logic [NLAYERS-1:0][31:0] cl;
        xvec_t x;
        track_t t;
        int cr[NCOO];
        int m;
        m = n;
        for (int l = 0; l < NLAYERS; l++) begin
          cl[l] = roads[rd].cl[l][m % int'(roads[rd].ncl[l])];
          m /= int'(roads[rd].ncl[l]);
        end
        x = ref_coords(cl);
        t.road = roads[rd].road;
        t.cl = cl;
        t.chi2 = ref_chi16(ref_chi2(x, S[sec], H[sec]));
        for (int i = 0; i < NPAR; i++) begin
          for (int j = 0; j < NCOO; j++) cr[j] = C[sec][i][j];
          t.par[i] = ref_par(x, cr, Q[sec][i]);
        end
        exp_trk.push_back(t);
        exp_chi.push_back(ref_chi2(x, S[sec], H[sec]));
        chis.push_back(ref_chi2(x, S[sec], H[sec]));
        n_exp_cand++;
      end
    end
    chis.sort();
    thresh = chis[chis.size() / 2];
    // keep only passing tracks
    for (int i = exp_trk.size() - 1; i >= 0; i--)
      if (exp_chi[i] > thresh) begin exp_trk.delete(i); end
    for (int i = 0; i < exp_trk.size(); i++) used.push_back(0);

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NSEC; s++) begin
      for (int i = 0; i < NDOF; i++) begin
        for (int j = 0; j < NCOO; j++) w[i*NCOO+j] = S[s][i][j];
        w[NDOF*NCOO+i] = H[s][i];
      end
      write_set(s, 0, w);
      for (int i = 0; i < NPAR; i++) begin
        for (int j = 0; j < NCOO; j++) w[i*NCOO+j] = C[s][i][j];
        w[NPAR*NCOO+i] = Q[s][i];
      end
      write_set(s, 1, w);
    end
    for (int rd = 0; rd < NROAD; rd++) begin
      @(negedge clk);
      road_valid = 1; road = roads[rd];
      do @(posedge clk); while (!road_ready);
      @(negedge clk) road_valid = 0;
    end
    wait (tout == exp_trk.size());
    repeat (200) @(posedge clk);
    checks++; if (tout != exp_trk.size()) failures++;
    checks++; if (int'(n_cand) != n_exp_cand) begin failures++; $display("n_cand %0d exp %0d", n_cand, n_exp_cand); end
    checks++; if (int'(n_pass) != exp_trk.size()) failures++;
    checks++; if (exp_trk.size() == 0 || exp_trk.size() == n_exp_cand) failures++;
    $display("candidates %0d, tracks %0d, lane wait cycles %0d", n_cand, tout, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
