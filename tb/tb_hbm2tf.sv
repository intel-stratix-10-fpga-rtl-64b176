// tb_hbm2tf: six pseudo-channel models hold constant sets for sectors
// 0..31 (word w of chunk k at address A is A*8 + w).  Five requesters (tags
// 0..4) each issue 30 requests of random sector and kind, one outstanding at
// a time like the Track Fitter.  For every request the chunk stream must
// deliver CHI_CHUNKS or PAR_CHUNKS chunks with index 0.. in order, the last
// one flagged, with the right data; all six channels must be used.
module tb_hbm2tf;
  import prm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, req_kind, ck_valid, ck_ready;
  logic [SECTOR_W-1:0] req_sector;
  logic [TAG_W-1:0] req_tag;
  chunk_t ck;
  logic [5:0] ar_valid, ar_ready, r_valid, r_ready;
  axi_ar_t [5:0] ar;
  axi_r_t [5:0] r;
  logic we; logic [HBM_AW-1:0] waddr; logic [HBM_DW-1:0] wdata;
  int n_reads[6], n_stall[6];

  hbm2tf dut (.*);
  for (genvar c = 0; c < 6; c++) begin : g_m
    hbm_pc_model #(.LAT(15 + 3*c), .REFI(400), .RFC(30)) u_m (
      .clk, .rst_n, .ar_valid(ar_valid[c]), .ar(ar[c]), .ar_ready(ar_ready[c]),
      .r_valid(r_valid[c]), .r(r[c]), .r_ready(r_ready[c]),
      .we, .waddr, .wdata, .n_reads(n_reads[c]), .n_refresh_stalls(n_stall[c]));
  end

  function automatic logic [HBM_DW-1:0] word_at(input logic [HBM_AW-1:0] a);
    logic [HBM_DW-1:0] d;
    for (int w = 0; w < 8; w++) d[w*32 +: 32] = 32'(a) * 8 + w;
    return d;
  endfunction

  // pending request per tag
  bit pend[5]; int psec[5]; bit pkind[5]; int pidx[5]; int done_cnt = 0;
  always @(posedge clk) if (rst_n && ck_valid && ck_ready) begin
    int t, n;
    logic [HBM_AW-1:0] a;
    t = int'(ck.tag);
    checks++;
    if (t > 4 || !pend[t]) begin failures++; end
    else begin
      n = pkind[t] ? PAR_CHUNKS : CHI_CHUNKS;
      a = CONST_BASE + HBM_AW'(psec[t]*512 + (pkind[t] ? 256 : 0) + pidx[t]*32);
      if (int'(ck.idx) != pidx[t] || ck.data != word_at(a) || ck.last != (pidx[t] == n-1)) begin
        failures++; $display("tag %0d idx %0d bad", t, ck.idx);
      end
      pidx[t]++;
      if (ck.last) begin pend[t] = 0; done_cnt++; end
    end
  end
  always @(negedge clk) ck_ready = ($urandom_range(0, 5) != 0);

  initial begin
    #800000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int issued[5];
    req_valid = 0; req_sector = 0; req_kind = 0; req_tag = 0; we = 0; waddr = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 32; s++)
      for (int k = 0; k < 16; k++) begin
        @(negedge clk);
        we = 1; waddr = CONST_BASE + HBM_AW'(s*512 + k*32); wdata = word_at(waddr);
      end
    @(negedge clk) we = 0;
    issued = '{default: 0};
    while (issued[0] + issued[1] + issued[2] + issued[3] + issued[4] < 150) begin
      int t;
      @(negedge clk);
      t = $urandom_range(0, 4);
      if (!pend[t] && issued[t] < 30) begin
        req_valid = 1; req_tag = 3'(t); req_sector = 16'($urandom_range(0, 31)); req_kind = 1'($urandom_range(0, 1));
        do @(posedge clk); while (!req_ready);
        pend[t] = 1; psec[t] = int'(req_sector); pkind[t] = req_kind; pidx[t] = 0; issued[t]++;
        @(negedge clk) req_valid = 0;
      end
    end
    wait (done_cnt == 150);
    repeat (5) @(posedge clk);
    checks++; if (done_cnt != 150) failures++;
    for (int c = 0; c < 6; c++) begin checks++; if (n_reads[c] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
