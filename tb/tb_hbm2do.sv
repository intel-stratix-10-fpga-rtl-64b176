// tb_hbm2do: two pseudo-channel models hold a pattern record for roadIDs
// 0..255 (SSID of layer l = road*8 + l, sector = road ^ 0x5A5A).  200 random
// requests are sent with distinct requestIDs under random output
// backpressure; every requestID must come back exactly once with the record
// of its road, both pseudo-channels must be used, and the refresh of the
// model must have delayed some reads.
module tb_hbm2do;
  import prm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, rsp_valid, rsp_ready;
  logic [ROAD_W-1:0] req_road;
  logic [7:0] req_id, rsp_id;
  patt_rec_t rsp_patt;
  logic [1:0] ar_valid, ar_ready, r_valid, r_ready;
  axi_ar_t [1:0] ar;
  axi_r_t [1:0] r;
  logic we; logic [HBM_AW-1:0] waddr; logic [HBM_DW-1:0] wdata;
  int n_reads[2], n_stall[2];

  hbm2do dut (.*);
  for (genvar c = 0; c < 2; c++) begin : g_m
    hbm_pc_model #(.LAT(20 + 7*c), .REFI(300), .RFC(40)) u_m (
      .clk, .rst_n, .ar_valid(ar_valid[c]), .ar(ar[c]), .ar_ready(ar_ready[c]),
      .r_valid(r_valid[c]), .r(r[c]), .r_ready(r_ready[c]),
      .we, .waddr, .wdata, .n_reads(n_reads[c]), .n_refresh_stalls(n_stall[c]));
  end

  function automatic patt_rec_t rec(input int road);
    patt_rec_t p;
    p.sector = 16'(road ^ 16'h5A5A);
    for (int l = 0; l < 8; l++) p.ssid[l] = 16'(road*8 + l);
    return p;
  endfunction

  int road_of[256]; bit back[256]; int nback = 0;
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    checks++;
    if (back[rsp_id] || rsp_patt != rec(road_of[rsp_id])) begin
      failures++; $display("bad response id %0d", rsp_id);
    end
    back[rsp_id] = 1; nback++;
  end
  always @(negedge clk) rsp_ready = ($urandom_range(0, 4) != 0);

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_road = 0; req_id = 0; we = 0; waddr = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rd = 0; rd < 256; rd++) begin
      @(negedge clk);
      we = 1; waddr = PATT_BASE + HBM_AW'(rd*32); wdata = HBM_DW'(rec(rd));
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      req_valid = 1; req_id = 8'(n); req_road = ROAD_W'($urandom_range(0, 255));
      road_of[n] = int'(req_road);
      do @(posedge clk); while (!req_ready);
      @(negedge clk) req_valid = 0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
    wait (nback == 200);
    repeat (5) @(posedge clk);
    checks++; if (nback != 200) failures++;
    checks++; if (n_reads[0] == 0 || n_reads[1] == 0) failures++;
    checks++; if (n_stall[0] + n_stall[1] == 0) failures++;
    $display("reads per channel %0d %0d, refresh stalls %0d", n_reads[0], n_reads[1], n_stall[0] + n_stall[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
