// tb_ssid_encoder: 20 random events are sent as {layer, cluster} words in
// random layer order followed by an end-of-event word.  Per layer the
// output must be the expected SSIDs (coordinate / super-strip size, pixel
// layer {x/33, y/402}) in non-decreasing order with equal SSIDs in arrival
// order, followed by one end-of-event word.  One event puts 40 clusters on
// layer 5 so that 8 must be dropped and counted.  With out_ready held high
// a layer must emit one word per cycle during the flush.
module tb_ssid_encoder;
  import prm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_eoe, in_ready;
  logic [2:0] in_layer;
  cluster_t in_cl;
  logic [NLAYERS-1:0] out_valid, out_ready;
  do_in_t [NLAYERS-1:0] out_word;
  logic [15:0] dropped;

  ssid_encoder dut (.*);

  function automatic int enc(int l, cluster_t c);
    if (l < NPIX) return ((int'(c.x[15:0] & 16'hFFFF) / 33) & 255) * 256 + ((int'(c.y[15:0] & 16'hFFFF) / 402) & 255);
    return int'(c.x[15:0] & 16'hFFFF) / 40;
  endfunction

  // expected per layer: queue of {ssid, cluster}
  longint exp_q[NLAYERS][$];
  int got_eoe[NLAYERS];
  int exp_drop = 0;
  bit fast_mode = 0;
  int gaps = 0;

  for (genvar l = 0; l < NLAYERS; l++) begin : g_out
    always @(posedge clk) if (rst_n && out_valid[l] && out_ready[l]) begin
      checks++;
      if (out_word[l].eoe) begin
        if (exp_q[l].size() != 0) begin failures++; $display("layer %0d eoe early", l); end
        got_eoe[l]++;
      end else if (exp_q[l].size() == 0 ||
                   exp_q[l][0] != {16'(out_word[l].ssid), 32'(out_word[l].cl)}) begin
        failures++; $display("layer %0d wrong word", l);
        if (exp_q[l].size() != 0) void'(exp_q[l].pop_front());
      end else void'(exp_q[l].pop_front());
    end
    // during a fast flush the layer must not stall
    always @(posedge clk) if (rst_n && fast_mode && !out_valid[l] && exp_q[l].size() != 0 && got_eoe[l] == 0 && !in_ready) gaps++;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    out_ready = '1; in_valid = 0; in_eoe = 0; in_layer = 0; in_cl = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 20; e++) begin
      longint ev[NLAYERS][$];
      int n;
      for (int l = 0; l < NLAYERS; l++) ev[l].delete();
      n = (e == 7) ? 40 : $urandom_range(0, 60);
      for (int k = 0; k < n; k++) begin
        int l, cnt;
        cluster_t c;
        l = (e == 7) ? 5 : $urandom_range(0, NLAYERS-1);
        c.x = 16'($urandom_range(0, 2000));
        c.y = 16'($urandom_range(0, 60000));
        cnt = ev[l].size();
        if (cnt < 32) ev[l].push_back({16'(enc(l, c)), 32'(c)});
        else exp_drop++;
        @(negedge clk);
        in_valid = 1; in_eoe = 0; in_layer = 3'(l); in_cl = c;
        do @(posedge clk); while (!in_ready);
        @(negedge clk) in_valid = 0;
      end
      // stable sort by SSID (insertion sort keeps arrival order of ties)
      for (int l = 0; l < NLAYERS; l++) begin
        for (int i = 1; i < ev[l].size(); i++) begin
          longint v;
          int j;
          v = ev[l][i]; j = i - 1;
          while (j >= 0 && ev[l][j][47:32] > v[47:32]) begin ev[l][j+1] = ev[l][j]; j--; end
          ev[l][j+1] = v;
        end
        exp_q[l] = ev[l];
        got_eoe[l] = 0;
      end
      fast_mode = (e % 2 == 0);
      out_ready = '1;
      @(negedge clk);
      in_valid = 1; in_eoe = 1;
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 0;
      while (1) begin
        int all;
        all = 1;
        for (int l = 0; l < NLAYERS; l++) if (got_eoe[l] == 0) all = 0;
        if (all) break;
        if (!fast_mode) out_ready = NLAYERS'($urandom);
        @(negedge clk);
      end
      out_ready = '1;
      fast_mode = 0;
    end
    repeat (5) @(posedge clk);
    checks++; if (int'(dropped) != exp_drop) begin failures++; $display("dropped %0d exp %0d", dropped, exp_drop); end
    checks++; if (gaps != 0) begin failures++; $display("flush gaps %0d", gaps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
